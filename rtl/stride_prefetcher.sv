// stride_prefetcher: first-level stride prefetcher working on the GHB.
//
// On start it looks at the three newest GHB entries a0 (the miss that just
// triggered), a1 and a2. If a0-a1 equals a1-a2 and is not zero, the stride s is
// confirmed and the suggestions a0+s, a0+2s, ..., a0+DEGREE*s are produced.
// The paper gives the degree (2) and the A+s..A+ds rule, and says the stride
// prefetcher needs no storage beyond the GHB; reading the stride from the
// global miss sequence (no per-PC table) and confirming it by two equal deltas
// are this design's choices.
//
// Timing: start is a one-cycle pulse with the three addresses valid in the
// same cycle (n_avail = number of GHB entries); done pulses one cycle later
// with sugg/sugg_valid held until the next start.
module stride_prefetcher import pp_pkg::*; #(
  parameter int unsigned DEGREE = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  line_t             a0,
  input  line_t             a1,
  input  line_t             a2,
  input  logic [15:0]       n_avail,
  output logic              done,
  output line_t             sugg [DEGREE],
  output logic [DEGREE-1:0] sugg_valid
);

  line_t d01, d12;
  logic  confirmed;
  assign d01       = a0 - a1;
  assign d12       = a1 - a2;
  assign confirmed = (n_avail >= 16'd3) && (d01 == d12) && (d01 != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done       <= 1'b0;
      sugg_valid <= '0;
      for (int i = 0; i < DEGREE; i++) sugg[i] <= '0;
    end else begin
      done <= start;
      if (start) begin
        for (int i = 0; i < DEGREE; i++) begin
          sugg[i]       <= a0 + LINE_W'(i + 1) * d01;
          sugg_valid[i] <= confirmed;
        end
      end
    end
  end

endmodule
