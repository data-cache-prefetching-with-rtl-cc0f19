// accept_table: trace of the prefetches the perceptron accepted.
//
// Each entry holds the prefetched line address (45 bits), the perceptron
// inputs it was judged with (32 bits) and an 8-bit duration counter, as in
// the paper. Every cache reference increments the counters of all live
// entries and retires the entries whose line it touches (a useful prefetch:
// the perceptron was right and is left alone). When a counter overflows, i.e.
// after 256 references without a use, or when a new entry overwrites a live
// one, the prefetch counts as wrong and the entry's inputs are sent out as a
// training step with d-r = -1.
//
// Entries are written round-robin (the oldest slot is reused). At most one
// training step leaves per cycle: the entry being overwritten goes first,
// otherwise the lowest-index overflowed entry. train_valid is registered and
// must be consumed in the cycle it is high (no back-pressure). The round-robin
// replacement and the one-step-per-cycle drain are this design's choices.
//
// Interface: ins_valid/ins_line/ins_feat write a new entry; ref_valid/ref_line
// is the stream of all cache references; used and expired pulse for one cycle
// when an entry is retired as used or as wrong.
module accept_table import pp_pkg::*; #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned CNT_W   = 8,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ins_valid,
  input  line_t ins_line,
  input  feat_t ins_feat,
  input  logic  ref_valid,
  input  line_t ref_line,
  output logic  train_valid,
  output feat_t train_feat,
  output logic  used,
  output logic  expired
);

  logic [ENTRIES-1:0] valid, ovf;
  line_t              line [ENTRIES];
  feat_t              fv   [ENTRIES];
  logic [CNT_W-1:0]   cnt  [ENTRIES];
  logic [AW-1:0]      wr_ptr;

  logic [ENTRIES-1:0] hit;
  logic               any_ovf;
  logic [AW-1:0]      ovf_idx;
  logic               victim;

  always_comb begin
    for (int e = 0; e < ENTRIES; e++)
      hit[e] = ref_valid && valid[e] && !ovf[e] && (line[e] == ref_line);
    any_ovf = 1'b0;
    ovf_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (valid[e] && ovf[e]) begin
        any_ovf = 1'b1;
        ovf_idx = AW'(e);
      end
    // the slot being overwritten still holds an unused prefetch
    victim = ins_valid && valid[wr_ptr] && !hit[wr_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid       <= '0;
      ovf         <= '0;
      wr_ptr      <= '0;
      train_valid <= 1'b0;
      train_feat  <= '0;
      used        <= 1'b0;
      expired     <= 1'b0;
    end else begin
      train_valid <= 1'b0;
      used        <= |hit;
      expired     <= 1'b0;
      for (int e = 0; e < ENTRIES; e++) begin
        if (hit[e]) valid[e] <= 1'b0;
        else if (ref_valid && valid[e] && !ovf[e]) begin
          if (cnt[e] == '1) ovf[e] <= 1'b1;
          cnt[e] <= cnt[e] + 1'b1;
        end
      end
      if (victim) begin
        train_valid <= 1'b1;
        train_feat  <= fv[wr_ptr];
        expired     <= 1'b1;
      end else if (any_ovf) begin
        train_valid      <= 1'b1;
        train_feat       <= fv[ovf_idx];
        expired          <= 1'b1;
        valid[ovf_idx]   <= 1'b0;
      end
      if (ins_valid) begin
        valid[wr_ptr] <= 1'b1;
        ovf[wr_ptr]   <= 1'b0;
        cnt[wr_ptr]   <= '0;
        line[wr_ptr]  <= ins_line;
        fv[wr_ptr]    <= ins_feat;
        wr_ptr        <= wr_ptr + 1'b1;
      end
    end
  end

endmodule
