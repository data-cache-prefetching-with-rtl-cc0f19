// markov_prefetcher: first-level Markov (address-correlation) prefetcher
// built on the GHB and its link chains.
//
// The GHB links every entry to the previous entry with the same line address.
// Following that chain from the miss that just triggered (address L) visits
// the earlier occurrences of L; the entry pushed right after each of them is a
// miss that once followed L, i.e. an arc of the Markov diagram. Up to DEGREE
// such successors are suggested, most recent occurrence first; repeats are
// suggested once. The paper gives the degree (4), the GHB with its 9-bit links
// and the index table; walking one chain element per cycle and the stale-link
// checks are this design's choices.
//
// A link is followed only while the entry it points to still holds L, lies
// within the valid part of the GHB and is older than the previous one, so an
// entry overwritten by the ring can not send the walk astray.
//
// Timing: start pulses with first_ptr/first_hit (the link of the new entry).
// One chain element is read per cycle through two GHB read ports (element p,
// successor p+1); done pulses after at most DEGREE+1 cycles.
module markov_prefetcher import pp_pkg::*; #(
  parameter int unsigned DEGREE  = 4,
  parameter int unsigned ENTRIES = 512,
  localparam int unsigned PW     = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  line_t             miss_addr,
  input  logic              first_hit,
  input  logic [PW-1:0]     first_ptr,
  input  logic [PW-1:0]     newest,
  input  logic [PW:0]       count,
  output logic [PW-1:0]     rd_idx0,
  output logic [PW-1:0]     rd_idx1,
  input  line_t             rd_addr0,
  input  logic [PW-1:0]     rd_link0,
  input  line_t             rd_addr1,
  output logic              done,
  output line_t             sugg [DEGREE],
  output logic [DEGREE-1:0] sugg_valid
);

  localparam int unsigned SW  = $clog2(DEGREE + 1);
  localparam int unsigned IXW = (DEGREE > 1) ? $clog2(DEGREE) : 1;

  logic          busy;
  logic [PW-1:0] p;
  logic [PW:0]   last_age;
  logic [SW-1:0] steps, n_sugg;
  line_t         l_q;

  logic [PW:0] age;
  logic        elem_ok, dup;
  assign rd_idx0 = p;
  assign rd_idx1 = p + 1'b1;
  assign age     = {1'b0, newest - p};
  // age 0 is the triggering miss itself, which has no successor yet.
  assign elem_ok = (rd_addr0 == l_q) && (age != '0) && (age < count) && (age > last_age);

  always_comb begin
    dup = 1'b0;
    for (int i = 0; i < DEGREE; i++)
      if (sugg_valid[i] && sugg[i] == rd_addr1) dup = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      p          <= '0;
      last_age   <= '0;
      steps      <= '0;
      n_sugg     <= '0;
      l_q        <= '0;
      sugg_valid <= '0;
      for (int i = 0; i < DEGREE; i++) sugg[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        l_q        <= miss_addr;
        p          <= first_ptr;
        last_age   <= '0;
        steps      <= '0;
        n_sugg     <= '0;
        sugg_valid <= '0;
        busy       <= first_hit;
        done       <= !first_hit;
      end else if (busy) begin
        if (elem_ok) begin
          if (!dup) begin
            sugg[n_sugg[IXW-1:0]]       <= rd_addr1;
            sugg_valid[n_sugg[IXW-1:0]] <= 1'b1;
            n_sugg             <= n_sugg + 1'b1;
          end
          p        <= rd_link0;
          last_age <= age;
          steps    <= steps + 1'b1;
        end
        if (!elem_ok || steps == SW'(DEGREE - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
