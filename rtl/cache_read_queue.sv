// cache_read_queue: FIFO of accepted prefetch requests on their way to the
// next-level cache or main memory.
//
// The paper sends every accepted prefetch through the cache read queue and
// gives nothing more; a DEPTH-entry FIFO of line addresses with valid/ready on
// both sides is this design's choice (DEPTH 8 is assumed). in_ready is low
// when full; out_valid is high when not empty, and a word leaves when
// out_valid and out_ready are both high. A push and a pop may share a cycle.
module cache_read_queue import pp_pkg::*; #(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  line_t in_line,
  output logic  out_valid,
  input  logic  out_ready,
  output line_t out_line,
  output logic [AW:0] level
);

  if (DEPTH != (1 << AW)) begin : g_bad_depth
    $error("cache_read_queue: DEPTH must be a power of two");
  end

  line_t         mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_line  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      level <= level + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // A valid word stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_line));

endmodule
