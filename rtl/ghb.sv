// ghb: global history buffer, a FIFO ring of recent cache-miss line addresses.
//
// Every cache miss pushes one entry {line address, link}. The link is the
// index of the previous entry holding the same address (written by the
// Markov index table path; unused by the stride configuration). When the ring
// is full the oldest entry is overwritten. Entry count (512), address width
// (45) and link width (9) follow the paper: 512 x 54 bits = 3.375 KB.
//
// Interface: push_valid writes at wr_idx and advances it in the next cycle.
// newest is the index of the most recently pushed entry, count the number of
// valid entries. NRD point read ports (rd_idx -> rd_addr/rd_link) and one
// row port are combinational reads of the registered array. The row port
// returns the WIN entries win_row*WIN .. win_row*WIN+WIN-1, i.e. the buffer is
// organised as WIN banks read side by side, so a scan of the whole GHB takes
// ENTRIES/WIN row reads (this organisation is this design's choice, made so
// that the feature search finishes in a few cycles). A read in the push cycle
// returns the old contents. Only the pointers are reset, the storage is not
// (as for an SRAM); readers must only look at entries below count.
module ghb import pp_pkg::*; #(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned NRD     = 3,
  parameter int unsigned WIN     = 32,
  localparam int unsigned PW     = $clog2(ENTRIES),
  localparam int unsigned RW     = (ENTRIES > WIN) ? $clog2(ENTRIES / WIN) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push_valid,
  input  line_t                  push_addr,
  input  logic [PW-1:0]          push_link,
  output logic [PW-1:0]          wr_idx,
  output logic [PW-1:0]          newest,
  output logic [PW:0]            count,
  input  logic [NRD-1:0][PW-1:0] rd_idx,
  output line_t                  rd_addr [NRD],
  output logic [PW-1:0]          rd_link [NRD],
  input  logic [RW-1:0]          win_row,
  output line_t                  win_addr [WIN]
);

  if (ENTRIES != (1 << PW) || WIN > ENTRIES || ENTRIES % WIN != 0) begin : g_bad_size
    $error("ghb: ENTRIES must be a power of two and a multiple of WIN");
  end

  line_t         mem_addr [ENTRIES];
  logic [PW-1:0] mem_link [ENTRIES];

  always_ff @(posedge clk) begin
    if (push_valid) begin
      mem_addr[wr_idx] <= push_addr;
      mem_link[wr_idx] <= push_link;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_idx <= '0;
      count  <= '0;
    end else if (push_valid) begin
      wr_idx <= wr_idx + 1'b1;
      if (count != (PW+1)'(ENTRIES)) count <= count + 1'b1;
    end
  end

  assign newest = wr_idx - 1'b1;

  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      rd_addr[p] = mem_addr[rd_idx[p]];
      rd_link[p] = mem_link[rd_idx[p]];
    end
    for (int w = 0; w < WIN; w++) begin
      win_addr[w] = mem_addr[(ENTRIES == WIN) ? PW'(w) : PW'({win_row, (PW-RW)'(w)})];
    end
  end

endmodule
