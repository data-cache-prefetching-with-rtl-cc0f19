// index_table: hash table from a miss line address to the GHB entry that last
// held it (the "Index Table" of the Markov first level).
//
// The table is direct mapped. The index is the XOR of the two lowest
// IW-bit slices of the line address; each entry keeps a valid bit, a TAG_W-bit
// tag (the address bits just above the index slice) and a PTR_W-bit GHB
// pointer. 256 entries x 32 bits = 1 KB, matching the paper's "approximately
// 1KB" for the index table; the hash, the tag and the entry count are this
// design's choices, the paper only gives the size and that the block is hashed.
//
// Interface: lk_addr -> lk_hit/lk_ptr is a combinational lookup of the current
// contents. upd_valid writes {upd_addr, upd_ptr} at the clock edge. A lookup
// and an update of the same address in one cycle returns the old pointer,
// which is what a push into the GHB needs (the new entry links to the old one).
module index_table import pp_pkg::*; #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned PTR_W   = 9,
  localparam int unsigned IW     = $clog2(ENTRIES),
  localparam int unsigned TAG_W  = 30 - IW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  line_t            lk_addr,
  output logic             lk_hit,
  output logic [PTR_W-1:0] lk_ptr,
  input  logic             upd_valid,
  input  line_t            upd_addr,
  input  logic [PTR_W-1:0] upd_ptr
);

  logic [ENTRIES-1:0] valid;
  logic [TAG_W-1:0]   tag [ENTRIES];
  logic [PTR_W-1:0]   ptr [ENTRIES];

  function automatic logic [IW-1:0] hash(line_t a);
    return a[IW-1:0] ^ a[2*IW-1:IW];
  endfunction

  function automatic logic [TAG_W-1:0] tag_of(line_t a);
    return a[IW +: TAG_W];
  endfunction

  logic [IW-1:0] lk_i, up_i;
  assign lk_i   = hash(lk_addr);
  assign up_i   = hash(upd_addr);
  assign lk_hit = valid[lk_i] && (tag[lk_i] == tag_of(lk_addr));
  assign lk_ptr = ptr[lk_i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         valid       <= '0;
    else if (upd_valid) valid[up_i] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (upd_valid) begin
      tag[up_i] <= tag_of(upd_addr);
      ptr[up_i] <= upd_ptr;
    end
  end

endmodule
