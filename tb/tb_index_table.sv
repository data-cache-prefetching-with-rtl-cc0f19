// tb_index_table: self-checking test of the Markov index table. Random
// updates and lookups over a small address pool (so hash slots collide) are
// compared with a reference that remembers, per hash slot, the last address
// and pointer written; a lookup hits when the slot's address agrees with the
// looked-up one in the 30 low bits the index and tag cover.
module tb_index_table;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  line_t lk_addr = '0, upd_addr = '0;
  logic lk_hit, upd_valid = 0;
  logic [8:0] lk_ptr, upd_ptr = '0;

  index_table dut (.*);

  int checks = 0, failures = 0;
  bit    m_valid [256];
  line_t m_addr  [256];
  logic [8:0] m_ptr [256];
  line_t pool [64];

  function automatic int h(line_t a);
    return int'(a[7:0] ^ a[15:8]);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) m_valid[i] = 0;
    for (int i = 0; i < 64; i++) pool[i] = line_t'({$urandom, $urandom}) & 45'h0000_00FF_F0FF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      lk_addr = pool[$urandom % 64];
      #1;
      begin
        automatic int s = h(lk_addr);
        automatic bit exp_hit = m_valid[s] && (m_addr[s][29:0] == lk_addr[29:0]);
        checks++;
        if (lk_hit != exp_hit || (exp_hit && lk_ptr != m_ptr[s])) begin
          failures++;
          if (failures < 10) $display("FAIL lookup %h hit=%0d exp=%0d", lk_addr, lk_hit, exp_hit);
        end
      end
      upd_valid = ($urandom % 2) == 0;
      upd_addr  = pool[$urandom % 64];
      upd_ptr   = 9'($urandom);
      if (upd_valid) begin
        m_valid[h(upd_addr)] = 1;
        m_addr[h(upd_addr)]  = upd_addr;
        m_ptr[h(upd_addr)]   = upd_ptr;
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
