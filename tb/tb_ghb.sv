// tb_ghb: self-checking test of the global history buffer at its default
// size (512 entries). Pushes 700 random entries (so the ring wraps), and after
// every push compares count, newest and random point/row reads with a
// reference list kept by the testbench.
module tb_ghb;
  import pp_pkg::*;
  localparam int unsigned ENTRIES = 512;
  localparam int unsigned PW = 9;
  localparam int unsigned WIN = 32;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid = 0;
  line_t push_addr = '0;
  logic [PW-1:0] push_link = '0;
  logic [PW-1:0] wr_idx, newest;
  logic [PW:0] count;
  logic [2:0][PW-1:0] rd_idx = '0;
  line_t rd_addr [3];
  logic [PW-1:0] rd_link [3];
  logic [3:0] win_row = '0;
  line_t win_addr [WIN];

  ghb dut (.*);

  int checks = 0, failures = 0;
  line_t ref_addr [ENTRIES];
  logic [PW-1:0] ref_link [ENTRIES];
  int n_pushed = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(count == 0, "count after reset");
    for (int n = 0; n < 700; n++) begin
      push_valid = 1;
      push_addr  = line_t'({$urandom, $urandom});
      push_link  = PW'($urandom);
      ref_addr[n % ENTRIES] = push_addr;
      ref_link[n % ENTRIES] = push_link;
      @(negedge clk);
      push_valid = 0;
      n_pushed++;
      check(count == ((n_pushed > ENTRIES) ? ENTRIES : n_pushed), "count");
      check(newest == PW'(n), "newest");
      for (int p = 0; p < 3; p++) rd_idx[p] = PW'(n - p);
      win_row = 4'($urandom);
      #1;
      for (int p = 0; p < 3; p++) begin
        if (n >= p) begin
          check(rd_addr[p] == ref_addr[(n - p) % ENTRIES], "point read addr");
          check(rd_link[p] == ref_link[(n - p) % ENTRIES], "point read link");
        end
      end
      for (int w = 0; w < WIN; w++)
        if (int'(win_row) * WIN + w < n_pushed)
          check(win_addr[w] == ref_addr[int'(win_row) * WIN + w], "row read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
