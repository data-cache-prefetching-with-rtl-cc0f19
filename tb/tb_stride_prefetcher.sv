// tb_stride_prefetcher: self-checking test of the first-level stride engine.
// Random triples with and without a common stride (positive and negative)
// are applied; a confirmed stride must give a0+s and a0+2s one cycle after
// start, any other triple no suggestion.
module tb_stride_prefetcher;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  line_t a0 = '0, a1 = '0, a2 = '0;
  logic [15:0] n_avail = '0;
  line_t sugg [2];
  logic [1:0] sugg_valid;

  stride_prefetcher dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      longint s;
      bit strided;
      @(negedge clk);
      strided = ($urandom % 2) == 0;
      s  = longint'($urandom % 64) - 32;
      a2 = line_t'({$urandom, $urandom});
      a1 = a2 + line_t'(s);
      a0 = strided ? a1 + line_t'(s) : a1 + line_t'(s) + 45'd1 + line_t'($urandom % 8);
      n_avail = ($urandom % 10 == 0) ? 16'd2 : 16'd100;
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!done) failures++;
      begin
        automatic bit exp = strided && s != 0 && n_avail >= 3;
        checks++;
        if (sugg_valid != {2{exp}}) begin
          failures++;
          if (failures < 10) $display("FAIL valid s=%0d exp=%0d got=%b", s, exp, sugg_valid);
        end
        if (exp) begin
          checks += 2;
          if (sugg[0] != a0 + line_t'(s))     failures++;
          if (sugg[1] != a0 + line_t'(2 * s)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
