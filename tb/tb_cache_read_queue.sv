// tb_cache_read_queue: self-checking test of the prefetch request FIFO.
// Random pushes and pops with random back-pressure are compared with a
// reference queue: order, full (in_ready) and empty (out_valid) flags.
module tb_cache_read_queue;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  line_t in_line = '0, out_line;
  logic [3:0] level;

  cache_read_queue dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  line_t q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) < ((n / 1000) % 2 ? 1 : 3);
      in_line   = line_t'({$urandom, $urandom});
      out_ready = ($urandom % 4) < ((n / 1000) % 2 ? 3 : 1);
      #1;
      checks += 3;
      if (in_ready != (q.size() < 8)) failures++;
      if (out_valid != (q.size() > 0)) failures++;
      if (int'(level) != q.size()) failures++;
      if (!in_ready) fulls++;
      if (out_valid) begin
        checks++;
        if (out_line != q[0]) begin
          failures++;
          if (failures < 10) $display("FAIL order");
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_line);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
