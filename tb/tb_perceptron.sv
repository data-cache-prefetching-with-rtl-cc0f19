// tb_perceptron: self-checking test of the perceptron. Random feature
// vectors are judged against y = sum w_j x_j + 256*theta computed here from a
// reference copy of the weights, and random training steps (both signs, with
// long runs to reach saturation) update that copy by the rule in the module
// header. Checks y, the accept bits (y > 0) and every weight after each step.
module tb_perceptron;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  feat_t feat [4];
  logic signed [20:0] y [4];
  logic [3:0] accept;
  logic train_valid = 0, train_up = 0;
  feat_t train_feat = '0;
  logic signed [7:0] weights [4];
  logic signed [7:0] theta;

  perceptron dut (.*);

  int checks = 0, failures = 0;
  int mw [4];
  int mt;
  int sat_hi = 0, sat_lo = 0, acc_seen = 0, den_seen = 0;

  function automatic int clip(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 4; j++) begin mw[j] = 0; feat[j] = '0; end
    mt = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // lane 3 sees only the constant input, so y = 256*theta tests the threshold itself
      for (int l = 0; l < 3; l++) feat[l] = {$urandom};
      feat[3] = '0;
      #1;
      for (int l = 0; l < 4; l++) begin
        automatic int ey = mt * 256;
        for (int j = 0; j < 4; j++) ey += mw[j] * int'(feat[l][j]);
        checks += 2;
        if (int'(y[l]) != ey) begin
          failures++;
          if (failures < 10) $display("FAIL y lane %0d got %0d exp %0d", l, y[l], ey);
        end
        if (accept[l] != (ey > 0)) failures++;
        if (ey > 0) acc_seen++; else den_seen++;
      end
      // training: runs of one sign so the weights reach both limits
      train_valid = ($urandom % 3) != 0;
      train_up    = ((n / 300) % 2) == 0;
      train_feat  = {$urandom};
      if (train_valid) begin
        for (int j = 0; j < 4; j++)
          mw[j] = clip(mw[j] + (train_up ? 1 : -1) * (int'(train_feat[j]) >> 4));
        mt = clip(mt + (train_up ? 16 : -16));
      end
      @(negedge clk);
      train_valid = 0;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'(weights[j]) != mw[j]) begin
          failures++;
          if (failures < 10) $display("FAIL w%0d got %0d exp %0d", j, weights[j], mw[j]);
        end
      end
      checks++;
      if (int'(theta) != mt) failures++;
      if (mt == 127) sat_hi++;
      if (mt == -128) sat_lo++;
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0 || acc_seen == 0 || den_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
