// tb_feature_extractor: self-checking test of the GHB feature extractor at
// its default sizes (512-entry GHB, 32-entry rows, 4 lanes).
// 600 misses over a small alphabet are pushed (the ring wraps); every 25
// pushes four suggestions are evaluated and the four features of each are
// compared with values computed here from the miss list by the rules in the
// module header. The latency must be 2 + ceil((count + oldest mod 32)/32)
// cycles.
module tb_feature_extractor;
  import pp_pkg::*;
  localparam int unsigned PW = 9;
  localparam int unsigned ENTRIES = 512;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid = 0;
  line_t push_addr = '0;
  logic [PW-1:0] wr_idx, newest;
  logic [3:0] win_row;
  logic [PW:0] count;
  line_t rd_addr [3];
  logic [PW-1:0] rd_link [3];
  line_t win_addr [32];

  ghb u_ghb (.clk, .rst_n, .push_valid, .push_addr, .push_link('0), .wr_idx, .newest,
             .count, .rd_idx('0), .rd_addr, .rd_link, .win_row, .win_addr);

  logic start = 0, done;
  line_t miss_addr = '0;
  pc_t miss_pc = '0;
  line_t sugg [4];
  feat_t feat [4];

  feature_extractor dut (.*);

  int checks = 0, failures = 0;
  line_t hist [$];
  line_t alpha [10];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic feat_t model(line_t a, line_t l, pc_t pc);
    feat_t f;
    int n = hist.size();
    int first = (n > ENTRIES) ? n - ENTRIES : 0;
    int mind = -1, occ = 0, k = 0, sum = 0, last_l = -1;
    for (int j = first; j < n; j++) begin
      if (hist[j] == l) begin
        k++;
        last_l = j;
      end else if (hist[j] == a && last_l >= 0 && j - last_l <= 8) begin
        sum += 1 << (8 - (j - last_l));
      end
      if (hist[j] == a) begin
        occ++;
        mind = n - 1 - j;
      end
    end
    f[F_DIST]  = (mind < 0 || mind > 255) ? 8'hFF : 8'(mind);
    f[F_TRANS] = (k == 0) ? 8'd0 : 8'(sum / k);
    f[F_XOR]   = a[7:0] ^ pc[7:0];
    f[F_OCC]   = (occ > 255) ? 8'hFF : 8'(occ);
    return f;
  endfunction

  int nonzero_trans = 0;

  initial begin
    for (int i = 0; i < 10; i++) alpha[i] = line_t'({$urandom, $urandom});
    for (int i = 0; i < 4; i++) sugg[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      push_addr  = ($urandom % 3 == 0) ? alpha[$urandom % 10] : alpha[n % 6];
      push_valid = 1;
      hist.push_back(push_addr);
      @(negedge clk);
      push_valid = 0;
      if (n % 25 == 3) begin
        int cyc, exp_cyc;
        miss_addr = push_addr;
        miss_pc   = pc_t'({$urandom, $urandom});
        for (int i = 0; i < 4; i++) sugg[i] = (i == 3) ? line_t'({$urandom, $urandom}) : alpha[$urandom % 10];
        begin
          // rows of 32 from the row holding the oldest entry
          automatic int oldest = (n + 1 - int'(count)) % ENTRIES;
          exp_cyc = 2 + (int'(count) + oldest % 32 + 31) / 32;
        end
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done && cyc < 200) begin
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (cyc != exp_cyc) begin
          failures++;
          $display("FAIL latency %0d exp %0d", cyc, exp_cyc);
        end
        for (int i = 0; i < 4; i++) begin
          automatic feat_t e = model(sugg[i], miss_addr, miss_pc);
          if (e[F_TRANS] != 0) nonzero_trans++;
          checks++;
          if (feat[i] != e) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d lane %0d got %h exp %h", n, i, feat[i], e);
          end
        end
      end
    end
    checks++;
    if (nonzero_trans < 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
