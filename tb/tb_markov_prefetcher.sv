// tb_markov_prefetcher: self-checking test of the GHB Markov engine together
// with the GHB and index table it walks. A stream of 400 misses over a small
// alphabet (distinct hash slots, so no chain is broken by a collision) is
// pushed; after each push the engine runs and its suggestions are compared
// with a reference computed from the miss list: the successors of the up to
// 4 most recent earlier occurrences of the miss, newest first, repeats once.
// The walk must finish within DEGREE+2 cycles.
module tb_markov_prefetcher;
  import pp_pkg::*;
  localparam int unsigned PW = 9;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid = 0;
  line_t push_addr = '0;
  logic [PW-1:0] push_link, wr_idx, newest;
  logic [PW:0] count;
  logic [2:0][PW-1:0] rd_idx;
  line_t rd_addr [3];
  logic [PW-1:0] rd_link [3];
  line_t win_addr [32];
  logic it_hit;
  logic [PW-1:0] it_ptr;

  ghb u_ghb (.clk, .rst_n, .push_valid, .push_addr, .push_link, .wr_idx, .newest,
             .count, .rd_idx, .rd_addr, .rd_link, .win_row('0), .win_addr);
  index_table u_it (.clk, .rst_n, .lk_addr(push_addr), .lk_hit(it_hit), .lk_ptr(it_ptr),
                    .upd_valid(push_valid), .upd_addr(push_addr), .upd_ptr(wr_idx));
  assign push_link = it_hit ? it_ptr : wr_idx;

  logic start = 0, done, first_hit = 0;
  logic [PW-1:0] first_ptr = '0, idx0, idx1;
  line_t miss_addr = '0;
  line_t sugg [4];
  logic [3:0] sugg_valid;
  assign rd_idx = {9'd0, idx1, idx0};

  markov_prefetcher dut (.clk, .rst_n, .start, .miss_addr, .first_hit, .first_ptr,
                         .newest, .count, .rd_idx0(idx0), .rd_idx1(idx1),
                         .rd_addr0(rd_addr[0]), .rd_link0(rd_link[0]), .rd_addr1(rd_addr[1]),
                         .done, .sugg, .sugg_valid);

  int checks = 0, failures = 0;
  line_t hist [$];
  line_t alpha [12];
  int chains = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 12; i++) alpha[i] = 45'h1000 + 45'(i) * 45'h11;  // distinct hash slots
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      line_t exp_s [$];
      int cyc;
      exp_s.delete();
      @(negedge clk);
      // a repeating pattern with occasional noise
      push_addr  = ($urandom % 5 == 0) ? alpha[$urandom % 12] : alpha[n % 7];
      push_valid = 1;
      #1;
      first_hit = it_hit;
      first_ptr = it_ptr;
      miss_addr = push_addr;
      hist.push_back(push_addr);
      @(negedge clk);
      push_valid = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 20) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc > 6) begin
        failures++;
        $display("FAIL walk took %0d cycles", cyc);
      end
      // reference
      begin
        automatic int occ = 0;
        for (int j = hist.size() - 2; j >= 0 && occ < 4; j--) begin
          if (hist[j] == miss_addr) begin
            automatic bit d = 0;
            occ++;
            foreach (exp_s[q]) if (exp_s[q] == hist[j + 1]) d = 1;
            if (!d) exp_s.push_back(hist[j + 1]);
          end
        end
      end
      if (exp_s.size() > 1) chains++;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (i < exp_s.size()) begin
          if (!sugg_valid[i] || sugg[i] != exp_s[i]) begin
            failures++;
            if (failures < 10) begin $display("FAIL n=%0d lane %0d got %h/%0d exp %h", n, i, sugg[i], sugg_valid[i], exp_s[i]); foreach (hist[q]) $write("%h ", hist[q][7:0]); $display(""); end
          end
        end else if (sugg_valid[i]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d lane %0d unexpected", n, i);
        end
      end
    end
    checks++;
    if (chains < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
