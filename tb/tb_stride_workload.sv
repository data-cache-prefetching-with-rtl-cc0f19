// tb_stride_workload: end-to-end test of the two-level prefetcher, stride first level.
//
// A direct-mapped 64-line cache model in this testbench turns an access
// stream into hits and misses, takes demand fills at once and installs every
// prefetch the design issues. The stream has three phases:
//   1. strided streams (strides 1..7 lines): the stride first level finds them
//      and its prefetches are useful;
//   2. random references over a large pool: first-level suggestions are mostly
//      useless, so accepted prefetches expire unused and train the weights down;
//   3. phase 1 again: blocks that are now denied get referenced, so the deny
//      table trains the weights up.
// The next level takes prefetches with random back-pressure, with long
// stretches of none, so the request queue fills.
// Checks: every prefetch is one the first level could have suggested for a
// recent miss (reference model kept here); triggers equal the misses sent;
// suggestions = accepts + denies; every accept leaves as exactly one request.
// Mechanism counters (engine stall, queue full, GHB wrap, accept-table use and
// expiry, deny-table right and wrong, training both ways, accept and deny)
// must each fire at least once.
module tb_stride_workload;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid = 0, acc_ready, acc_miss = 0;
  line_t acc_line = '0;
  pc_t acc_pc = '0;
  logic pf_valid, pf_ready = 0;
  line_t pf_line;
  pf_stats_t stats;
  logic signed [7:0] weights [4];
  logic signed [7:0] theta;

  perceptron_prefetcher #(.KIND(PF_STRIDE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---------------- cache model ----------------
  line_t ctag [64];
  bit    cval [64];
  function automatic bit lookup(line_t l);
    return cval[l[5:0]] && ctag[l[5:0]] == l;
  endfunction

  // ---------------- reference first level ----------------
  line_t mhist [$];          // misses, oldest first
  line_t allowed [$];        // suggestions of recent misses
  int    allowed_from [$];   // miss number each came from
  int    n_miss = 0;

  function automatic void model_suggest(line_t l);
    // l+s and l+2s when the last three misses share the stride s
    int n = mhist.size();
    if (n >= 3 && mhist[n-1] - mhist[n-2] == mhist[n-2] - mhist[n-3] &&
        mhist[n-1] != mhist[n-2]) begin
      line_t s = mhist[n-1] - mhist[n-2];
      allowed.push_back(l + s);
      allowed.push_back(l + 2 * s);
      allowed_from.push_back(n_miss);
      allowed_from.push_back(n_miss);
    end
    while (allowed_from.size() > 0 && allowed_from[0] < n_miss - 16) begin
      void'(allowed.pop_front());
      void'(allowed_from.pop_front());
    end
  endfunction

  function automatic bit is_allowed(line_t l);
    foreach (allowed[i]) if (allowed[i] == l) return 1;
    return 0;
  endfunction

  // ---------------- mechanism counters ----------------
  int c_stall = 0, c_qfull = 0, c_wrap = 0, c_used = 0, c_expired = 0;
  int c_dok = 0, c_dwrong = 0, c_pf = 0, c_pf_bad = 0;
  always @(negedge clk) if (rst_n) begin
    if (acc_valid && acc_miss && !acc_ready) c_stall++;
    if (!dut.u_queue.in_ready) c_qfull++;
    if (dut.ghb_count == 10'(512)) c_wrap++;
    if (dut.unused_at_used) c_used++;
    if (dut.unused_at_exp) c_expired++;
    if (dut.unused_dt_ok) c_dok++;
    if (dut.unused_dt_wrong) c_dwrong++;
  end

  // the next level: random back-pressure, installs prefetched lines
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (pf_valid && pf_ready) begin
      c_pf++;
      if (!is_allowed(pf_line)) begin
        c_pf_bad++;
        if (c_pf_bad < 5) $display("FAIL prefetch %h not suggested", pf_line);
      end
      ctag[pf_line[5:0]] <= pf_line;
      cval[pf_line[5:0]] <= 1'b1;
    end
  end
  always @(negedge clk) pf_ready <= ((cyc / 3000) % 4 == 3) ? 1'b0 : ($urandom % 4 != 0);

  task automatic access(line_t l, pc_t pc);
    @(negedge clk);
    acc_valid = 1;
    acc_line  = l;
    acc_pc    = pc;
    acc_miss  = !lookup(l);
    @(posedge clk);
    while (!acc_ready) @(posedge clk);
    if (acc_miss) begin
      n_miss++;
      mhist.push_back(l);
      if (mhist.size() > 512) void'(mhist.pop_front());
      model_suggest(l);
      ctag[l[5:0]] = l;
      cval[l[5:0]] = 1'b1;
    end
    #1;
    acc_valid = 0;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  line_t loop_lines [96];
  initial begin
    for (int i = 0; i < 64; i++) cval[i] = 0;
    for (int i = 0; i < 96; i++) loop_lines[i] = line_t'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 3; ph++) begin
      for (int n = 0; n < 2500; n++) begin
        if (ph == 1)
          access(45'h4000 + 45'($urandom % 1500), 48'h401000 + 48'($urandom % 64) * 4);
        else begin
          // strided streams: a new base and stride every 200 references
          access(45'h100000 * 45'(n / 200 + 1) + 45'(n % 200) * 45'((n / 200) % 7 + 1),
                 48'h400000 + 48'((n / 200) % 7) * 4);
        end
      end
    end
    // drain
    pf_ready = 1;
    repeat (2000) @(negedge clk);
    check(c_pf_bad == 0, "every prefetch was a first-level suggestion");
    check(int'(stats.triggers) == n_miss, $sformatf("triggers %0d vs misses %0d", stats.triggers, n_miss));
    check(stats.suggestions == stats.accepts + stats.denies, "suggestions = accepts + denies");
    check(int'(stats.accepts) == c_pf, $sformatf("accepts %0d vs requests %0d", stats.accepts, c_pf));
    $display("misses=%0d suggestions=%0d accepts=%0d denies=%0d train_up=%0d train_down=%0d stall=%0d",
             n_miss, stats.suggestions, stats.accepts, stats.denies, stats.train_up,
             stats.train_down, stats.stall_cycles);
    $display("qfull=%0d ghb_wrap=%0d used=%0d expired=%0d deny_ok=%0d deny_wrong=%0d theta=%0d w=%0d %0d %0d %0d",
             c_qfull, c_wrap, c_used, c_expired, c_dok, c_dwrong, theta,
             weights[0], weights[1], weights[2], weights[3]);
    check(c_stall > 0 && stats.stall_cycles > 0, "engine stall happened");
    check(c_qfull > 0, "request queue filled");
    check(c_wrap > 0, "GHB wrapped");
    check(c_used > 0, "accepted prefetch used");
    check(c_expired > 0 && stats.train_down > 0, "accepted prefetch expired and trained down");
    check(c_dok > 0, "correct deny");
    check(c_dwrong > 0 && stats.train_up > 0, "wrong deny trained up");
    check(stats.accepts > 0 && stats.denies > 0, "both decisions taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
