// tb_deny_table: self-checking test of the deny table at its default size
// (32 entries, limit 32 misses).
//  1. an entry referenced after 31 misses trains (d-r = +1) with its features,
//     and waits while train_ready is low;
//  2. an entry that sees 32 misses is dropped as a correct deny, no training;
//  3. overwriting an unreferenced entry drops it as a correct deny;
//  4. 3000 random insertions, references and misses against a reference model
//     that ages each entry by misses: every entry referenced in time must
//     train exactly once with its own features, and the correct-deny pulses
//     (one per cycle in which entries expire or one is overwritten) must match.
module tb_deny_table;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic ins_valid = 0, ref_valid = 0, miss_tick = 0, train_ready = 0;
  line_t ins_line = '0, ref_line = '0;
  feat_t ins_feat = '0;
  logic train_valid, wrong_deny, correct_deny, lost;
  feat_t train_feat;

  deny_table dut (.*);

  int checks = 0, failures = 0, trains = 0, corrects = 0;
  int trained_ids [int];
  always @(posedge clk) begin
    if (train_valid && train_ready) begin
      trains++;
      if (trained_ids.exists(int'(train_feat))) trained_ids[int'(train_feat)]++;
      else trained_ids[int'(train_feat)] = 1;
    end
    if (correct_deny) corrects++;
  end

  // reference model for phase 4
  typedef struct {line_t l; int id; int age; bit live;} m_ent_t;
  m_ent_t model [32];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic insert(line_t l, feat_t f);
    @(negedge clk);
    ins_valid = 1; ins_line = l; ins_feat = f;
    @(negedge clk);
    ins_valid = 0;
  endtask

  task automatic misses(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); miss_tick = 1;
      @(negedge clk); miss_tick = 0;
    end
  endtask

  task automatic reference(line_t l);
    @(negedge clk);
    ref_valid = 1; ref_line = l;
    @(negedge clk);
    ref_valid = 0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. wrong deny
    insert(45'h300, 32'h11223344);
    misses(31);
    reference(45'h300);
    repeat (3) @(negedge clk);
    check(train_valid && train_feat == 32'h11223344, "wrong deny waits for the port");
    check(trains == 0, "nothing taken while not ready");
    train_ready = 1;
    @(negedge clk);
    check(trains == 1, "training taken");
    check(!train_valid, "entry retired after training");
    // 2. correct deny by expiry
    insert(45'h400, 32'h55667788);
    misses(31);
    check(corrects == 0, "no expiry before 32 misses");
    misses(1);
    @(negedge clk);
    check(corrects == 1, "expiry on the 32nd miss");
    reference(45'h400);
    repeat (2) @(negedge clk);
    check(trains == 1 && !train_valid, "expired entry does not train");
    // 3. overwrite: fill 32 slots, one more pushes out the oldest
    for (int i = 0; i < 32; i++) insert(45'h5000 + 45'(i), feat_t'(i));
    check(corrects == 1, "no drop while filling");
    insert(45'h6000, 32'h0);
    @(negedge clk);
    check(corrects == 2, "overwrite counts as correct deny");
    reference(45'h5001);
    @(negedge clk);
    check(trains == 2, "second entry still live and trains");
    // 4. random traffic; the table is emptied first (35 insertions so far)
    misses(40);
    repeat (4) @(negedge clk);
    begin
      automatic int slot = 35 % 32;
      automatic int exp_corr = 0, n_ins = 0;
      automatic int exp_train [int];
      trained_ids.delete();
      corrects = 0;
      for (int e = 0; e < 32; e++) model[e].live = 0;
      for (int op = 0; op < 3000; op++) begin
        automatic int r = $urandom % 3;
        if (r == 0) begin
          automatic line_t l = 45'h40000 + 45'(n_ins);
          automatic int id = 7000 + n_ins;
          if (model[slot].live) exp_corr++;
          model[slot] = '{l, id, 0, 1};
          insert(l, feat_t'(id));
          slot = (slot + 1) % 32;
          n_ins++;
        end else if (r == 1) begin
          automatic line_t l;
          if ($urandom % 2 == 0 && n_ins > 0) l = 45'h40000 + 45'(n_ins - 1 - int'($urandom % 50));
          else l = 45'h90000 + 45'($urandom % 64);
          for (int e = 0; e < 32; e++)
            if (model[e].live && model[e].l == l) begin
              model[e].live = 0; exp_train[model[e].id] = 1;
            end
          reference(l);
        end else begin
          automatic bit any = 0;
          for (int e = 0; e < 32; e++)
            if (model[e].live && ++model[e].age == 32) begin model[e].live = 0; any = 1; end
          if (any) exp_corr++;
          misses(1);
        end
      end
      repeat (10) @(negedge clk);
      $display("random phase: %0d inserts, %0d wrong denies, %0d correct-deny pulses",
               n_ins, exp_train.num(), exp_corr);
      check(corrects == exp_corr, $sformatf("correct-deny pulses %0d exp %0d", corrects, exp_corr));
      check(trained_ids.num() == exp_train.num(),
            $sformatf("trained entries %0d exp %0d", trained_ids.num(), exp_train.num()));
      foreach (exp_train[id])
        check(trained_ids.exists(id) && trained_ids[id] == 1, $sformatf("entry %0d trains once", id));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
