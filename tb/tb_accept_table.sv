// tb_accept_table: self-checking test of the accept table at its default
// size (256 entries, 8-bit counters).
//  1. an entry referenced before 256 later references retires as used and
//     never trains;
//  2. an entry left alone trains (with its stored features) exactly after the
//     256th reference following its insertion, one cycle later;
//  3. after 256 insertions the 257th overwrites the oldest live entry, which
//     then trains in the next cycle;
//  4. 3000 random insertions and references against a reference model that
//     ages each entry by references: every entry must end either used (one
//     used pulse per reference that retires entries) or trained exactly once
//     with its own features, whichever the model predicts.
module tb_accept_table;
  import pp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic ins_valid = 0, ref_valid = 0;
  line_t ins_line = '0, ref_line = '0;
  feat_t ins_feat = '0;
  logic train_valid, used, expired;
  feat_t train_feat;

  accept_table dut (.*);

  int checks = 0, failures = 0;
  int trains = 0;
  feat_t last_train;
  int trained_ids [int];
  always @(negedge clk) if (train_valid) begin
    trains++; last_train = train_feat;
    if (trained_ids.exists(int'(train_feat))) trained_ids[int'(train_feat)]++;
    else trained_ids[int'(train_feat)] = 1;
  end
  int used_pulses = 0;
  always @(negedge clk) if (used) used_pulses++;

  // reference model for phase 4
  typedef struct {line_t l; int id; int age; bit live;} m_ent_t;
  m_ent_t model [256];

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
    // 1. used entry
    insert(45'h100, 32'hA1A2A3A4);
    for (int i = 0; i < 100; i++) reference(45'h7000 + 45'(i));
    @(negedge clk);
    ref_valid = 1; ref_line = 45'h100;
    @(posedge clk); #1;
    check(used, "used pulse");
    @(negedge clk); ref_valid = 0;
    for (int i = 0; i < 300; i++) reference(45'h7000 + 45'(i));
    check(trains == 0, "used entry never trains");
    // 2. unused entry expires after exactly 256 references
    insert(45'h200, 32'hB1B2B3B4);
    for (int i = 0; i < 255; i++) reference(45'h8000 + 45'(i));
    repeat (3) @(negedge clk);
    check(trains == 0, "no training before the 256th reference");
    @(negedge clk);
    ref_valid = 1; ref_line = 45'h9999;
    @(negedge clk);
    ref_valid = 0;
    @(posedge clk); #1;
    check(train_valid && train_feat == 32'hB1B2B3B4, "train one cycle after overflow");
    @(negedge clk); #1;
    check(trains == 1, $sformatf("exactly one training step (%0d)", trains));
    // 3. overwrite of a live entry
    for (int i = 0; i < 256; i++) insert(45'h10000 + 45'(i), feat_t'(i + 1));
    check(trains == 1, "no training while free slots remain");
    insert(45'h20000, 32'hC0C0C0C0);
    @(negedge clk); #1;
    check(trains == 2 && last_train == feat_t'(1), "victim trains with its features");
    // 4. random traffic against the model; slot = insertion number mod 256
    begin
      automatic int slot = 1;  // 257 insertions so far
      automatic int exp_used = 0;
      automatic int exp_train [int];
      automatic int n_ins = 0;
      repeat (30) @(negedge clk);
      trained_ids.delete();
      used_pulses = 0;
      // entries left from phase 3: all live with age 0, ids 2..256 and C0C0C0C0
      for (int e = 0; e < 256; e++) begin
        model[e].live = 1; model[e].age = 0;
        model[e].l = (e == 0) ? 45'h20000 : 45'h10000 + 45'(e);
        model[e].id = (e == 0) ? int'(32'hC0C0C0C0) : e + 1;
      end
      for (int op = 0; op < 3000; op++) begin
        if ($urandom % 3 == 0) begin
          automatic line_t l = 45'h40000 + 45'(n_ins);
          automatic int id = 5000 + n_ins;
          if (model[slot].live) exp_train[model[slot].id] = 1;
          model[slot] = '{l, id, 0, 1};
          insert(l, feat_t'(id));
          slot = (slot + 1) % 256;
          n_ins++;
        end else begin
          automatic line_t l;
          automatic bit any = 0;
          if ($urandom % 2 == 0 && n_ins > 0) l = 45'h40000 + 45'(n_ins - 1 - int'($urandom % 400));
          else l = 45'h90000 + 45'($urandom % 64);
          for (int e = 0; e < 256; e++)
            if (model[e].live) begin
              if (model[e].l == l) begin model[e].live = 0; any = 1; end
              else if (++model[e].age == 256) begin
                model[e].live = 0; exp_train[model[e].id] = 1;
              end
            end
          if (any) exp_used++;
          reference(l);
        end
      end
      repeat (600) @(negedge clk);
      $display("random phase: %0d inserts, %0d used, %0d trained", n_ins, exp_used, exp_train.num());
      check(used_pulses == exp_used, $sformatf("used pulses %0d exp %0d", used_pulses, exp_used));
      check(trained_ids.num() == exp_train.num(),
            $sformatf("trained entries %0d exp %0d", trained_ids.num(), exp_train.num()));
      foreach (exp_train[id])
        check(trained_ids.exists(id) && trained_ids[id] == 1, $sformatf("entry %0d trains once", id));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
