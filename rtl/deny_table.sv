// deny_table: trace of the suggestions the perceptron denied.
//
// Each entry holds the denied line address, the perceptron inputs and an
// 8-bit duration counter, as in the paper. The counters count cache misses
// (prefetch triggers). An entry whose line is referenced before its counter
// reaches LIMIT (32) was denied wrongly: it is marked and its inputs are sent
// out as a training step with d-r = +1. An entry that reaches LIMIT, or that
// is overwritten by a new entry, was denied correctly and is dropped without
// training.
//
// Entries are written round-robin. Marked entries wait in the table until the
// training port takes them (train_valid/train_ready, lowest index first); an
// entry overwritten while still waiting loses its training step and pulses
// lost. Round-robin replacement and the waiting scheme are this design's
// choices.
//
// Interface: ins_valid/ins_line/ins_feat write an entry; ref_valid/ref_line is
// the stream of all cache references; miss_tick pulses once per trigger.
// wrong_deny pulses when an entry is marked, correct_deny when one is dropped.
module deny_table import pp_pkg::*; #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned LIMIT   = 32,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ins_valid,
  input  line_t ins_line,
  input  feat_t ins_feat,
  input  logic  ref_valid,
  input  line_t ref_line,
  input  logic  miss_tick,
  output logic  train_valid,
  input  logic  train_ready,
  output feat_t train_feat,
  output logic  wrong_deny,
  output logic  correct_deny,
  output logic  lost
);

  logic [ENTRIES-1:0] valid, marked;
  line_t              line [ENTRIES];
  feat_t              fv   [ENTRIES];
  logic [CNT_W-1:0]   cnt  [ENTRIES];
  logic [AW-1:0]      wr_ptr;

  logic [ENTRIES-1:0] hit, timeout;
  logic [AW-1:0]      tr_idx;

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      hit[e]     = ref_valid && valid[e] && !marked[e] && (line[e] == ref_line);
      timeout[e] = miss_tick && valid[e] && !marked[e] && !hit[e] &&
                   (cnt[e] + 1'b1 >= CNT_W'(LIMIT));
    end
    train_valid = 1'b0;
    tr_idx      = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (valid[e] && marked[e]) begin
        train_valid = 1'b1;
        tr_idx      = AW'(e);
      end
    train_feat = fv[tr_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid        <= '0;
      marked       <= '0;
      wr_ptr       <= '0;
      wrong_deny   <= 1'b0;
      correct_deny <= 1'b0;
      lost         <= 1'b0;
    end else begin
      wrong_deny   <= |hit;
      correct_deny <= (|timeout) ||
                      (ins_valid && valid[wr_ptr] && !marked[wr_ptr] && !hit[wr_ptr]);
      lost         <= ins_valid && valid[wr_ptr] && marked[wr_ptr] &&
                      !(train_valid && train_ready && tr_idx == wr_ptr);
      for (int e = 0; e < ENTRIES; e++) begin
        if (hit[e]) marked[e] <= 1'b1;
        else if (timeout[e]) valid[e] <= 1'b0;
        else if (miss_tick && valid[e] && !marked[e]) cnt[e] <= cnt[e] + 1'b1;
      end
      if (train_valid && train_ready) begin
        valid[tr_idx]  <= 1'b0;
        marked[tr_idx] <= 1'b0;
      end
      if (ins_valid) begin
        valid[wr_ptr]  <= 1'b1;
        marked[wr_ptr] <= 1'b0;
        cnt[wr_ptr]    <= '0;
        line[wr_ptr]   <= ins_line;
        fv[wr_ptr]     <= ins_feat;
        wr_ptr         <= wr_ptr + 1'b1;
      end
    end
  end

endmodule
