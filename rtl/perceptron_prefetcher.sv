// perceptron_prefetcher: two-level data-cache prefetcher whose second level is
// a perceptron that vetoes first-level suggestions.
//
// The prefetcher watches every reference of the cache it serves. A miss
// (a) is pushed into the GHB, (b) triggers the first-level prefetcher (stride,
// degree 2, or GHB Markov with its index table, degree 4, chosen by KIND),
// (c) has every suggested block looked up in the GHB to build a 32-bit
// feature vector, (d) is judged by one perceptron lane per suggestion, and
// (e) the accepted blocks are queued as prefetch requests and recorded in the
// accept table, the denied ones in the deny table. Both tables watch later
// references and turn wrong decisions into training steps for the shared
// weights. This is the datapath of the paper's figures 1 and 3.
//
// Sequencing (this design's choice; the paper gives no cycle counts):
//   IDLE   a miss is taken (acc_ready high); GHB push, index-table update.
//   FIRST  first-level prefetcher runs (1 cycle stride, <= DEGREE+1 Markov).
//   SCAN   feature extractor scans the GHB, one SCAN_W-entry row per cycle
//          (16-17 cycles for a full 512-entry GHB at SCAN_W = 32).
//   DECIDE the perceptron lanes judge all suggestions in one cycle.
//   RECORD one suggestion per cycle goes to the request queue + accept table
//          (waits while the queue is full) or to the deny table.
// While the engine is busy a new miss is held off by acc_ready = 0; hits are
// always taken, so the tables see every reference.
//
// Interface: acc_valid/acc_ready/acc_miss/acc_line/acc_pc is the cache's
// reference stream (line address = 45 bits); pf_valid/pf_ready/pf_line the
// prefetch requests to the next level; stats counts the events the paper's
// evaluation reports; weights/theta show the perceptron state.
module perceptron_prefetcher import pp_pkg::*; #(
  parameter pf_kind_e    KIND        = PF_MARKOV,
  parameter int unsigned GHB_ENTRIES = 512,
  parameter int unsigned IT_ENTRIES  = 256,
  parameter int unsigned AT_ENTRIES  = 256,
  parameter int unsigned DT_ENTRIES  = 32,
  parameter int unsigned DT_LIMIT    = 32,
  parameter int unsigned SCAN_W      = 32,
  parameter int unsigned Q_DEPTH     = 8,
  localparam int unsigned DEGREE     = (KIND == PF_STRIDE) ? 2 : 4,
  localparam int unsigned PW         = $clog2(GHB_ENTRIES),
  localparam int unsigned RW         = (GHB_ENTRIES > SCAN_W) ? $clog2(GHB_ENTRIES / SCAN_W) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       acc_valid,
  output logic                       acc_ready,
  input  logic                       acc_miss,
  input  line_t                      acc_line,
  input  pc_t                        acc_pc,
  output logic                       pf_valid,
  input  logic                       pf_ready,
  output line_t                      pf_line,
  output pf_stats_t                  stats,
  output logic signed [WEIGHT_W-1:0] weights [N_FEAT],
  output logic signed [WEIGHT_W-1:0] theta
);

  typedef enum logic [2:0] {S_IDLE, S_FIRST, S_SCAN, S_DECIDE, S_RECORD} state_e;
  state_e state;

  logic  take, take_miss;
  line_t l_q;
  pc_t   pc_q;

  assign acc_ready = (state == S_IDLE) || !acc_miss;
  assign take      = acc_valid && acc_ready;
  assign take_miss = take && acc_miss;

  // ---------------- GHB and index table ----------------
  logic [PW-1:0]          ghb_wr_idx, ghb_newest;
  logic [PW:0]            ghb_count;
  logic [2:0][PW-1:0]     ghb_rd_idx;
  line_t                  ghb_rd_addr [3];
  logic [PW-1:0]          ghb_rd_link [3];
  logic [RW-1:0]          ghb_win_row;
  line_t                  ghb_win_addr [SCAN_W];
  logic                   it_hit;
  logic [PW-1:0]          it_ptr;
  logic [PW-1:0]          push_link;

  ghb #(.ENTRIES(GHB_ENTRIES), .NRD(3), .WIN(SCAN_W)) u_ghb (
    .clk, .rst_n,
    .push_valid (take_miss),
    .push_addr  (acc_line),
    .push_link  (push_link),
    .wr_idx     (ghb_wr_idx),
    .newest     (ghb_newest),
    .count      (ghb_count),
    .rd_idx     (ghb_rd_idx),
    .rd_addr    (ghb_rd_addr),
    .rd_link    (ghb_rd_link),
    .win_row    (ghb_win_row),
    .win_addr   (ghb_win_addr)
  );

  // ---------------- first level ----------------
  logic        first_start, first_done;
  line_t       sugg_fl [DEGREE];
  logic [DEGREE-1:0] sugg_fl_valid;
  logic        l_hit_q;
  logic [PW-1:0] l_link_q;

  if (KIND == PF_MARKOV) begin : g_markov
    logic [PW-1:0] mk_idx0, mk_idx1;

    index_table #(.ENTRIES(IT_ENTRIES), .PTR_W(PW)) u_index (
      .clk, .rst_n,
      .lk_addr   (acc_line),
      .lk_hit    (it_hit),
      .lk_ptr    (it_ptr),
      .upd_valid (take_miss),
      .upd_addr  (acc_line),
      .upd_ptr   (ghb_wr_idx)
    );
    assign push_link = it_hit ? it_ptr : ghb_wr_idx;

    markov_prefetcher #(.DEGREE(DEGREE), .ENTRIES(GHB_ENTRIES)) u_first (
      .clk, .rst_n,
      .start      (first_start),
      .miss_addr  (l_q),
      .first_hit  (l_hit_q),
      .first_ptr  (l_link_q),
      .newest     (ghb_newest),
      .count      (ghb_count),
      .rd_idx0    (mk_idx0),
      .rd_idx1    (mk_idx1),
      .rd_addr0   (ghb_rd_addr[0]),
      .rd_link0   (ghb_rd_link[0]),
      .rd_addr1   (ghb_rd_addr[1]),
      .done       (first_done),
      .sugg       (sugg_fl),
      .sugg_valid (sugg_fl_valid)
    );
    assign ghb_rd_idx = {ghb_newest, mk_idx1, mk_idx0};
  end else begin : g_stride
    assign it_hit    = 1'b0;
    assign it_ptr    = '0;
    assign push_link = '0;

    stride_prefetcher #(.DEGREE(DEGREE)) u_first (
      .clk, .rst_n,
      .start      (first_start),
      .a0         (ghb_rd_addr[0]),
      .a1         (ghb_rd_addr[1]),
      .a2         (ghb_rd_addr[2]),
      .n_avail    (16'(ghb_count)),
      .done       (first_done),
      .sugg       (sugg_fl),
      .sugg_valid (sugg_fl_valid)
    );
    assign ghb_rd_idx = {ghb_newest - PW'(2), ghb_newest - PW'(1), ghb_newest};
  end

  // ---------------- feature extraction ----------------
  logic  fx_start, fx_done;
  feat_t fx_feat [DEGREE];

  feature_extractor #(.LANES(DEGREE), .ENTRIES(GHB_ENTRIES), .SCAN_W(SCAN_W)) u_fx (
    .clk, .rst_n,
    .start     (fx_start),
    .miss_addr (l_q),
    .miss_pc   (pc_q),
    .sugg      (sugg_fl),
    .newest    (ghb_newest),
    .count     (ghb_count),
    .win_row   (ghb_win_row),
    .win_addr  (ghb_win_addr),
    .done      (fx_done),
    .feat      (fx_feat)
  );

  // ---------------- perceptron and training ----------------
  localparam int unsigned YW = 2 * WEIGHT_W + 4 + 1;
  logic signed [YW-1:0] y [DEGREE];
  logic [DEGREE-1:0]    pc_accept;
  logic                 at_train_valid, dt_train_valid, dt_train_ready;
  feat_t                at_train_feat, dt_train_feat;
  logic                 tr_valid, tr_up;
  feat_t                tr_feat;

  // The accept table's step is never held back; the deny table waits.
  assign dt_train_ready = !at_train_valid;
  assign tr_valid       = at_train_valid || dt_train_valid;
  assign tr_up          = !at_train_valid;
  assign tr_feat        = at_train_valid ? at_train_feat : dt_train_feat;

  perceptron #(.LANES(DEGREE)) u_perceptron (
    .clk, .rst_n,
    .feat        (fx_feat),
    .y           (y),
    .accept      (pc_accept),
    .train_valid (tr_valid),
    .train_up    (tr_up),
    .train_feat  (tr_feat),
    .weights     (weights),
    .theta       (theta)
  );

  // ---------------- decision recording ----------------
  localparam int unsigned LW = $clog2(DEGREE);
  logic [DEGREE-1:0] dec_accept, dec_valid;
  logic [LW-1:0]     lane;
  line_t             rec_line;
  feat_t             rec_feat;
  logic              rec_valid, rec_acc, q_ready, rec_fire;

  assign rec_line  = sugg_fl[lane];
  assign rec_feat  = fx_feat[lane];
  assign rec_valid = (state == S_RECORD) && dec_valid[lane];
  assign rec_acc   = dec_accept[lane];
  // a lane is done when it is empty, denied, or accepted into the queue
  assign rec_fire  = (state == S_RECORD) && (!dec_valid[lane] || !rec_acc || q_ready);

  logic unused_at_used, unused_at_exp, unused_dt_wrong, unused_dt_ok, unused_dt_lost;
  logic [$clog2(Q_DEPTH):0] unused_level;

  cache_read_queue #(.DEPTH(Q_DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid  (rec_valid && rec_acc),
    .in_ready  (q_ready),
    .in_line   (rec_line),
    .out_valid (pf_valid),
    .out_ready (pf_ready),
    .out_line  (pf_line),
    .level     (unused_level)
  );

  accept_table #(.ENTRIES(AT_ENTRIES)) u_accept (
    .clk, .rst_n,
    .ins_valid   (rec_valid && rec_acc && q_ready),
    .ins_line    (rec_line),
    .ins_feat    (rec_feat),
    .ref_valid   (take),
    .ref_line    (acc_line),
    .train_valid (at_train_valid),
    .train_feat  (at_train_feat),
    .used        (unused_at_used),
    .expired     (unused_at_exp)
  );

  deny_table #(.ENTRIES(DT_ENTRIES), .LIMIT(DT_LIMIT)) u_deny (
    .clk, .rst_n,
    .ins_valid    (rec_valid && !rec_acc),
    .ins_line     (rec_line),
    .ins_feat     (rec_feat),
    .ref_valid    (take),
    .ref_line     (acc_line),
    .miss_tick    (take_miss),
    .train_valid  (dt_train_valid),
    .train_ready  (dt_train_ready),
    .train_feat   (dt_train_feat),
    .wrong_deny   (unused_dt_wrong),
    .correct_deny (unused_dt_ok),
    .lost         (unused_dt_lost)
  );

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      l_q         <= '0;
      pc_q        <= '0;
      l_hit_q     <= 1'b0;
      l_link_q    <= '0;
      first_start <= 1'b0;
      fx_start    <= 1'b0;
      dec_accept  <= '0;
      dec_valid   <= '0;
      lane        <= '0;
      stats       <= '0;
    end else begin
      first_start <= 1'b0;
      fx_start    <= 1'b0;
      if (acc_valid && acc_miss && !acc_ready)
        stats.stall_cycles <= stats.stall_cycles + 1;
      if (tr_valid && tr_up)  stats.train_up   <= stats.train_up + 1;
      if (tr_valid && !tr_up) stats.train_down <= stats.train_down + 1;
      case (state)
        S_IDLE: if (take_miss) begin
          l_q         <= acc_line;
          pc_q        <= acc_pc;
          l_hit_q     <= it_hit;
          l_link_q    <= it_ptr;
          first_start <= 1'b1;
          stats.triggers <= stats.triggers + 1;
          state       <= S_FIRST;
        end
        S_FIRST: if (first_done) begin
          if (sugg_fl_valid == '0) state <= S_IDLE;
          else begin
            fx_start <= 1'b1;
            state    <= S_SCAN;
          end
        end
        S_SCAN: if (fx_done) state <= S_DECIDE;
        S_DECIDE: begin
          dec_valid  <= sugg_fl_valid;
          dec_accept <= pc_accept;
          lane       <= '0;
          state      <= S_RECORD;
        end
        S_RECORD: if (rec_fire) begin
          if (dec_valid[lane]) begin
            stats.suggestions <= stats.suggestions + 1;
            if (rec_acc) stats.accepts <= stats.accepts + 1;
            else         stats.denies  <= stats.denies + 1;
          end
          lane <= lane + 1'b1;
          if (lane == LW'(DEGREE - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A miss must not be taken while a previous one is still being processed.
  a_one_trigger: assert property (@(posedge clk) disable iff (!rst_n)
    take_miss |-> state == S_IDLE);

endmodule
