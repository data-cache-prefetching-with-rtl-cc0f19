// feature_extractor: searches the GHB for each first-level suggestion and
// quantifies the four perceptron inputs.
//
// For a suggested block A and the miss L that triggered the prefetcher:
//   x1 distance   distance from the newest GHB entry to the newest entry
//                 holding A (0 = newest); 255 if A is absent, saturating.
//   x2 transition every occurrence of L in the GHB (k of them, the newest
//                 included) gives the entries that follow it the weights
//                 2^n, 2^(n-1), ... (m = 1, 2, ... entries after L, up to
//                 TP_WIN entries or the next L); the weights that land on A are
//                 summed and divided by k.
//   x3 xor        the low 8 bits of A XOR the low 8 bits of the PC.
//   x4 occurrence number of GHB entries holding A, saturating at 255.
// The features and the 2^(n-m)/k weighting are the paper's. The 8-bit
// quantization, n = 7 with an 8-entry window (weights 128..1, so x2 fits 8
// bits), giving the weights to the entries after each L, and the bit slices
// of x3 are this design's choices.
//
// The GHB is read one row of SCAN_W entries per cycle, starting with the row
// that holds the oldest valid entry, and walked oldest to newest; entries
// outside the valid range are masked, and when the ring is full and the
// oldest entry is not at a row start, that row is read again at the end for
// its newest part. All LANES suggestions are evaluated in the same pass.
// Timing: start (one cycle, with the suggestions, L, PC and the GHB pointers)
// -> ceil((count + oldest mod SCAN_W)/SCAN_W) scan cycles (16 or 17 for a full
// 512-entry GHB at SCAN_W = 32) -> one divide cycle -> done pulse, with feat
// held until the next start.
module feature_extractor import pp_pkg::*; #(
  parameter int unsigned LANES   = 4,
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned SCAN_W  = 32,
  parameter int unsigned TP_N    = 7,
  parameter int unsigned TP_WIN  = 8,
  localparam int unsigned PW     = $clog2(ENTRIES),
  localparam int unsigned SWB    = $clog2(SCAN_W),
  localparam int unsigned RW     = (ENTRIES > SCAN_W) ? PW - SWB : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  line_t            miss_addr,
  input  pc_t              miss_pc,
  input  line_t            sugg [LANES],
  input  logic [PW-1:0]    newest,
  input  logic [PW:0]      count,
  output logic [RW-1:0]    win_row,
  input  line_t            win_addr [SCAN_W],
  output logic             done,
  output feat_t            feat [LANES]
);

  localparam int unsigned CW = PW + 1;          // counts up to ENTRIES
  localparam int unsigned SUMW = CW + TP_N + 1; // sum of weights

  typedef enum logic [1:0] {F_IDLE, F_SCAN, F_DIV} fstate_e;
  fstate_e state;

  line_t         l_q;
  pc_t           pc_q;
  line_t         a_q [LANES];
  logic [CW-1:0] cnt_q;      // entries to scan
  logic [CW:0]   pos;        // row slots walked so far (multiple of SCAN_W)
  logic [PW-1:0] oldest;
  logic [CW:0]   mis;        // slot of the oldest entry within its row

  // running state of the scan
  logic [CW-1:0]   k_q;
  logic            seen_l_q;       // an L has been seen (dist_q meaningful)
  logic [CW-1:0]   dist_q;         // entries since the last L
  logic            found_q [LANES];
  logic [CW-1:0]   mind_q  [LANES];
  logic [CW-1:0]   occ_q   [LANES];
  logic [SUMW-1:0] tsum_q  [LANES];

  logic [CW-1:0]   k_n;
  logic            seen_l_n;
  logic [CW-1:0]   dist_n;
  logic            found_n [LANES];
  logic [CW-1:0]   mind_n  [LANES];
  logic [CW-1:0]   occ_n   [LANES];
  logic [SUMW-1:0] tsum_n  [LANES];

  logic [PW-1:0] row_first;
  assign row_first = oldest + pos[PW-1:0];
  assign win_row   = (ENTRIES > SCAN_W) ? RW'(row_first >> SWB) : '0;

  // One scan step over SCAN_W entries, oldest first.
  always_comb begin
    k_n      = k_q;
    seen_l_n = seen_l_q;
    dist_n   = dist_q;
    for (int l = 0; l < LANES; l++) begin
      found_n[l] = found_q[l];
      mind_n[l]  = mind_q[l];
      occ_n[l]   = occ_q[l];
      tsum_n[l]  = tsum_q[l];
    end
    for (int w = 0; w < SCAN_W; w++) begin
      // entry age order: offset from the oldest entry
      if (pos + (CW+1)'(w) >= mis && pos + (CW+1)'(w) - mis < (CW+1)'(cnt_q)) begin
        if (win_addr[w] == l_q) begin
          k_n      = k_n + 1'b1;
          seen_l_n = 1'b1;
          dist_n   = '0;
        end else if (seen_l_n && dist_n != '1) begin
          dist_n = dist_n + 1'b1;
        end
        for (int l = 0; l < LANES; l++) begin
          if (win_addr[w] == a_q[l]) begin
            found_n[l] = 1'b1;
            // distance from the newest entry: count-1-offset
            mind_n[l]  = CW'((CW+1)'(cnt_q) - 1'b1 + mis - (pos + (CW+1)'(w)));
            occ_n[l]   = occ_n[l] + 1'b1;
            if (win_addr[w] != l_q && seen_l_n && dist_n >= CW'(1) && dist_n <= CW'(TP_WIN))
              tsum_n[l] = tsum_n[l] + (SUMW'(1) << (CW'(TP_N + 1) - dist_n));
          end
        end
      end
    end
  end

  // x2 = (sum of weights) / k, evaluated in the F_DIV cycle
  logic [SUMW-1:0] quot [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++)
      quot[l] = (k_q == '0) ? '0 : tsum_q[l] / SUMW'(k_q);
  end

  function automatic logic [FEAT_W-1:0] sat8(logic [CW-1:0] v);
    return (v > CW'(255)) ? 8'hFF : v[FEAT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= F_IDLE;
      done     <= 1'b0;
      l_q      <= '0;
      pc_q     <= '0;
      cnt_q    <= '0;
      pos      <= '0;
      oldest   <= '0;
      mis      <= '0;
      k_q      <= '0;
      seen_l_q <= 1'b0;
      dist_q   <= '0;
      for (int l = 0; l < LANES; l++) begin
        a_q[l]     <= '0;
        found_q[l] <= 1'b0;
        mind_q[l]  <= '0;
        occ_q[l]   <= '0;
        tsum_q[l]  <= '0;
        feat[l]    <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        F_IDLE: if (start) begin
          l_q      <= miss_addr;
          pc_q     <= miss_pc;
          cnt_q    <= count;
          oldest   <= (newest - count[PW-1:0] + 1'b1) & ~PW'(SCAN_W - 1);
          mis      <= (CW+1)'(PW'(newest - count[PW-1:0] + 1'b1) & PW'(SCAN_W - 1));
          pos      <= '0;
          k_q      <= '0;
          seen_l_q <= 1'b0;
          dist_q   <= '0;
          for (int l = 0; l < LANES; l++) begin
            a_q[l]     <= sugg[l];
            found_q[l] <= 1'b0;
            mind_q[l]  <= '0;
            occ_q[l]   <= '0;
            tsum_q[l]  <= '0;
          end
          state <= F_SCAN;
        end
        F_SCAN: begin
          k_q      <= k_n;
          seen_l_q <= seen_l_n;
          dist_q   <= dist_n;
          for (int l = 0; l < LANES; l++) begin
            found_q[l] <= found_n[l];
            mind_q[l]  <= mind_n[l];
            occ_q[l]   <= occ_n[l];
            tsum_q[l]  <= tsum_n[l];
          end
          pos <= pos + (CW+1)'(SCAN_W);
          if (pos + (CW+1)'(SCAN_W) >= (CW+1)'(cnt_q) + mis) state <= F_DIV;
        end
        F_DIV: begin
          for (int l = 0; l < LANES; l++) begin
            feat[l][F_DIST]  <= found_q[l] ? sat8(mind_q[l]) : 8'hFF;
            feat[l][F_TRANS] <= (quot[l] > SUMW'(255)) ? 8'hFF : quot[l][FEAT_W-1:0];
            feat[l][F_XOR]   <= a_q[l][FEAT_W-1:0] ^ pc_q[FEAT_W-1:0];
            feat[l][F_OCC]   <= sat8(occ_q[l]);
          end
          done  <= 1'b1;
          state <= F_IDLE;
        end
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
