// perceptron: the second-level prefetcher, one neuron whose weights are
// shared by LANES parallel decision units.
//
// Each lane computes y = sum_j w_j * x_j + theta * 1 for its feature vector
// and accepts the suggestion when y > 0 (the paper's threshold of zero). The
// lanes are combinational, so all suggestions of one trigger are judged in the
// same cycle, as the paper proposes (one perceptron per unit of prefetch
// degree, one copy of the weights).
//
// Training follows the error-correction rule w_j += alpha*(d-r)*x_j. Features
// are read as fractions x/256 of full scale and the constant input 1 as full
// scale (256), so theta weighs like a feature; alpha = 2^-ALPHA_SHIFT, giving a
// step of x_j >> ALPHA_SHIFT for w_j and 256 >> ALPHA_SHIFT for theta. Weights
// are 8-bit two's complement and saturate. The paper gives the rule, the
// five 8-bit weights and the zero threshold; the fixed-point scaling, alpha,
// saturation and the reset values (features 0, theta THETA_INIT > 0 so that
// an untrained unit follows the first level) are this design's choices.
//
// Training port: train_valid for one cycle with train_feat and train_up
// (1: d-r = +1, a wrongly denied block; 0: d-r = -1, an accepted block that
// was never used). The weights change at that clock edge.
module perceptron import pp_pkg::*; #(
  parameter int unsigned LANES       = 4,
  parameter int unsigned ALPHA_SHIFT = 4,
  parameter int          THETA_INIT  = 1,
  localparam int unsigned YW         = 2 * WEIGHT_W + 4 + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  feat_t                       feat [LANES],
  output logic signed [YW-1:0]        y [LANES],
  output logic [LANES-1:0]            accept,
  input  logic                        train_valid,
  input  logic                        train_up,
  input  feat_t                       train_feat,
  output logic signed [WEIGHT_W-1:0]  weights [N_FEAT],
  output logic signed [WEIGHT_W-1:0]  theta
);

  localparam int signed WMAX = (1 <<< (WEIGHT_W - 1)) - 1;
  localparam int signed WMIN = -(1 <<< (WEIGHT_W - 1));
  localparam int unsigned FULL = 1 << FEAT_W;   // the constant input 1.0

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [YW-1:0] acc;
      acc = YW'(theta) * YW'(signed'(FULL));
      for (int j = 0; j < N_FEAT; j++)
        acc = acc + YW'(weights[j]) * signed'({1'b0, feat[l][j]});
      y[l]      = acc;
      accept[l] = (acc > 0);
    end
  end

  function automatic logic signed [WEIGHT_W-1:0] step(logic signed [WEIGHT_W-1:0] w,
                                                      logic up, int unsigned mag);
    int signed v;
    v = up ? int'(w) + int'(mag) : int'(w) - int'(mag);
    if (v > WMAX) v = WMAX;
    if (v < WMIN) v = WMIN;
    return WEIGHT_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_FEAT; j++) weights[j] <= '0;
      theta <= WEIGHT_W'(THETA_INIT);
    end else if (train_valid) begin
      for (int j = 0; j < N_FEAT; j++)
        weights[j] <= step(weights[j], train_up, int'(train_feat[j]) >> ALPHA_SHIFT);
      theta <= step(theta, train_up, FULL >> ALPHA_SHIFT);
    end
  end

endmodule
