// weight_updater: samples weights w = mu + sigma * eps, LANES per cycle.
//
// One multiplier and one adder per lane.  mu, sigma and w are signed B-bit
// numbers with FRAC fraction bits; eps is a signed 8-bit unit-Gaussian sample
// with EPS_FRAC fraction bits.  With EPS_ODD = 1 the eps code e stands for
// e + 1/2 (the RLF-GRNG's bit count minus 128 has mean -1/2, so this makes
// the samples symmetric); the multiplier then works on 2e+1.  The product is
// rounded to the nearest weight step and the sum saturates to B bits.
// Formats, the half-step offset and the rounding are this design's choices
// (the paper does not give them).  sigma is stored directly (softplus of rho
// is done offline).
//
// Timing: two register stages, so w and out_valid appear two cycles after
// the operands and in_valid.  The second stage is the weight register that
// feeds the PEs.
module weight_updater
  import vibnn_pkg::*;
#(
  parameter int unsigned LANES    = 64,
  parameter int unsigned B        = 8,
  parameter int unsigned EPS_FRAC_P = EPS_FRAC,
  parameter bit          EPS_ODD  = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [LANES-1:0][B-1:0]     mu,
  input  logic [LANES-1:0][B-1:0]     sigma,
  input  logic [LANES-1:0][EPS_W-1:0] eps,
  output logic                        out_valid,
  output logic [LANES-1:0][B-1:0]     w
);
  localparam int unsigned EW = EPS_W + 1;   // 2e + EPS_ODD
  localparam int unsigned PW = B + EW;
  logic signed [PW-1:0] prod_q [LANES];
  logic        [B-1:0]  mu_q   [LANES];
  logic                 v_q;

  // Saturate: the value fits in B bits when bits PW..B-1 all agree.
  function automatic logic [B-1:0] sat(input logic signed [PW:0] v);
    if (v[PW:B-1] == '0 || v[PW:B-1] == '1) return v[B-1:0];
    return v[PW] ? {1'b1, {(B-1){1'b0}}} : {1'b0, {(B-1){1'b1}}};
  endfunction

  // product rounded to nearest: (sigma*(2e+odd) + 2^EPS_FRAC) >> (EPS_FRAC+1)
  function automatic logic signed [PW:0] scaled(input logic signed [PW-1:0] p);
    logic signed [PW:0] r;
    r = (PW+1)'(p) + signed'((PW+1)'(1) <<< EPS_FRAC_P);
    return r >>> (EPS_FRAC_P + 1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      prod_q[l] <= PW'(signed'(sigma[l])) * PW'(signed'({eps[l], EPS_ODD}));
      mu_q[l]   <= mu[l];
      w[l]      <= sat((PW+1)'(signed'(mu_q[l])) + scaled(prod_q[l]));
    end
  end
endmodule
