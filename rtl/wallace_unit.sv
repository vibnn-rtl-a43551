// wallace_unit: one Wallace Unit of the BNNWallace-GRNG.
//
// A pool memory of POOL_WORDS words, each holding four W-bit Gaussian
// numbers, feeds a 4x4 Hadamard transform every cycle:
//   t = (x1 + x2 + x3 + x4) >> 1
//   x1' = t - x1   x2' = t - x2   x3' = x3 - t   x4' = x4 - t
// A linear combination of Gaussians is Gaussian, and this matrix (scaled by
// 1/2) is orthogonal, so x' keeps the pool's distribution.  No multiplier is
// needed.  The halving uses a rounding bit rnd supplied from outside (the
// parent alternates it) so that the pool's mean does not drift downwards,
// which a plain floor shift would cause; results saturate to W bits.  Both
// are this design's choices.
//
// Interface: the pool is read at raddr when re is high; x_new is valid in
// the following cycle (combinational from the pool's registered output).
// The parent writes the numbers back through we/waddr/wdata.  All numbers
// are signed.
module wallace_unit #(
  parameter int unsigned W          = 8,
  parameter int unsigned POOL_WORDS = 64,
  localparam int unsigned AW        = $clog2(POOL_WORDS)
) (
  input  logic                clk,
  input  logic                re,
  input  logic [AW-1:0]       raddr,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [3:0][W-1:0]   wdata,
  input  logic                rnd,
  output logic [3:0][W-1:0]   x_new
);
  logic [3:0][W-1:0] x;
  logic signed [W+2:0] sum, t, d [4];

  sdp_ram #(.WIDTH(4 * W), .DEPTH(POOL_WORDS)) u_pool (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata(x)
  );

  // Saturate: the value fits in W bits when its top four bits agree.
  function automatic logic [W-1:0] sat(input logic signed [W+2:0] v);
    if (v[W+2:W-1] == 4'b0000 || v[W+2:W-1] == 4'b1111) return v[W-1:0];
    return v[W+2] ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
  endfunction

  always_comb begin
    sum = (W+3)'(signed'(x[0])) + (W+3)'(signed'(x[1]))
        + (W+3)'(signed'(x[2])) + (W+3)'(signed'(x[3]));
    t   = (sum + signed'({{(W+2){1'b0}}, rnd})) >>> 1;
    d[0] = t - (W+3)'(signed'(x[0]));
    d[1] = t - (W+3)'(signed'(x[1]));
    d[2] = (W+3)'(signed'(x[2])) - t;
    d[3] = (W+3)'(signed'(x[3])) - t;
    for (int k = 0; k < 4; k++) x_new[k] = sat(d[k]);
  end
endmodule
