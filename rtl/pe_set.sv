// pe_set: a set of S processing elements that share their input features.
//
// Every PE of the set computes one neuron and sees the same N features per
// beat; each PE has its own N weights (lanes s*N .. s*N+N-1 of the set's
// weight vector).  On a bias beat PE s takes its bias from lane s*N.  The S
// outputs, all valid in the same cycle, form one B*S-bit word (PE 0 in the
// low bits) that the memory distributor writes back as one IFMem word.
//
// Timing: that of pe (outputs three cycles after the bias beat).
module pe_set #(
  parameter int unsigned N     = 8,
  parameter int unsigned S     = 8,
  parameter int unsigned B     = 8,
  parameter int unsigned FRAC  = 4,
  parameter int unsigned ACC_W = 28
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    first,
  input  logic                    bias_beat,
  input  logic [N-1:0][B-1:0]     x,
  input  logic [S*N-1:0][B-1:0]   w,
  output logic                    y_valid,
  output logic [S-1:0][B-1:0]     y
);
  logic [S-1:0] v;

  for (genvar s = 0; s < S; s++) begin : g_pe
    pe #(.N(N), .B(B), .FRAC(FRAC), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n, .in_valid, .first, .bias_beat, .x,
      .w(w[s*N +: N]), .bias(w[s*N]),
      .y_valid(v[s]), .y(y[s])
    );
  end

  assign y_valid = &v;  // all PEs run in lockstep
endmodule
