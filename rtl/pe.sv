// pe: processing element, one neuron computed over several beats.
//
// A beat brings N input features x and N weights w.  The MAC multiplies them
// pairwise and adds the products in a binary adder tree; the accumulator sums
// the beats of one neuron (first clears it).  A bias beat, which carries the
// sampled bias, closes the neuron: the bias is added, the sum is rescaled
// and ReLU is applied.
//
// Pipeline (three stages): stage 1 registers the N products, stage 2 adds the
// tree into the accumulator, stage 3 adds the bias and applies ReLU.  y and
// y_valid appear three cycles after the bias beat.
//
// Fixed point (own choice): x, w, bias, y are signed B-bit with FRAC fraction
// bits; the accumulator keeps 2*FRAC fraction bits in ACC_W bits.  The
// output is (acc + bias*2^FRAC) >> FRAC (floor), clipped to [0, 2^(B-1)-1].
module pe #(
  parameter int unsigned N     = 8,
  parameter int unsigned B     = 8,
  parameter int unsigned FRAC  = 4,
  parameter int unsigned ACC_W = 28
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                first,      // first data beat of a neuron
  input  logic                bias_beat,  // this beat carries the bias
  input  logic [N-1:0][B-1:0] x,
  input  logic [N-1:0][B-1:0] w,
  input  logic [B-1:0]        bias,
  output logic                y_valid,
  output logic [B-1:0]        y
);
  localparam int unsigned PW = 2 * B;

  logic signed [PW-1:0]    prod [N];
  logic                    s1_v, s1_first, s1_bias;
  logic signed [B-1:0]     s1_b;
  logic signed [ACC_W-1:0] acc, tree;
  logic                    s2_fire;
  logic signed [B-1:0]     s2_b;
  logic signed [ACC_W-1:0] pre;

  // Stage 1: multipliers.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) prod[i] <= signed'(x[i]) * signed'(w[i]);
    s1_b <= signed'(bias);
    if (!rst_n) begin
      s1_v     <= 1'b0;
      s1_first <= 1'b0;
      s1_bias  <= 1'b0;
    end else begin
      s1_v     <= in_valid;
      s1_first <= first;
      s1_bias  <= bias_beat;
    end
  end

  // Adder tree over the products (level by level).
  always_comb begin
    logic signed [ACC_W-1:0] lvl [N];
    int n;
    for (int i = 0; i < N; i++) lvl[i] = ACC_W'(prod[i]);
    n = N;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lvl[i] = lvl[2*i] + lvl[2*i+1];
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    tree = lvl[0];
  end

  // Stage 2: accumulator.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc     <= '0;
      s2_fire <= 1'b0;
      s2_b    <= '0;
    end else begin
      s2_fire <= s1_v && s1_bias;
      s2_b    <= s1_b;
      if (s1_v && !s1_bias) acc <= (s1_first ? '0 : acc) + tree;
    end
  end

  // Stage 3: bias, rescale, ReLU.
  assign pre = (acc + (ACC_W'(s2_b) <<< FRAC)) >>> FRAC;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      y_valid <= s2_fire;
      if (s2_fire) begin
        if (pre < 0)                                  y <= '0;
        else if (pre > ACC_W'((1 << (B - 1)) - 1))    y <= B'((1 << (B - 1)) - 1);
        else                                          y <= pre[B-1:0];
      end
    end
  end
endmodule
