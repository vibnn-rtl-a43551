// tb_rlf_grng: self-checking test of the parallel RLF-GRNG.
//
// A behavioural reference keeps every lane's 255 seed bits as a plain array,
// seeded from its own xorshift64 model, and applies the combined two-step
// linear feedback each cycle.  Every output must equal (popcount of the
// referenced lane) - 128, with the lane chosen by the rotating group
// multiplexer.  Also checked: seeding takes 85+1 cycles before ready, the
// count of a lane changes by at most five per cycle, and over many samples
// the mean and variance match B(255,1/2) (127.5 and 63.75).
module tb_rlf_grng;
  localparam int LANES  = 8;
  localparam logic [63:0] SEED = 64'h0123456789ABCDEF;
  localparam int CYCLES = 3000;

  logic clk = 0, rst_n = 0;
  logic ready;
  logic [LANES-1:0][7:0] eps;
  int checks = 0, failures = 0;

  rlf_grng #(.LANES(LANES), .SEED(SEED)) u_dut (.clk, .rst_n, .ready, .eps);

  always #5 clk = ~clk;

  function automatic logic [63:0] xorshift(input logic [63:0] s);
    s ^= s << 13; s ^= s >> 7; s ^= s << 17;
    return s;
  endfunction

  logic ref_bits [LANES][255];

  function automatic int popc(input int l);
    int c = 0;
    for (int i = 0; i < 255; i++) c += int'(ref_bits[l][i]);
    return c;
  endfunction

  task automatic ref_step(input int h);
    for (int l = 0; l < LANES; l++) begin
      logic a, b;
      a = ref_bits[l][h];
      b = ref_bits[l][(h + 1) % 255];
      ref_bits[l][(h + 250) % 255] ^= a;
      ref_bits[l][(h + 251) % 255] ^= b;
      ref_bits[l][(h + 252) % 255] ^= a;
      ref_bits[l][(h + 253) % 255] ^= a ^ b;
      ref_bits[l][(h + 254) % 255] ^= b;
    end
  endtask

  initial begin
    logic [63:0] s;
    int h, cyc, prev [LANES];
    real sum, sum2, n, mean, var_;
    s = SEED;
    for (int i = 0; i < 255; i++) begin
      s = xorshift(s);
      for (int l = 0; l < LANES; l++) ref_bits[l][i] = s[l];
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 86) begin failures++; $display("FAIL ready after %0d cycles, expected 86", cyc); end
    h = 0; sum = 0; sum2 = 0; n = 0;
    for (int l = 0; l < LANES; l++) prev[l] = popc(l);
    for (int k = 0; k < CYCLES; k++) begin
      for (int l = 0; l < LANES; l++) begin
        int g, j, src, expv, got;
        g = l / 4; j = l % 4;
        src = 4 * g + ((j + (k % 4) + g) % 4);
        expv = popc(src) - 128;
        got  = int'($signed(eps[l]));
        checks++;
        if (got != expv) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d lane %0d: eps %0d expected %0d", k, l, got, expv);
        end
        sum += real'(got + 128); sum2 += real'((got + 128) * (got + 128)); n += 1.0;
      end
      for (int l = 0; l < LANES; l++) begin
        automatic int d = int'(u_dut.result[l]) - prev[l];
        checks++;
        if (d > 5 || d < -5) begin failures++; $display("FAIL lane %0d jumped by %0d", l, d); end
        prev[l] = int'(u_dut.result[l]);
      end
      ref_step(h);
      h = (h + 2) % 255;
      @(posedge clk); #1;
    end
    mean = sum / n;
    var_ = sum2 / n - mean * mean;
    $display("RLF-GRNG: mean %f (127.5), variance %f (63.75) over %0d samples", mean, var_, int'(n));
    checks++;
    if (mean < 126.0 || mean > 129.0) begin failures++; $display("FAIL mean"); end
    checks++;
    if (var_ < 45.0 || var_ > 85.0) begin failures++; $display("FAIL variance"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYCLES + 500) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
