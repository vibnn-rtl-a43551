// tb_bnnwallace_grng: loads the pools of four Wallace Units with Gaussian
// numbers (Q4.3, sums of uniforms generated here), runs the generator and
// follows it with a model that transforms the same words, rotates the new
// numbers by one across the units and writes them back.  Each output must
// match the model; after many pool passes the output mean and standard
// deviation must still be those of a unit Gaussian (0 and 8 LSB).
module tb_bnnwallace_grng;
  localparam int U = 4, W = 8, PW = 16, N = 4 * U, CYCLES = 4000;
  logic clk = 0, rst_n = 0, run = 0, load_we = 0, valid;
  logic [1:0] load_unit = '0;
  logic [3:0] load_addr = '0;
  logic [3:0][W-1:0] load_data = '0;
  logic [N-1:0][W-1:0] eps;
  int pool [U][PW][4];
  int checks = 0, failures = 0;

  bnnwallace_grng #(.UNITS(U), .W(W), .POOL_WORDS(PW)) u_dut (
    .clk, .rst_n, .run, .load_we, .load_unit, .load_addr, .load_data, .eps, .valid);
  always #5 clk = ~clk;

  function automatic int gauss();
    int s = 0;
    for (int i = 0; i < 12; i++) s += int'($urandom % 1024);
    return (s - 6144) / 128;   // sd of the sum is 1024 -> 8 LSB
  endfunction
  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction
  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  initial begin
    int addr, rnd, xn [N], g;
    real sum, sum2, n, mean, sd;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < U; u++)
      for (int a = 0; a < PW; a++) begin
        @(negedge clk);
        load_we = 1; load_unit = 2'(u); load_addr = 4'(a);
        for (int k = 0; k < 4; k++) begin g = sat8(gauss()); pool[u][a][k] = g; load_data[k] = W'(g); end
      end
    @(negedge clk); load_we = 0; run = 1;
    addr = 0; rnd = 0; sum = 0; sum2 = 0; n = 0;
    @(negedge clk);
    for (int c = 0; c < CYCLES; c++) begin
      // model of the word read in the previous cycle
      for (int u = 0; u < U; u++) begin
        int s, t;
        s = 0;
        for (int k = 0; k < 4; k++) s += pool[u][addr][k];
        t = (s + rnd) >>> 1;
        for (int k = 0; k < 4; k++) xn[4*u+k] = sat8((k < 2) ? t - pool[u][addr][k] : pool[u][addr][k] - t);
      end
      for (int i = 0; i < N; i++) pool[i / 4][addr][i % 4] = xn[(i + N - 1) % N];
      @(negedge clk);
      checks++;
      if (!valid) begin failures++; $display("FAIL not valid"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (s8((eps[i])) != xn[i]) begin
          failures++; if (failures < 10) $display("FAIL cycle %0d out %0d got %0d exp %0d", c, i, $signed(eps[i]), xn[i]);
        end
        sum += real'(xn[i]); sum2 += real'(xn[i] * xn[i]); n += 1.0;
      end
      addr = (addr + 1) % PW;
      rnd ^= 1;
    end
    mean = sum / n; sd = $sqrt(sum2 / n - mean * mean);
    $display("BNNWallace: mean %f LSB, sd %f LSB (unit Gaussian = 8 LSB)", mean, sd);
    checks++;
    if (mean > 1.5 || mean < -1.5) begin failures++; $display("FAIL mean drift"); end
    checks++;
    if (sd < 6.0 || sd > 10.0) begin failures++; $display("FAIL sd"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (CYCLES + 500) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
