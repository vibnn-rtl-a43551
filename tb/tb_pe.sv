// tb_pe: streams random neurons of 1..12 data beats (plus the bias beat)
// back to back and with gaps through one PE.  For every neuron the model
// computes relu(clip((sum x*w + bias*16) >> 4)) and checks it appears with
// y_valid exactly three cycles after the bias beat; y_valid must never be
// high at other times.  Large weights are included so that clipping at 127
// and the ReLU both occur; both are counted.
module tb_pe;
  localparam int N = 8, FRAC = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, bias_beat = 0, y_valid;
  logic [N-1:0][7:0] x = '0, w = '0;
  logic [7:0] bias = '0, y;
  int checks = 0, failures = 0, clipped = 0, zeroed = 0;
  int expq [$];
  bit vexp [4];
  int cyc = 0;

  pe #(.N(N), .B(8), .FRAC(FRAC), .ACC_W(28)) u_dut (.clk, .rst_n, .in_valid, .first, .bias_beat, .x, .w, .bias, .y_valid, .y);
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (y_valid !== vexp[(cyc + 1) % 4]) begin failures++; $display("FAIL y_valid timing at cycle %0d", cyc); end
    if (y_valid) begin
      int e;
      e = expq.pop_front();
      checks++;
      if (int'(y) != e) begin failures++; $display("FAIL y got %0d exp %0d", y, e); end
    end
    vexp[cyc % 4] = in_valid && bias_beat;
    cyc++;
  end

  initial begin
    for (int i = 0; i < 4; i++) vexp[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int beats, acc, pre, big;
      beats = 1 + $urandom % 12;
      big = (n % 5 == 0);
      acc = 0;
      for (int b = 0; b < beats; b++) begin
        in_valid = 1; first = (b == 0); bias_beat = 0;
        for (int i = 0; i < N; i++) begin
          x[i] = 8'($urandom % 128);
          w[i] = big ? 8'($urandom) : 8'($urandom % 16 - 8);
          acc += s8(x[i]) * s8(w[i]);
        end
        bias = 8'($urandom);
        @(negedge clk);
        if ($urandom % 4 == 0) begin in_valid = 0; x = '1; @(negedge clk); end
      end
      in_valid = 1; first = 0; bias_beat = 1; bias = 8'($urandom % 64 - 32);
      x = 8'($urandom);
      pre = (acc + s8(bias) * 16) >>> FRAC;
      if (pre > 127) begin pre = 127; clipped++; end
      if (pre < 0) begin pre = 0; zeroed++; end
      expq.push_back(pre);
      @(negedge clk);
      in_valid = 0; bias_beat = 0;
      if ($urandom % 3 == 0) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    if (clipped == 0 || zeroed == 0) begin failures++; $display("FAIL clip %0d relu %0d never exercised", clipped, zeroed); end
    $display("PE: %0d clipped, %0d cut by ReLU", clipped, zeroed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
