// tb_pe_set: one PE set (S = N = 8) computing eight neurons that share the
// input words.  Each PE gets its own weight lanes; on the bias beat PE s
// must take its bias from lane s*N.  Checks all eight outputs and that
// y_valid comes three cycles after the bias beat.
module tb_pe_set;
  localparam int N = 8, S = 8, FRAC = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, bias_beat = 0, y_valid;
  logic [N-1:0][7:0] x = '0;
  logic [S*N-1:0][7:0] w = '0;
  logic [S-1:0][7:0] y;
  int checks = 0, failures = 0;

  pe_set #(.N(N), .S(S), .B(8), .FRAC(FRAC), .ACC_W(28)) u_dut (.clk, .rst_n, .in_valid, .first, .bias_beat, .x, .w, .y_valid, .y);
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int beats, acc [S], e;
      beats = 1 + $urandom % 6;
      for (int s = 0; s < S; s++) acc[s] = 0;
      for (int b = 0; b < beats; b++) begin
        in_valid = 1; first = (b == 0); bias_beat = 0;
        for (int i = 0; i < N; i++) x[i] = 8'($urandom % 128);
        for (int s = 0; s < S; s++)
          for (int i = 0; i < N; i++) begin
            w[s*N+i] = 8'($urandom % 32 - 16);
            acc[s] += s8(x[i]) * s8(w[s*N+i]);
          end
        @(negedge clk);
      end
      in_valid = 1; first = 0; bias_beat = 1;
      for (int k = 0; k < S * N; k++) w[k] = 8'($urandom % 64 - 32);
      @(negedge clk);
      in_valid = 0; bias_beat = 0;
      for (int d = 1; d <= 3; d++) begin
        checks++;
        if (y_valid !== (d == 3)) begin failures++; $display("FAIL y_valid at delay %0d", d); end
        if (d < 3) @(negedge clk);
      end
      for (int s = 0; s < S; s++) begin
        e = (acc[s] + s8(w[s*N]) * 16) >>> FRAC;
        e = (e < 0) ? 0 : (e > 127) ? 127 : e;
        checks++;
        if (int'(y[s]) != e) begin failures++; $display("FAIL neuron %0d pe %0d got %0d exp %0d", n, s, y[s], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
