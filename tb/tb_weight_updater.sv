// tb_weight_updater: random mu, sigma and eps (including extreme values that
// saturate); checks w = sat8(mu + round(sigma*(eps + 1/2) / 8)) (the default
// half-step eps code, rounding half up) two cycles later,
// with a new operand set every cycle, and the two-cycle valid latency.
module tb_weight_updater;
  localparam int L = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [L-1:0][7:0] mu, sigma, eps, w;
  int checks = 0, failures = 0;
  int exp_q [$];

  weight_updater #(.LANES(L), .B(8)) u_dut (.clk, .rst_n, .in_valid, .mu, .sigma, .eps, .out_valid, .w);
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction
  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  int expv [3][L];
  initial begin
    mu = '0; sigma = '0; eps = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      // check results of the operands given two cycles ago
      if (c >= 2) begin
        checks++;
        if (!out_valid) begin failures++; $display("FAIL valid latency"); end
        for (int l = 0; l < L; l++) begin
          checks++;
          if (s8((w[l])) != expv[(c - 2) % 3][l]) begin
            failures++; if (failures < 10) $display("FAIL c %0d lane %0d got %0d exp %0d", c, l, $signed(w[l]), expv[(c-2)%3][l]);
          end
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL early valid"); end
      end
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        mu[l] = 8'($urandom); sigma[l] = (c % 7 == 0) ? 8'd127 : 8'($urandom % 32); eps[l] = 8'($urandom);
        expv[c % 3][l] = sat8(s8((mu[l])) + ((s8((sigma[l])) * (2 * s8((eps[l])) + 1) + 8) >>> 4));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
