// tb_wallace_unit: fills the pool with random numbers, reads every word and
// compares x_new with the Hadamard transform computed here
// (t = (sum + rnd) >> 1, x1' = t-x1, x2' = t-x2, x3' = x3-t, x4' = x4-t,
// saturated to 8 bits), for both values of the rounding bit.  Also checks
// that the sum of the four outputs equals 4t - sum (no overflow cases).
module tb_wallace_unit;
  localparam int W = 8, PW = 16;
  logic clk = 0;
  logic re = 0, we = 0, rnd = 0;
  logic [3:0] raddr = '0, waddr = '0;
  logic [3:0][W-1:0] wdata = '0, x_new;
  logic [3:0][W-1:0] pool [PW];
  int checks = 0, failures = 0;

  wallace_unit #(.W(W), .POOL_WORDS(PW)) u_dut (.clk, .re, .raddr, .we, .waddr, .wdata, .rnd, .x_new);
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction
  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  initial begin
    for (int i = 0; i < PW; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i);
      for (int k = 0; k < 4; k++) wdata[k] = (i < 2) ? ((k % 2) ? 8'sd127 : -8'sd128) : W'($urandom % 64 - 32);
      pool[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < PW; i++) begin
        int xs [4], sum, t, e;
        @(negedge clk); re = 1; raddr = 4'(i); rnd = 1'(r);
        @(negedge clk); re = 0;
        sum = 0;
        for (int k = 0; k < 4; k++) begin xs[k] = s8((pool[i][k])); sum += xs[k]; end
        t = (sum + r) >>> 1;
        for (int k = 0; k < 4; k++) begin
          e = sat8((k < 2) ? t - xs[k] : xs[k] - t);
          checks++;
          if (s8((x_new[k])) != e) begin failures++; $display("FAIL word %0d k %0d got %0d exp %0d x=%h xn=%h sum=%0d t=%0d ux=%h", i, k, s8(x_new[k]), e, pool[i], x_new, u_dut.sum, u_dut.t, u_dut.x); end
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
