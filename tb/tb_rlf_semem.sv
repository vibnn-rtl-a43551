// tb_rlf_semem: checks the three SeMem blocks: each block keeps its own 85
// words, one write and one read per block per cycle, independent of the
// other blocks (array model per block).
module tb_rlf_semem;
  import vibnn_pkg::*;
  localparam int LANES = 16;
  logic clk = 0;
  logic [2:0] we = '0, re = '0;
  logic [2:0][6:0] waddr = '0, raddr = '0;
  logic [2:0][LANES-1:0] wdata = '0, rdata;
  logic [LANES-1:0] model [3][85];
  int checks = 0, failures = 0;

  rlf_semem #(.LANES(LANES)) u_dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    logic [2:0][LANES-1:0] exp_q;
    for (int p = 0; p < 85; p++) begin
      @(negedge clk);
      we = '1;
      for (int b = 0; b < 3; b++) begin waddr[b] = 7'(p); wdata[b] = LANES'($urandom); model[b][p] = wdata[b]; end
    end
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      for (int b = 0; b < 3; b++) begin
        re[b] = 1'($urandom); raddr[b] = 7'($urandom % 85);
        we[b] = 1'($urandom); waddr[b] = 7'($urandom % 85); wdata[b] = LANES'($urandom);
        exp_q[b] = re[b] ? model[b][raddr[b]] : rdata[b];
      end
      @(posedge clk); #1;
      for (int b = 0; b < 3; b++) begin
        if (we[b]) model[b][waddr[b]] = wdata[b];
        checks++;
        if (rdata[b] !== exp_q[b]) begin failures++; $display("FAIL block %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
