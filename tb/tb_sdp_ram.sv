// tb_sdp_ram: checks the simple dual-port RAM against an array model:
// random writes and reads, one-cycle read latency, rdata held while re is
// low, and the old word returned when reading the address being written.
module tb_sdp_ram;
  localparam int W = 16, D = 32;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) u_dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    logic [W-1:0] exp_q;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      re = 1; raddr = 5'($urandom);
      we = ($urandom % 2) == 1; waddr = ($urandom % 4 == 0) ? raddr : 5'($urandom); wdata = W'($urandom);
      exp_q = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== exp_q) begin failures++; $display("FAIL read %0d got %h exp %h", raddr, rdata, exp_q); end
    end
    @(negedge clk); re = 0; we = 0; exp_q = rdata;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (rdata !== exp_q) begin failures++; $display("FAIL rdata not held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
