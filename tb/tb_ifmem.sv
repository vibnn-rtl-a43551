// tb_ifmem: writes different data into both memories at the same addresses,
// then reads with random select (and simultaneous writes to the other
// memory) and checks rd_data one cycle later, including that a read of one
// memory is unaffected by writes to the other.
module tb_ifmem;
  localparam int D = 16;
  logic clk = 0, rd_en = 0, rd_sel = 0, wr_en = 0, wr_sel = 0;
  logic [3:0] rd_addr = '0, wr_addr = '0;
  logic [63:0] rd_data, wr_data = '0;
  logic [63:0] model [2][D];
  int checks = 0, failures = 0;

  ifmem #(.B(8), .N(8), .DEPTH(D)) u_dut (.clk, .rd_en, .rd_sel, .rd_addr, .rd_data, .wr_en, .wr_sel, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  initial begin
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 1'(m); wr_addr = 4'(a); wr_data = {$urandom, $urandom};
        model[m][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int c = 0; c < 500; c++) begin
      logic [63:0] e;
      rd_en = 1; rd_sel = 1'($urandom); rd_addr = 4'($urandom);
      e = model[rd_sel][rd_addr];
      // write the other memory in the same cycle
      wr_en = 1; wr_sel = ~rd_sel; wr_addr = 4'($urandom); wr_data = {$urandom, $urandom};
      model[wr_sel][wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== e) begin failures++; $display("FAIL read got %h exp %h", rd_data, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
