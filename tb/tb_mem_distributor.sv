// tb_mem_distributor: sends batches of T = 4 words with random count (1..4),
// base and select, either exactly in the cycle of the previous batch's last
// write (back to back) or after gaps.  Every write must go to base+t of the
// selected memory with word t, one per cycle starting the cycle after the
// batch, and nothing else may be written.  Back-to-back batches are counted.
module tb_mem_distributor;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, sel = 0, busy, wr_en, wr_sel;
  logic [T-1:0][15:0] in_words = '0;
  logic [6:0] base = '0, wr_addr;
  logic [2:0] count = '0;
  logic [15:0] wr_data;
  typedef struct { logic sel; logic [6:0] addr; logic [15:0] data; } wr_t;
  wr_t expq [$];
  int checks = 0, failures = 0, b2b = 0;

  mem_distributor #(.T(T), .WORD_W(16), .AW(7)) u_dut (
    .clk, .rst_n, .in_valid, .in_words, .sel, .base, .count, .busy, .wr_en, .wr_sel, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      wr_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected write"); end
      else begin
        e = expq.pop_front();
        if (wr_sel !== e.sel || wr_addr !== e.addr || wr_data !== e.data) begin
          failures++; $display("FAIL write got %0d/%0d/%h exp %0d/%0d/%h", wr_sel, wr_addr, wr_data, e.sel, e.addr, e.data);
        end
      end
    end else if (expq.size() != 0 && !in_valid) begin
      // writes must be continuous once a batch is accepted
      checks++; failures++; $display("FAIL write gap");
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      in_valid = 1; sel = 1'($urandom); base = 7'($urandom % 100); count = 3'(1 + $urandom % T);
      for (int t = 0; t < T; t++) in_words[t] = 16'($urandom);
      if (busy) b2b++;
      #1;
      for (int t = 0; t < int'(count); t++) expq.push_back('{sel, 7'(base + 7'(t)), in_words[t]});
      @(negedge clk);
      in_valid = 0;
      if ($urandom % 2) begin
        // next batch in the cycle of the last write
        while (!(busy && u_dut.last)) @(negedge clk);
      end else begin
        while (busy) @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
      end
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d writes missing", expq.size()); end
    if (b2b == 0) begin failures++; $display("FAIL back-to-back batch never happened"); end
    $display("distributor: %0d back-to-back batches", b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
