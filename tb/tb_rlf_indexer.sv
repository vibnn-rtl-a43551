// tb_rlf_indexer: checks the RLF controller's memory schedule.  During the
// 85 seeding cycles every block is written at position p with three
// consecutive xorshift64 states (independent model).  Then, with the head h
// starting at 0 and growing by two (mod 255) each cycle, it checks that
// exactly locations h+2 and h+3 are read, h+250 and h+251 written (block =
// location mod 3, position = location div 3, with the right write-back
// select), that the head blocks are h mod 3 and (h+1) mod 3, the priming
// commands and the select counter.
module tb_rlf_indexer;
  import vibnn_pkg::*;
  localparam int LANES = 8;
  localparam logic [63:0] SEED = 64'hCAFEF00D12345678;
  logic clk = 0, rst_n = 0;
  logic [2:0] we, re, wsel;
  logic [2:0][6:0] waddr, raddr;
  logic seeding, ready;
  logic [2:0][LANES-1:0] seed_word;
  logic [1:0] hblk0, hblk1, mux_sel;
  upd_cmd_t cmd;
  int checks = 0, failures = 0;

  rlf_indexer #(.LANES(LANES), .SEED(SEED)) u_dut (
    .clk, .rst_n, .semem_we(we), .semem_waddr(waddr), .seeding, .seed_word, .wsel,
    .semem_re(re), .semem_raddr(raddr), .hblk0, .hblk1, .upd_cmd(cmd), .mux_sel, .ready);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic expect_access(input int la, input int lb, input bit is_read, input bit [1:0] sel_b);
    logic [2:0] en;
    en = is_read ? re : we;
    chk(en == ((3'b1 << (la % 3)) | (3'b1 << (lb % 3))), is_read ? "read enables" : "write enables");
    if (is_read) begin
      chk(raddr[la % 3] == 7'(la / 3), "read address a");
      chk(raddr[lb % 3] == 7'(lb / 3), "read address b");
    end else begin
      chk(waddr[la % 3] == 7'(la / 3), "write address a");
      chk(waddr[lb % 3] == 7'(lb / 3), "write address b");
      chk(wsel[la % 3] == 1'b0 && wsel[lb % 3] == 1'b1, "write select");
    end
  endtask

  initial begin
    logic [63:0] s;
    int h;
    logic [1:0] sel0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    s = SEED;
    for (int p = 0; p < 85; p++) begin
      #1;
      chk(seeding && we == 3'b111 && !ready, "seeding state");
      for (int b = 0; b < 3; b++) begin
        s ^= s << 13; s ^= s >> 7; s ^= s << 17;
        chk(waddr[b] == 7'(p) && seed_word[b] == s[LANES-1:0], "seed word");
      end
      chk(cmd.op == UPD_SEED && cmd.prime == ((p == 83) ? 2'd1 : (p == 84) ? 2'd2 : 2'd0), "prime command");
      @(negedge clk);
    end
    // priming: read x(0), x(1)
    chk(!seeding && !ready && we == 3'b000, "priming state");
    expect_access(0, 1, 1'b1, 2'b00);
    h = 0;
    sel0 = 2'd0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      #1;
      chk(ready && cmd.op == UPD_RUN, "running");
      chk(hblk0 == 2'(h % 3) && hblk1 == 2'((h + 1) % 3), "head blocks");
      expect_access((h + 2) % 255, (h + 3) % 255, 1'b1, 2'b00);
      expect_access((h + 250) % 255, (h + 251) % 255, 1'b0, 2'b00);
      chk(mux_sel == 2'(sel0 + 2'(k)), "mux select");
      h = (h + 2) % 255;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
