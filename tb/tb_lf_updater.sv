// tb_lf_updater: drives one LF-updater the way the controller does.  The
// test keeps the lane's 255 bits twice: as the memory the updater reads its
// heads from and writes its two outgoing bits to, and as a reference vector
// updated by the combined feedback equations.  Checked every cycle: the
// written-back bits equal the reference, and the result register equals the
// reference popcount.
module tb_lf_updater;
  import vibnn_pkg::*;
  logic clk = 0, rst_n = 0;
  upd_cmd_t cmd;
  logic [1:0] head_bits, wb_bits;
  logic [2:0] seed_bits;
  logic [7:0] init_sum, result;
  logic mem [255], refv [255];
  int checks = 0, failures = 0;

  lf_updater u_dut (.clk, .rst_n, .cmd, .head_bits, .seed_bits, .init_sum, .wb_bits, .result);
  always #5 clk = ~clk;

  function automatic int popc();
    int c = 0;
    for (int i = 0; i < 255; i++) c += int'(refv[i]);
    return c;
  endfunction

  initial begin
    int h;
    cmd = '{op: UPD_IDLE, prime: 2'd0}; head_bits = '0; seed_bits = '0; init_sum = '0;
    for (int i = 0; i < 255; i++) begin mem[i] = 1'($urandom); refv[i] = mem[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // seeding: the two cycles that carry the tap seeds, plus the initial sum
    @(negedge clk);
    cmd = '{op: UPD_SEED, prime: 2'd1}; seed_bits = {mem[251], mem[250], mem[249]}; init_sum = 8'(popc());
    @(negedge clk);
    cmd = '{op: UPD_SEED, prime: 2'd2}; seed_bits = {mem[254], mem[253], mem[252]};
    @(negedge clk);
    cmd = '{op: UPD_IDLE, prime: 2'd0};
    h = 0;
    for (int k = 0; k < 1000; k++) begin
      logic a, b;
      @(negedge clk);
      checks++;
      if (int'(result) != popc()) begin failures++; if (failures < 10) $display("FAIL cycle %0d result %0d exp %0d", k, result, popc()); end
      cmd = '{op: UPD_RUN, prime: 2'd0};
      head_bits = {mem[(h + 1) % 255], mem[h]};
      a = refv[h]; b = refv[(h + 1) % 255];
      refv[(h + 250) % 255] ^= a;
      refv[(h + 251) % 255] ^= b;
      refv[(h + 252) % 255] ^= a;
      refv[(h + 253) % 255] ^= a ^ b;
      refv[(h + 254) % 255] ^= b;
      #1;
      checks++;
      if (wb_bits !== {refv[(h + 251) % 255], refv[(h + 250) % 255]}) begin
        failures++; if (failures < 10) $display("FAIL cycle %0d write-back", k);
      end
      mem[(h + 250) % 255] = wb_bits[0];
      mem[(h + 251) % 255] = wb_bits[1];
      h = (h + 2) % 255;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
