// tb_rlf_init_rom: recomputes, with an independent xorshift64 model, the
// number of ones each lane receives among the 255 seed words and compares
// it with the ROM contents, for two different seeds.
module tb_rlf_init_rom;
  localparam logic [63:0] S0 = 64'h9E3779B97F4A7C15;
  localparam logic [63:0] S1 = 64'h0000000000000001;
  logic [63:0][7:0] rom0;
  logic [11:0][7:0] rom1;
  int checks = 0, failures = 0;

  rlf_init_rom #(.LANES(64), .SEED(S0)) u_dut0 (.init_sum(rom0));
  rlf_init_rom #(.LANES(12), .SEED(S1)) u_dut1 (.init_sum(rom1));

  function automatic int expected(input logic [63:0] seed, input int lane);
    logic [63:0] s = seed;
    int c = 0;
    for (int i = 0; i < 255; i++) begin
      s ^= s << 13; s ^= s >> 7; s ^= s << 17;
      c += int'(s[lane]);
    end
    return c;
  endfunction

  initial begin
    #1;
    for (int l = 0; l < 64; l++) begin
      checks++;
      if (int'(rom0[l]) != expected(S0, l)) begin failures++; $display("FAIL lane %0d: %0d vs %0d", l, rom0[l], expected(S0, l)); end
    end
    for (int l = 0; l < 12; l++) begin
      checks++;
      if (int'(rom1[l]) != expected(S1, l)) begin failures++; $display("FAIL seed1 lane %0d", l); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
