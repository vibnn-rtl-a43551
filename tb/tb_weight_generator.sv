// tb_weight_generator: two small weight generators, one with the RLF-GRNG
// and one with the BNNWallace-GRNG.  WPMem is filled with random (mu,
// sigma) pairs, then words are read in random order with gaps.  A reference
// RLF-GRNG with the same seed runs beside the first DUT; for the Wallace DUT
// the eps of its own GRNG (checked in its own testbench) is observed.  Each
// weight must equal sat(mu + round(sigma*eps'/8)) for the eps produced in the
// read cycle (eps' = eps + 1/2 for the RLF build, eps for Wallace), and w_valid must come exactly three cycles after rd_en.
module tb_weight_generator;
  import vibnn_pkg::*;
  localparam int L = 8, D = 16, PW = 8;
  localparam logic [63:0] SEED = 64'h0F1E2D3C4B5A6978;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, wp_we = 0, pool_we = 0, pool_done = 0;
  logic [3:0] rd_addr = '0, wp_waddr = '0;
  logic [L-1:0][15:0] wp_wdata = '0;
  logic [0:0] pool_unit = '0;
  logic [2:0] pool_addr = '0;
  logic [3:0][7:0] pool_data = '0;
  logic rdy_r, rdy_w, v_r, v_w, ref_ready;
  logic [L-1:0][7:0] w_r, w_w, ref_eps;
  logic [L-1:0][15:0] wp [D];
  int checks = 0, failures = 0;

  weight_generator #(.GRNG(GRNG_RLF), .LANES(L), .B(8), .WP_DEPTH(D), .SEED(SEED), .POOL_WORDS(PW)) u_rlf (
    .clk, .rst_n, .rd_en, .rd_addr, .wp_we, .wp_waddr, .wp_wdata,
    .pool_we, .pool_unit, .pool_addr, .pool_data, .pool_done,
    .grng_ready(rdy_r), .w_valid(v_r), .w(w_r));
  weight_generator #(.GRNG(GRNG_WALLACE), .LANES(L), .B(8), .WP_DEPTH(D), .SEED(SEED), .POOL_WORDS(PW)) u_wal (
    .clk, .rst_n, .rd_en, .rd_addr, .wp_we, .wp_waddr, .wp_wdata,
    .pool_we, .pool_unit, .pool_addr, .pool_data, .pool_done,
    .grng_ready(rdy_w), .w_valid(v_w), .w(w_w));
  rlf_grng #(.LANES(L), .SEED(SEED)) u_ref (.clk, .rst_n, .ready(ref_ready), .eps(ref_eps));
  always #5 clk = ~clk;

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction
  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // expected weights, indexed by issue cycle mod 4
  int exp_r [4][L], exp_w [4][L];
  bit issued [4];
  int cyc = 0;

  always @(posedge clk) if (rst_n) begin
    // results of the read issued three cycles ago
    checks += 2;
    if (v_r !== issued[(cyc + 1) % 4]) begin failures++; $display("FAIL rlf valid timing at cycle %0d", cyc); end
    if (v_w !== issued[(cyc + 1) % 4]) begin failures++; $display("FAIL wallace valid timing at cycle %0d", cyc); end
    if (issued[(cyc + 1) % 4])
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (s8(w_r[l]) != exp_r[(cyc + 1) % 4][l]) begin failures++; if (failures < 10) $display("FAIL rlf w lane %0d got %0d exp %0d", l, s8(w_r[l]), exp_r[(cyc+1)%4][l]); end
        if (s8(w_w[l]) != exp_w[(cyc + 1) % 4][l]) begin failures++; if (failures < 10) $display("FAIL wallace w lane %0d got %0d exp %0d", l, s8(w_w[l]), exp_w[(cyc+1)%4][l]); end
      end
    // this cycle's read
    issued[cyc % 4] = rd_en;
    if (rd_en)
      for (int l = 0; l < L; l++) begin
        int mu, sg;
        mu = s8(wp[rd_addr][l][7:0]); sg = s8(wp[rd_addr][l][15:8]);
        exp_r[cyc % 4][l] = sat8(mu + ((sg * (2 * s8(ref_eps[l]) + 1) + 8) >>> 4));
        exp_w[cyc % 4][l] = sat8(mu + ((sg * 2 * s8(u_wal.g_wallace.u_grng.eps[l]) + 8) >>> 4));
      end
    cyc++;
  end

  initial begin
    for (int i = 0; i < 4; i++) issued[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      wp_we = 1; wp_waddr = 4'(a);
      for (int l = 0; l < L; l++) wp_wdata[l] = {8'($urandom % 64), 8'($urandom)};
      wp[a] = wp_wdata;
      @(negedge clk);
    end
    wp_we = 0;
    for (int a = 0; a < 2 * PW; a++) begin
      pool_we = 1; pool_unit = 1'(a / PW); pool_addr = 3'(a % PW);
      for (int k = 0; k < 4; k++) pool_data[k] = 8'($urandom % 17 - 8);
      @(negedge clk);
    end
    pool_we = 0; pool_done = 1;
    while (!rdy_r) @(negedge clk);
    checks++;
    if (!rdy_w) begin failures++; $display("FAIL wallace generator not ready"); end
    for (int c = 0; c < 400; c++) begin
      rd_en = ($urandom % 4) != 0;
      rd_addr = 4'($urandom);
      @(negedge clk);
    end
    rd_en = 0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
