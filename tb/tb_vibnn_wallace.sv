// tb_vibnn_wallace: the end-to-end test of tb_vibnn_top (T = 4 PE sets,
// 40-40-16-40-10 network) for the BNNWallace-GRNG build of the accelerator.
// The host first fills every Wallace pool with roughly Gaussian numbers
// through the pool port and releases the generators with pool_done.  The
// test is in vibnn_tb_body.svh: exact sigma = 0 run, Bayesian run against
// the observed sampled weights, noise statistics, cycle counts and
// mechanism counts.
module tb_vibnn_wallace;
  import vibnn_pkg::*;
  localparam int T = 4, IF_DEPTH = 16, WP_DEPTH = 64, POOL_TB = 64;
  localparam grng_e GRNG = GRNG_WALLACE;
  localparam int NL = 4, MAXI = 40, MAXO = 40;
  localparam int SIZES [5] = '{40, 40, 16, 40, 10};
  localparam int IF_AW_TB = $clog2(IF_DEPTH), WAW_TB = $clog2(WP_DEPTH);
  localparam bit SHORT_PASSES = 1'b1;
  localparam int WATCHDOG = 20000;

  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] cfg_num_layers = '0;
  logic [3:0][IF_AW_TB-1:0] cfg_in_words = '0, cfg_out_words = '0;
  logic busy, done, result_sel, grng_ready, stall;
  logic if_ext_we = 0, if_ext_re = 0, if_ext_sel = 0;
  logic [IF_AW_TB-1:0] if_ext_addr = '0;
  logic [7:0][7:0] if_ext_wdata = '0, if_ext_rdata;
  logic wp_ext_we = 0;
  logic [1:0] wp_ext_set = '0;
  logic [WAW_TB-1:0] wp_ext_addr = '0;
  logic [63:0][15:0] wp_ext_wdata = '0;
  logic pool_ext_we = 0, pool_done = 0;
  logic [1:0] pool_ext_set = '0;
  logic [3:0] pool_ext_unit = '0;
  logic [5:0] pool_ext_addr = '0;
  logic [3:0][7:0] pool_ext_data = '0;

  vibnn_top #(.T(T), .IF_DEPTH(IF_DEPTH), .WP_DEPTH(WP_DEPTH), .GRNG(GRNG), .POOL_WORDS(POOL_TB)) u_dut (
    .clk, .rst_n, .start, .cfg_num_layers, .cfg_in_words, .cfg_out_words, .busy, .done, .result_sel,
    .grng_ready, .stall, .if_ext_we, .if_ext_re, .if_ext_sel, .if_ext_addr, .if_ext_wdata, .if_ext_rdata,
    .wp_ext_we, .wp_ext_set, .wp_ext_addr, .wp_ext_wdata,
    .pool_ext_we, .pool_ext_set, .pool_ext_unit, .pool_ext_addr, .pool_ext_data, .pool_done);

  `include "vibnn_tb_body.svh"

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
