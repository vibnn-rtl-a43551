// tb_vibnn_full: end-to-end test of the accelerator at its default
// (paper) size: T = 16 PE sets of 8x8 PEs (128 PEs), 128-word IFMems,
// 276-word WPMems, RLF-GRNGs, running the 784-200-200-10 MNIST network of
// the paper's evaluation.  The first layer needs two passes (25 output
// words for 16 sets, so the second is partial) of 99 beats.  The last layer
// has 26 beats and one pass.  No pass is shorter than T beats, so this
// network has no stall cycles; tb_vibnn_top covers those.  The test is in vibnn_tb_body.svh (see there):
// exact check of a sigma = 0 run, check of a Bayesian run against the
// observed sampled weights, noise statistics, run cycle counts and
// mechanism counts.
module tb_vibnn_full;
  import vibnn_pkg::*;
  localparam int T = 16, IF_DEPTH = 128, WP_DEPTH = 276, POOL_TB = 64;
  localparam grng_e GRNG = GRNG_RLF;
  localparam int NL = 3, MAXI = 784, MAXO = 200;
  localparam int SIZES [4] = '{784, 200, 200, 10};
  localparam int IF_AW_TB = $clog2(IF_DEPTH), WAW_TB = $clog2(WP_DEPTH);
  localparam bit SHORT_PASSES = 1'b0;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] cfg_num_layers = '0;
  logic [3:0][IF_AW_TB-1:0] cfg_in_words = '0, cfg_out_words = '0;
  logic busy, done, result_sel, grng_ready, stall;
  logic if_ext_we = 0, if_ext_re = 0, if_ext_sel = 0;
  logic [IF_AW_TB-1:0] if_ext_addr = '0;
  logic [7:0][7:0] if_ext_wdata = '0, if_ext_rdata;
  logic wp_ext_we = 0;
  logic [3:0] wp_ext_set = '0;
  logic [WAW_TB-1:0] wp_ext_addr = '0;
  logic [63:0][15:0] wp_ext_wdata = '0;
  logic pool_ext_we = 0, pool_done = 0;
  logic [3:0] pool_ext_set = '0;
  logic [3:0] pool_ext_unit = '0;
  logic [5:0] pool_ext_addr = '0;
  logic [3:0][7:0] pool_ext_data = '0;

  vibnn_top u_dut (
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
