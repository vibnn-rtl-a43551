// vibnn_top: VIBNN accelerator for variational inference on Bayesian
// fully connected networks.
//
// Every weight and bias of the network is a Gaussian N(mu, sigma^2); one run
// (start .. done) computes one Monte Carlo sample of the network output with
// freshly drawn weights w = mu + sigma*eps.  Averaging several runs is left
// to the host.
//
// Structure: T PE sets of S = N PEs each, one weight generator per set (its
// own WPMem, GRNG and weight updater), two IFMems used alternately, the
// memory distributor and the global controller.  In each beat all PEs read
// the same N features from one IFMem word, and set t reads S*N sampled
// weights from weight generator t.  The GRNG type (RLF or BNNWallace) is a
// build parameter; each set's RLF-GRNG gets its own seed.
//
// Pipeline: controller issue -> IFMem/WPMem read (1 cycle) -> weight updater
// (2 cycles; the features wait in two registers) -> PE (3 cycles) -> memory
// distributor, which writes one word per cycle.
//
// Host ports (the external-memory side): with busy low the host writes input
// words into an IFMem and reads results back through if_ext_*, loads the
// WPMems through wp_ext_* and, for the Wallace build, the GRNG pools through
// pool_ext_*.  WPMem word k of set t holds, for every PE s of the set and
// every lane i, the pair {sigma, mu} in lane s*N+i; data beats use lane i
// for input i, the bias beat uses lane s*N for PE s.
module vibnn_top
  import vibnn_pkg::*;
#(
  parameter int unsigned B          = B_DEF,
  parameter int unsigned N          = N_DEF,
  parameter int unsigned T          = T_DEF,
  parameter int unsigned FRAC       = FRAC_DEF,
  parameter grng_e       GRNG       = GRNG_RLF,
  parameter int unsigned IF_DEPTH   = 128,
  parameter int unsigned WP_DEPTH   = 276,
  parameter int unsigned MAX_LAYERS = 4,
  parameter int unsigned POOL_WORDS = 64,
  localparam int unsigned S         = N,
  localparam int unsigned LANES     = S * N,
  localparam int unsigned IF_AW     = $clog2(IF_DEPTH),
  localparam int unsigned WAW       = $clog2(WP_DEPTH),
  localparam int unsigned TW        = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned PUW       = (LANES > 4) ? $clog2(LANES / 4) : 1,
  localparam int unsigned PAW       = $clog2(POOL_WORDS),
  localparam int unsigned LW        = $clog2(MAX_LAYERS + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // run control and network description
  input  logic                             start,
  input  logic [LW-1:0]                    cfg_num_layers,
  input  logic [MAX_LAYERS-1:0][IF_AW-1:0] cfg_in_words,
  input  logic [MAX_LAYERS-1:0][IF_AW-1:0] cfg_out_words,
  output logic                             busy,
  output logic                             done,
  output logic                             result_sel,
  output logic                             grng_ready,
  output logic                             stall,       // pass stretched to T cycles
  // host access to the IFMems
  input  logic                             if_ext_we,
  input  logic                             if_ext_re,
  input  logic                             if_ext_sel,
  input  logic [IF_AW-1:0]                 if_ext_addr,
  input  logic [N-1:0][B-1:0]              if_ext_wdata,
  output logic [N-1:0][B-1:0]              if_ext_rdata,
  // host access to the WPMems
  input  logic                             wp_ext_we,
  input  logic [TW-1:0]                    wp_ext_set,
  input  logic [WAW-1:0]                   wp_ext_addr,
  input  logic [LANES-1:0][2*B-1:0]        wp_ext_wdata,
  // Wallace pool loading (unused by the RLF build)
  input  logic                             pool_ext_we,
  input  logic [TW-1:0]                    pool_ext_set,
  input  logic [PUW-1:0]                   pool_ext_unit,
  input  logic [PAW-1:0]                   pool_ext_addr,
  input  logic [3:0][EPS_W-1:0]            pool_ext_data,
  input  logic                             pool_done
);
  localparam int unsigned CW = $clog2(T + 1);

  // controller
  logic                 c_if_re, c_if_sel, c_wp_re, pe_valid, pe_first, pe_bias;
  logic [IF_AW-1:0]     c_if_addr, dist_base;
  logic [WAW-1:0]       c_wp_addr;
  logic                 dist_valid, dist_sel, dist_busy;
  logic [CW-1:0]        dist_count;
  // memories and datapath
  logic                 if_re, if_rsel, if_we, if_wsel;
  logic [IF_AW-1:0]     if_raddr, if_waddr;
  logic [N*B-1:0]       if_rdata, if_wdata, x_d1, x_d2;
  logic                 d_we, d_sel;
  logic [IF_AW-1:0]     d_addr;
  logic [N*B-1:0]       d_data;
  logic [T-1:0]         wg_ready, wg_valid, set_valid;
  logic [T-1:0][LANES-1:0][B-1:0] w;
  logic [T-1:0][N*B-1:0]          set_y;

  global_controller #(
    .T(T), .MAX_LAYERS(MAX_LAYERS), .IF_AW(IF_AW), .WAW(WAW), .LAT_WG(3), .LAT_PE(3)
  ) u_ctrl (
    .clk, .rst_n, .start, .grng_ready, .cfg_num_layers, .cfg_in_words, .cfg_out_words,
    .dist_busy, .busy, .done, .result_sel, .stall,
    .if_rd_en(c_if_re), .if_rd_sel(c_if_sel), .if_rd_addr(c_if_addr),
    .wp_rd_en(c_wp_re), .wp_rd_addr(c_wp_addr),
    .pe_valid, .pe_first, .pe_bias,
    .dist_valid, .dist_sel, .dist_base, .dist_count
  );

  assign grng_ready = &wg_ready;

  // IFMem ports: the controller reads while busy, the host otherwise; the
  // distributor writes while it has data, the host otherwise.
  assign if_re    = busy ? c_if_re   : if_ext_re;
  assign if_rsel  = busy ? c_if_sel  : if_ext_sel;
  assign if_raddr = busy ? c_if_addr : if_ext_addr;
  assign if_we    = d_we ? 1'b1      : (if_ext_we && !busy);
  assign if_wsel  = d_we ? d_sel     : if_ext_sel;
  assign if_waddr = d_we ? d_addr    : if_ext_addr;
  assign if_wdata = d_we ? d_data    : if_ext_wdata;
  assign if_ext_rdata = if_rdata;

  ifmem #(.B(B), .N(N), .DEPTH(IF_DEPTH)) u_ifmem (
    .clk, .rd_en(if_re), .rd_sel(if_rsel), .rd_addr(if_raddr), .rd_data(if_rdata),
    .wr_en(if_we), .wr_sel(if_wsel), .wr_addr(if_waddr), .wr_data(if_wdata)
  );

  // Features wait two cycles to meet the sampled weights.
  always_ff @(posedge clk) begin
    x_d1 <= if_rdata;
    x_d2 <= x_d1;
  end

  for (genvar t = 0; t < T; t++) begin : g_set
    weight_generator #(
      .GRNG(GRNG), .LANES(LANES), .B(B), .WP_DEPTH(WP_DEPTH), .POOL_WORDS(POOL_WORDS),
      .SEED(64'h9E3779B97F4A7C15 ^ (64'(t) * 64'hD1B54A32D192ED03))
    ) u_wg (
      .clk, .rst_n,
      .rd_en(c_wp_re), .rd_addr(c_wp_addr),
      .wp_we(wp_ext_we && (wp_ext_set == TW'(t))), .wp_waddr(wp_ext_addr), .wp_wdata(wp_ext_wdata),
      .pool_we(pool_ext_we && (pool_ext_set == TW'(t))), .pool_unit(pool_ext_unit),
      .pool_addr(pool_ext_addr), .pool_data(pool_ext_data), .pool_done,
      .grng_ready(wg_ready[t]), .w_valid(wg_valid[t]), .w(w[t])
    );

    pe_set #(.N(N), .S(S), .B(B), .FRAC(FRAC)) u_set (
      .clk, .rst_n, .in_valid(pe_valid), .first(pe_first), .bias_beat(pe_bias),
      .x(x_d2), .w(w[t]), .y_valid(set_valid[t]), .y(set_y[t])
    );
  end

  mem_distributor #(.T(T), .WORD_W(N * B), .AW(IF_AW)) u_dist (
    .clk, .rst_n, .in_valid(dist_valid), .in_words(set_y), .sel(dist_sel),
    .base(dist_base), .count(dist_count), .busy(dist_busy),
    .wr_en(d_we), .wr_sel(d_sel), .wr_addr(d_addr), .wr_data(d_data)
  );

  a_weights_aligned: assert property (@(posedge clk) disable iff (!rst_n) pe_valid |-> &wg_valid)
    else $error("vibnn_top: PE beat without sampled weights");
  a_results_aligned: assert property (@(posedge clk) disable iff (!rst_n) dist_valid |-> &set_valid)
    else $error("vibnn_top: distributor tag without PE results");
endmodule
