// weight_generator: weight generator of one PE set.
//
// Holds the set's weight parameter memory (WPMem), a Gaussian random number
// generator and the weight updater.  Every WPMem word carries LANES = S*N
// (mu, sigma) pairs, one per weight the set's PEs consume in one cycle; each
// read produces LANES freshly sampled weights w = mu + sigma*eps.  The GRNG
// is the RLF-GRNG or the BNNWallace-GRNG (parameter GRNG); its output passes
// a register (the DFF stage between GRNG and updater) before the updater.
// The GRNG runs every cycle, so each read sees new samples.
//
// Interface: wp_we/wp_waddr/wp_wdata load the WPMem (pair k = {sigma, mu} in
// bits [16k+15:16k] for B = 8).  rd_en/rd_addr read one word; w and w_valid
// follow three cycles later (RAM read, updater product, weight register).
// The Wallace pools are filled through pool_*; pool_done starts that
// generator.  grng_ready goes high once the GRNG delivers samples.  In the
// RLF build the pool_* inputs have no function (the RLF-GRNG seeds itself),
// so lint reports them as unused; they stay so that both builds share one
// interface.
module weight_generator
  import vibnn_pkg::*;
#(
  parameter grng_e       GRNG     = GRNG_RLF,
  parameter int unsigned LANES    = 64,
  parameter int unsigned B        = 8,
  parameter int unsigned WP_DEPTH = 276,
  parameter logic [63:0] SEED     = 64'h9E3779B97F4A7C15,
  parameter int unsigned POOL_WORDS = 64,
  localparam int unsigned WAW     = $clog2(WP_DEPTH),
  localparam int unsigned PUW     = (LANES > 4) ? $clog2(LANES / 4) : 1,
  localparam int unsigned PAW     = $clog2(POOL_WORDS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rd_en,
  input  logic [WAW-1:0]              rd_addr,
  input  logic                        wp_we,
  input  logic [WAW-1:0]              wp_waddr,
  input  logic [LANES-1:0][2*B-1:0]   wp_wdata,
  input  logic                        pool_we,
  input  logic [PUW-1:0]              pool_unit,
  input  logic [PAW-1:0]              pool_addr,
  input  logic [3:0][EPS_W-1:0]       pool_data,
  input  logic                        pool_done,
  output logic                        grng_ready,
  output logic                        w_valid,
  output logic [LANES-1:0][B-1:0]     w
);
  logic [LANES-1:0][EPS_W-1:0] eps_raw, eps_q;
  logic [LANES-1:0][2*B-1:0]   par;
  logic [LANES-1:0][B-1:0]     mu, sigma;
  logic                        par_v;

  if (GRNG == GRNG_RLF) begin : g_rlf
    rlf_grng #(.LANES(LANES), .SEED(SEED)) u_grng (
      .clk, .rst_n, .ready(grng_ready), .eps(eps_raw)
    );
  end else begin : g_wallace
    bnnwallace_grng #(.UNITS(LANES / 4), .W(EPS_W), .POOL_WORDS(POOL_WORDS)) u_grng (
      .clk, .rst_n, .run(pool_done),
      .load_we(pool_we), .load_unit(pool_unit), .load_addr(pool_addr), .load_data(pool_data),
      .eps(eps_raw), .valid(grng_ready)
    );
  end

  // DFF stage between the GRNG and the weight updater.
  always_ff @(posedge clk) eps_q <= eps_raw;

  sdp_ram #(.WIDTH(LANES * 2 * B), .DEPTH(WP_DEPTH)) u_wpmem (
    .clk, .we(wp_we), .waddr(wp_waddr), .wdata(wp_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(par)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) par_v <= 1'b0;
    else        par_v <= rd_en;
  end

  always_comb
    for (int l = 0; l < LANES; l++) begin
      mu[l]    = par[l][B-1:0];
      sigma[l] = par[l][2*B-1:B];
    end

  weight_updater #(.LANES(LANES), .B(B), .EPS_ODD(GRNG == GRNG_RLF)) u_wu (
    .clk, .rst_n, .in_valid(par_v), .mu, .sigma, .eps(eps_q),
    .out_valid(w_valid), .w
  );
endmodule
