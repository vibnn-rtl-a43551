// rlf_grng: parallel RAM-based Linear Feedback Gaussian random number
// generator (RLF-GRNG), LANES 8-bit samples per cycle.
//
// Each lane sums the 255 bits of its own linear-feedback sequence, which
// follows B(255, 1/2) ~ N(127.5, 63.75).  All lanes share one controller and
// indexer (rlf_indexer) and one seed memory (rlf_semem, one bit column per
// lane); each lane has its own LF-updater.  The Initialization ROM supplies
// the starting sums.  The lane results pass through multiplexers that, for
// every group of four lanes, rotate which lane drives which of the group's
// four outputs; the select is shared and comes from the controller.  The
// rotation phase differs per group (own choice; the paper only says the
// orders differ).
//
// Output format (own choice): eps = count - 128 as a signed 8-bit number.
// Its standard deviation is 7.98 LSB, so read with 3 fraction bits (Q4.3)
// it is close to a unit Gaussian.
//
// Timing: after reset the generator seeds its memory for 85 cycles and
// primes for one; from then on ready is high and eps changes every cycle.
module rlf_grng
  import vibnn_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter logic [63:0] SEED  = 64'h9E3779B97F4A7C15
) (
  input  logic                        clk,
  input  logic                        rst_n,
  output logic                        ready,
  output logic [LANES-1:0][EPS_W-1:0] eps
);
  logic [RLF_BLOCKS-1:0]             we, re, wsel;
  logic [RLF_BLOCKS-1:0][RLF_AW-1:0] waddr, raddr;
  logic [RLF_BLOCKS-1:0][LANES-1:0]  wdata, rdata, seed_word;
  logic                              seeding;
  logic [1:0]                        hblk0, hblk1, mux_sel;
  upd_cmd_t                          cmd;
  logic [LANES-1:0][7:0]             init_sum, result;
  logic [LANES-1:0]                  head0, head1, wb0, wb1;

  rlf_indexer #(.LANES(LANES), .SEED(SEED)) u_ctrl (
    .clk, .rst_n,
    .semem_we(we), .semem_waddr(waddr), .seeding, .seed_word, .wsel,
    .semem_re(re), .semem_raddr(raddr), .hblk0, .hblk1,
    .upd_cmd(cmd), .mux_sel, .ready
  );

  rlf_semem #(.LANES(LANES)) u_semem (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata
  );

  rlf_init_rom #(.LANES(LANES), .SEED(SEED)) u_rom (.init_sum);

  // Head words from the block each head lives in; write-back words per block.
  assign head0 = rdata[hblk0];
  assign head1 = rdata[hblk1];
  always_comb
    for (int b = 0; b < RLF_BLOCKS; b++)
      wdata[b] = seeding ? seed_word[b] : (wsel[b] ? wb1 : wb0);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [1:0] wb;
    lf_updater u_upd (
      .clk, .rst_n, .cmd,
      .head_bits({head1[l], head0[l]}),
      .seed_bits({seed_word[2][l], seed_word[1][l], seed_word[0][l]}),
      .init_sum (init_sum[l]),
      .wb_bits  (wb),
      .result   (result[l])
    );
    assign wb0[l] = wb[0];
    assign wb1[l] = wb[1];
  end

  // Output multiplexers: output j of group g takes lane 4g + (j+sel+g) mod 4.
  always_comb
    for (int l = 0; l < LANES; l++) begin
      int g, j, src;
      g   = l / 4;
      j   = l % 4;
      src = 4 * g + ((j + int'(mux_sel) + g) % 4);
      if (src >= LANES) src = l;
      eps[l] = {~result[src][7], result[src][6:0]};
    end

  initial assert (LANES % 4 == 0) else $error("rlf_grng: LANES must be a multiple of 4");
endmodule
