// rlf_indexer: controller and indexer of the RLF-GRNG.
//
// After reset the controller seeds the SeMem: for 85 cycles it writes one word
// into each of the three blocks (locations 3p, 3p+1, 3p+2 at position p), the
// words being consecutive states of a xorshift64 generator started at SEED.
// While the last six seeds go by it tells the LF-updaters to capture the five
// tap bits of the first window (locations 250..254).  One priming cycle reads
// the first two heads, x(0) and x(1); then the generator runs.
//
// Running, the head h advances by two locations per cycle (two LFSR shifts
// combined).  Each location is held as (Block, Pos), and every pointer steps
// with the paper's indexer FSM: Block 1 -> 3 keeps Pos, 3 -> 2 and 2 -> 1
// increment Pos (blocks are numbered 0..2 here).  Four pointers are kept:
// the heads h and h+1, whose successors h+2, h+3 are read for the next cycle,
// and h+250, h+251, the two updated bits that leave the buffer register and
// are written back.  The paper's own list of accesses (read h, h+250, h+251;
// write h+253, h+254) does not fit an increasing head; this access pattern
// is this design's reading and keeps one read and one write per block.
//
// Outputs: SeMem port controls, the seed words, which block holds x(h) and
// x(h+1) this cycle, the LF-updater command, the 2-bit select shared by the
// output multiplexers (a free-running counter, own choice) and ready, high
// from the first running cycle on.
module rlf_indexer
  import vibnn_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter logic [63:0] SEED  = 64'h9E3779B97F4A7C15
) (
  input  logic                              clk,
  input  logic                              rst_n,
  output logic [RLF_BLOCKS-1:0]             semem_we,
  output logic [RLF_BLOCKS-1:0][RLF_AW-1:0] semem_waddr,
  output logic                              seeding,     // wdata = seed_word
  output logic [RLF_BLOCKS-1:0][LANES-1:0]  seed_word,
  output logic [RLF_BLOCKS-1:0]             wsel,        // 0: bit h+250, 1: bit h+251
  output logic [RLF_BLOCKS-1:0]             semem_re,
  output logic [RLF_BLOCKS-1:0][RLF_AW-1:0] semem_raddr,
  output logic [1:0]                        hblk0,       // block of x(h)
  output logic [1:0]                        hblk1,       // block of x(h+1)
  output upd_cmd_t                          upd_cmd,
  output logic [1:0]                        mux_sel,
  output logic                              ready
);
  typedef enum logic [1:0] {S_SEED, S_PRIME, S_RUN} state_e;

  state_e            state;
  logic [RLF_AW-1:0] seed_pos;
  logic [63:0]       xs;
  rlf_ptr_t          hd0, hd1, wb0, wb1;   // h, h+1, h+250, h+251
  rlf_ptr_t          rd0, rd1;             // locations read this cycle
  logic [63:0]       w0, w1, w2;

  localparam rlf_ptr_t LOC0   = '{blk: 2'd0, pos: RLF_AW'(0)};
  localparam rlf_ptr_t LOC1   = '{blk: 2'd1, pos: RLF_AW'(0)};
  localparam rlf_ptr_t LOC250 = '{blk: 2'd1, pos: RLF_AW'(83)};
  localparam rlf_ptr_t LOC251 = '{blk: 2'd2, pos: RLF_AW'(83)};

  // Seed words of the three locations written this cycle.
  always_comb begin
    w0 = xs64(xs);
    w1 = xs64(w0);
    w2 = xs64(w1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_SEED;
      seed_pos <= '0;
      xs       <= SEED;
      hd0      <= LOC0;
      hd1      <= LOC1;
      wb0      <= LOC250;
      wb1      <= LOC251;
      mux_sel  <= '0;
    end else begin
      unique case (state)
        S_SEED: begin
          xs       <= w2;
          seed_pos <= seed_pos + 1'b1;
          if (seed_pos == RLF_AW'(RLF_DEPTH - 1)) state <= S_PRIME;
        end
        S_PRIME: state <= S_RUN;
        default: begin
          hd0     <= rlf_adv2(hd0);
          hd1     <= rlf_adv2(hd1);
          wb0     <= rlf_adv2(wb0);
          wb1     <= rlf_adv2(wb1);
          mux_sel <= mux_sel + 1'b1;
        end
      endcase
    end
  end

  // Read the heads of the next cycle: x(0), x(1) when priming, else h+2, h+3.
  assign rd0 = (state == S_PRIME) ? hd0 : rlf_adv2(hd0);
  assign rd1 = (state == S_PRIME) ? hd1 : rlf_adv2(hd1);

  always_comb begin
    seeding   = (state == S_SEED);
    semem_we  = '0;
    semem_re  = '0;
    wsel      = '0;
    for (int b = 0; b < RLF_BLOCKS; b++) begin
      semem_waddr[b] = seed_pos;
      semem_raddr[b] = rd0.pos;
    end
    seed_word[0] = w0[LANES-1:0];
    seed_word[1] = w1[LANES-1:0];
    seed_word[2] = w2[LANES-1:0];
    unique case (state)
      S_SEED: semem_we = '1;
      S_PRIME: begin
        semem_re[rd0.blk] = 1'b1;
        semem_re[rd1.blk] = 1'b1;
        semem_raddr[rd1.blk] = rd1.pos;
      end
      default: begin
        semem_re[rd0.blk]    = 1'b1;
        semem_re[rd1.blk]    = 1'b1;
        semem_raddr[rd1.blk] = rd1.pos;
        semem_we[wb0.blk]    = 1'b1;
        semem_we[wb1.blk]    = 1'b1;
        semem_waddr[wb0.blk] = wb0.pos;
        semem_waddr[wb1.blk] = wb1.pos;
        wsel[wb1.blk]        = 1'b1;
      end
    endcase
  end

  always_comb begin
    hblk0        = hd0.blk;
    hblk1        = hd1.blk;
    upd_cmd.op   = (state == S_SEED) ? UPD_SEED : (state == S_RUN) ? UPD_RUN : UPD_IDLE;
    upd_cmd.prime = 2'd0;
    if (state == S_SEED && seed_pos == RLF_AW'(83)) upd_cmd.prime = 2'd1;
    if (state == S_SEED && seed_pos == RLF_AW'(84)) upd_cmd.prime = 2'd2;
  end

  assign ready = (state == S_RUN);
endmodule
