// vibnn_pkg: constants and types shared by the VIBNN accelerator.
//
// The accelerator samples every weight of a fully connected Bayesian network
// as w = mu + sigma*eps and runs the forward pass on an array of
// time-multiplexed neuron processing elements (PEs).  Sizes follow the
// evaluated configuration: 8-bit operands (B), 8-input PEs (N), S = N PEs
// per PE set and 16 PE sets (T).  The fixed-point formats are this design's
// choice: operands are signed B-bit with FRAC_DEF fraction bits, the
// Gaussian samples are signed 8-bit with EPS_FRAC fraction bits.
package vibnn_pkg;
  localparam int unsigned B_DEF    = 8;   // operand bit length
  localparam int unsigned N_DEF    = 8;   // inputs per PE (= PEs per set)
  localparam int unsigned T_DEF    = 16;  // number of PE sets
  localparam int unsigned FRAC_DEF = 4;   // fraction bits of mu, sigma, x, w
  localparam int unsigned EPS_W    = 8;   // Gaussian sample width
  localparam int unsigned EPS_FRAC = 3;   // fraction bits of a sample

  // RLF-GRNG geometry: 2^8-1 seed locations, three RAM blocks.
  localparam int unsigned RLF_L      = 255;
  localparam int unsigned RLF_BLOCKS = 3;
  localparam int unsigned RLF_DEPTH  = RLF_L / RLF_BLOCKS;  // 85
  localparam int unsigned RLF_AW     = 7;

  typedef enum logic [0:0] {GRNG_RLF = 1'b0, GRNG_WALLACE = 1'b1} grng_e;

  // Command broadcast by the RLF controller to every LF-updater.
  typedef enum logic [1:0] {
    UPD_IDLE  = 2'd0,  // hold
    UPD_SEED  = 2'd1,  // seeding: load result register, capture tap seeds
    UPD_RUN   = 2'd2   // one combined two-step update per cycle
  } upd_op_e;

  typedef struct packed {
    upd_op_e    op;
    logic [1:0] prime;     // while seeding: 1 = seeds of locations 249..251,
                           // 2 = seeds of locations 252..254 are on seed_bits
  } upd_cmd_t;

  // A seed location kept as (RAM block, position in block): loc = 3*pos+blk.
  typedef struct packed {
    logic [1:0]        blk;
    logic [RLF_AW-1:0] pos;
  } rlf_ptr_t;

  // Advance a location by two (mod 255).  Block sequence 0 -> 2 -> 1 -> 0;
  // the position stays on 0 -> 2 and grows by one otherwise (wrapping at 85).
  function automatic rlf_ptr_t rlf_adv2(input rlf_ptr_t p);
    rlf_ptr_t r;
    logic [RLF_AW-1:0] pinc;
    pinc = (p.pos == RLF_AW'(RLF_DEPTH - 1)) ? '0 : p.pos + 1'b1;
    unique case (p.blk)
      2'd0:    begin r.blk = 2'd2; r.pos = p.pos; end
      2'd2:    begin r.blk = 2'd1; r.pos = pinc;  end
      default: begin r.blk = 2'd0; r.pos = pinc;  end
    endcase
    return r;
  endfunction

  // xorshift64 step used to produce the RLF seeds (controller and ROM).
  function automatic logic [63:0] xs64(input logic [63:0] s);
    logic [63:0] v;
    v = s ^ (s << 13);
    v = v ^ (v >> 7);
    v = v ^ (v << 17);
    return v;
  endfunction
endpackage
