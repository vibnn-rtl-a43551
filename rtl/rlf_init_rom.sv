// rlf_init_rom: Initialization ROM of the RLF-GRNG.
//
// Holds, for every lane, the number of ones in that lane's 255 initial seed
// bits; the LF-updaters load it into their result registers so that the
// running count starts right.  The paper stores this pre-computed sum in a
// ROM; here the table is computed at elaboration by a constant function that
// replays the controller's seed sequence (word i = (i+1)-fold xorshift64 of
// SEED, lane l = bit l), so ROM and seeds always match for any SEED.
// Purely combinational constant output.
module rlf_init_rom
  import vibnn_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter logic [63:0] SEED  = 64'h9E3779B97F4A7C15
) (
  output logic [LANES-1:0][7:0] init_sum
);
  typedef logic [LANES-1:0][7:0] rom_t;

  function automatic rom_t build_rom();
    rom_t        r;
    logic [63:0] s;
    r = '0;
    s = SEED;
    for (int i = 0; i < RLF_L; i++) begin
      s = xs64(s);
      for (int l = 0; l < LANES; l++) r[l] = r[l] + 8'(s[l]);
    end
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  assign init_sum = ROM;

  initial assert (LANES >= 1 && LANES <= 64) else $error("rlf_init_rom: LANES must be 1..64");
endmodule
