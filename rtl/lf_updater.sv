// lf_updater: one lane of the RLF-GRNG (buffer register, updater, counter).
//
// A lane is a 255-bit linear-feedback register kept in one bit column of the
// SeMem.  The head h moves two places per cycle; the lane keeps the five taps
// x(h+250..h+254) in a buffer register, takes the two heads x(h), x(h+1)
// from the SeMem and applies the two combined feedback steps (indices mod
// 255):
//   x(h+250) ^= x(h)            x(h+251) ^= x(h+1)     x(h+252) ^= x(h)
//   x(h+253) ^= x(h) ^ x(h+1)   x(h+254) ^= x(h+1)
// The updated x(h+250), x(h+251) leave the window and go back to the SeMem
// (wb_bits).  For the next head h+2 the taps are the updated h+252..h+254
// followed by the old heads (locations h+255 = h and h+256 = h+1): the buffer
// shifts by two and the heads enter at its top.
//
// The lane's output is the number of ones among its 255 bits (binomial
// B(255, 1/2), close to Gaussian).  Only the taps change, so the result
// register is kept by adding PC(new taps) - tap register, where the tap
// register holds the number of ones in the taps before the update.  While
// seeding, the result register loads the Initialization ROM value and the
// tap bits are captured from the seed stream.
//
// Timing: in a UPD_RUN cycle head_bits must carry x(h), x(h+1); wb_bits is
// combinational; result is the count after the previous updates.
module lf_updater
  import vibnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  upd_cmd_t   cmd,
  input  logic [1:0] head_bits,   // [0] = x(h), [1] = x(h+1)
  input  logic [2:0] seed_bits,   // seeds of locations 3p, 3p+1, 3p+2
  input  logic [7:0] init_sum,
  output logic [1:0] wb_bits,     // [0] = new x(h+250), [1] = new x(h+251)
  output logic [7:0] result
);
  logic [4:0] taps;        // taps[k] = x(h+250+k)
  logic [4:0] upd;
  logic [4:0] taps_nxt;
  logic [2:0] tap_reg;
  logic [2:0] pc;
  logic       h0, h1;

  assign h0 = head_bits[0];
  assign h1 = head_bits[1];

  always_comb begin
    upd[0] = taps[0] ^ h0;
    upd[1] = taps[1] ^ h1;
    upd[2] = taps[2] ^ h0;
    upd[3] = taps[3] ^ h0 ^ h1;
    upd[4] = taps[4] ^ h1;
    pc     = 3'(upd[0]) + 3'(upd[1]) + 3'(upd[2]) + 3'(upd[3]) + 3'(upd[4]);
  end

  always_comb begin
    taps_nxt = taps;
    unique case (cmd.op)
      UPD_RUN:  taps_nxt = {h1, h0, upd[4], upd[3], upd[2]};
      UPD_SEED: begin
        if (cmd.prime == 2'd1) taps_nxt[1:0] = seed_bits[2:1];   // 250, 251
        if (cmd.prime == 2'd2) taps_nxt[4:2] = seed_bits;        // 252..254
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      taps    <= '0;
      tap_reg <= '0;
      result  <= '0;
    end else begin
      taps    <= taps_nxt;
      tap_reg <= 3'($countones(taps_nxt));
      unique case (cmd.op)
        UPD_SEED: result <= init_sum;
        UPD_RUN:  result <= result + 8'(pc) - 8'(tap_reg);
        default:  ;
      endcase
    end
  end

  assign wb_bits = upd[1:0];
endmodule
