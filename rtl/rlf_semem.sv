// rlf_semem: seed memory (SeMem) of the RLF-GRNG.
//
// The 255 seed locations of every lane are kept as 255 words of LANES bits:
// bit l of word i is location i of lane l.  Following the paper's 3-block
// storing scheme, location i lives in block (i mod 3) at position (i div 3),
// so each block is an 85-word 2-port RAM.  The RLF logic touches two
// consecutive locations per read and per write, which always fall in
// different blocks; a block sees at most one read and one write per cycle.
//
// Interface: one write port and one read port per block (index 0..2 is the
// paper's Block 1..3).  Reads return data one cycle later (sdp_ram).
module rlf_semem
  import vibnn_pkg::*;
#(
  parameter int unsigned LANES = 64
) (
  input  logic                            clk,
  input  logic [RLF_BLOCKS-1:0]           we,
  input  logic [RLF_BLOCKS-1:0][RLF_AW-1:0] waddr,
  input  logic [RLF_BLOCKS-1:0][LANES-1:0]  wdata,
  input  logic [RLF_BLOCKS-1:0]           re,
  input  logic [RLF_BLOCKS-1:0][RLF_AW-1:0] raddr,
  output logic [RLF_BLOCKS-1:0][LANES-1:0]  rdata
);
  for (genvar b = 0; b < RLF_BLOCKS; b++) begin : g_blk
    sdp_ram #(.WIDTH(LANES), .DEPTH(RLF_DEPTH)) u_ram (
      .clk  (clk),
      .we   (we[b]),
      .waddr(waddr[b]),
      .wdata(wdata[b]),
      .re   (re[b]),
      .raddr(raddr[b]),
      .rdata(rdata[b])
    );
  end
endmodule
