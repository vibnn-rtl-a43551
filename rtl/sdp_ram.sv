// sdp_ram: simple dual-port RAM, one write port and one synchronous read port.
//
// Every on-chip memory of the accelerator is built from this block: the three
// SeMem blocks of the RLF-GRNG, the Wallace pool memories, the two IFMems and
// the per-PE-set weight parameter memories (WPMem).  The paper asks for
// 2-port RAM; the port roles and the one-cycle registered read are this
// design's choice, matching FPGA block RAM.
//
// Timing: a write with we=1 updates mem[waddr] at the clock edge.  With re=1
// rdata shows mem[raddr] after the next edge and holds otherwise.  Reading the
// address being written returns the old word.  The contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
