// ifmem: the two input-feature memories (IFMem1, IFMem2) and their read mux.
//
// Each IFMem word holds N features of B bits, so one read gives a PE set all
// the inputs of one beat.  The memories are used alternately: while one
// holds the current layer's inputs and is read, the other receives the
// layer's activations; for the next layer the roles swap.  sel = 0 chooses
// IFMem1.  The write port is shared between the memory distributor and the
// host, which the parent arbitrates.
//
// Timing: rd_data shows the word of the memory rd_sel chose one cycle after
// rd_en (the select is registered with the read).
module ifmem #(
  parameter int unsigned B     = 8,
  parameter int unsigned N     = 8,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic             rd_sel,
  input  logic [AW-1:0]    rd_addr,
  output logic [B*N-1:0]   rd_data,
  input  logic             wr_en,
  input  logic             wr_sel,
  input  logic [AW-1:0]    wr_addr,
  input  logic [B*N-1:0]   wr_data
);
  logic [1:0][B*N-1:0] rdata;
  logic                sel_q;

  for (genvar m = 0; m < 2; m++) begin : g_mem
    sdp_ram #(.WIDTH(B * N), .DEPTH(DEPTH)) u_ram (
      .clk,
      .we   (wr_en && (wr_sel == 1'(m))),
      .waddr(wr_addr),
      .wdata(wr_data),
      .re   (rd_en && (rd_sel == 1'(m))),
      .raddr(rd_addr),
      .rdata(rdata[m])
    );
  end

  always_ff @(posedge clk) if (rd_en) sel_q <= rd_sel;

  assign rd_data = rdata[sel_q];
endmodule
