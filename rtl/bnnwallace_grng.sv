// bnnwallace_grng: BNN-oriented Wallace Gaussian random number generator.
//
// UNITS Wallace Units work in lockstep on the same pool address, which steps
// through the pool one word per cycle.  Their 4*UNITS new numbers are the
// generator's output.  Before being written back to the pools they are
// rotated by one number across the units (sharing and shifting): number k
// written back is x'[k-1], and number 0 receives the last unit's x'[4].  The
// numbers thus flow through all units and the small pools act as one large
// pool.  The write-back goes to the word just read.
//
// Interface: the pools are filled through the load port while run is low
// (four W-bit numbers per write, Gaussian, Q4.3 in this design).  With run
// high a new word is read every cycle; eps holds the transformed numbers
// and valid goes high one cycle after the first read.  eps is registered.
module bnnwallace_grng #(
  parameter int unsigned UNITS      = 16,
  parameter int unsigned W          = 8,
  parameter int unsigned POOL_WORDS = 64,
  localparam int unsigned AW        = $clog2(POOL_WORDS),
  localparam int unsigned UW        = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          run,
  input  logic                          load_we,
  input  logic [UW-1:0]                 load_unit,
  input  logic [AW-1:0]                 load_addr,
  input  logic [3:0][W-1:0]             load_data,
  output logic [4*UNITS-1:0][W-1:0]     eps,
  output logic                          valid
);
  logic [AW-1:0]                addr, addr_q;
  logic                         rd_q, rnd;
  logic [4*UNITS-1:0][W-1:0]    x_new, shifted;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr  <= '0;
      addr_q <= '0;
      rd_q  <= 1'b0;
      rnd   <= 1'b0;
      valid <= 1'b0;
      eps   <= '0;
    end else begin
      rd_q   <= run;
      addr_q <= addr;
      if (run) addr <= (addr == AW'(POOL_WORDS - 1)) ? '0 : addr + 1'b1;
      if (rd_q) begin
        rnd   <= ~rnd;
        eps   <= x_new;
        valid <= 1'b1;
      end
    end
  end

  // Sharing and shifting: rotate the whole vector by one number.
  assign shifted = {x_new[4*UNITS-2:0], x_new[4*UNITS-1]};

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    logic          we_u;
    logic [AW-1:0] waddr_u;
    logic [3:0][W-1:0] wdata_u;
    always_comb begin
      if (rd_q) begin
        we_u    = 1'b1;
        waddr_u = addr_q;
        wdata_u = shifted[4*u +: 4];
      end else begin
        we_u    = load_we && (load_unit == UW'(u));
        waddr_u = load_addr;
        wdata_u = load_data;
      end
    end
    wallace_unit #(.W(W), .POOL_WORDS(POOL_WORDS)) u_wu (
      .clk, .re(run), .raddr(addr), .we(we_u), .waddr(waddr_u), .wdata(wdata_u),
      .rnd, .x_new(x_new[4*u +: 4])
    );
  end

  initial assert (POOL_WORDS >= 2 && (1 << AW) == POOL_WORDS)
    else $error("bnnwallace_grng: POOL_WORDS must be a power of two >= 2");
endmodule
