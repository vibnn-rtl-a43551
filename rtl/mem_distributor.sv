// mem_distributor: collects the outputs of all PE sets and writes them back.
//
// When in_valid is high the distributor stores the T words produced by the
// T PE sets (one word per set) together with the destination: the IFMem
// (sel), the first word address (base) and the number of words to keep
// (count, 1..T; sets beyond it computed padding neurons).  It then writes
// word t to address base+t, one word per cycle.  A new batch may arrive in
// the cycle of the last write.  Arriving while the buffer is still being
// written is a protocol error, which an assertion reports; the controller
// avoids it by making every pass last at least T cycles.
//
// Timing: the first write is in the cycle after in_valid; busy is high
// while writes remain.
module mem_distributor #(
  parameter int unsigned T      = 16,
  parameter int unsigned WORD_W = 64,
  parameter int unsigned AW     = 7,
  localparam int unsigned CW    = $clog2(T + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [T-1:0][WORD_W-1:0]  in_words,
  input  logic                      sel,
  input  logic [AW-1:0]             base,
  input  logic [CW-1:0]             count,
  output logic                      busy,
  output logic                      wr_en,
  output logic                      wr_sel,
  output logic [AW-1:0]             wr_addr,
  output logic [WORD_W-1:0]         wr_data
);
  logic [T-1:0][WORD_W-1:0] buffer;
  logic [CW-1:0]            idx, cnt;
  logic [AW-1:0]            base_q;
  logic                     sel_q, last, accept;

  assign last   = busy && (idx == cnt - 1'b1);
  assign accept = in_valid && (!busy || last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      idx    <= '0;
      cnt    <= '0;
      base_q <= '0;
      sel_q  <= 1'b0;
    end else begin
      if (busy) idx <= idx + 1'b1;
      if (last) busy <= 1'b0;
      if (accept) begin
        buffer <= in_words;
        base_q <= base;
        sel_q  <= sel;
        cnt    <= count;
        idx    <= '0;
        busy   <= (count != '0);
      end
    end
  end

  assign wr_en   = busy;
  assign wr_sel  = sel_q;
  assign wr_addr = base_q + AW'(idx);
  assign wr_data = buffer[idx[$clog2(T)-1:0]];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> (!busy || last))
    else $error("mem_distributor: results arrived before the buffer was written back");
  a_count: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> count <= CW'(T))
    else $error("mem_distributor: count exceeds T");
endmodule
