// global_controller: sequences one sampled forward pass through the network.
//
// The network is a chain of fully connected layers given by a small table:
// cfg_in_words[l] = ceil(inputs/N) and cfg_out_words[l] = ceil(neurons/S).
// Neuron j of a layer is computed in pass j div (S*T) by PE j mod S of set
// (j div S) mod T.  A pass is cfg_in_words data beats, each reading one
// IFMem word (shared by all PEs) and one WPMem word (each set its own),
// followed by one bias beat that reads one more WPMem word.  The WPMem
// address just counts up over the whole network, so parameters are stored
// in the order they are used.
//
// Layer l reads IFMem (l mod 2) and writes the other one; before the roles
// swap the controller drains the pipeline and waits for the memory
// distributor.  A pass shorter than T beats is stretched with stall cycles
// to T cycles, so the distributor has written its buffer before the next
// results arrive.  The result of the last layer is in IFMem result_sel.
//
// Timing: the IFMem and WPMem reads are issued by this block; pe_* are
// delayed LAT_WG cycles to meet the sampled weights at the PEs, dist_* a
// further LAT_PE cycles to meet the PE outputs.  done pulses one cycle when
// the last activations are written.  start is taken only when grng_ready.
module global_controller #(
  parameter int unsigned T          = 16,
  parameter int unsigned MAX_LAYERS = 4,
  parameter int unsigned IF_AW      = 7,
  parameter int unsigned WAW        = 9,
  parameter int unsigned LAT_WG     = 3,
  parameter int unsigned LAT_PE     = 3,
  localparam int unsigned CW        = $clog2(T + 1),
  localparam int unsigned LW        = $clog2(MAX_LAYERS + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic                             grng_ready,
  input  logic [LW-1:0]                    cfg_num_layers,
  input  logic [MAX_LAYERS-1:0][IF_AW-1:0] cfg_in_words,
  input  logic [MAX_LAYERS-1:0][IF_AW-1:0] cfg_out_words,
  input  logic                             dist_busy,
  output logic                             busy,
  output logic                             done,
  output logic                             result_sel,
  output logic                             stall,
  output logic                             if_rd_en,
  output logic                             if_rd_sel,
  output logic [IF_AW-1:0]                 if_rd_addr,
  output logic                             wp_rd_en,
  output logic [WAW-1:0]                   wp_rd_addr,
  output logic                             pe_valid,
  output logic                             pe_first,
  output logic                             pe_bias,
  output logic                             dist_valid,
  output logic                             dist_sel,
  output logic [IF_AW-1:0]                 dist_base,
  output logic [CW-1:0]                    dist_count
);
  typedef enum logic [2:0] {C_IDLE, C_BEAT, C_STALL, C_DRAIN, C_NEXT} cstate_e;

  typedef struct packed {
    logic             valid;
    logic             first;
    logic             bias;
    logic             sel;
    logic [IF_AW-1:0] base;
    logic [CW-1:0]    count;
  } tag_t;

  localparam int unsigned LAT = LAT_WG + LAT_PE;

  cstate_e          state;
  logic [LW-1:0]    layer;
  logic [IF_AW-1:0] beat;       // beat within the pass, in_words = bias beat
  logic [IF_AW-1:0] pass_base;  // first output word of this pass
  logic [IF_AW:0]   pcyc;       // cycles since the pass began
  logic [3:0]       drain;
  logic [WAW-1:0]   wp_addr;
  logic [IF_AW-1:0] in_words, out_words, remain;
  logic             src;
  tag_t             tag;
  tag_t             pipe [LAT];

  assign in_words  = cfg_in_words[layer];
  assign out_words = cfg_out_words[layer];
  assign src       = layer[0];
  assign remain    = out_words - pass_base;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      layer      <= '0;
      beat       <= '0;
      pass_base  <= '0;
      pcyc       <= '0;
      drain      <= '0;
      wp_addr    <= '0;
      done       <= 1'b0;
      result_sel <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start && grng_ready) begin
          state     <= C_BEAT;
          layer     <= '0;
          beat      <= '0;
          pass_base <= '0;
          pcyc      <= '0;
          wp_addr   <= '0;
        end
        C_BEAT: begin
          wp_addr <= wp_addr + 1'b1;
          pcyc    <= pcyc + 1'b1;
          if (beat == in_words) begin
            beat <= '0;
            if (pcyc + 1'b1 < (IF_AW+1)'(T)) state <= C_STALL;
            else if (remain <= IF_AW'(T)) begin state <= C_DRAIN; drain <= '0; end
            else begin pass_base <= pass_base + IF_AW'(T); pcyc <= '0; end
          end else beat <= beat + 1'b1;
        end
        C_STALL: begin
          pcyc <= pcyc + 1'b1;
          if (pcyc + 1'b1 >= (IF_AW+1)'(T)) begin
            if (remain <= IF_AW'(T)) begin state <= C_DRAIN; drain <= '0; end
            else begin state <= C_BEAT; pass_base <= pass_base + IF_AW'(T); pcyc <= '0; end
          end
        end
        C_DRAIN: begin
          if (drain != 4'(LAT + 2)) drain <= drain + 1'b1;
          else if (!dist_busy) state <= C_NEXT;
        end
        default: begin  // C_NEXT: swap IFMem roles or finish
          pass_base <= '0;
          pcyc      <= '0;
          if (layer + 1'b1 == cfg_num_layers) begin
            state      <= C_IDLE;
            done       <= 1'b1;
            result_sel <= ~src;
          end else begin
            state <= C_BEAT;
            layer <= layer + 1'b1;
          end
        end
      endcase
    end
  end

  assign busy  = (state != C_IDLE);
  assign stall = (state == C_STALL);

  always_comb begin
    if_rd_en   = (state == C_BEAT) && (beat != in_words);
    if_rd_sel  = src;
    if_rd_addr = beat;
    wp_rd_en   = (state == C_BEAT);
    wp_rd_addr = wp_addr;
    tag.valid  = (state == C_BEAT);
    tag.first  = (beat == '0);
    tag.bias   = (beat == in_words);
    tag.sel    = ~src;
    tag.base   = pass_base;
    tag.count  = (remain < IF_AW'(T)) ? CW'(remain) : CW'(T);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= tag;
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  always_comb begin
    pe_valid   = pipe[LAT_WG-1].valid;
    pe_first   = pipe[LAT_WG-1].first;
    pe_bias    = pipe[LAT_WG-1].bias;
    dist_valid = pipe[LAT-1].valid && pipe[LAT-1].bias;
    dist_sel   = pipe[LAT-1].sel;
    dist_base  = pipe[LAT-1].base;
    dist_count = pipe[LAT-1].count;
  end

  a_no_empty_layer: assert property (@(posedge clk) disable iff (!rst_n)
      (state == C_BEAT) |-> (in_words != '0 && out_words != '0))
    else $error("global_controller: layer with zero inputs or outputs");
endmodule
