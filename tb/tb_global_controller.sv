// tb_global_controller: runs the controller (T = 4) on a three-layer table
// (in_words 3,5,2; out_words 9,3,4) twice, with a model of the memory
// distributor's busy signal.  An independent model lists the beats that
// must be issued: for each layer, ceil(out/T) passes of in_words data beats
// plus a bias beat.  Checks every IFMem read (memory, address), the WPMem
// address counting up by one per beat, pe_* exactly three cycles after the
// issue, dist_* exactly six cycles after the bias beat with base, count and
// destination, stall cycles (T - in_words - 1 per short pass), that start
// is ignored until grng_ready, done and result_sel.  Stalls, role swaps
// and partial passes are counted and must all occur.
module tb_global_controller;
  localparam int T = 4, L = 3;
  logic clk = 0, rst_n = 0, start = 0, grng_ready = 0, dist_busy = 0;
  logic [1:0] num_layers = 2'(L);
  logic [3:0][6:0] in_w, out_w;
  logic busy, done, result_sel, stall, if_rd_en, if_rd_sel, wp_rd_en;
  logic pe_valid, pe_first, pe_bias, dist_valid, dist_sel;
  logic [6:0] if_rd_addr, dist_base;
  logic [8:0] wp_rd_addr;
  logic [2:0] dist_count;
  int checks = 0, failures = 0, stalls = 0, swaps = 0, partial = 0;

  global_controller #(.T(T), .MAX_LAYERS(4), .IF_AW(7), .WAW(9)) u_dut (
    .clk, .rst_n, .start, .grng_ready, .cfg_num_layers({1'b0, num_layers}), .cfg_in_words(in_w),
    .cfg_out_words(out_w), .dist_busy, .busy, .done, .result_sel, .stall,
    .if_rd_en, .if_rd_sel, .if_rd_addr, .wp_rd_en, .wp_rd_addr,
    .pe_valid, .pe_first, .pe_bias, .dist_valid, .dist_sel, .dist_base, .dist_count);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected beats
  typedef struct { bit bias; bit first; int layer; int addr; int base; int count; } beat_t;
  beat_t beats [$];
  int exp_stalls;
  // issued-beat history for latency checks (index: cycle mod 8)
  beat_t hist [8];
  bit hv [8];
  int cyc = 0, wp_next = 0, dist_left = 0;

  always @(posedge clk) if (rst_n) begin
    // pe_* for the beat issued three cycles ago
    chk(pe_valid == hv[(cyc + 5) % 8], "pe_valid latency");
    if (hv[(cyc + 5) % 8]) begin
      chk(pe_first == hist[(cyc + 5) % 8].first, "pe_first");
      chk(pe_bias == hist[(cyc + 5) % 8].bias, "pe_bias");
    end
    // dist_* six cycles after the bias beat
    chk(dist_valid == (hv[(cyc + 2) % 8] && hist[(cyc + 2) % 8].bias), "dist_valid latency");
    if (dist_valid) begin
      beat_t b;
      b = hist[(cyc + 2) % 8];
      chk(dist_base == 7'(b.base) && dist_count == 3'(b.count) && dist_sel == 1'(~b.layer[0]), "dist fields");
      chk(dist_busy == 0 || dist_left == 1, "results while distributor busy");
      if (b.count < T) partial++;
      dist_left = b.count;
    end else if (dist_left > 0) dist_left--;
    // issue of this cycle
    hv[cyc % 8] = wp_rd_en;
    if (wp_rd_en) begin
      beat_t e;
      chk(beats.size() != 0, "beat expected");
      e = beats.pop_front();
      hist[cyc % 8] = e;
      chk(int'(wp_rd_addr) == wp_next, "WPMem address");
      wp_next++;
      chk(if_rd_en == !e.bias, "IFMem read enable");
      if (!e.bias) chk(int'(if_rd_addr) == e.addr && if_rd_sel == 1'(e.layer[0]), "IFMem read address/select");
    end else chk(!if_rd_en, "IFMem read without beat");
    if (stall) stalls++;
    cyc++;
  end
  // distributor busy model: busy for count cycles after dist_valid
  always @(posedge clk) dist_busy <= (dist_valid && dist_count != 0) || (dist_left > 1);

  initial begin
    int prev_sel;
    in_w = '0; out_w = '0;
    in_w[0] = 7'd3; in_w[1] = 7'd5; in_w[2] = 7'd2;
    out_w[0] = 7'd9; out_w[1] = 7'd3; out_w[2] = 7'd4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int pc;
      exp_stalls = 0;
      wp_next = 0;
      for (int l = 0; l < L; l++) begin
        for (int p = 0; p * T < int'(out_w[l]); p++) begin
          pc = int'(out_w[l]) - p * T; if (pc > T) pc = T;
          for (int b = 0; b <= int'(in_w[l]); b++)
            beats.push_back('{b == int'(in_w[l]), b == 0, l, b, p * T, pc});
          if (int'(in_w[l]) + 1 < T) exp_stalls += T - int'(in_w[l]) - 1;
        end
      end
      stalls = 0;
      start = 1;
      if (run == 0) begin
        repeat (5) @(negedge clk);
        chk(!busy, "start ignored while GRNG not ready");
        grng_ready = 1;
      end
      @(negedge clk);
      start = 0;
      chk(busy, "started");
      prev_sel = 0;
      while (!done) begin
        @(negedge clk);
        if (busy && if_rd_en && int'(if_rd_sel) != prev_sel) begin swaps++; prev_sel = if_rd_sel; end
      end
      chk(beats.size() == 0, "all beats issued");
      chk(stalls == exp_stalls, "stall cycles");
      chk(result_sel == 1'((L - 1) % 2 == 0), "result_sel");
      @(negedge clk);
      chk(!busy && !done, "idle after done");
      $display("run %0d: %0d stall cycles (expected %0d)", run, stalls, exp_stalls);
    end
    chk(stalls > 0 && swaps >= 4 && partial > 0, "mechanisms exercised");
    $display("stalls %0d, IFMem swaps %0d, partial passes %0d", stalls, swaps, partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
