// vibnn_tb_body.svh: shared end-to-end test of vibnn_top, included by
// tb_vibnn_top and tb_vibnn_wallace (small configuration, RLF and Wallace
// builds) and tb_vibnn_full (default configuration).  The including module defines the localparams T, IF_DEPTH,
// WP_DEPTH, GRNG, NL, SIZES (layer sizes, input first), MAXI, MAXO, the
// signals of the DUT ports, instantiates the DUT as u_dut and has the
// watchdog (WATCHDOG cycles).  SHORT_PASSES
// says whether the network has passes shorter than T beats (then stalls and
// back-to-back distributor batches must occur).
//
// What it does: builds a random Bayesian network, lays its parameters out in
// the WPMems in the order the controller consumes them (per set t, pass p,
// beat b: lane s*N+i = weight of neuron p*S*T + t*S + s from input b*N+i;
// bias beat: lane s*N = bias of that neuron), writes the input image into
// IFMem 0 and runs the network twice:
//   run 0: all sigma = 0, so the hardware must reproduce the exact
//          fixed-point forward pass of the mu network computed here;
//   run 1: sigma != 0.  The sampled weights are observed at each weight
//          generator's output and the forward pass is recomputed with them;
//          the sampled noise must have zero mean and the programmed spread.
// In both runs the busy time must equal the cycle count the schedule
// predicts.  Mechanisms are counted and each must have occurred: pass
// stalls, IFMem role swaps, multi-pass layers, partial passes, bias beats,
// back-to-back distributor batches, start held off until the GRNG is ready,
// host reads of the result memory.

  localparam int S = 8, NB = 8, LANES = 64, FRAC = 4, LATC = 6;
  localparam int TW = (T > 1) ? $clog2(T) : 1;

  int checks = 0, failures = 0;
  byte mu_w [NL][MAXO][MAXI];
  byte sg_w [NL][MAXO][MAXI];
  byte mu_b [NL][MAXO];
  byte sg_b [NL][MAXO];
  byte samp [T][WP_DEPTH][LANES];
  int  img [MAXI];
  int  in_words [NL], out_words [NL];
  int  n_stall = 0, n_swap = 0, n_multi = 0, n_partial = 0, n_bias = 0, n_b2b = 0, n_held = 0, n_hostrd = 0;
  int  cyc = 0;

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int s8(input logic [7:0] v);
    return int'(signed'(v));
  endfunction

  // ---- observers -------------------------------------------------------
  logic [WAW_TB-1:0] wp_addr_q [3];
  logic              wp_v_q [3];
  logic              last_rsel = 1'b0;
  always @(posedge clk) begin
    wp_addr_q[2] <= wp_addr_q[1]; wp_addr_q[1] <= wp_addr_q[0]; wp_addr_q[0] <= u_dut.u_ctrl.wp_rd_addr;
    wp_v_q[2] <= wp_v_q[1]; wp_v_q[1] <= wp_v_q[0]; wp_v_q[0] <= u_dut.u_ctrl.wp_rd_en;
    if (rst_n) begin
      cyc++;
      if (stall) n_stall++;
      if (u_dut.pe_bias && u_dut.pe_valid) n_bias++;
      if (u_dut.dist_valid && u_dut.dist_busy) n_b2b++;
      if (u_dut.dist_valid && u_dut.dist_base != '0) n_multi++;
      if (u_dut.dist_valid && int'(u_dut.dist_count) < T) n_partial++;
      if (busy && u_dut.c_if_re) begin
        if (u_dut.c_if_sel != last_rsel) n_swap++;
        last_rsel <= u_dut.c_if_sel;
      end
      if (!busy) last_rsel <= 1'b0;
    end
  end
  for (genvar t = 0; t < T; t++) begin : g_obs
    always @(posedge clk) if (rst_n) begin
      if (u_dut.g_set[t].u_wg.w_valid) begin
        if (!wp_v_q[2]) begin failures++; $display("FAIL weight valid without read"); end
        for (int l = 0; l < LANES; l++) samp[t][wp_addr_q[2]][l] = byte'(u_dut.g_set[t].u_wg.w[l]);
      end
    end
  end

  // ---- layout helpers --------------------------------------------------
  function automatic int passes(input int l);
    return (out_words[l] + T - 1) / T;
  endfunction

  // WPMem lane content of set t, word of (layer l, pass p, beat b)
  function automatic logic [15:0] lane_val(input int l, input int p, input int b, input int t, input int lane);
    int s, i, j, idx;
    s = lane / NB; i = lane % NB;
    j = p * S * T + t * S + s;
    if (j >= SIZES[l+1]) return 16'h0;
    if (b == in_words[l]) return (i == 0) ? {sg_b[l][j], mu_b[l][j]} : 16'h0;
    idx = b * NB + i;
    if (idx >= SIZES[l]) return 16'h0;
    return {sg_w[l][j][idx], mu_w[l][j][idx]};
  endfunction

  task automatic load_wpmem();
    int k;
    k = 0;
    for (int l = 0; l < NL; l++)
      for (int p = 0; p < passes(l); p++)
        for (int b = 0; b <= in_words[l]; b++) begin
          for (int t = 0; t < T; t++) begin
            wp_ext_we = 1; wp_ext_set = TW'(t); wp_ext_addr = WAW_TB'(k);
            for (int ln = 0; ln < LANES; ln++) wp_ext_wdata[ln] = lane_val(l, p, b, t, ln);
            @(negedge clk);
          end
          k++;
        end
    wp_ext_we = 0;
    chk(k <= WP_DEPTH, "network fits the WPMem");
  endtask

  // forward pass of the architecture with the weights observed in samp
  // (the same arithmetic as the PEs); returns activations of the last layer
  task automatic reference(output int y [MAXO], input bit use_mu);
    int x [MAXI + 64], nx [MAXI + 64], k, acc, v, wgt, bias;
    for (int i = 0; i < MAXI + 64; i++) x[i] = (i < SIZES[0]) ? img[i] : 0;
    k = 0;
    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < MAXI + 64; i++) nx[i] = 0;
      for (int p = 0; p < passes(l); p++) begin
        for (int t = 0; t < T; t++)
          for (int s = 0; s < S; s++) begin
            int j;
            j = p * S * T + t * S + s;
            acc = 0;
            for (int b = 0; b < in_words[l]; b++)
              for (int i = 0; i < NB; i++) begin
                wgt = use_mu ? s8(lane_val(l, p, b, t, s * NB + i)[7:0]) : int'(samp[t][k + b][s * NB + i]);
                acc += x[b * NB + i] * wgt;
              end
            bias = use_mu ? s8(lane_val(l, p, in_words[l], t, s * NB)[7:0]) : int'(samp[t][k + in_words[l]][s * NB]);
            v = (acc + bias * 16) >>> FRAC;
            v = (v < 0) ? 0 : (v > 127) ? 127 : v;
            if (j < out_words[l] * NB) nx[j] = v;
          end
        k += in_words[l] + 1;
      end
      x = nx;
    end
    for (int j = 0; j < MAXO; j++) y[j] = x[j];
  endtask

  // busy cycles the schedule predicts: passes of max(T, in+1) cycles, the
  // drain (until the last batch is written, at least LAT+3 cycles) and one
  // cycle to swap the IFMems
  function automatic int predicted_cycles();
    int c, last;
    c = 0;
    for (int l = 0; l < NL; l++) begin
      c += passes(l) * ((in_words[l] + 1 > T) ? in_words[l] + 1 : T);
      last = out_words[l] - (passes(l) - 1) * T;
      c += ((LATC + 3 > LATC + 1 + last) ? LATC + 3 : LATC + 1 + last) + 1;
    end
    return c;
  endfunction

  task automatic run_once(input int run);
    int y [MAXO], yr [MAXO], c0, busy_cyc, nout;
    logic rsel;
    // host loads the image into IFMem 0 (padding features are zero); it is
    // rewritten for every run because later layers reuse IFMem 0
    for (int w = 0; w < in_words[0]; w++) begin
      if_ext_we = 1; if_ext_sel = 0; if_ext_addr = IF_AW_TB'(w);
      for (int i = 0; i < NB; i++) if_ext_wdata[i] = (w * NB + i < SIZES[0]) ? 8'(img[w * NB + i]) : 8'd0;
      @(negedge clk);
    end
    if_ext_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    c0 = cyc;
    chk(busy, "run started");
    busy_cyc = 0;
    while (!done) begin
      if (busy) busy_cyc++;
      @(negedge clk);
      chk(cyc - c0 < 200000, "run finishes");
      if (cyc - c0 >= 200000) break;
    end
    rsel = result_sel;
    chk(busy_cyc == predicted_cycles(), "cycle count of the run");
    $display("run %0d: %0d busy cycles (schedule predicts %0d)", run, busy_cyc, predicted_cycles());
    @(negedge clk);
    // read the result memory through the host port
    nout = SIZES[NL];
    for (int w = 0; w < out_words[NL-1]; w++) begin
      if_ext_re = 1; if_ext_sel = rsel; if_ext_addr = IF_AW_TB'(w);
      @(negedge clk);
      if_ext_re = 0;
      n_hostrd++;
      for (int i = 0; i < NB; i++) y[w * NB + i] = int'(if_ext_rdata[i]);
    end
    if (run == 0) begin
      // with sigma = 0 every observed weight must equal its mu
      int k, bad;
      k = 0; bad = 0;
      for (int l = 0; l < NL; l++)
        for (int p = 0; p < passes(l); p++) begin
          for (int b = 0; b <= in_words[l]; b++)
            for (int t = 0; t < T; t++)
              for (int ln = 0; ln < LANES; ln++)
                if (int'(samp[t][k + b][ln]) != s8(lane_val(l, p, b, t, ln)[7:0])) bad++;
          k += in_words[l] + 1;
        end
      chk(bad == 0, "sampled weights equal mu when sigma = 0");
      if (bad != 0) $display("  %0d weights differ", bad);
    end
    reference(yr, run == 0);
    for (int j = 0; j < out_words[NL-1] * NB; j++) begin
      chk(y[j] == yr[j], "network output");
      if (y[j] != yr[j] && failures < 20) $display("  output %0d got %0d exp %0d", j, y[j], yr[j]);
    end
    $write("run %0d outputs:", run);
    for (int j = 0; j < nout; j++) $write(" %0d", y[j]);
    $write("\n");
  endtask

  // noise statistics of run 1: (w - mu) over all data weights
  task automatic noise_stats();
    real sum, sum2, sig2, n;
    int k, d;
    sum = 0; sum2 = 0; sig2 = 0; n = 0;
    k = 0;
    for (int l = 0; l < NL; l++)
      for (int p = 0; p < passes(l); p++) begin
        for (int b = 0; b <= in_words[l]; b++)
          for (int t = 0; t < T; t++)
            for (int ln = 0; ln < LANES; ln++) begin
              logic [15:0] pv;
              pv = lane_val(l, p, b, t, ln);
              if (pv[15:8] != 0 && s8(pv[7:0]) > -64 && s8(pv[7:0]) < 64) begin
                d = int'(samp[t][k + b][ln]) - s8(pv[7:0]);
                sum += d; sum2 += d * d; sig2 += s8(pv[15:8]) * s8(pv[15:8]); n += 1;
              end
            end
        k += in_words[l] + 1;
      end
    $display("sampled noise: %0d weights, mean %f, variance %f, programmed sigma^2 %f", int'(n), sum / n, sum2 / n, sig2 / n);
    chk(n > 100, "noise samples");
    chk(sum / n < 0.5 && sum / n > -0.5, "noise mean");
    chk(sum2 / sig2 > 0.8 && sum2 / sig2 < 1.2, "noise variance");
  endtask

  initial begin
    for (int i = 0; i < 3; i++) begin wp_addr_q[i] = '0; wp_v_q[i] = 1'b0; end
    for (int t = 0; t < T; t++) for (int a = 0; a < WP_DEPTH; a++) for (int l = 0; l < LANES; l++) samp[t][a][l] = 0;
    for (int l = 0; l < NL; l++) begin
      in_words[l] = (SIZES[l] + NB - 1) / NB;
      out_words[l] = (SIZES[l+1] + NB - 1) / NB;
      cfg_in_words[l] = IF_AW_TB'(in_words[l]);
      cfg_out_words[l] = IF_AW_TB'(out_words[l]);
    end
    cfg_num_layers = 3'(NL);
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < SIZES[l+1]; j++) begin
        mu_b[l][j] = byte'($urandom % 17) - 8;
        for (int i = 0; i < SIZES[l]; i++) mu_w[l][j][i] = byte'($urandom % 7) - 3;
      end
    for (int i = 0; i < SIZES[0]; i++) img[i] = $urandom % 32;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // start is held off while the GRNGs are still seeding
    start = 1;
    @(negedge clk);
    start = 0;
    if (!grng_ready && !busy) n_held++;
    if (GRNG == GRNG_WALLACE) begin
      // fill every Wallace pool with roughly Gaussian numbers (sd 8 = 1.0)
      for (int t = 0; t < T; t++)
        for (int u = 0; u < LANES / 4; u++)
          for (int a = 0; a < POOL_TB; a++) begin
            pool_ext_we = 1; pool_ext_set = TW'(t); pool_ext_unit = 4'(u); pool_ext_addr = 6'(a);
            for (int k = 0; k < 4; k++) begin
              int g;
              g = 0;
              for (int r = 0; r < 12; r++) g += $urandom % 1024;
              pool_ext_data[k] = 8'((g - 6144) / 128);
            end
            @(negedge clk);
          end
      pool_ext_we = 0;
      pool_done = 1;
    end
    // run 0: deterministic network (sigma = 0)
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < SIZES[l+1]; j++) begin
        sg_b[l][j] = 0;
        for (int i = 0; i < SIZES[l]; i++) sg_w[l][j][i] = 0;
      end
    load_wpmem();
    while (!grng_ready) @(negedge clk);
    run_once(0);
    // run 1: Bayesian network
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < SIZES[l+1]; j++) begin
        sg_b[l][j] = byte'($urandom % 8);
        for (int i = 0; i < SIZES[l]; i++) sg_w[l][j][i] = byte'($urandom % 12);
      end
    load_wpmem();
    run_once(1);
    noise_stats();
    $display("mechanisms: stall cycles %0d, IFMem role swaps %0d, later-pass batches %0d, partial passes %0d, bias beats %0d, back-to-back batches %0d, start held for GRNG %0d, host result reads %0d",
             n_stall, n_swap, n_multi, n_partial, n_bias, n_b2b, n_held, n_hostrd);
    if (SHORT_PASSES) chk(n_stall > 0, "stall happened");
    chk(n_swap >= 2 * (NL - 1), "IFMem role swaps happened");
    chk(n_multi > 0, "multi-pass layer happened");
    chk(n_partial > 0, "partial pass happened");
    chk(n_bias > 0, "bias beats happened");
    if (SHORT_PASSES) chk(n_b2b > 0, "back-to-back distributor batch happened");
    chk(n_held > 0, "start held while GRNG not ready");
    chk(n_hostrd > 0, "host read results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
