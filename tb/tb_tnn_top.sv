// tb_tnn_top: end-to-end test of the clustering processor at reduced size
// (32-sample signals, 4 projected values, 32 synapses per neuron, 3 neurons).
//
// A synthetic data set of three signal shapes with noise is used.
//  1. A calibration pass learns the column ranges.
//  2. Inference with the reset weights (all equal) gives a tie among all
//     neurons, resolved to neuron 0; a very high threshold gives no spike
//     and the winner by potential.
//  3. Online learning (STDP) runs for several epochs.
//  4. Inference after learning is compared signal by signal with the
//     reference model fed with the weights read back, and the clustering
//     is scored by the Rand index against the true shapes.
// Mechanisms counted: calibration, spiking winners, no-spike fallback,
// ties, potentiation, depression, weights held at 0 and WMAX by clamping,
// input stalls, learn/inference mode switches.
module tb_tnn_top;
  import tnn_pkg::*;
  import tnn_ref_pkg::*;

  localparam int unsigned E = 8, L = 32, ELL = 4, K = 3, TMAX = 16, WMAX = 7;
  localparam int unsigned XW = 8, LANES = 8, S = E * ELL;
  localparam int unsigned KW = 2, TW = 5, WBITS = 3, JW = $clog2(S + LANES);
  localparam logic [31:0] PSEED = 32'h5EED_0001;
  localparam int NSIG = 36;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [15:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic s_valid = 0, s_ready; logic signed [XW-1:0] s_data = '0;
  logic res_valid, res_spiked; logic [KW-1:0] res_cluster; logic [TW-1:0] res_time;
  logic w_we = 0; logic [KW-1:0] w_k = '0; logic [JW-1:0] w_j = '0;
  logic [WBITS-1:0] w_wdata = '0, w_rdata;
  logic busy;

  tnn_top #(.E(E), .L(L), .ELL(ELL), .K(K), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int sig   [NSIG][L];
  int label [NSIG];
  int cmin [ELL], cmax [ELL];
  int wts  [K][S];
  int theta_v = 40;
  int n_calib = 0, n_spike = 0, n_nospike = 0, n_tie = 0, n_pot = 0, n_dep = 0;
  int n_clamp0 = 0, n_clampmax = 0, n_stall = 0, n_modesw = 0, n_cycles_bad = 0;
  int got_cluster, got_time, got_spiked;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic read_weights();
    for (int k = 0; k < K; k++)
      for (int j = 0; j < S; j++) begin
        w_k = KW'(k); w_j = JW'(j); #1;
        wts[k][j] = int'(w_rdata);
      end
  endtask

  // stream one signal; returns the result if one is produced
  task automatic send(int idx, bit expect_result);
    int n = 0;
    @(negedge clk);
    s_valid = 1; s_data = XW'(sig[idx][0]);
    while (n < L) begin
      @(posedge clk);
      if (s_valid && s_ready) begin
        n++;
        #1;
        if (n < L) begin
          s_data = XW'(sig[idx][n]);
          if ((idx + n) % 11 == 0) begin   // source not ready for a cycle
            s_valid = 0; n_stall++;
            @(negedge clk); s_valid = 1;
          end
        end
      end
    end
    s_valid = 0;
    if (expect_result) begin
      while (!res_valid) @(posedge clk);
      got_cluster = int'(res_cluster); got_time = int'(res_time); got_spiked = int'(res_spiked);
    end
    while (busy) @(posedge clk);
  endtask

  // reference forward pass
  task automatic ref_pass(int idx, output int cl, output int tm, output int sp, output int ties);
    int xp [ELL];
    int tj [S];
    int tk [K], vend [K];
    int pot, vm;
    for (int i = 0; i < ELL; i++) begin
      xp[i] = 0;
      for (int n = 0; n < L; n++) xp[i] += coef(PSEED, n, i) * sig[idx][n];
      for (int e = 0; e < E; e++) tj[i*E+e] = enc_t(xp[i], cmin[i], cmax[i], 16, e, E, TMAX);
    end
    for (int k = 0; k < K; k++) begin
      tk[k] = TMAX;
      for (int t = 0; t <= TMAX; t++) begin
        pot = 0;
        for (int j = 0; j < S; j++) if (tj[j] < TMAX) pot += rho(t - tj[j], wts[k][j]);
        if (t < TMAX && tk[k] == TMAX && pot >= theta_v) tk[k] = t;
        if (t == TMAX) vend[k] = pot;
      end
    end
    tm = TMAX; cl = 0; ties = 0;
    for (int k = 0; k < K; k++) if (tk[k] < tm) begin tm = tk[k]; cl = k; end
    for (int k = 0; k < K; k++) if (tk[k] == tm && tm < TMAX) ties++;
    sp = (tm < TMAX);
    if (!sp) begin
      vm = -1;
      for (int k = 0; k < K; k++) if (vend[k] > vm) begin vm = vend[k]; cl = k; end
    end
  endtask

  task automatic infer_and_compare(int idx, string phase);
    int cl, tm, sp, ties;
    read_weights();
    ref_pass(idx, cl, tm, sp, ties);
    send(idx, 1);
    checks++;
    if (got_cluster != cl || got_time != tm || got_spiked != sp) begin
      failures++;
      $display("%s sig %0d: got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", phase, idx,
               got_cluster, got_time, got_spiked, cl, tm, sp);
    end
    if (sp) n_spike++; else n_nospike++;
    if (ties > 1) n_tie++;
  endtask

  initial begin
    int assign_c [NSIG];
    int a, b, agree, pairs, cyc;
    int w0 [K][S];
    real ri;
    // ---- data set: sine, square, falling ramp, plus noise
    for (int s = 0; s < NSIG; s++) begin
      label[s] = s % 3;
      for (int n = 0; n < L; n++) begin
        case (label[s])
          0: a = int'(90.0 * $sin(2.0 * 3.14159 * n / L));
          1: a = ((n / 8) % 2 == 0) ? 80 : -80;
          default: a = 100 - (200 * n) / L;
        endcase
        a += int'($urandom_range(30)) - 15;
        sig[s][n] = (a > 127) ? 127 : (a < -128) ? -128 : a;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;

    cfg(CFG_LEN, L); cfg(CFG_ELL, ELL); cfg(CFG_K, K); cfg(CFG_GAMMA, 16);
    cfg(CFG_THETA, theta_v);

    // ---- 1. calibration pass
    cfg(CFG_MODE, 2); n_modesw++;
    cfg(CFG_CAL_CLR, 0);
    for (int i = 0; i < ELL; i++) begin cmin[i] = 1 << 30; cmax[i] = -(1 << 30); end
    for (int s = 0; s < NSIG; s++) begin
      send(s, 0);
      n_calib++;
      for (int i = 0; i < ELL; i++) begin
        a = 0;
        for (int n = 0; n < L; n++) a += coef(PSEED, n, i) * sig[s][n];
        if (a < cmin[i]) cmin[i] = a;
        if (a > cmax[i]) cmax[i] = a;
      end
    end
    checks++;
    if (res_valid) failures++;

    // ---- 2. inference with equal initial weights: ties resolved to neuron 0
    cfg(CFG_MODE, 0); n_modesw++;
    for (int s = 0; s < 6; s++) begin
      infer_and_compare(s, "initial");
      checks++; if (got_cluster != 0) failures++;
    end
    // no neuron reaches a huge threshold: winner by largest potential
    theta_v = 2000; cfg(CFG_THETA, theta_v);
    for (int k = 0; k < K; k++) begin   // make neuron 2 the strongest
      @(negedge clk); w_we = 1; w_k = 2'd2; w_wdata = 3'd7;
      for (int j = 0; j < S; j++) begin w_j = JW'(j); @(negedge clk); end
      w_we = 0;
    end
    for (int s = 0; s < 3; s++) begin
      infer_and_compare(s, "nospike");
      checks++; if (got_spiked != 0 || got_cluster != 2) failures++;
    end
    for (int j = 0; j < S; j++) begin   // back to the reset weight
      @(negedge clk); w_we = 1; w_k = 2'd2; w_j = JW'(j); w_wdata = 3'd3;
    end
    @(negedge clk); w_we = 0;
    theta_v = 40; cfg(CFG_THETA, theta_v);

    // ---- 3. online learning
    cfg(CFG_PI_S, 1200); cfg(CFG_PI_C, 9000); cfg(CFG_PI_B, 14000); cfg(CFG_PI_MIN, 2000);
    cfg(CFG_SEED, 32'h0BAD_5EED);
    cfg(CFG_MODE, 1); n_modesw++;
    for (int ep = 0; ep < 12; ep++)
      for (int s = 0; s < NSIG; s++) begin
        read_weights();
        for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) w0[k][j] = wts[k][j];
        @(negedge clk);
        send((s * 7 + ep) % NSIG, 1);
        // each weight moves by at most one step per forward pass
        read_weights();
        for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
          if (wts[k][j] > w0[k][j]) n_pot++;
          if (wts[k][j] < w0[k][j]) n_dep++;
          checks++;
          if (wts[k][j] - w0[k][j] > 1 || w0[k][j] - wts[k][j] > 1 || wts[k][j] > WMAX) failures++;
        end
      end
    read_weights();
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
      if (wts[k][j] == 0) n_clamp0++;
      if (wts[k][j] == WMAX) n_clampmax++;
    end
    // STDP phase length with learning on
    @(negedge clk); s_valid = 0;
    fork
      send(0, 1);
      begin
        while (!res_valid) @(posedge clk);
        cyc = 0;
        while (busy) begin @(posedge clk); cyc++; end
        checks++;
        if (cyc != K * ((S + LANES - 1) / LANES)) begin
          failures++; n_cycles_bad++; $display("STDP phase took %0d cycles", cyc);
        end
      end
    join

    // ---- 4. inference after learning
    cfg(CFG_MODE, 0); n_modesw++;
    for (int s = 0; s < NSIG; s++) begin
      infer_and_compare(s, "learned");
      assign_c[s] = got_cluster;
    end
    agree = 0; pairs = 0;
    for (int i = 0; i < NSIG; i++)
      for (int j = i + 1; j < NSIG; j++) begin
        pairs++;
        if ((label[i] == label[j]) == (assign_c[i] == assign_c[j])) agree++;
      end
    ri = real'(agree) / real'(pairs);
    $display("Rand index after learning: %0.3f", ri);
    checks++;
    if (ri < 0.6) begin failures++; $display("clustering quality too low"); end

    $display("mechanisms: calib=%0d spike=%0d nospike=%0d tie=%0d pot=%0d dep=%0d at0=%0d atmax=%0d stall=%0d modesw=%0d",
             n_calib, n_spike, n_nospike, n_tie, n_pot, n_dep, n_clamp0, n_clampmax, n_stall, n_modesw);
    if (n_calib == 0) failures++;
    if (n_spike == 0) failures++;
    if (n_nospike == 0) failures++;
    if (n_tie == 0) failures++;
    if (n_pot == 0) failures++;
    if (n_dep == 0) failures++;
    if (n_clamp0 == 0 && n_clampmax == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_modesw < 2) failures++;
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
