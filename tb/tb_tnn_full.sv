// tb_tnn_full: the processor at its default size (270-sample signals,
// 33 projected values, 264 synapses per neuron, 25 neurons) taken through
// one complete operation: a calibration pass over a few signals, inference
// checked against the reference model, and one learning step whose STDP
// phase must last 25 * 264/8 cycles and move no weight by more than one.
module tb_tnn_full;
  import tnn_pkg::*;
  import tnn_ref_pkg::*;

  localparam int unsigned E = E_DEF, L = L_DEF, ELL = ELL_DEF, K = K_DEF;
  localparam int unsigned TMAX = TMAX_DEF, WMAX = WMAX_DEF, XW = XW_DEF;
  localparam int unsigned LANES = LANES_DEF, S = E * ELL;
  localparam int unsigned KW = $clog2(K), TW = $clog2(TMAX + 1), WBITS = WBITS_DEF;
  localparam int unsigned JW = $clog2(S + LANES);
  localparam logic [31:0] PSEED = 32'h5EED_0001;
  localparam int NSIG = 6;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [15:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic s_valid = 0, s_ready; logic signed [XW-1:0] s_data = '0;
  logic res_valid, res_spiked; logic [KW-1:0] res_cluster; logic [TW-1:0] res_time;
  logic w_we = 0; logic [KW-1:0] w_k = '0; logic [JW-1:0] w_j = '0;
  logic [WBITS-1:0] w_wdata = '0, w_rdata;
  logic busy;

  tnn_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int sig [NSIG][L];
  int cmin [ELL], cmax [ELL];
  int wts [K][S];
  int theta_v = 300;
  int got_cluster, got_time, got_spiked;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  task automatic send(int idx, bit expect_result);
    @(negedge clk); s_valid = 1;
    for (int n = 0; n < L; n++) begin
      s_data = XW'(sig[idx][n]);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      #1;
    end
    s_valid = 0;
    if (expect_result) begin
      while (!res_valid) @(posedge clk);
      got_cluster = int'(res_cluster); got_time = int'(res_time); got_spiked = int'(res_spiked);
    end
  endtask

  task automatic ref_pass(int idx, output int cl, output int tm, output int sp);
    int xp, pot, vm;
    int tj [S];
    int tk [K], vend [K];
    for (int i = 0; i < ELL; i++) begin
      xp = 0;
      for (int n = 0; n < L; n++) xp += coef(PSEED, n, i) * sig[idx][n];
      for (int e = 0; e < E; e++) tj[i*E+e] = enc_t(xp, cmin[i], cmax[i], 16, e, E, TMAX);
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
    tm = TMAX; cl = 0;
    for (int k = 0; k < K; k++) if (tk[k] < tm) begin tm = tk[k]; cl = k; end
    sp = (tm < TMAX);
    if (!sp) begin
      vm = -1;
      for (int k = 0; k < K; k++) if (vend[k] > vm) begin vm = vend[k]; cl = k; end
    end
  endtask

  initial begin
    int a, cl, tm, sp, cyc;
    int w0 [K][S];
    for (int s = 0; s < NSIG; s++)
      for (int n = 0; n < L; n++) begin
        a = int'(80.0 * $sin(2.0 * 3.14159 * (s + 1) * n / L)) + int'($urandom_range(40)) - 20;
        sig[s][n] = (a > 127) ? 127 : (a < -128) ? -128 : a;
      end
    repeat (3) @(posedge clk); rst_n = 1;
    cfg(CFG_THETA, theta_v);
    // random initial weights so that the neurons differ
    for (int k = 0; k < K; k++)
      for (int j = 0; j < S; j++) begin
        @(negedge clk); w_we = 1; w_k = KW'(k); w_j = JW'(j); w_wdata = WBITS'($urandom_range(WMAX));
      end
    @(negedge clk); w_we = 0;

    // calibration
    cfg(CFG_MODE, 2);
    cfg(CFG_CAL_CLR, 0);
    for (int i = 0; i < ELL; i++) begin cmin[i] = 1 << 30; cmax[i] = -(1 << 30); end
    for (int s = 0; s < NSIG; s++) begin
      send(s, 0);
      while (busy) @(posedge clk);
      for (int i = 0; i < ELL; i++) begin
        a = 0;
        for (int n = 0; n < L; n++) a += coef(PSEED, n, i) * sig[s][n];
        if (a < cmin[i]) cmin[i] = a;
        if (a > cmax[i]) cmax[i] = a;
      end
    end

    // inference against the reference
    cfg(CFG_MODE, 0);
    for (int s = 0; s < 3; s++) begin
      read_weights();
      ref_pass(s, cl, tm, sp);
      send(s, 1);
      while (busy) @(posedge clk);
      checks++;
      if (got_cluster != cl || got_time != tm || got_spiked != sp) begin
        failures++;
        $display("sig %0d: got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", s, got_cluster, got_time, got_spiked, cl, tm, sp);
      end
    end

    // one learning step
    cfg(CFG_PI_S, 1200); cfg(CFG_PI_C, 9000); cfg(CFG_PI_B, 14000); cfg(CFG_PI_MIN, 2000);
    cfg(CFG_SEED, 32'h1234_5678);
    cfg(CFG_MODE, 1);
    read_weights();
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) w0[k][j] = wts[k][j];
    send(4, 1);
    cyc = 0;
    while (busy) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != K * ((S + LANES - 1) / LANES)) begin failures++; $display("STDP phase %0d cycles", cyc); end
    read_weights();
    cyc = 0;
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
      checks++;
      if (wts[k][j] - w0[k][j] > 1 || w0[k][j] - wts[k][j] > 1) failures++;
      if (wts[k][j] != w0[k][j]) cyc++;
    end
    checks++;
    if (cyc == 0) begin failures++; $display("no weight changed"); end
    $display("weights changed by one learning step: %0d of %0d", cyc, K * S);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
