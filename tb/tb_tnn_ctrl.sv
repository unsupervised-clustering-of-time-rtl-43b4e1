// tb_tnn_ctrl: self-checking test of the configuration registers and the
// per-signal sequencer.  Checks register write-back and clamping, strobes
// for the range store, and for each mode (inference, learning, calibration)
// the exact phase lengths: cfg_len accepted samples, ELL encode cycles,
// ticks 0..T_max-1, one result strobe, and the STDP hand-off.
module tb_tnn_ctrl;
  import tnn_pkg::*;
  localparam int unsigned L = 12, ELL = 4, K = 3, TMAX = 16, PW = 14, VW = 9;
  localparam int unsigned TW = 5, IW = 2, KW = 2, NW = 4;
  logic clk = 0, rst_n = 0, cfg_we = 0, s_valid = 0, stdp_done = 0;
  logic [15:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic learn_en, calib_en, seed_load, cal_clear, rng_wr_min, rng_wr_max;
  logic [VW-1:0] theta;
  logic [GAMMA_W-1:0] gamma_q;
  prob_t pi_s, pi_c, pi_b, pi_min;
  logic [31:0] seed;
  logic [NW-1:0] sig_len;
  logic [IW:0] ell_used;
  logic [KW:0] k_used;
  logic [IW-1:0] rng_wr_idx, enc_col;
  logic signed [PW-1:0] rng_wr_data;
  logic s_ready, proj_clear, proj_valid, enc_we, cal_en, col_valid;
  logic neur_clear, fire_step, res_latch, stdp_start, busy;
  logic [TW-1:0] tick;
  tnn_state_e state;
  int checks = 0, failures = 0;

  tnn_ctrl #(.L(L), .ELL(ELL), .K(K), .TMAX(TMAX), .PW(PW), .VW(VW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // counters of what the sequencer does
  int n_acc, n_enc, n_cal, n_fire, n_res, n_start, n_clr, n_pclr, tick_err, col_err;
  always @(posedge clk) if (rst_n) begin
    if (proj_valid) n_acc++;
    if (enc_we) begin if (int'(enc_col) != n_enc) col_err++; n_enc++; end
    if (cal_en) n_cal++;
    if (fire_step) begin if (int'(tick) != n_fire) tick_err++; n_fire++; end
    if (res_latch) n_res++;
    if (stdp_start) n_start++;
    if (neur_clear) n_clr++;
    if (proj_clear) n_pclr++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_signal(int len, int stdp_delay, output int cycles);
    n_acc = 0; n_enc = 0; n_cal = 0; n_fire = 0; n_res = 0; n_start = 0;
    n_clr = 0; n_pclr = 0; tick_err = 0; col_err = 0; cycles = 0;
    @(negedge clk); s_valid = 1;
    while (n_acc < len) begin
      @(negedge clk); cycles++;
      if (n_acc == 3 && s_valid) begin s_valid = 0; @(negedge clk); cycles++; s_valid = 1; end
    end
    s_valid = 0;
    while (busy) begin
      if (state == ST_STDP) begin
        repeat (stdp_delay) @(negedge clk);
        stdp_done = 1; @(negedge clk); stdp_done = 0;
      end else begin
        @(negedge clk); cycles++;
      end
    end
  endtask

  initial begin
    int cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    check(int'(sig_len), L, "reset len");
    check(int'(gamma_q), 16, "reset gamma");
    wr(16'h0001, 37);      check(int'(theta), 37, "theta");
    wr(16'h0002, 24);      check(int'(gamma_q), 24, "gamma");
    wr(16'h0003, 100);     check(int'(pi_s), 100, "pi_s");
    wr(16'h0004, 200);     check(int'(pi_c), 200, "pi_c");
    wr(16'h0005, 300);     check(int'(pi_b), 300, "pi_b");
    wr(16'h0006, 400);     check(int'(pi_min), 400, "pi_min");
    wr(16'h000A, 99);      check(int'(k_used), K, "k clamp");
    wr(16'h000A, 2);       check(int'(k_used), 2, "k");
    wr(16'h0009, 3);       check(int'(ell_used), 3, "ell");
    wr(16'h0008, 10);      check(int'(sig_len), 10, "len");
    // strobes
    @(negedge clk); cfg_we = 1; cfg_addr = 16'h0007; cfg_wdata = 32'hABCD; #1;
    check(int'(seed_load), 1, "seed strobe");
    @(negedge clk); check(int'(seed), 32'hABCD, "seed");
    cfg_addr = 16'h1002; cfg_wdata = -32'sd55; #1;
    check(int'(rng_wr_min), 1, "xmin strobe"); check(int'(rng_wr_idx), 2, "xmin idx");
    check(int'(rng_wr_data), -55, "xmin data");
    cfg_addr = 16'h2001; #1; check(int'(rng_wr_max), 1, "xmax strobe");
    cfg_addr = 16'h000B; #1; check(int'(cal_clear), 1, "cal clear strobe");
    @(negedge clk); cfg_we = 0;

    // inference
    wr(16'h0000, 0);
    run_signal(10, 0, cyc);
    check(n_acc, 10, "inf samples"); check(n_enc, ELL, "inf encode"); check(col_err, 0, "enc order");
    check(n_fire, TMAX, "inf ticks"); check(tick_err, 0, "tick order");
    check(n_res, 1, "inf result"); check(n_start, 0, "inf no stdp"); check(n_clr, 1, "neuron clear");
    check(n_pclr, 1, "proj clear");
    check(cyc, 1 + 10 + 1 + ELL + TMAX + 1, "inf cycles");  // idle, samples, one stall
    // learning
    wr(16'h0000, 1);
    run_signal(10, 7, cyc);
    check(n_res, 1, "learn result"); check(n_start, 1, "learn stdp start");
    check(n_fire, TMAX, "learn ticks");
    // calibration
    wr(16'h0000, 2);
    run_signal(10, 0, cyc);
    check(n_cal, 3, "cal columns"); check(n_enc, 0, "cal no encode");
    check(n_fire, 0, "cal no fire"); check(n_res, 0, "cal no result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
