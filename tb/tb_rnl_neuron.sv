// tb_rnl_neuron: self-checking test of the ramp-no-leak neuron.
// Reference: v(t) = sum_j rho(t - t_j, w_j) with rho evaluated directly
// from its three-case definition; the spike time is the first t < T_max
// with v(t) >= theta, else T_max; the final potential is v(T_max).  Each
// forward pass takes exactly T_max step cycles.
module tb_rnl_neuron;
  localparam int unsigned S = 12, TMAX = 16, WBITS = 3, WMAX = 7, TW = 5;
  localparam int unsigned VW = $clog2(S * WMAX + 1);
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [TW-1:0] tick = '0;
  logic [TW-1:0] tj [S];
  logic [WBITS-1:0] w [S];
  logic [VW-1:0] theta = '0;
  logic [TW-1:0] spike_t;
  logic fired;
  logic [VW-1:0] v;
  int checks = 0, failures = 0, n_fired = 0, n_silent = 0;

  rnl_neuron #(.S(S), .TMAX(TMAX), .WBITS(WBITS), .WMAX(WMAX)) dut (.*);
  always #5 clk = ~clk;

  function automatic int rho(int t, int wv);
    if (t < 0) return 0;
    if (t < wv) return t;
    return wv;
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pot, exp_t, exp_v;
    for (int j = 0; j < S; j++) begin tj[j] = TW'(TMAX); w[j] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 600; trial++) begin
      for (int j = 0; j < S; j++) begin
        tj[j] = ($urandom_range(3) == 0) ? TW'(TMAX) : TW'($urandom_range(TMAX-1));
        w[j]  = WBITS'($urandom_range(WMAX));
      end
      theta = VW'($urandom_range(60) + 1);
      exp_t = TMAX;
      for (int t = 0; t <= TMAX; t++) begin
        pot = 0;
        for (int j = 0; j < S; j++)
          if (tj[j] != TW'(TMAX)) pot += rho(t - int'(tj[j]), int'(w[j]));
        if (t < TMAX && exp_t == TMAX && pot >= int'(theta)) exp_t = t;
        if (t == TMAX) exp_v = pot;
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int t = 0; t < TMAX; t++) begin
        step = 1; tick = TW'(t);
        @(negedge clk);
      end
      step = 0;
      checks++;
      if (int'(spike_t) != exp_t || fired != (exp_t < TMAX)) begin
        failures++; $display("trial %0d: spike %0d fired %0d exp %0d", trial, spike_t, fired, exp_t);
      end
      checks++;
      if (int'(v) != exp_v) begin failures++; $display("trial %0d: v %0d exp %0d", trial, v, exp_v); end
      if (exp_t < TMAX) n_fired++; else n_silent++;
    end
    checks++;
    if (n_fired == 0 || n_silent == 0) begin failures++; $display("coverage %0d %0d", n_fired, n_silent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
