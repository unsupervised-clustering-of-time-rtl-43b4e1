// tb_stdp_unit: self-checking test of the STDP unit.
// The testbench holds the weight array itself.  With every Bernoulli
// probability at 0 or "always", each rule of the STDP table is checked
// exactly (including clamping at 0 and WMAX); with X_c always and X_min
// never, the rate at which a weight w grows (tj <= tk) or shrinks (tj > tk)
// is compared with P[S_P(w)] = (w/7)(2 - w/7) and P[S_N(w)] = 1 - (w/7)^2.
// The sweep must take exactly k_used * ceil(S/LANES) cycles.
module tb_stdp_unit;
  import tnn_pkg::*;
  localparam int unsigned K = 4, S = 22, LANES = 4, TMAX = 16, WBITS = 3, WMAX = 7;
  localparam int unsigned TW = 5, KW = 2, GW = $clog2((S + LANES - 1) / LANES);
  logic clk = 0, rst_n = 0, seed_load = 0, start = 0;
  logic [31:0] seed = 32'hCAFE;
  logic [KW:0] k_used = (KW+1)'(K);
  prob_t pi_s = '0, pi_c = '0, pi_b = '0, pi_min = '0;
  logic [TW-1:0] tj [S], tko [K];
  logic lane_we, busy, done;
  logic [KW-1:0] lane_k;
  logic [GW-1:0] lane_grp;
  logic [WBITS-1:0] lane_wdata [LANES], lane_rdata [LANES];
  logic [WBITS-1:0] mem [K][S];
  int checks = 0, failures = 0;

  stdp_unit #(.K(K), .S(S), .LANES(LANES), .TMAX(TMAX), .WBITS(WBITS), .WMAX(WMAX)) dut (.*);
  always #5 clk = ~clk;

  always_comb
    for (int l = 0; l < LANES; l++)
      lane_rdata[l] = (32'(lane_grp) * LANES + l < S) ? mem[lane_k][32'(lane_grp) * LANES + l] : '0;
  always_ff @(posedge clk)
    if (lane_we)
      for (int l = 0; l < LANES; l++)
        if (32'(lane_grp) * LANES + l < S) mem[lane_k][32'(lane_grp) * LANES + l] <= lane_wdata[l];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one sweep and check its length
  task automatic sweep(int ku);
    int cyc;
    k_used = (KW+1)'(ku);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc - 1 != ku * ((S + LANES - 1) / LANES)) begin
      failures++; $display("sweep took %0d cycles", cyc - 1);
    end
  endtask

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic int clampw(int x);
    return (x < 0) ? 0 : (x > int'(WMAX)) ? int'(WMAX) : x;
  endfunction

  initial begin
    int w0 [K][S];
    int exp_w, win, tw, up [8], dn [8], tot_up [8], tot_dn [8];
    real p, f;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); seed_load = 1; @(negedge clk); seed_load = 0;

    // ---- exact rules, each Bernoulli certain or impossible
    for (int mode = 0; mode < 3; mode++) begin
      for (int rep = 0; rep < 6; rep++) begin
        pi_s = (mode == 0) ? '1 : '0;
        pi_c = (mode == 1) ? '1 : '0;
        pi_b = (mode == 2) ? '1 : '0;
        pi_min = '1;
        win = int'($urandom_range(K - 1));
        tw  = int'($urandom_range(TMAX - 1));
        for (int k = 0; k < K; k++) tko[k] = (k == win && rep != 0) ? TW'(tw) : TW'(TMAX);
        for (int j = 0; j < S; j++) tj[j] = ($urandom_range(2) == 0) ? TW'(TMAX) : TW'($urandom_range(TMAX - 1));
        for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
          mem[k][j] = WBITS'($urandom_range(WMAX));
          w0[k][j] = int'(mem[k][j]);
        end
        sweep(K);
        for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
          logic e_sp, o_sp;
          e_sp = (tj[j] != TW'(TMAX)); o_sp = (tko[k] != TW'(TMAX));
          exp_w = w0[k][j];
          if (mode == 0 && e_sp && !o_sp) exp_w = w0[k][j] + 1;
          if (mode == 1 && e_sp && o_sp) exp_w = (tj[j] <= tko[k]) ? w0[k][j] + 1 : w0[k][j] - 1;
          if (mode == 2 && !e_sp && o_sp) exp_w = w0[k][j] - 1;
          exp_w = clampw(exp_w);
          checks++;
          if (int'(mem[k][j]) != exp_w) begin
            failures++;
            if (failures < 10) $display("mode %0d k%0d j%0d tj %0d tk %0d: %0d -> %0d exp %0d",
              mode, k, j, tj[j], tko[k], w0[k][j], mem[k][j], exp_w);
          end
        end
      end
    end

    // ---- only the neurons in use are updated
    pi_s = '1; pi_c = '0; pi_b = '0;
    for (int k = 0; k < K; k++) tko[k] = TW'(TMAX);
    for (int j = 0; j < S; j++) tj[j] = 0;
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) mem[k][j] = 0;
    sweep(2);
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
      checks++; if (int'(mem[k][j]) != ((k < 2) ? 1 : 0)) failures++;
    end

    // ---- stabilising probabilities S_P and S_N
    for (int w = 0; w < 8; w++) begin tot_up[w] = 0; tot_dn[w] = 0; up[w] = 0; dn[w] = 0; end
    pi_s = '0; pi_c = '1; pi_b = '0; pi_min = '0;
    for (int k = 0; k < K; k++) tko[k] = TW'(8);
    for (int j = 0; j < S; j++) tj[j] = (j % 2 == 0) ? TW'(3) : TW'(12);
    for (int rep = 0; rep < 400; rep++) begin
      for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
        mem[k][j] = WBITS'((j / 2 + k + rep) % 8);
        w0[k][j] = int'(mem[k][j]);
      end
      sweep(K);
      for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) begin
        if (j % 2 == 0) begin tot_up[w0[k][j]]++; if (int'(mem[k][j]) > w0[k][j]) up[w0[k][j]]++; end
        else            begin tot_dn[w0[k][j]]++; if (int'(mem[k][j]) < w0[k][j]) dn[w0[k][j]]++; end
      end
    end
    for (int w = 0; w < 8; w++) begin
      f = real'(w) / 7.0;
      if (w < 7) begin
        p = f * (2.0 - f);
        checks++;
        if (rabs(real'(up[w]) / real'(tot_up[w]) - p) > 0.05) begin
          failures++; $display("S_P(%0d): rate %f exp %f", w, real'(up[w]) / real'(tot_up[w]), p);
        end
      end
      if (w > 0) begin
        p = (1.0 - f) * (1.0 + f);
        checks++;
        if (rabs(real'(dn[w]) / real'(tot_dn[w]) - p) > 0.05) begin
          failures++; $display("S_N(%0d): rate %f exp %f", w, real'(dn[w]) / real'(tot_dn[w]), p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
