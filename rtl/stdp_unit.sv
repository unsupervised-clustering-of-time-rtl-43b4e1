// stdp_unit: stochastic integer STDP learning of the TNN column.
//
// After each forward pass every weight w = w[k][j] between encoding neuron j
// (spike time t_j) and processing neuron k (time t_k after inhibition)
// changes by
//   t_j <  T, t_k =  T          : +X_s
//   t_j <  T, t_k <  T, t_j<=t_k : +X_c * max(S_P(w), X_min)
//   t_j <  T, t_k <  T, t_j> t_k : -X_c * max(S_N(w), X_min)
//   t_j =  T, t_k <  T          : -X_b * max(S_N(w), X_min)
//   t_j =  T, t_k =  T          : 0
// and is then clamped to [0, WMAX] (T = T_max).  X_s, X_c, X_b, X_min are
// Bernoulli variables with the configured probabilities; S_P and S_N are
// Bernoulli with P[S_P=1] = (w/WMAX)(2 - w/WMAX) and
// P[S_N=1] = (1 - w/WMAX)(1 + w/WMAX).  The rule is the method's; max of
// two bits is their OR.
//
// Implementation (this design's): LANES synapses of one neuron are updated
// per cycle through the weight array's read-modify-write port, sweeping
// k = 0..k_used-1 and lane groups 0..ceil(S/LANES)-1, so one full update takes
// k_used * ceil(S/LANES) cycles.  Each lane owns a 64-bit xorshift
// generator; bits [15:0] drive the X_s/X_c/X_b draw, [31:16] X_min and
// [47:32] S_P/S_N.  `seed_load` reseeds all lanes from `seed`.
//
// Interface: pulse `start` (while idle) to begin; `busy` is high while the
// sweep runs and `done` pulses in its last cycle.
module stdp_unit
  import tnn_pkg::*;
#(
  parameter int unsigned K     = K_DEF,
  parameter int unsigned S     = E_DEF * ELL_DEF,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned TMAX  = TMAX_DEF,
  parameter int unsigned WBITS = WBITS_DEF,
  parameter int unsigned WMAX  = WMAX_DEF,
  parameter int unsigned TW    = $clog2(TMAX + 1),
  parameter int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned GW    = ((S + LANES - 1) / LANES > 1) ? $clog2((S + LANES - 1) / LANES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seed_load,
  input  logic [31:0]      seed,
  input  logic             start,
  input  logic [KW:0]      k_used,
  input  prob_t            pi_s,
  input  prob_t            pi_c,
  input  prob_t            pi_b,
  input  prob_t            pi_min,
  input  logic [TW-1:0]    tj  [S],
  input  logic [TW-1:0]    tko [K],
  // weight array read-modify-write port
  output logic             lane_we,
  output logic [KW-1:0]    lane_k,
  output logic [GW-1:0]    lane_grp,
  output logic [WBITS-1:0] lane_wdata [LANES],
  input  logic [WBITS-1:0] lane_rdata [LANES],
  output logic             busy,
  output logic             done
);

  localparam logic [63:0] GOLD = 64'h9E37_79B9_7F4A_7C15;

  logic [63:0] rnd [LANES];
  logic        last_chunk, last_row;

  for (genvar l = 0; l < LANES; l++) begin : g_rng
    xorshift64 u_rng (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (seed_load),
      .seed   ({seed, ~seed} ^ (GOLD * 64'(l + 1))),
      .advance(busy),
      .state  (rnd[l])
    );
  end

  // sweep counters
  assign last_chunk = (32'(lane_grp) * LANES + LANES >= S);
  assign last_row   = (32'(lane_k) + 1 >= 32'(k_used)) || (32'(lane_k) + 1 >= K);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      lane_k    <= '0;
      lane_grp <= '0;
    end else if (!busy) begin
      if (start && k_used != '0) begin
        busy      <= 1'b1;
        lane_k    <= '0;
        lane_grp <= '0;
      end
    end else if (last_chunk) begin
      lane_grp <= '0;
      if (last_row) busy <= 1'b0;
      else          lane_k <= lane_k + 1'b1;
    end else begin
      lane_grp <= lane_grp + 1'b1;
    end
  end

  assign done    = busy && last_chunk && last_row;
  assign lane_we = busy;

  // per-lane update rule
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [TW-1:0]    t_e, t_o;
      logic [WBITS-1:0] w;
      logic             e_sp, o_sp, xmin, inc, dec;
      int unsigned      j;
      j    = 32'(lane_grp) * LANES + l;
      t_e  = (j < S) ? tj[j] : TW'(TMAX);
      t_o  = tko[lane_k];
      w    = lane_rdata[l];
      e_sp = (t_e != TW'(TMAX));
      o_sp = (t_o != TW'(TMAX));
      xmin = bern(rnd[l][31:16], pi_min);
      inc  = 1'b0;
      dec  = 1'b0;
      if (e_sp && !o_sp)
        inc = bern(rnd[l][15:0], pi_s);
      else if (e_sp && o_sp && t_e <= t_o)
        inc = bern(rnd[l][15:0], pi_c) &&
              (bern(rnd[l][47:32], sp_prob(32'(w), WMAX)) || xmin);
      else if (e_sp && o_sp)
        dec = bern(rnd[l][15:0], pi_c) &&
              (bern(rnd[l][47:32], sn_prob(32'(w), WMAX)) || xmin);
      else if (o_sp)
        dec = bern(rnd[l][15:0], pi_b) &&
              (bern(rnd[l][47:32], sn_prob(32'(w), WMAX)) || xmin);
      if (inc && 32'(w) < WMAX)   lane_wdata[l] = w + 1'b1;
      else if (dec && w != '0)    lane_wdata[l] = w - 1'b1;
      else                        lane_wdata[l] = w;
    end
  end

endmodule
