// tnn_top: neuromorphic time-series clustering processor.
//
// A raw signal of up to L samples streams in.  The signal encoding layer
// projects it to ELL values with a sparse random projection (rand_proj),
// and encodes each value into E spike times with Gaussian receptive fields
// (col_range + grf_encoder), held by the encoding neurons
// (encoding_neurons).  The TNN processing layer is one column of K
// ramp-no-leak neurons (rnl_neuron), fully connected to the E*ELL encoding
// neurons through 3-bit synaptic weights (synapse_weights).  One-winner-
// take-all lateral inhibition (wta_inhibit) selects the cluster, and with
// learning enabled the STDP unit (stdp_unit) updates every weight after the
// forward pass, so the column keeps learning online.  tnn_ctrl sequences it.
//
// Interface:
//   cfg_*      register writes (map in tnn_pkg); xmin/xmax are written there
//              or learned by a calibration pass over the data set.
//   s_*        sample stream, one signed XW-bit sample per s_valid&&s_ready.
//   res_*      one-cycle res_valid per signal: winning neuron (cluster),
//              its spike time (T_max if no neuron fired and the winner was
//              chosen by largest potential) and whether any neuron fired.
//   w_*        host access to single weights (write, combinational read).
//   busy       high from the first sample until the unit can take another.
// Timing per signal: cfg_len cycles of input, ELL encode cycles, T_max
// forward-pass ticks, one inhibition cycle, then k_used*ceil(S/LANES) STDP
// cycles when learning.
module tnn_top
  import tnn_pkg::*;
#(
  parameter int unsigned E         = E_DEF,
  parameter int unsigned L         = L_DEF,
  parameter int unsigned ELL       = ELL_DEF,
  parameter int unsigned K         = K_DEF,
  parameter int unsigned TMAX      = TMAX_DEF,
  parameter int unsigned WMAX      = WMAX_DEF,
  parameter int unsigned WBITS     = WBITS_DEF,
  parameter int unsigned XW        = XW_DEF,
  parameter int unsigned LANES     = LANES_DEF,
  parameter int unsigned W_INIT    = 3,
  parameter logic [31:0] PROJ_SEED = 32'h5EED_0001,
  parameter int unsigned S         = E * ELL,
  parameter int unsigned PW        = XW + $clog2(L) + 1,
  parameter int unsigned TW        = $clog2(TMAX + 1),
  parameter int unsigned VW        = $clog2(S * WMAX + 1),
  parameter int unsigned IW        = (ELL > 1) ? $clog2(ELL) : 1,
  parameter int unsigned KW        = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned JW        = $clog2(S + LANES),
  parameter int unsigned GW        = ((S + LANES - 1) / LANES > 1) ? $clog2((S + LANES - 1) / LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_wdata,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic signed [XW-1:0] s_data,
  output logic              res_valid,
  output logic [KW-1:0]     res_cluster,
  output logic [TW-1:0]     res_time,
  output logic              res_spiked,
  input  logic              w_we,
  input  logic [KW-1:0]     w_k,
  input  logic [JW-1:0]     w_j,
  input  logic [WBITS-1:0]  w_wdata,
  output logic [WBITS-1:0]  w_rdata,
  output logic              busy
);

  // ----------------------------------------------------------- control
  logic                 learn_en, calib_en, seed_load, cal_clear;
  logic [VW-1:0]        theta;
  logic [GAMMA_W-1:0]   gamma_q;
  prob_t                pi_s, pi_c, pi_b, pi_min;
  logic [31:0]          seed;
  logic [$clog2(L+1)-1:0] sig_len;
  logic [IW:0]          ell_used;
  logic [KW:0]          k_used;
  logic                 rng_wr_min, rng_wr_max;
  logic [IW-1:0]        rng_wr_idx;
  logic signed [PW-1:0] rng_wr_data;
  tnn_state_e           state;
  logic                 proj_clear, proj_valid, enc_we, cal_en, col_valid;
  logic                 neur_clear, fire_step, res_latch, stdp_start, stdp_done;
  logic [IW-1:0]        enc_col;
  logic [TW-1:0]        tick;

  tnn_ctrl #(.L(L), .ELL(ELL), .K(K), .TMAX(TMAX), .PW(PW), .VW(VW)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .learn_en, .calib_en, .theta, .gamma_q, .pi_s, .pi_c, .pi_b, .pi_min,
    .seed, .seed_load, .sig_len, .ell_used, .k_used, .cal_clear,
    .rng_wr_min, .rng_wr_max, .rng_wr_idx, .rng_wr_data,
    .s_valid, .s_ready, .state, .proj_clear, .proj_valid, .enc_col, .enc_we,
    .cal_en, .col_valid, .neur_clear, .fire_step, .tick, .res_latch,
    .stdp_start, .stdp_done, .busy
  );

  // ------------------------------------------------- signal encoding layer
  logic signed [PW-1:0] acc [ELL];
  logic signed [PW-1:0] xsel, xmin, xmax;
  logic [$clog2(L+1)-1:0] n_count;

  rand_proj #(.L(L), .ELL(ELL), .XW(XW), .PW(PW), .PROJ_SEED(PROJ_SEED)) u_proj (
    .clk, .rst_n, .clear(proj_clear), .in_valid(proj_valid), .x(s_data),
    .acc, .n_count
  );

  assign xsel = acc[enc_col];

  col_range #(.ELL(ELL), .PW(PW)) u_range (
    .clk, .rst_n,
    .wr_min(rng_wr_min), .wr_max(rng_wr_max), .wr_idx(rng_wr_idx), .wr_data(rng_wr_data),
    .cal_clear, .cal_en, .cal_idx(enc_col), .cal_x(xsel),
    .rd_idx(enc_col), .xmin, .xmax
  );

  logic [TW-1:0] t_col [E];

  grf_encoder #(.E(E), .TMAX(TMAX), .PW(PW)) u_grf (
    .x(xsel), .xmin, .xmax, .gamma_q, .col_valid, .t(t_col)
  );

  logic [TW-1:0] tj [S];
  logic [S-1:0]  enc_spike;

  encoding_neurons #(.E(E), .ELL(ELL), .TMAX(TMAX)) u_enc (
    .clk, .rst_n, .clear(1'b0), .we(enc_we), .col(enc_col), .t_in(t_col),
    .fire_en(fire_step), .tick, .t_out(tj), .spike(enc_spike)
  );

  // -------------------------------------------------- TNN processing layer
  logic [WBITS-1:0] w_all [K][S];
  logic             lane_we;
  logic [KW-1:0]    lane_k;
  logic [GW-1:0]    lane_grp;
  logic [WBITS-1:0] lane_wdata [LANES];
  logic [WBITS-1:0] lane_rdata [LANES];

  synapse_weights #(.K(K), .S(S), .WBITS(WBITS), .W_INIT(W_INIT), .LANES(LANES)) u_w (
    .clk, .rst_n, .w_all,
    .lane_we, .lane_k, .lane_grp, .lane_wdata, .lane_rdata,
    .host_we(w_we), .host_k(w_k), .host_j(w_j), .host_wdata(w_wdata), .host_rdata(w_rdata)
  );

  logic [TW-1:0] tk  [K];
  logic [TW-1:0] tko [K];
  logic [VW-1:0] vk  [K];
  logic [K-1:0]  fired;

  for (genvar k = 0; k < K; k++) begin : g_col
    rnl_neuron #(.S(S), .TMAX(TMAX), .WBITS(WBITS), .WMAX(WMAX)) u_neuron (
      .clk, .rst_n, .clear(neur_clear), .step(fire_step), .tick,
      .tj, .w(w_all[k]), .theta,
      .spike_t(tk[k]), .fired(fired[k]), .v(vk[k])
    );
  end

  logic [KW-1:0] winner;
  logic [TW-1:0] tmin;
  logic          spiked;

  wta_inhibit #(.K(K), .TMAX(TMAX), .VW(VW)) u_wta (
    .tk, .v(vk), .k_used, .tko, .winner, .tmin, .spiked
  );

  logic stdp_busy;

  stdp_unit #(.K(K), .S(S), .LANES(LANES), .TMAX(TMAX), .WBITS(WBITS), .WMAX(WMAX)) u_stdp (
    .clk, .rst_n, .seed_load, .seed, .start(stdp_start), .k_used,
    .pi_s, .pi_c, .pi_b, .pi_min, .tj, .tko,
    .lane_we, .lane_k, .lane_grp, .lane_wdata, .lane_rdata,
    .busy(stdp_busy), .done(stdp_done)
  );

  // ------------------------------------------------------------- result
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid   <= 1'b0;
      res_cluster <= '0;
      res_time    <= TW'(TMAX);
      res_spiked  <= 1'b0;
    end else begin
      res_valid <= res_latch;
      if (res_latch) begin
        res_cluster <= winner;
        res_time    <= tmin;
        res_spiked  <= spiked;
      end
    end
  end

endmodule
