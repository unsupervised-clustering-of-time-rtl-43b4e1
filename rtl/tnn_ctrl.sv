// tnn_ctrl: configuration registers and per-signal sequencer.
//
// Registers (written through cfg_we/cfg_addr/cfg_wdata, map in tnn_pkg):
// mode (learn enable, calibrate), firing threshold theta, receptive-field
// scale gamma, the four STDP probabilities, the STDP seed, and the sizes in
// use (signal length, projected values, neurons), which let one instance
// serve any network up to its parameters.  Writes to the xmin/xmax spaces
// are decoded into write strobes for the column range store.
//
// Sequence for one signal (the order is the method's; cycle-level timing is
// this design's):
//   IDLE  waits for s_valid and clears the projection accumulators;
//   PROJ  accepts cfg_len samples, one per cycle with s_valid && s_ready;
//   ENC   visits projected value 0..ELL-1, one per cycle: in calibrate mode
//         it updates the column ranges and then returns to IDLE, otherwise
//         it encodes the value into spike times and clears the neurons;
//   FIRE  steps the neurons through ticks 0..T_max-1;
//   WTA   latches the lateral-inhibition result (res_latch);
//   STDP  if learning is on, starts the STDP sweep and waits for stdp_done.
// Latency from the last sample to the result is ELL + T_max + 1 cycles;
// with learning the next signal is accepted k_used*ceil(S/LANES) cycles
// later.  Configuration writes while busy take effect at once and are the
// host's responsibility.
module tnn_ctrl
  import tnn_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned ELL   = ELL_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned TMAX  = TMAX_DEF,
  parameter int unsigned PW    = XW_DEF + $clog2(L_DEF) + 1,
  parameter int unsigned VW    = $clog2(E_DEF * ELL_DEF * WMAX_DEF + 1),
  parameter int unsigned TW    = $clog2(TMAX + 1),
  parameter int unsigned IW    = (ELL > 1) ? $clog2(ELL) : 1,
  parameter int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned NW    = $clog2(L + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration bus
  input  logic                 cfg_we,
  input  logic [15:0]          cfg_addr,
  input  logic [31:0]          cfg_wdata,
  // configuration outputs
  output logic                 learn_en,
  output logic                 calib_en,
  output logic [VW-1:0]        theta,
  output logic [GAMMA_W-1:0]   gamma_q,
  output prob_t                pi_s,
  output prob_t                pi_c,
  output prob_t                pi_b,
  output prob_t                pi_min,
  output logic [31:0]          seed,
  output logic                 seed_load,
  output logic [NW-1:0]        sig_len,
  output logic [IW:0]          ell_used,
  output logic [KW:0]          k_used,
  output logic                 cal_clear,
  output logic                 rng_wr_min,
  output logic                 rng_wr_max,
  output logic [IW-1:0]        rng_wr_idx,
  output logic signed [PW-1:0] rng_wr_data,
  // sample stream
  input  logic                 s_valid,
  output logic                 s_ready,
  // sequencing
  output tnn_state_e           state,
  output logic                 proj_clear,
  output logic                 proj_valid,
  output logic [IW-1:0]        enc_col,
  output logic                 enc_we,
  output logic                 cal_en,
  output logic                 col_valid,
  output logic                 neur_clear,
  output logic                 fire_step,
  output logic [TW-1:0]        tick,
  output logic                 res_latch,
  output logic                 stdp_start,
  input  logic                 stdp_done,
  output logic                 busy
);

  logic [NW-1:0] n_acc;

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      learn_en  <= 1'b0;
      calib_en  <= 1'b0;
      theta     <= VW'(1);
      gamma_q   <= GAMMA_W'(1 << GAMMA_FB);    // gamma = 1.0
      pi_s      <= '0;
      pi_c      <= '0;
      pi_b      <= '0;
      pi_min    <= '0;
      seed      <= 32'h1;
      sig_len   <= NW'(L);
      ell_used  <= (IW+1)'(ELL);
      k_used    <= (KW+1)'(K);
    end else if (cfg_we && cfg_addr[15:12] == CFG_SPACE_REG) begin
      case (cfg_reg_e'(cfg_addr[3:0]))
        CFG_MODE:   {calib_en, learn_en} <= cfg_wdata[1:0];
        CFG_THETA:  theta   <= VW'(cfg_wdata);
        CFG_GAMMA:  gamma_q <= GAMMA_W'(cfg_wdata);
        CFG_PI_S:   pi_s    <= prob_t'(cfg_wdata);
        CFG_PI_C:   pi_c    <= prob_t'(cfg_wdata);
        CFG_PI_B:   pi_b    <= prob_t'(cfg_wdata);
        CFG_PI_MIN: pi_min  <= prob_t'(cfg_wdata);
        CFG_SEED:   seed    <= cfg_wdata;
        CFG_LEN:    sig_len <= (32'(cfg_wdata) > L || cfg_wdata == 0) ? NW'(L) : NW'(cfg_wdata);
        CFG_ELL:    ell_used <= (32'(cfg_wdata) > ELL) ? (IW+1)'(ELL) : (IW+1)'(cfg_wdata);
        CFG_K:      k_used  <= (32'(cfg_wdata) > K) ? (KW+1)'(K) : (KW+1)'(cfg_wdata);
        default: ;
      endcase
    end
  end

  wire reg_wr = cfg_we && cfg_addr[15:12] == CFG_SPACE_REG;
  assign seed_load   = reg_wr && cfg_addr[3:0] == CFG_SEED;
  assign cal_clear   = reg_wr && cfg_addr[3:0] == CFG_CAL_CLR;
  assign rng_wr_min  = cfg_we && cfg_addr[15:12] == CFG_SPACE_XMIN;
  assign rng_wr_max  = cfg_we && cfg_addr[15:12] == CFG_SPACE_XMAX;
  assign rng_wr_idx  = IW'(cfg_addr[11:0]);
  assign rng_wr_data = PW'(signed'(cfg_wdata));

  // ---------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      n_acc   <= '0;
      enc_col <= '0;
      tick    <= '0;
    end else begin
      case (state)
        ST_IDLE: if (s_valid) begin
          state <= ST_PROJ;
          n_acc <= '0;
        end
        ST_PROJ: if (s_valid) begin
          n_acc <= n_acc + 1'b1;
          if (n_acc + 1'b1 >= sig_len) begin
            state   <= ST_ENC;
            enc_col <= '0;
          end
        end
        ST_ENC: begin
          if (32'(enc_col) + 1 >= ELL) begin
            enc_col <= '0;
            tick    <= '0;
            state   <= calib_en ? ST_IDLE : ST_FIRE;
          end else begin
            enc_col <= enc_col + 1'b1;
          end
        end
        ST_FIRE: begin
          if (32'(tick) + 1 >= TMAX) state <= ST_WTA;
          else                       tick  <= tick + 1'b1;
        end
        ST_WTA:  state <= learn_en ? ST_STDP : ST_IDLE;
        ST_STDP: if (stdp_done) state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    s_ready    = (state == ST_PROJ);
    proj_clear = (state == ST_IDLE) && s_valid;
    proj_valid = (state == ST_PROJ) && s_valid;
    col_valid  = (32'(enc_col) < 32'(ell_used));
    enc_we     = (state == ST_ENC) && !calib_en;
    cal_en     = (state == ST_ENC) && calib_en && col_valid;
    neur_clear = (state == ST_ENC) && (enc_col == '0);
    fire_step  = (state == ST_FIRE);
    res_latch  = (state == ST_WTA);
    stdp_start = (state == ST_WTA) && learn_en;
    busy       = (state != ST_IDLE);
  end

  // A sample is only taken while the sequencer is collecting one.
  a_ready_only_in_proj: assert property (@(posedge clk) disable iff (!rst_n)
    proj_valid |-> state == ST_PROJ);
  // Every forward pass lasts exactly T_max steps.
  a_fire_ticks: assert property (@(posedge clk) disable iff (!rst_n)
    fire_step |-> 32'(tick) < TMAX);

endmodule
