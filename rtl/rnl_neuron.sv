// rnl_neuron: ramp-no-leak integrate-and-fire processing neuron.
//
// Body potential v(t) = sum_j rho(t - t_j, w_j) with the ramp-no-leak
// response rho(t, w) = 0 for t < 0, t for 0 <= t < w, w for t >= w.  The
// neuron fires once, at the first tick t with v(t) >= theta; if that never
// happens before T_max its spike time is T_max.  Those are the method's
// definitions.
//
// Implementation: rho grows by exactly one per tick while 0 <= t - t_j < w_j,
// so v(t+1) = v(t) + #{j : t_j <= t < t_j + w_j}; the neuron keeps v in a
// register and adds that population count once per tick.  Inputs with
// t_j = T_max are silent.
//
// Interface and timing: `clear` zeroes v and re-arms the neuron.  Each cycle
// with `step` high processes tick `tick` (the controller steps 0..T_max-1):
// v is compared with theta first (v holds v(tick)), then advanced to
// v(tick+1).  After T_max steps `spike_t` and `fired` are final and `v`
// holds v(T_max), the end-of-window potential used by lateral inhibition
// when no neuron fired.
module rnl_neuron
  import tnn_pkg::*;
#(
  parameter int unsigned S     = E_DEF * ELL_DEF,
  parameter int unsigned TMAX  = TMAX_DEF,
  parameter int unsigned WBITS = WBITS_DEF,
  parameter int unsigned WMAX  = WMAX_DEF,
  parameter int unsigned TW    = $clog2(TMAX + 1),
  parameter int unsigned VW    = $clog2(S * WMAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             step,
  input  logic [TW-1:0]    tick,
  input  logic [TW-1:0]    tj [S],
  input  logic [WBITS-1:0] w  [S],
  input  logic [VW-1:0]    theta,
  output logic [TW-1:0]    spike_t,
  output logic             fired,
  output logic [VW-1:0]    v
);

  logic [VW-1:0] inc;

  always_comb begin
    inc = '0;
    for (int j = 0; j < S; j++) begin
      if (tj[j] != TW'(TMAX) && tick >= tj[j] &&
          (VW'(tick) - VW'(tj[j])) < VW'(w[j]))
        inc = inc + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v       <= '0;
      fired   <= 1'b0;
      spike_t <= TW'(TMAX);
    end else if (clear) begin
      v       <= '0;
      fired   <= 1'b0;
      spike_t <= TW'(TMAX);
    end else if (step) begin
      v <= v + inc;
      if (!fired && v >= theta) begin
        fired   <= 1'b1;
        spike_t <= tick;
      end
    end
  end

endmodule
