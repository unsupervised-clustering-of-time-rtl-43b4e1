// encoding_neurons: the E*ELL encoding neurons of the signal encoding layer.
//
// Each encoding neuron fires at most once per forward pass, at the spike
// time the receptive-field encoder computed for it; T_max means it stays
// silent.  This block stores those spike times (one column of E per write)
// and, during the forward pass, raises spike[j] in the tick equal to t_j.
// Neuron j = i*E + e belongs to projected value i and receptive field e.
//
// Interface: `clear` sets every spike time to T_max; `we` stores t_in into
// column `col` on the next edge.  `t_out` is the stored vector; `spike` is
// combinational from `tick` and `fire_en`.  Reset clears to T_max.
module encoding_neurons
  import tnn_pkg::*;
#(
  parameter int unsigned E    = E_DEF,
  parameter int unsigned ELL  = ELL_DEF,
  parameter int unsigned TMAX = TMAX_DEF,
  parameter int unsigned TW   = $clog2(TMAX + 1),
  parameter int unsigned IW   = (ELL > 1) ? $clog2(ELL) : 1,
  parameter int unsigned S    = E * ELL
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          we,
  input  logic [IW-1:0] col,
  input  logic [TW-1:0] t_in  [E],
  input  logic          fire_en,
  input  logic [TW-1:0] tick,
  output logic [TW-1:0] t_out [S],
  output logic [S-1:0]  spike
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < S; j++) t_out[j] <= TW'(TMAX);
    end else if (clear) begin
      for (int j = 0; j < S; j++) t_out[j] <= TW'(TMAX);
    end else if (we && 32'(col) < ELL) begin
      for (int e = 0; e < E; e++) t_out[32'(col) * E + e] <= t_in[e];
    end
  end

  always_comb
    for (int j = 0; j < S; j++)
      spike[j] = fire_en && (t_out[j] != TW'(TMAX)) && (t_out[j] == tick);

endmodule
