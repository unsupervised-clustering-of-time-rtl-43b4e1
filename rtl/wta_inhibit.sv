// wta_inhibit: 1-winner-take-all lateral inhibition of the TNN column.
//
// Among the neurons in use (index < k_used) the earliest output spike
// passes and all others are suppressed to T_max; on a tie the lowest index
// wins.  If no neuron fired, every output stays T_max and the neuron with
// the largest end-of-window body potential is reported as the predicted
// cluster (lowest index on a tie of potentials, which is this design's
// choice).  `spiked` tells which of the two cases applies.
//
// Interface and timing: purely combinational.
module wta_inhibit
  import tnn_pkg::*;
#(
  parameter int unsigned K    = K_DEF,
  parameter int unsigned TMAX = TMAX_DEF,
  parameter int unsigned VW   = $clog2(E_DEF * ELL_DEF * WMAX_DEF + 1),
  parameter int unsigned TW   = $clog2(TMAX + 1),
  parameter int unsigned KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic [TW-1:0]  tk  [K],
  input  logic [VW-1:0]  v   [K],
  input  logic [KW:0]    k_used,
  output logic [TW-1:0]  tko [K],
  output logic [KW-1:0]  winner,
  output logic [TW-1:0]  tmin,
  output logic           spiked
);

  logic [KW-1:0] first_idx, vmax_idx;
  logic [VW-1:0] vmax;

  always_comb begin
    tmin      = TW'(TMAX);
    first_idx = '0;
    vmax      = '0;
    vmax_idx  = '0;
    for (int k = 0; k < K; k++) begin
      if (k < 32'(k_used)) begin
        if (tk[k] < tmin) begin
          tmin      = tk[k];
          first_idx = KW'(k);
        end
        if (v[k] > vmax) begin
          vmax     = v[k];
          vmax_idx = KW'(k);
        end
      end
    end
    spiked = (tmin != TW'(TMAX));
    winner = spiked ? first_idx : vmax_idx;
    for (int k = 0; k < K; k++)
      tko[k] = (spiked && KW'(k) == first_idx) ? tk[k] : TW'(TMAX);
  end

endmodule
