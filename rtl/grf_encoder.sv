// grf_encoder: Gaussian receptive-field encoder for one projected value.
//
// Projected value x of column i is encoded by E encoding neurons.  Neuron j
// has a Gaussian of width sigma = gamma (xmax - xmin) / (E - 2) centred at
// mu_j = xmin + ((2j - 3)/2) sigma, and fires at
//     t_j = round(T_max (1 - exp(-((x - mu_j)/sigma)^2 / 2))),
// with t_j = T_max meaning "no spike".  Those formulas are the method's.
//
// Implementation (this design's): the normalised coordinate
//     u = (x - xmin)(E - 2) / (gamma (xmax - xmin))
// is formed by one integer division with UFB fractional bits (truncated
// towards zero), so (x - mu_j)/sigma = u - j + 3/2.  Its magnitude a is
// squared and compared with the T_max thresholds of
// tnn_pkg::grf_a2_threshold; the spike time is the number of thresholds
// reached.  No exponential is evaluated.  A range xmax <= xmin is treated as
// 1 and gamma = 0 as 1/16, so the encoder never divides by zero.  When
// `col_valid` is low every output is T_max (the column is not in use).
//
// Interface and timing: purely combinational; gamma is unsigned Q4.4.
module grf_encoder
  import tnn_pkg::*;
#(
  parameter int unsigned E    = E_DEF,
  parameter int unsigned TMAX = TMAX_DEF,
  parameter int unsigned PW   = XW_DEF + $clog2(L_DEF) + 1,
  parameter int unsigned TW   = $clog2(TMAX + 1)
) (
  input  logic signed [PW-1:0]  x,
  input  logic signed [PW-1:0]  xmin,
  input  logic signed [PW-1:0]  xmax,
  input  logic [GAMMA_W-1:0]    gamma_q,
  input  logic                  col_valid,
  output logic [TW-1:0]         t [E]
);

  localparam int unsigned EW  = $clog2(E + 1);
  localparam int unsigned NW  = PW + 1 + EW + UFB + GAMMA_FB + 1;   // numerator
  localparam int unsigned AW  = UFB + 3;                            // |d| < 8.0
  localparam int unsigned A2W = 2 * AW;

  // a^2 thresholds, index k-1 for k = 1..TMAX
  function automatic logic [A2W:0] th(input int unsigned k);
    longint unsigned v;
    v = grf_a2_threshold(k, TMAX);
    return (v >= (longint'(1) << A2W)) ? {1'b1, {A2W{1'b0}}} : (A2W+1)'(v);
  endfunction

  logic signed [NW-1:0] diff, rng, num, den, u;
  logic [GAMMA_W-1:0]   g;

  always_comb begin
    diff = NW'(x) - NW'(xmin);
    rng  = NW'(xmax) - NW'(xmin);
    if (rng <= 0) rng = NW'(1);
    g    = (gamma_q == '0) ? GAMMA_W'(1) : gamma_q;
    num  = (diff * NW'(E - 2)) <<< (UFB + GAMMA_FB);
    den  = rng * NW'({1'b0, g});
    u    = num / den;
  end

  for (genvar j = 0; j < E; j++) begin : g_neuron
    logic signed [NW-1:0] d;
    logic [NW-1:0]        mag;
    logic [AW-1:0]        a;
    logic [A2W:0]         a2;
    logic [TW-1:0]        cnt;
    always_comb begin
      d   = u - NW'(j << UFB) + NW'(3 << (UFB - 1));
      mag = (d < 0) ? NW'(-d) : NW'(d);
      a   = (mag >= NW'(1 << AW)) ? '1 : AW'(mag);
      a2  = (A2W+1)'(a) * (A2W+1)'(a);
      cnt = '0;
      for (int k = 1; k <= TMAX; k++)
        if (a2 >= th(k)) cnt = cnt + 1'b1;
      t[j] = col_valid ? cnt : TW'(TMAX);
    end
  end

endmodule
