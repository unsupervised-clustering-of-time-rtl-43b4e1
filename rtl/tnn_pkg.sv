// tnn_pkg: constants, types and small pure functions shared by the
// temporal-neural-network (TNN) time-series clustering processor.
//
// Default sizes are those of the largest network the design must hold
// (a 270-sample signal, 25 clusters): E = 8 encoding neurons per projected
// value, ell = floor(L/8) = 33 projected values, so E*ell = 264 synapses per
// neuron.  T_max = 16 and w_max = 7 with 3-bit weights follow the source
// method; everything else here (fixed-point formats, probability encoding,
// configuration map) is this implementation's own choice.
package tnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned E_DEF     = 8;    // encoding neurons per value
  localparam int unsigned L_DEF     = 270;  // maximum raw signal length
  localparam int unsigned ELL_DEF   = 33;   // projected values, floor(L/8)
  localparam int unsigned K_DEF     = 25;   // processing neurons = clusters
  localparam int unsigned TMAX_DEF  = 16;   // exclusive bound on spike times
  localparam int unsigned WMAX_DEF  = 7;    // maximum synaptic weight
  localparam int unsigned WBITS_DEF = 3;    // weight resolution
  localparam int unsigned XW_DEF    = 8;    // raw sample width (signed)
  localparam int unsigned LANES_DEF = 8;    // synapses updated per STDP cycle

  // Fixed point of the normalised receptive-field coordinate u = (x-xmin)/sigma
  localparam int unsigned UFB       = 6;    // fractional bits of u
  // gamma (receptive-field width scale) is unsigned Q4.4
  localparam int unsigned GAMMA_W   = 8;
  localparam int unsigned GAMMA_FB  = 4;

  // Bernoulli probabilities are 16-bit fractions p/65536, except that the
  // all-ones code means "always one".
  localparam int unsigned PROB_W    = 16;
  typedef logic [PROB_W-1:0] prob_t;

  // --------------------------------------------------- configuration map
  typedef enum logic [3:0] {
    CFG_MODE   = 4'd0,   // bit0 learn enable, bit1 calibrate
    CFG_THETA  = 4'd1,   // firing threshold
    CFG_GAMMA  = 4'd2,   // Q4.4 width scale
    CFG_PI_S   = 4'd3,
    CFG_PI_C   = 4'd4,
    CFG_PI_B   = 4'd5,
    CFG_PI_MIN = 4'd6,
    CFG_SEED   = 4'd7,   // writing reseeds the STDP random generators
    CFG_LEN    = 4'd8,   // samples per signal
    CFG_ELL    = 4'd9,   // projected values in use
    CFG_K      = 4'd10,  // processing neurons in use
    CFG_CAL_CLR= 4'd11   // writing starts a fresh min/max calibration
  } cfg_reg_e;
  // cfg_addr[15:12]: 0 = register above, 1 = xmin[i], 2 = xmax[i] (i = addr[11:0])
  localparam logic [3:0] CFG_SPACE_REG  = 4'd0;
  localparam logic [3:0] CFG_SPACE_XMIN = 4'd1;
  localparam logic [3:0] CFG_SPACE_XMAX = 4'd2;

  typedef enum logic [2:0] {
    ST_IDLE, ST_PROJ, ST_ENC, ST_FIRE, ST_WTA, ST_STDP
  } tnn_state_e;

  // ------------------------------------------------------------ functions
  // Bernoulli draw: r uniform on [0, 2^16), one with probability p/2^16,
  // and always one for p = all-ones.
  function automatic logic bern(input prob_t r, input prob_t p);
    return (p == '1) || (r < p);
  endfunction

  // P[S_P(w)=1] = (w/wmax)(2 - w/wmax) as a probability code.
  function automatic prob_t sp_prob(input int unsigned w, input int unsigned wmax);
    longint unsigned v;
    v = (longint'(w) * (longint'(2*wmax) - longint'(w)) * 65536) / longint'(wmax*wmax);
    return (v >= 65535) ? '1 : prob_t'(v);
  endfunction

  // P[S_N(w)=1] = (1 - w/wmax)(1 + w/wmax) as a probability code.
  function automatic prob_t sn_prob(input int unsigned w, input int unsigned wmax);
    longint unsigned v;
    v = (longint'(wmax*wmax - w*w) * 65536) / longint'(wmax*wmax);
    return (v >= 65535) ? '1 : prob_t'(v);
  endfunction

  // Receptive-field spike-time thresholds.  With a = |x - mu|/sigma the
  // encoder emits t = round(T_max (1 - exp(-a^2/2))), which is the number
  // of k in 1..T_max with a^2 >= -2 ln(1 - (2k-1)/(2 T_max)).  This returns
  // that bound for a^2 held with 2*UFB fractional bits, rounded up.  It is
  // evaluated with integers only: -2 ln(D/N) = 4 atanh(z), z = (N-D)/(N+D),
  // N = 2 T_max, D = 2 T_max - 2k + 1, summing the atanh series
  // z + z^3/3 + z^5/5 + ... in 2^-30 fixed point.
  function automatic longint unsigned grf_a2_threshold(input int unsigned k,
                                                      input int unsigned tmax);
    longint n, d, z, z2, term, sum;
    n    = 2 * longint'(tmax);
    d    = 2 * longint'(tmax) - 2 * longint'(k) + 1;
    z    = ((n - d) <<< 30) / (n + d);
    z2   = (z * z) >>> 30;
    term = z;
    sum  = 0;
    for (int m = 0; m < 600; m++) begin
      sum  += term / (2 * m + 1);
      term  = (term * z2) >>> 30;
    end
    return longint'((sum * 4 * (longint'(1) <<< (2 * UFB)) + (longint'(1) <<< 30) - 1) >>> 30);
  endfunction

  // Counter-based generator of the sparse projection matrix P.
  // Entry P[n][i] is +1 (prob. 1/6), -1 (1/6) or 0 (2/3); the factor sqrt(3)
  // of the ternary projection is left out, since the encoder normalises each
  // column by its own range.
  function automatic logic [31:0] proj_hash(input logic [31:0] seed,
                                            input logic [31:0] n,
                                            input logic [31:0] i);
    logic [31:0] v;
    v = seed ^ (n * 32'h9E37_79B1) ^ (i * 32'h85EB_CA77);
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    v = v * 32'h297A_2D39;
    v = v ^ (v >> 15);
    return v;
  endfunction

  // Returns +1, -1 or 0 as a 2-bit signed value.
  function automatic logic signed [1:0] proj_coef(input logic [31:0] seed,
                                                  input logic [31:0] n,
                                                  input logic [31:0] i);
    logic [31:0] h;
    logic [18:0] c;   // (h[15:0] * 6) >> 16 lies in 0..5
    h = proj_hash(seed, n, i);
    c = 19'(h[15:0]) * 19'd6;
    case (c[18:16])
      3'd0:    return 2'sb01;
      3'd1:    return 2'sb11;
      default: return 2'sb00;
    endcase
  endfunction

endpackage
