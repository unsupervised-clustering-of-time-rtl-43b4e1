// tb_grf_encoder: self-checking test of the Gaussian receptive-field encoder.
// Reference: t_j = round(T_max (1 - exp(-a^2/2))) evaluated in floating
// point, with a = |u - j + 3/2| and u = (x - xmin)(E-2)/(gamma (xmax - xmin))
// taken at the encoder's 1/64 resolution (truncated towards zero).  Every
// output must match exactly; unused columns must give T_max.
module tb_grf_encoder;
  localparam int unsigned E = 8, TMAX = 16, PW = 18, TW = 5;
  logic signed [PW-1:0] x, xmin, xmax;
  logic [7:0] gamma_q;
  logic col_valid;
  logic [TW-1:0] t [E];
  int checks = 0, failures = 0, spikes = 0, silent = 0;

  grf_encoder #(.E(E), .TMAX(TMAX), .PW(PW)) dut (.*);

  function automatic int ref_t(int xv, int mn, int mx, int g, int j);
    longint num, den, uq;
    real a, f;
    int r;
    r   = (mx - mn <= 0) ? 1 : mx - mn;
    num = longint'(xv - mn) * (E - 2) * 1024;   // 2^(6+4)
    den = longint'(r) * g;
    uq  = num / den;                             // truncation towards zero
    a   = real'(uq) / 64.0 - real'(j) + 1.5;
    f   = $exp(-0.5 * a * a);
    return int'($floor(real'(TMAX) * (1.0 - f) + 0.5));
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mn, mx, xv, g, e;
    for (int trial = 0; trial < 3000; trial++) begin
      mn = int'($urandom_range(2000)) - 1000;
      mx = mn + int'($urandom_range(3000)) + 1;
      xv = mn - 100 + int'($urandom_range(mx - mn + 200));
      g  = (trial % 3 == 0) ? 16 : int'($urandom_range(40)) + 4;
      x = PW'(xv); xmin = PW'(mn); xmax = PW'(mx); gamma_q = 8'(g); col_valid = 1;
      #1;
      for (int j = 0; j < E; j++) begin
        e = ref_t(xv, mn, mx, g, j);
        checks++;
        if (int'(t[j]) != e) begin
          failures++;
          if (failures < 10) $display("x=%0d [%0d,%0d] g=%0d j=%0d got %0d exp %0d", xv, mn, mx, g, j, t[j], e);
        end
        if (e < TMAX) spikes++; else silent++;
      end
    end
    // a value at xmin with gamma = 1: neuron 1 is centred half a width below
    // and neuron 2 half a width above, so both give round(16(1-e^-1/8)) = 2
    x = 0; xmin = 0; xmax = 600; gamma_q = 16; col_valid = 1; #1;
    checks++; if (t[1] != 2 || t[2] != 2) begin failures++; $display("centre %0d %0d", t[1], t[2]); end
    checks++; if (t[7] != 16) begin failures++; $display("far neuron %0d", t[7]); end
    col_valid = 0; #1;
    for (int j = 0; j < E; j++) begin
      checks++; if (t[j] != TW'(TMAX)) failures++;
    end
    checks++;
    if (spikes == 0 || silent == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
