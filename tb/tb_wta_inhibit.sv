// tb_wta_inhibit: self-checking test of 1-WTA lateral inhibition.
// Reference: the earliest spike among neurons in use passes, lowest index
// on ties, all others become T_max; with no spike the winner is the
// neuron with the largest potential (lowest index on ties).
module tb_wta_inhibit;
  localparam int unsigned K = 6, TMAX = 16, VW = 8, TW = 5, KW = 3;
  logic [TW-1:0] tk [K], tko [K];
  logic [VW-1:0] v [K];
  logic [KW:0] k_used;
  logic [KW-1:0] winner;
  logic [TW-1:0] tmin;
  logic spiked;
  int checks = 0, failures = 0, n_tie = 0, n_none = 0;

  wta_inhibit #(.K(K), .TMAX(TMAX), .VW(VW)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ew, et, ku, vm, cnt;
    for (int trial = 0; trial < 5000; trial++) begin
      ku = int'($urandom_range(K - 1)) + 1;
      k_used = (KW+1)'(ku);
      for (int k = 0; k < K; k++) begin
        tk[k] = ($urandom_range(2) == 0) ? TW'(TMAX) : TW'($urandom_range(5) + 10);
        if (trial % 4 == 0) tk[k] = TW'(TMAX);
        v[k]  = VW'($urandom_range(20));
      end
      et = TMAX; ew = 0;
      for (int k = 0; k < ku; k++) if (int'(tk[k]) < et) begin et = int'(tk[k]); ew = k; end
      cnt = 0;
      for (int k = 0; k < ku; k++) if (int'(tk[k]) == et && et < TMAX) cnt++;
      if (cnt > 1) n_tie++;
      if (et == TMAX) begin
        n_none++; vm = -1;
        for (int k = 0; k < ku; k++) if (int'(v[k]) > vm) begin vm = int'(v[k]); ew = k; end
      end
      #1;
      checks++;
      if (int'(winner) != ew || int'(tmin) != et || spiked != (et < TMAX)) begin
        failures++;
        if (failures < 10) $display("trial %0d: winner %0d/%0d tmin %0d/%0d", trial, winner, ew, tmin, et);
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (int'(tko[k]) != ((et < TMAX && k == ew) ? et : TMAX)) failures++;
      end
    end
    checks++;
    if (n_tie == 0 || n_none == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
