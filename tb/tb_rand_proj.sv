// tb_rand_proj: self-checking test of the sparse random projection.
// Streams random signals, recomputes every projected sum with a local copy
// of the matrix-generating hash, and checks the sample counter.  It also
// checks that about 1/6, 1/6 and 2/3 of the matrix entries are +1, -1, 0.
module tb_rand_proj;
  localparam int unsigned L = 24, ELL = 6, XW = 8;
  localparam int unsigned PW = XW + $clog2(L) + 1;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [XW-1:0] x = '0;
  logic signed [PW-1:0] acc [ELL];
  logic [$clog2(L+1)-1:0] n_count;
  int checks = 0, failures = 0;

  rand_proj #(.L(L), .ELL(ELL), .XW(XW), .PROJ_SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  function automatic int coef(logic [31:0] s, int n, int i);
    logic [31:0] v; int c;
    v = s ^ (32'(n) * 32'h9E3779B1) ^ (32'(i) * 32'h85EBCA77);
    v = v ^ (v >> 15); v = v * 32'h2C1B3C6D;
    v = v ^ (v >> 12); v = v * 32'h297A2D39;
    v = v ^ (v >> 15);
    c = (int'(v[15:0]) * 6) >>> 16;
    return (c == 0) ? 1 : (c == 1) ? -1 : 0;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sig [L];
    int exp_acc;
    int npos, nneg, nzero;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int n = 0; n < L; n++) begin
        sig[n] = (trial == 0) ? 127 : (trial == 1) ? -128 : int'($urandom_range(255)) - 128;
        x = XW'(sig[n]); in_valid = 1;
        @(negedge clk);
        // one idle cycle now and then: nothing must be accumulated
        if (n % 7 == 3) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (int'(n_count) != L) begin failures++; $display("n_count %0d", n_count); end
      for (int i = 0; i < ELL; i++) begin
        exp_acc = 0;
        for (int n = 0; n < L; n++) exp_acc += coef(SEED, n, i) * sig[n];
        checks++;
        if (int'(acc[i]) != exp_acc) begin
          failures++;
          $display("trial %0d col %0d: got %0d exp %0d", trial, i, acc[i], exp_acc);
        end
      end
    end
    // distribution of the ternary entries
    npos = 0; nneg = 0; nzero = 0;
    for (int n = 0; n < 300; n++)
      for (int i = 0; i < 40; i++)
        case (coef(SEED, n, i)) 1: npos++; -1: nneg++; default: nzero++; endcase
    checks++;
    if (npos < 1800 || npos > 2200 || nneg < 1800 || nneg > 2200) begin
      failures++; $display("distribution %0d %0d %0d", npos, nneg, nzero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
