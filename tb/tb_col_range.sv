// tb_col_range: self-checking test of the per-column range store.
// Checks host writes, reset values, and that a calibration pass over random
// data leaves each column's exact minimum and maximum.
module tb_col_range;
  localparam int unsigned ELL = 5, PW = 14, IW = 3;
  logic clk = 0, rst_n = 0;
  logic wr_min = 0, wr_max = 0, cal_clear = 0, cal_en = 0;
  logic [IW-1:0] wr_idx = '0, cal_idx = '0, rd_idx = '0;
  logic signed [PW-1:0] wr_data = '0, cal_x = '0, xmin, xmax;
  int checks = 0, failures = 0;

  col_range #(.ELL(ELL), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mn [ELL], mx [ELL], v;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < ELL; i++) begin
      rd_idx = IW'(i); #1; check(int'(xmin), 0, "reset min"); check(int'(xmax), 0, "reset max");
    end
    // host writes
    for (int i = 0; i < ELL; i++) begin
      @(negedge clk); wr_min = 1; wr_idx = IW'(i); wr_data = PW'(-100 - i);
      @(negedge clk); wr_min = 0; wr_max = 1; wr_data = PW'(200 + 3*i);
      @(negedge clk); wr_max = 0;
    end
    for (int i = 0; i < ELL; i++) begin
      rd_idx = IW'(i); #1; check(int'(xmin), -100 - i, "wr min"); check(int'(xmax), 200 + 3*i, "wr max");
    end
    // calibration
    @(negedge clk); cal_clear = 1; @(negedge clk); cal_clear = 0;
    for (int i = 0; i < ELL; i++) begin mn[i] = 1 << 20; mx[i] = -(1 << 20); end
    for (int s = 0; s < 40; s++)
      for (int i = 0; i < ELL; i++) begin
        v = int'($urandom_range(8000)) - 4000;
        if (v < mn[i]) mn[i] = v;
        if (v > mx[i]) mx[i] = v;
        cal_en = 1; cal_idx = IW'(i); cal_x = PW'(v);
        @(negedge clk);
      end
    cal_en = 0;
    for (int i = 0; i < ELL; i++) begin
      rd_idx = IW'(i); #1; check(int'(xmin), mn[i], "cal min"); check(int'(xmax), mx[i], "cal max");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
