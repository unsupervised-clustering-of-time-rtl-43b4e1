// tb_synapse_weights: self-checking test of the weight array.
// Checks the reset value, host writes and reads, STDP lane reads and writes
// by lane group (including a partial last group), lane priority over the host port,
// and the parallel read-out against a reference copy.
module tb_synapse_weights;
  localparam int unsigned K = 3, S = 10, WBITS = 3, LANES = 4, KW = 2, JW = 4, GW = 2;
  logic clk = 0, rst_n = 0;
  logic [WBITS-1:0] w_all [K][S];
  logic lane_we = 0, host_we = 0;
  logic [KW-1:0] lane_k = '0, host_k = '0;
  logic [GW-1:0] lane_grp = '0;
  logic [JW-1:0] host_j = '0;
  logic [WBITS-1:0] lane_wdata [LANES], lane_rdata [LANES];
  logic [WBITS-1:0] host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;
  int ref_w [K][S];

  synapse_weights #(.K(K), .S(S), .WBITS(WBITS), .W_INIT(3), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare_all(string what);
    for (int k = 0; k < K; k++)
      for (int j = 0; j < S; j++) begin
        checks++;
        if (int'(w_all[k][j]) != ref_w[k][j]) begin
          failures++; $display("%s w[%0d][%0d]=%0d exp %0d", what, k, j, w_all[k][j], ref_w[k][j]);
        end
      end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) lane_wdata[l] = '0;
    for (int k = 0; k < K; k++) for (int j = 0; j < S; j++) ref_w[k][j] = 3;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    compare_all("reset");
    // host writes
    for (int n = 0; n < 20; n++) begin
      host_we = 1; host_k = KW'($urandom_range(K-1)); host_j = JW'($urandom_range(S-1));
      host_wdata = WBITS'($urandom_range(7));
      ref_w[host_k][host_j] = int'(host_wdata);
      @(negedge clk);
    end
    host_we = 0;
    compare_all("host");
    for (int n = 0; n < 10; n++) begin
      host_k = KW'($urandom_range(K-1)); host_j = JW'($urandom_range(S-1)); #1;
      checks++; if (int'(host_rdata) != ref_w[host_k][host_j]) failures++;
    end
    // lane sweeps
    for (int k = 0; k < K; k++)
      for (int b = 0; b < S; b += LANES) begin
        lane_k = KW'(k); lane_grp = GW'(b / LANES); #1;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'(lane_rdata[l]) != ((b + l < S) ? ref_w[k][b+l] : 0)) begin
            failures++; $display("lane read k%0d j%0d", k, b + l);
          end
          lane_wdata[l] = WBITS'($urandom_range(7));
          if (b + l < S) ref_w[k][b+l] = int'(lane_wdata[l]);
        end
        lane_we = 1;
        // a host write to the same weight in the same cycle loses
        host_we = 1; host_k = KW'(k); host_j = JW'(b); host_wdata = ~lane_wdata[0];
        @(negedge clk);
        lane_we = 0; host_we = 0;
      end
    compare_all("lanes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
