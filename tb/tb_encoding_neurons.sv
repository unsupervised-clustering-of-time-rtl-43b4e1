// tb_encoding_neurons: self-checking test of the encoding-neuron store.
// Writes random spike times column by column and checks the stored vector
// (index i*E + e), the clear, and that each neuron spikes exactly in the
// tick equal to its spike time and never when it holds T_max.
module tb_encoding_neurons;
  localparam int unsigned E = 4, ELL = 5, TMAX = 16, TW = 5, IW = 3, S = E * ELL;
  logic clk = 0, rst_n = 0, clear = 0, we = 0, fire_en = 0;
  logic [IW-1:0] col = '0;
  logic [TW-1:0] t_in [E];
  logic [TW-1:0] tick = '0;
  logic [TW-1:0] t_out [S];
  logic [S-1:0] spike;
  int checks = 0, failures = 0;
  int ref_t [S];

  encoding_neurons #(.E(E), .ELL(ELL), .TMAX(TMAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt;
    for (int e = 0; e < E; e++) t_in[e] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < S; j++) begin checks++; if (t_out[j] != TW'(TMAX)) failures++; end
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < ELL; i++) begin
        we = 1; col = IW'(i);
        for (int e = 0; e < E; e++) begin
          ref_t[i*E+e] = int'($urandom_range(TMAX));
          t_in[e] = TW'(ref_t[i*E+e]);
        end
        @(negedge clk);
      end
      we = 0;
      for (int j = 0; j < S; j++) begin
        checks++;
        if (int'(t_out[j]) != ref_t[j]) begin failures++; $display("t[%0d] %0d exp %0d", j, t_out[j], ref_t[j]); end
      end
      // spike trains over one forward pass
      for (int j = 0; j < S; j++) begin
        cnt = 0;
        for (int tt = 0; tt < TMAX; tt++) begin
          fire_en = 1; tick = TW'(tt); #1;
          if (spike[j]) begin
            cnt++;
            checks++; if (tt != ref_t[j]) failures++;
          end
        end
        checks++;
        if (cnt != ((ref_t[j] < TMAX) ? 1 : 0)) begin failures++; $display("neuron %0d spiked %0d times", j, cnt); end
      end
      fire_en = 0; #1;
      checks++; if (spike != '0) failures++;
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int j = 0; j < S; j++) begin checks++; if (t_out[j] != TW'(TMAX)) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
