// rand_proj: sparse random projection of a streamed signal.
//
// Reduces an L-sample signal to ELL values, x~_i = sum_n x[n] * P[n][i],
// where P is a sparse ternary matrix whose entries are +1, 0 or -1 with
// probabilities 1/6, 2/3 and 1/6 (the Achlioptas projection the method
// uses; its common factor sqrt(3) is dropped because the receptive-field
// encoder that follows normalises every column by its own range, so a
// global scale cancels).
//
// P is not stored: entry P[n][i] is recomputed from a fixed hash of
// (PROJ_SEED, n, i) each time sample n arrives, so the same matrix is
// applied to every signal.  The hash is this design's choice; the method
// only asks for a fixed random matrix.
//
// Interface: pulse `clear` before a signal to zero the accumulators and the
// sample counter; then each cycle with `in_valid` high accumulates sample
// `x` (signed, XW bits) into all ELL sums in parallel.  `acc` is valid the
// cycle after the last sample.  One sample per cycle, no stall.
module rand_proj
  import tnn_pkg::*;
#(
  parameter int unsigned L         = L_DEF,
  parameter int unsigned ELL       = ELL_DEF,
  parameter int unsigned XW        = XW_DEF,
  parameter int unsigned PW        = XW + $clog2(L) + 1,
  parameter logic [31:0] PROJ_SEED = 32'h5EED_0001
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       in_valid,
  input  logic signed [XW-1:0]       x,
  output logic signed [PW-1:0]       acc [ELL],
  output logic [$clog2(L+1)-1:0]     n_count
);

  logic signed [PW-1:0] xs;
  assign xs = PW'(x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_count <= '0;
      for (int i = 0; i < ELL; i++) acc[i] <= '0;
    end else if (clear) begin
      n_count <= '0;
      for (int i = 0; i < ELL; i++) acc[i] <= '0;
    end else if (in_valid) begin
      n_count <= n_count + 1'b1;
      for (int i = 0; i < ELL; i++) begin
        case (proj_coef(PROJ_SEED, 32'(n_count), 32'(i)))
          2'sb01:  acc[i] <= acc[i] + xs;
          2'sb11:  acc[i] <= acc[i] - xs;
          default: acc[i] <= acc[i];
        endcase
      end
    end
  end

endmodule
