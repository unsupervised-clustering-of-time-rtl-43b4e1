// col_range: per-column range store of the receptive-field encoder.
//
// The Gaussian receptive fields of projected value i are placed using the
// minimum and maximum of column i over the data set.  This block holds those
// ELL (xmin, xmax) pairs.  They can be written by the host, or learned in a
// calibration pass: `cal_clear` sets every xmin to the largest and every
// xmax to the smallest PW-bit value, and afterwards each `cal_en` cycle
// folds value `cal_x` into column `cal_idx` (running min and max).  Feeding
// the whole data set through once in calibration mode therefore yields the
// column extremes the method asks for.  Calibration is this design's way of
// obtaining them in hardware; the method computes them offline.
//
// Interface: host write ports take effect on the next edge; calibration
// updates take effect on the next edge; `rd_idx` selects the pair shown on
// `xmin`/`xmax` combinationally.  Reset clears both to zero.
module col_range
  import tnn_pkg::*;
#(
  parameter int unsigned ELL = ELL_DEF,
  parameter int unsigned PW  = XW_DEF + $clog2(L_DEF) + 1,
  parameter int unsigned IW  = (ELL > 1) ? $clog2(ELL) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host writes
  input  logic                 wr_min,
  input  logic                 wr_max,
  input  logic [IW-1:0]        wr_idx,
  input  logic signed [PW-1:0] wr_data,
  // calibration
  input  logic                 cal_clear,
  input  logic                 cal_en,
  input  logic [IW-1:0]        cal_idx,
  input  logic signed [PW-1:0] cal_x,
  // read
  input  logic [IW-1:0]        rd_idx,
  output logic signed [PW-1:0] xmin,
  output logic signed [PW-1:0] xmax
);

  localparam logic signed [PW-1:0] POS_MAX = {1'b0, {(PW-1){1'b1}}};
  localparam logic signed [PW-1:0] NEG_MIN = {1'b1, {(PW-1){1'b0}}};

  logic signed [PW-1:0] mins [ELL];
  logic signed [PW-1:0] maxs [ELL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ELL; i++) begin
        mins[i] <= '0;
        maxs[i] <= '0;
      end
    end else if (cal_clear) begin
      for (int i = 0; i < ELL; i++) begin
        mins[i] <= POS_MAX;
        maxs[i] <= NEG_MIN;
      end
    end else begin
      if (cal_en && 32'(cal_idx) < ELL) begin
        if (cal_x < mins[cal_idx]) mins[cal_idx] <= cal_x;
        if (cal_x > maxs[cal_idx]) maxs[cal_idx] <= cal_x;
      end
      if (wr_min && 32'(wr_idx) < ELL) mins[wr_idx] <= wr_data;
      if (wr_max && 32'(wr_idx) < ELL) maxs[wr_idx] <= wr_data;
    end
  end

  assign xmin = (32'(rd_idx) < ELL) ? mins[rd_idx] : '0;
  assign xmax = (32'(rd_idx) < ELL) ? maxs[rd_idx] : '0;

endmodule
