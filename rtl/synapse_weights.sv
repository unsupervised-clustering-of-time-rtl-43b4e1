// synapse_weights: the K x S synaptic weight array of the TNN column.
//
// Every processing neuron k has one WBITS-bit weight w[k][j] in [0, WMAX]
// per encoding neuron j.  All weights are read in parallel by the neurons
// (`w_all`).  Two write paths exist: a LANES-wide read-modify-write port
// used by the STDP unit (row `lane_k`, lane group `lane_grp`, i.e. synapses
// lane_grp*LANES .. lane_grp*LANES + LANES-1, read combinationally and
// written on the next edge; synapse j is always served by lane j mod LANES,
// so each weight has a single write source per port), and a
// single-weight host port for loading or inspecting weights.  If both write
// the same weight in one cycle, the STDP lane wins.  Lanes past S are
// ignored and read as 0.  Reset sets every weight to W_INIT; the initial
// value is not specified by the method and is this design's choice.
module synapse_weights
  import tnn_pkg::*;
#(
  parameter int unsigned K      = K_DEF,
  parameter int unsigned S      = E_DEF * ELL_DEF,
  parameter int unsigned WBITS  = WBITS_DEF,
  parameter int unsigned W_INIT = 3,
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned KW     = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned JW     = $clog2(S + LANES),
  parameter int unsigned GW     = ((S + LANES - 1) / LANES > 1) ? $clog2((S + LANES - 1) / LANES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WBITS-1:0] w_all [K][S],
  // STDP lanes
  input  logic             lane_we,
  input  logic [KW-1:0]    lane_k,
  input  logic [GW-1:0]    lane_grp,
  input  logic [WBITS-1:0] lane_wdata [LANES],
  output logic [WBITS-1:0] lane_rdata [LANES],
  // host port
  input  logic             host_we,
  input  logic [KW-1:0]    host_k,
  input  logic [JW-1:0]    host_j,
  input  logic [WBITS-1:0] host_wdata,
  output logic [WBITS-1:0] host_rdata
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++)
        for (int j = 0; j < S; j++) w_all[k][j] <= WBITS'(W_INIT);
    end else begin
      if (host_we && 32'(host_k) < K && 32'(host_j) < S)
        w_all[host_k][host_j] <= host_wdata;
      if (lane_we)
        for (int k = 0; k < K; k++)
          for (int j = 0; j < S; j++)
            if (32'(lane_k) == k && 32'(lane_grp) == j / LANES)
              w_all[k][j] <= lane_wdata[j % LANES];
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      lane_rdata[l] = (32'(lane_k) < K && 32'(lane_grp) * LANES + l < S)
                      ? w_all[lane_k][32'(lane_grp) * LANES + l] : '0;
    host_rdata = (32'(host_k) < K && 32'(host_j) < S) ? w_all[host_k][host_j] : '0;
  end

endmodule
