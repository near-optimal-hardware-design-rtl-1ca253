// receptor_unit (RU): P receptors side by side.
//
// The MAU delivers P feature-map values per clock, one per input map of the
// current group.  Each lane p runs through its own receptor, so the RU turns
// P values per clock into k x k x P values per clock and the memories are read
// only once per position.  In the reference configuration P is 16 for 1x1
// layers and 1 for 3x3 layers, so only lane 0 ever needs the k=3 shift rows;
// the other lanes are built as k=1 (bypass) receptors.  N_K3 sets how many
// lanes get the full 3x3 receptor; a bypass lane drives only its centre tap
// and holds the other eight taps at zero.  The lane split is this design's choice;
// the structure (P receptors, one per input lane) follows the paper's Fig. 3.
//
// Interface: as for one receptor, with in_data[p] / out_win[p][j] per lane.
// All lanes share restart, configuration and in_valid, so all lanes move in
// step.  Timing: two clocks, plus W+1 values of fill for k=3 (see receptor).
module receptor_unit
  import nm_pkg::*;
#(
  parameter int unsigned WMAX_P = 300,
  parameter int unsigned NLANE  = PMAX,
  parameter int unsigned N_K3   = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              cfg_k3,
  input  logic [DIM_W-1:0]  cfg_w,
  input  logic [DIM_W-1:0]  cfg_h,
  input  logic              in_valid,
  input  data_t             in_data [NLANE],
  output logic              out_valid,
  output data_t             out_win [NLANE][KK]
);

  logic lane_valid [NLANE];

  for (genvar p = 0; p < NLANE; p++) begin : g_lane
    receptor #(.WMAX_P(WMAX_P), .KMAX_P(p < N_K3 ? 3 : 1)) u_rec (
      .clk, .rst_n, .restart, .cfg_k3, .cfg_w, .cfg_h,
      .in_valid, .in_data(in_data[p]),
      .out_valid(lane_valid[p]), .out_win(out_win[p])
    );
  end

  assign out_valid = lane_valid[0];

endmodule
