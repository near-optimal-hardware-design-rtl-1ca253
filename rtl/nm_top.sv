// nm_top: neuron-machine CNN engine, top level.
//
// A memory part (MAU + receptor unit) and an array of hardware neurons
// (synapse unit -> dendrite unit -> soma unit) are connected in a ring: the
// memory part supplies, every clock, the k x k x P receptive-field values of
// the current position to all hardware neurons, and the hardware neurons
// write the finished output values of Q output maps back into the memory part,
// where they become the input of the next layer.  The control unit steps
// through the stage operation table, one convolution layer per row, and
// repeats it for every image.  With the default sizes this is the reference
// configuration: 256 multipliers forming 28 HNs of 3x3x1 inputs or 16 HNs of
// 1x1x16 inputs, R=32 feature-map memories, maps up to 300 pixels wide.
//
// Pipeline, in clocks from the memory read of a pixel: MAU read 1, receptor
// 2 (+W+1 values of fill for 3x3), synapse unit 2, dendrite unit 5, soma unit
// 2, then the MAU write.  Nothing stalls; a layer costs
// ceil(C/P)*ceil(F/Q)*W*H clocks plus its fill and drain.
//
// Host side (this design's choice; the paper gives no host interface): the
// host loads the SOT (sot_*), the weights (wl_*), the biases (bl_*) and the
// input image (ext_w*), pulses start, waits for done and reads results with
// ext_r* while the engine is idle.  The soma-unit output stream (hn_*) is
// brought out for post-processing units (softmax, SSD box decoding, NMS),
// which are not part of this RTL.
module nm_top
  import nm_pkg::*;
#(
  parameter int unsigned WMAX_P    = 300,
  parameter int unsigned MAU_DEPTH = 131072,
  parameter int unsigned WDEPTH    = 32768,
  parameter int unsigned NSDEPTH   = 22500,
  parameter int unsigned BDEPTH    = 1024,
  parameter int unsigned SOT_ROWS  = 64,
  localparam int unsigned MW  = $clog2(R),
  localparam int unsigned AW  = $clog2(MAU_DEPTH),
  localparam int unsigned WAW = $clog2(WDEPTH),
  localparam int unsigned BAW = $clog2(BDEPTH),
  localparam int unsigned RAW = $clog2(SOT_ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               auto_repeat,
  output logic               busy,
  output logic               done,
  // stage operation table
  input  logic               sot_we,
  input  logic [RAW-1:0]     sot_waddr,
  input  sot_row_t           sot_wdata,
  // weights and biases
  input  logic               wl_we,
  input  logic [7:0]         wl_mul,
  input  logic [WAW-1:0]     wl_addr,
  input  wgt_t               wl_data,
  input  logic               bl_we,
  input  logic [5:0]         bl_hn,
  input  logic [BAW-1:0]     bl_addr,
  input  acc_t               bl_data,
  // feature-map memories
  input  logic               ext_we,
  input  logic [MW-1:0]      ext_wmem,
  input  logic [AW-1:0]      ext_waddr,
  input  data_t              ext_wdata,
  input  logic               ext_re,
  input  logic [MW-1:0]      ext_rmem,
  input  logic [AW-1:0]      ext_raddr,
  output data_t              ext_rdata,
  // soma-unit output stream, for post-processing
  output logic               hn_valid,
  output logic               hn_last,
  output logic [MAP_W-1:0]   hn_f0,
  output logic [5:0]         hn_nf,
  output logic [OPIX_W-1:0]  hn_opix,
  output data_t              hn_data [QMAX],
  output logic [RAW-1:0]     layer_idx
);

  // SOT / CU
  sot_row_t           row;
  logic               sot_first, sot_next;
  mode_t              mode;
  logic               cfg_k3, cfg_relu, ru_restart, rd_en, layer_end;
  logic [DIM_W-1:0]   cfg_w, cfg_h;
  logic [SHIFT_W-1:0] cfg_shift;
  logic [MADDR_W-1:0] cfg_rd_base, cfg_wr_base;
  logic [PIX_W-1:0]   plane_in, plane_out, rd_pix;
  logic [MAP_W-1:0]   rd_c0;
  tag_t               hn_tag, snu_tag, du_tag, su_tag;

  // datapath
  logic  mau_valid, ru_valid;
  data_t mau_data [PMAX];
  data_t ru_win   [PMAX][KK];
  prod_t prod     [NMUL];
  acc_t  du_acc   [QMAX];
  data_t su_data  [QMAX];

  sot #(.ROWS(SOT_ROWS)) u_sot (
    .clk, .rst_n, .tw_we(sot_we), .tw_addr(sot_waddr), .tw_data(sot_wdata),
    .first(sot_first), .next(sot_next), .row, .row_idx(layer_idx)
  );

  cu u_cu (
    .clk, .rst_n, .start, .auto_repeat, .busy, .done,
    .sot_first, .sot_next, .row,
    .mode, .cfg_k3, .cfg_w, .cfg_h, .cfg_shift, .cfg_relu, .cfg_rd_base, .cfg_wr_base,
    .plane_in, .plane_out, .ru_restart, .rd_en, .rd_c0, .rd_pix,
    .hn_tag, .layer_end
  );

  mau #(.DEPTH(MAU_DEPTH), .NRD(PMAX), .NWR(QMAX)) u_mau (
    .clk, .rst_n,
    .rd_en, .rd_c0, .rd_base(cfg_rd_base), .rd_plane(plane_in), .rd_pix,
    .rd_valid(mau_valid), .rd_data(mau_data),
    .wr_en(su_tag.valid), .wr_f0(su_tag.f0), .wr_nf(su_tag.nf), .wr_base(cfg_wr_base),
    .wr_plane(plane_out), .wr_pix(PIX_W'(su_tag.opix)), .wr_data(su_data),
    .ext_we, .ext_wmem, .ext_waddr, .ext_wdata, .ext_re, .ext_rmem, .ext_raddr, .ext_rdata
  );

  receptor_unit #(.WMAX_P(WMAX_P), .NLANE(PMAX), .N_K3(1)) u_ru (
    .clk, .rst_n, .restart(ru_restart), .cfg_k3, .cfg_w, .cfg_h,
    .in_valid(mau_valid), .in_data(mau_data), .out_valid(ru_valid), .out_win(ru_win)
  );

  snu #(.WDEPTH(WDEPTH)) u_snu (
    .clk, .rst_n, .mode, .in_win(ru_win), .in_tag(hn_tag), .prod, .out_tag(snu_tag),
    .wl_we, .wl_mul, .wl_addr, .wl_data
  );

  du #(.NSDEPTH(NSDEPTH)) u_du (
    .clk, .rst_n, .mode, .in_prod(prod), .in_tag(snu_tag), .out_acc(du_acc), .out_tag(du_tag)
  );

  su #(.BDEPTH(BDEPTH)) u_su (
    .clk, .rst_n, .cfg_shift, .cfg_relu, .in_acc(du_acc), .in_tag(du_tag),
    .out_data(su_data), .out_tag(su_tag),
    .bl_we, .bl_hn, .bl_addr, .bl_data
  );

  assign layer_end = su_tag.last;
  assign hn_valid  = su_tag.valid;
  assign hn_last   = su_tag.last;
  assign hn_f0     = su_tag.f0;
  assign hn_nf     = su_tag.nf;
  assign hn_opix   = su_tag.opix;
  assign hn_data   = su_data;

  // the receptor window and the control tag must enter the synapse unit together
  always @(posedge clk) if (rst_n && hn_tag.valid)
    assert (ru_valid) else $error("control tag without receptor data");

endmodule
