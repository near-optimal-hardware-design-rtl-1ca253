// snu: synapse unit, the shared pool of multipliers.
//
// NMUL multipliers, each with its own weight memory, multiply the receptive
// field values by their weights.  Switches at the multiplier inputs, set per
// layer, decide which receptor tap feeds which multiplier, so that the same
// pool serves both layer shapes of the reference configuration (Fig. 5):
//   3x3 layers (k=3, P=1, Q=28): multiplier 9q+j takes tap j of receptor 0
//     for every hardware neuron q (the RU output is copied to all HNs);
//     multipliers 252..255 are idle.
//   1x1 layers (k=1, P=16, Q=16): multiplier 16q+p takes the value of
//     receptor lane p for hardware neuron q.
// All weight memories are read at the same address, given by the control
// tag, which moves on by one every W*H clocks (one input-map group).  The pool
// size, the two mappings and the shared weight address follow the paper;
// the exact wiring order, the 8-bit operands and the load port are this
// design's choices.
//
// Timing: products and the tag come out two clocks after in_win/in_tag
// (weight read + input register, then the multiplier register).
// Weight loading: wl_we writes wl_data into memory wl_mul at wl_addr.
module snu
  import nm_pkg::*;
#(
  parameter int unsigned NMUL_P = NMUL,
  parameter int unsigned NLANE  = PMAX,
  parameter int unsigned Q3_P   = Q3,
  parameter int unsigned Q1_P   = Q1,
  parameter int unsigned WDEPTH = 32768,
  localparam int unsigned WAW   = $clog2(WDEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mode_t              mode,
  input  data_t              in_win [NLANE][KK],
  input  tag_t               in_tag,
  output prod_t              prod [NMUL_P],
  output tag_t               out_tag,
  // weight loading
  input  logic               wl_we,
  input  logic [7:0]         wl_mul,
  input  logic [WAW-1:0]     wl_addr,
  input  wgt_t               wl_data
);

  initial assert (Q3_P * KK <= NMUL_P && Q1_P * NLANE <= NMUL_P)
    else $fatal(1, "multiplier pool too small");

  data_t act   [NMUL_P];
  data_t act_q [NMUL_P];
  wgt_t  wgt   [NMUL_P];
  tag_t  tag1;

  // input switches
  always_comb begin
    for (int i = 0; i < NMUL_P; i++) begin
      act[i] = '0;
      if (mode == MODE_3X3) begin
        if (i < int'(Q3_P * KK)) act[i] = in_win[0][i % KK];
      end else begin
        if (i < int'(Q1_P * NLANE)) act[i] = in_win[i % NLANE][KK/2];
      end
    end
  end

  for (genvar i = 0; i < NMUL_P; i++) begin : g_mul
    dp_ram #(.WIDTH(WGT_W), .DEPTH(WDEPTH)) u_wmem (
      .clk, .we(wl_we && wl_mul == 8'(i)), .waddr(wl_addr), .wdata(wl_data),
      .raddr(WAW'(in_tag.waddr)), .rdata(wgt[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= TAG_IDLE; out_tag <= TAG_IDLE;
      for (int i = 0; i < NMUL_P; i++) begin act_q[i] <= '0; prod[i] <= '0; end
    end else begin
      tag1    <= in_tag;
      out_tag <= tag1;
      for (int i = 0; i < NMUL_P; i++) begin
        act_q[i] <= act[i];
        prod[i]  <= act_q[i] * wgt[i];
      end
    end
  end

endmodule
