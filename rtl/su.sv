// su: soma unit of the hardware neurons.
//
// Turns each finished sum of the dendrite unit into a feature-map value of
// the next layer: add the bias of the output map, apply the activation
// function, and re-quantise to the data width.  The order bias, activation
// follows the paper (Sec. III-D, Fig. 2).  The number formats are this design's
// choice, because the paper gives none: the sum and the bias are 32-bit
// integers, the result is (sum + bias) arithmetically shifted right by
// cfg_shift and saturated to 8 bits; the activation is ReLU when cfg_relu is
// set (and the saturation bounds it at 127, close to the ReLU6 of MobileNet),
// identity otherwise.  The pooling stage the paper lists after the
// activation is not built (see the documentation).
//
// Bias memories: one per HN, read at tag.baddr, which the control unit steps
// once per group of output maps.  Loaded through bl_* (memory bl_hn, word
// bl_addr).  Timing: out_data/out_tag two clocks after in_acc/in_tag.
module su
  import nm_pkg::*;
#(
  parameter int unsigned QMAX_P = QMAX,
  parameter int unsigned BDEPTH = 1024,
  localparam int unsigned BAW   = $clog2(BDEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] cfg_shift,
  input  logic               cfg_relu,
  input  acc_t               in_acc [QMAX_P],
  input  tag_t               in_tag,
  output data_t              out_data [QMAX_P],
  output tag_t               out_tag,
  // bias loading
  input  logic               bl_we,
  input  logic [5:0]         bl_hn,
  input  logic [BAW-1:0]     bl_addr,
  input  acc_t               bl_data
);

  localparam acc_t DMAX = acc_t'(2**(DATA_W-1) - 1);
  localparam acc_t DMIN = -acc_t'(2**(DATA_W-1));

  acc_t bias  [QMAX_P];
  acc_t acc_q [QMAX_P];
  tag_t tag1;

  for (genvar q = 0; q < QMAX_P; q++) begin : g_bias
    dp_ram #(.WIDTH(ACC_W), .DEPTH(BDEPTH)) u_bmem (
      .clk, .we(bl_we && bl_hn == 6'(q)), .waddr(bl_addr), .wdata(bl_data),
      .raddr(BAW'(in_tag.baddr)), .rdata(bias[q])
    );
  end

  function automatic data_t soma(acc_t s, acc_t b, logic [SHIFT_W-1:0] sh, logic relu);
    acc_t v = (s + b) >>> sh;
    if (relu && v < 0) v = 0;
    if (v > DMAX) v = DMAX;
    if (v < DMIN) v = DMIN;
    return data_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= TAG_IDLE; out_tag <= TAG_IDLE;
      for (int q = 0; q < QMAX_P; q++) begin acc_q[q] <= '0; out_data[q] <= '0; end
    end else begin
      tag1    <= in_tag;
      out_tag <= tag1;
      for (int q = 0; q < QMAX_P; q++) begin
        acc_q[q]    <= in_acc[q];
        out_data[q] <= soma(acc_q[q], bias[q], cfg_shift, cfg_relu);
      end
    end
  end

endmodule
