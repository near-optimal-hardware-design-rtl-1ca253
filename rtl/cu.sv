// cu: control unit.
//
// Runs the network held in the stage operation table (SOT), one row (one
// convolution layer) after another, without any processor.  For a layer it
//   1. derives from the row the layer shape (k, P, Q), the numbers of input
//      and output map groups ceil(C/P) and ceil(F/Q), the map planes and the
//      output size for stride 1 or 2;
//   2. runs a read scan that addresses the MAU: input maps c0..c0+P-1 at
//      pixel y*W+x, every clock, followed, for k=3, by W+1 flush reads that
//      push the last windows out of the receptor;
//   3. starts, D clocks later, a second identical scan whose state becomes
//      the control tag that travels beside the data through the hardware
//      neurons, D being the latency from a memory read to the matching
//      receptor window (3 clocks, plus W+1 for k=3).  The tag carries the
//      Netsum address (output pixel), the weight address (steps by one per
//      W*H clocks and keeps counting over the whole inference), the bias
//      address, the group of output maps and first/last-group flags;
//   4. waits until the tag marked last leaves the soma unit, then moves on.
// After the last row it raises done and, if auto_repeat is set, starts
// again from row 0 for the next image.
//
// The counter-based addressing, the SOT rows, the single weight address
// stepping every W*H clocks, the delayed control and the restart at row 0
// follow the paper (Stored-Program Control Scheme).  The tag format, the
// way stride 2 is done (every position is computed, only even x and y are
// kept) and the handshake (start/done) are this design's choices.
module cu
  import nm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               auto_repeat,
  output logic               busy,
  output logic               done,
  // SOT
  output logic               sot_first,
  output logic               sot_next,
  input  sot_row_t           row,
  // static layer configuration
  output mode_t              mode,
  output logic               cfg_k3,
  output logic [DIM_W-1:0]   cfg_w,
  output logic [DIM_W-1:0]   cfg_h,
  output logic [SHIFT_W-1:0] cfg_shift,
  output logic               cfg_relu,
  output logic [MADDR_W-1:0] cfg_rd_base,
  output logic [MADDR_W-1:0] cfg_wr_base,
  output logic [PIX_W-1:0]   plane_in,
  output logic [PIX_W-1:0]   plane_out,
  // receptor unit
  output logic               ru_restart,
  // MAU read
  output logic               rd_en,
  output logic [MAP_W-1:0]   rd_c0,
  output logic [PIX_W-1:0]   rd_pix,
  // hardware neurons
  output tag_t               hn_tag,
  input  logic               layer_end
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_SETUP, S_RUN, S_DRAIN} state_t;
  state_t state;

  sot_row_t            cur;
  logic [4:0]          p_cur;     // P: 1 or 16
  logic [5:0]          q_cur;     // Q: 28 or 16
  logic [MAP_W-1:0]    n_cg, n_fg;
  logic [DIM_W-1:0]    w_out;
  logic                s2;
  logic [DIM_W+1:0]    delay_cnt, flush_cnt;
  logic [WADDR_W-1:0]  wbase;
  logic [BADDR_W-1:0]  bbase;
  logic                rs_start, hs_start;

  // read scan and HN scan
  logic rs_active, rs_last, hs_active, hs_last;
  logic [DIM_W-1:0] rs_x, rs_y, hs_x, hs_y;
  logic [PIX_W-1:0] rs_pix, hs_pix;
  logic [MAP_W-1:0] rs_cg, rs_fg, hs_cg, hs_fg;

  scan_seq u_rs (.clk, .rst_n, .start(rs_start), .w(cur.w), .h(cur.h), .n_cg, .n_fg,
                 .active(rs_active), .x(rs_x), .y(rs_y), .pix(rs_pix), .cg(rs_cg), .fg(rs_fg),
                 .last(rs_last));
  scan_seq u_hs (.clk, .rst_n, .start(hs_start), .w(cur.w), .h(cur.h), .n_cg, .n_fg,
                 .active(hs_active), .x(hs_x), .y(hs_y), .pix(hs_pix), .cg(hs_cg), .fg(hs_fg),
                 .last(hs_last));

  assign mode        = cur.mode;
  assign cfg_k3      = (cur.mode == MODE_3X3);
  assign cfg_w       = cur.w;
  assign cfg_h       = cur.h;
  assign cfg_shift   = cur.shift;
  assign cfg_relu    = cur.relu;
  assign cfg_rd_base = cur.rd_base;
  assign cfg_wr_base = cur.wr_base;
  assign busy        = (state != S_IDLE);

  assign rs_start   = (state == S_SETUP);
  assign ru_restart = (state == S_SETUP);
  assign hs_start   = (state == S_RUN) && (delay_cnt == 1);

  // MAU read: the scan, then the receptor flush
  assign rd_en  = rs_active || (state == S_RUN && flush_cnt != 0 && !rs_active && !rs_start);
  assign rd_c0  = rs_active ? MAP_W'(rs_cg * p_cur) : '0;
  assign rd_pix = rs_active ? rs_pix : '0;

  // control tag of the data entering the synapse unit
  always_comb begin
    logic [MAP_W-1:0] f0;
    logic [MAP_W-1:0] left;
    f0   = MAP_W'(hs_fg * q_cur);
    left = cur.f - f0;
    hn_tag          = TAG_IDLE;
    hn_tag.valid    = hs_active;
    hn_tag.last     = hs_last;
    hn_tag.cg_first = (hs_cg == '0);
    hn_tag.cg_last  = (hs_cg == n_cg - 1'b1);
    hn_tag.keep     = !s2 || (!hs_x[0] && !hs_y[0]);
    hn_tag.f0       = f0;
    hn_tag.nf       = (left > MAP_W'(q_cur)) ? q_cur : 6'(left);
    hn_tag.opix     = s2 ? OPIX_W'((hs_y >> 1) * w_out + (hs_x >> 1))
                         : OPIX_W'(hs_y * cur.w + hs_x);
    hn_tag.waddr    = wbase + WADDR_W'(hs_fg * n_cg) + WADDR_W'(hs_cg);
    hn_tag.baddr    = bbase + BADDR_W'(hs_fg);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; p_cur <= 5'd1; q_cur <= 6'(Q3);
      n_cg <= '0; n_fg <= '0; w_out <= '0; s2 <= 1'b0; plane_in <= '0; plane_out <= '0;
      delay_cnt <= '0; flush_cnt <= '0; wbase <= '0; bbase <= '0;
      done <= 1'b0; sot_first <= 1'b0; sot_next <= 1'b0;
    end else begin
      done <= 1'b0; sot_first <= 1'b0; sot_next <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          sot_first <= 1'b1; wbase <= '0; bbase <= '0;
          state <= S_FETCH;
        end
        S_FETCH: begin
          // the pointer moved last clock; the row is readable this clock
          if (!sot_first && !sot_next) state <= S_SETUP;
        end
        S_SETUP: begin
          automatic logic [DIM_W-1:0] ho;
          cur   <= row;
          p_cur <= 5'(mode_p(row.mode));
          q_cur <= 6'(mode_q(row.mode));
          n_cg  <= MAP_W'((int'(row.c) + int'(mode_p(row.mode)) - 1) / int'(mode_p(row.mode)));
          n_fg  <= MAP_W'((int'(row.f) + int'(mode_q(row.mode)) - 1) / int'(mode_q(row.mode)));
          s2    <= (row.stride == 2'd2);
          w_out <= (row.stride == 2'd2) ? DIM_W'((row.w + 1'b1) >> 1) : row.w;
          ho     = (row.stride == 2'd2) ? DIM_W'((row.h + 1'b1) >> 1) : row.h;
          plane_in  <= PIX_W'(row.w * row.h);
          plane_out <= PIX_W'(((row.stride == 2'd2) ? DIM_W'((row.w + 1'b1) >> 1) : row.w) * ho);
          delay_cnt <= (row.mode == MODE_3X3) ? (DIM_W+2)'(row.w) + 4 : (DIM_W+2)'(3);
          flush_cnt <= (row.mode == MODE_3X3) ? (DIM_W+2)'(row.w) + 1 : '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (delay_cnt != 0) delay_cnt <= delay_cnt - 1'b1;
          if (!rs_active && flush_cnt != 0) flush_cnt <= flush_cnt - 1'b1;
          if (hs_last) state <= S_DRAIN;
        end
        S_DRAIN: if (layer_end) begin
          wbase <= wbase + WADDR_W'(n_cg * n_fg);
          bbase <= bbase + BADDR_W'(n_fg);
          if (cur.last) begin
            done <= 1'b1;
            if (auto_repeat) begin
              sot_first <= 1'b1; wbase <= '0; bbase <= '0;
              state <= S_FETCH;
            end else state <= S_IDLE;
          end else begin
            sot_next <= 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
