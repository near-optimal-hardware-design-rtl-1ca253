// receptor: one filter circuit of the receptor unit.
//
// What it does: takes one feature-map value per clock, in raster order
// (x fastest, then y, then the next map with no gap), and delivers per clock
// the whole k x k receptive field around one centre position, with the
// positions that fall outside the map forced to zero (zero padding).
//
// How: as in the paper, the value stream runs through k shift-register rows
// of W registers each; the end of one row (register W-1, W being the run-time
// map width) feeds the start of the row above.  The first k registers of every
// row are the k x k taps.  A masking circuit tracks the (x, y) position of the
// centre tap and zeroes the taps whose position is outside 0..W-1 / 0..H-1.
// Counting of the centre starts when W*floor(k/2)+floor(k/2) values have been
// shifted in (Table 1 of the paper; the running text says k*W+floor(k/2),
// which does not match its own table, so the table is followed).  Positions
// wrap from (W-1, H-1) straight to (0, 0) of the next map.  With k=1 the
// value is bypassed to the centre tap and the other taps are zero.
//
// Interface: restart clears the fill count (pulse it before a new layer).
// cfg_k3 selects k=3 (1) or k=1 (0); cfg_w/cfg_h are the map size and must
// stay stable while a layer runs.  out_win[j] is tap (dx, dy) with
// j = (dy+1)*3 + (dx+1).
//
// Timing: out_valid/out_win appear two clocks after the in_valid cycle that
// shifted in the newest value of the window, so for k=3 the window centred on
// input number i comes out two clocks after input number i+W+1 went in.  For
// k=1 the latency is two clocks.  There is no stall: one value in, one window
// out.  The row length WMAX, the data width and the reset are this design's
// choices.  A KMAX=1 instance has only the bypass path.
module receptor
  import nm_pkg::*;
#(
  parameter int unsigned WMAX_P = 300,
  parameter int unsigned KMAX_P = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              cfg_k3,
  input  logic [DIM_W-1:0]  cfg_w,
  input  logic [DIM_W-1:0]  cfg_h,
  input  logic              in_valid,
  input  data_t             in_data,
  output logic              out_valid,
  output data_t             out_win [KK]
);

  initial begin
    assert (KMAX_P == 1 || KMAX_P == 3) else $fatal(1, "KMAX_P must be 1 or 3");
  end

  if (KMAX_P == 3) begin : g_k3
    localparam int unsigned RW = WMAX_P * DATA_W;
    logic [RW-1:0]     sr [3];          // row r (dy=r-1); register i = bits [i*DATA_W +: DATA_W]
    data_t             row_end [3];     // register W-1 of each row
    logic [DIM_W:0]    fill;            // values shifted in, saturates at W+2
    logic              win_ok;          // sr holds a window with a valid centre
    logic              fresh;           // sr was shifted in the last cycle
    logic [DIM_W-1:0]  cx, cy;          // centre position of that window
    logic [DIM_W:0]    lead;            // values before the first centre: W+2 (k=3), 1 (k=1)

    assign lead = cfg_k3 ? ({1'b0, cfg_w} + 2'd2) : (DIM_W+1)'(1);

    for (genvar r = 0; r < 3; r++) begin : g_end
      assign row_end[r] = data_t'(sr[r] >> ((int'(cfg_w) - 1) * DATA_W));
    end

    // shift-register rows: register 0 takes the new value, i takes i-1
    always_ff @(posedge clk) begin
      if (in_valid) begin
        sr[2] <= {sr[2][RW-DATA_W-1:0], in_data};
        sr[1] <= {sr[1][RW-DATA_W-1:0], row_end[2]};
        sr[0] <= {sr[0][RW-DATA_W-1:0], row_end[1]};
      end
    end

    // fill count and centre position
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fill <= '0; win_ok <= 1'b0; fresh <= 1'b0; cx <= '0; cy <= '0;
      end else if (restart) begin
        fill <= '0; win_ok <= 1'b0; fresh <= 1'b0; cx <= '0; cy <= '0;
      end else begin
        fresh <= in_valid;
        if (in_valid) begin
          if (fill + 1'b1 >= lead) begin
            win_ok <= 1'b1;
            if (!win_ok) begin
              cx <= '0; cy <= '0;
            end else if (cx == cfg_w - 1'b1) begin
              cx <= '0;
              cy <= (cy == cfg_h - 1'b1) ? '0 : cy + 1'b1;
            end else begin
              cx <= cx + 1'b1;
            end
          end
          if (fill < lead) fill <= fill + 1'b1;
        end
      end
    end

    // masking circuit and output register
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid <= 1'b0;
        for (int j = 0; j < KK; j++) out_win[j] <= '0;
      end else begin
        out_valid <= fresh && win_ok && !restart;
        for (int dy = -1; dy <= 1; dy++) begin
          for (int dx = -1; dx <= 1; dx++) begin
            automatic int  px = int'(cx) + dx;
            automatic int  py = int'(cy) + dy;
            automatic logic in_map = (px >= 0) && (px < int'(cfg_w)) &&
                                     (py >= 0) && (py < int'(cfg_h));
            if (cfg_k3)
              out_win[(dy+1)*3 + (dx+1)] <= in_map ? data_t'(sr[dy+1][(1-dx)*DATA_W +: DATA_W]) : '0;
            else
              out_win[(dy+1)*3 + (dx+1)] <= (dx == 0 && dy == 0) ? data_t'(sr[2][DATA_W-1:0]) : '0;
          end
        end
      end
    end
  end else begin : g_k1
    data_t held;
    logic  fresh;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        held <= '0; fresh <= 1'b0; out_valid <= 1'b0;
        for (int j = 0; j < KK; j++) out_win[j] <= '0;
      end else begin
        if (in_valid) held <= in_data;
        fresh     <= in_valid && !restart;
        out_valid <= fresh && !restart;
        for (int j = 0; j < KK; j++) out_win[j] <= (j == KK/2) ? held : '0;
      end
    end
  end

endmodule
