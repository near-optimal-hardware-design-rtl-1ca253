// scan_seq: the scan counters of one convolution layer.
//
// Enumerates, one per clock, every (output-map group fg, input-map group cg,
// y, x) of a layer in the order the hardware neurons consume them: x fastest,
// then y, then the next group of input maps, then the next group of output
// maps.  start begins a scan at all zeros; active stays high for exactly
// n_fg * n_cg * W * H clocks; last marks the final clock.  The control unit
// runs two of these, one that addresses the memories and one, started later
// by the pipeline latency, that labels the data reaching the hardware
// neurons.  The order follows Eq. 3 and Eq. 6 of the paper.
module scan_seq
  import nm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DIM_W-1:0]  w,
  input  logic [DIM_W-1:0]  h,
  input  logic [MAP_W-1:0]  n_cg,
  input  logic [MAP_W-1:0]  n_fg,
  output logic              active,
  output logic [DIM_W-1:0]  x,
  output logic [DIM_W-1:0]  y,
  output logic [PIX_W-1:0]  pix,
  output logic [MAP_W-1:0]  cg,
  output logic [MAP_W-1:0]  fg,
  output logic              last
);

  logic end_x, end_y, end_cg, end_fg;
  assign end_x  = (x == w - 1'b1);
  assign end_y  = (y == h - 1'b1);
  assign end_cg = (cg == n_cg - 1'b1);
  assign end_fg = (fg == n_fg - 1'b1);
  assign last   = active && end_x && end_y && end_cg && end_fg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; x <= '0; y <= '0; pix <= '0; cg <= '0; fg <= '0;
    end else if (start) begin
      active <= 1'b1; x <= '0; y <= '0; pix <= '0; cg <= '0; fg <= '0;
    end else if (active) begin
      if (last) active <= 1'b0;
      if (!end_x) begin
        x <= x + 1'b1; pix <= pix + 1'b1;
      end else begin
        x <= '0;
        if (!end_y) begin
          y <= y + 1'b1; pix <= pix + 1'b1;
        end else begin
          y <= '0; pix <= '0;
          if (!end_cg) cg <= cg + 1'b1;
          else begin
            cg <= '0;
            fg <= end_fg ? '0 : fg + 1'b1;
          end
        end
      end
    end
  end

endmodule
