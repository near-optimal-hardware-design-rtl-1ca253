// tb_receptor: self-checking test of the receptor (k x k window + zero-padding
// masking).  Streams two 6x5 maps back to back with k=3, then one flush of
// W+1 values, and compares every window with one cut directly from the source
// arrays (zero outside the map).  It also checks the latency: the window
// centred on value i must appear two clocks after value i+W+1 was presented.
// A second pass runs k=1 (bypass) and a third k=3 pass on a 1-pixel-wide map.
//
// The window contents and the zero padding follow the paper; the start of
// the window after W+2 values follows the paper's table of receptor timing,
// and the 2-clock output register is this design's own.
module tb_receptor;
  import nm_pkg::*;

  localparam int WMAX = 8;
  logic clk = 0, rst_n = 0, restart = 0, cfg_k3 = 0, in_valid = 0;
  logic [DIM_W-1:0] cfg_w = 0, cfg_h = 0;
  data_t in_data = 0;
  logic out_valid;
  data_t out_win [KK];
  int checks = 0, failures = 0;
  int cyc = 0;

  receptor #(.WMAX_P(WMAX), .KMAX_P(3)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t img [4][8][8];  // [map][y][x]
  int in_cyc [512];      // cycle each input value was presented

  task automatic run(input bit k3, input int w, input int h, input int nmap);
    int n, got, lead;
    lead = k3 ? w + 1 : 0;
    for (int c = 0; c < nmap; c++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) img[c][y][x] = data_t'($urandom_range(1, 255));
    @(negedge clk);
    cfg_k3 = k3; cfg_w = DIM_W'(w); cfg_h = DIM_W'(h);
    restart = 1; @(negedge clk); restart = 0;
    n = nmap * w * h;
    got = 0;
    fork
      begin
        for (int i = 0; i < n + lead; i++) begin
          in_valid = 1;
          if (i < n) in_data = img[i / (w*h)][(i % (w*h)) / w][i % w];
          else       in_data = data_t'($urandom);
          in_cyc[i] = cyc;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        while (got < n) begin
          @(posedge clk); #1;
          if (out_valid) begin
            int c, x, y;
            c = got / (w*h); x = (got % (w*h)) % w; y = (got % (w*h)) / w;
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++) begin
                data_t exp_v;
                if (!k3) exp_v = (dx == 0 && dy == 0) ? img[c][y][x] : '0;
                else if (x+dx < 0 || x+dx >= w || y+dy < 0 || y+dy >= h) exp_v = '0;
                else exp_v = img[c][y+dy][x+dx];
                checks++;
                if (out_win[(dy+1)*3+dx+1] !== exp_v) begin
                  failures++;
                  $display("k3=%0d map %0d (%0d,%0d) tap (%0d,%0d): got %0d exp %0d",
                           k3, c, x, y, dx, dy, out_win[(dy+1)*3+dx+1], exp_v);
                end
              end
            checks++;
            if (cyc != in_cyc[got + lead] + 2) begin
              failures++;
              $display("latency: window %0d at cycle %0d, input %0d at %0d",
                       got, cyc, got + lead, in_cyc[got + lead]);
            end
            got++;
          end
        end
      end
    join
    repeat (4) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra window after the stream"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 6, 5, 2);
    run(0, 6, 5, 2);
    run(1, 8, 3, 3);
    run(1, 1, 4, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
