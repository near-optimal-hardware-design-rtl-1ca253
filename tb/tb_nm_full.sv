// tb_nm_full: the engine at its default (full) sizes running the first layers
// of SSD/MobileNet on a 300x300 image.
//   row 0: 3x3 convolution, stride 2, 3 input maps of 300x300 -> 32 maps of
//          150x150 (first layer of the network);
//   row 1: 1x1 convolution, 32 -> 64 maps of 150x150 (the shape of the
//          network's third layer; the depthwise layer between them is not
//          supported by this engine and is skipped).
// Weights, biases and the image are random; every output value of both
// layers is read back and compared with a direct evaluation of the
// convolution formula.  The clocks with data in the hardware neurons must
// equal ceil(C/P)*ceil(F/Q)*W*H for each layer.  The clock count of each
// layer is printed beside the count published for the reference system.
//
// The layer shapes are those of the reference system's evaluation; the clock
// counts it prints differ from the reference system's for stride-2 layers,
// which this design computes at full resolution.
module tb_nm_full;
  import nm_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, auto_repeat = 0, busy, done;
  logic sot_we = 0; logic [5:0] sot_waddr = 0; sot_row_t sot_wdata = '0;
  logic wl_we = 0; logic [7:0] wl_mul = 0; logic [14:0] wl_addr = 0; wgt_t wl_data = 0;
  logic bl_we = 0; logic [5:0] bl_hn = 0; logic [9:0] bl_addr = 0; acc_t bl_data = 0;
  logic ext_we = 0, ext_re = 0; logic [4:0] ext_wmem = 0, ext_rmem = 0;
  logic [16:0] ext_waddr = 0, ext_raddr = 0; data_t ext_wdata = 0, ext_rdata;
  logic hn_valid, hn_last; logic [MAP_W-1:0] hn_f0; logic [5:0] hn_nf;
  logic [OPIX_W-1:0] hn_opix; data_t hn_data [QMAX]; logic [5:0] layer_idx;

  nm_top dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int W0 = 300, W1 = 150;
  byte  img  [3][W0][W0];
  byte  out0 [32][W1][W1];
  byte  out1 [64][W1][W1];
  byte  w0 [32][3][9];
  byte  w1 [64][32];
  int   b0 [32], b1 [64];
  localparam int SH0 = 7, SH1 = 7;
  localparam int BASE_IMG = 0, BASE_L0 = 90000, BASE_L1 = 0;

  function automatic byte sat(int s, int b, int sh);
    int v = (s + b) >>> sh;
    if (v < 0) v = 0;
    if (v > 127) v = 127;
    return byte'(v);
  endfunction

  int n_valid [2];
  int t_start [2], t_end [2];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_cu.state == dut.u_cu.S_SETUP) t_start[layer_idx] = cyc;
    if (hn_last) t_end[layer_idx] = cyc;
    if (dut.hn_tag.valid) n_valid[layer_idx]++;
  end

  initial begin
    sot_row_t r;
    int bad;
    // data and reference
    foreach (img[c, y, x]) img[c][y][x] = byte'($urandom_range(0, 255) - 128);
    foreach (w0[f, c, j]) w0[f][c][j] = byte'($urandom_range(0, 30) - 15);
    foreach (w1[f, c]) w1[f][c] = byte'($urandom_range(0, 30) - 15);
    foreach (b0[f]) b0[f] = $urandom_range(0, 2000) - 1000;
    foreach (b1[f]) b1[f] = $urandom_range(0, 2000) - 1000;
    for (int f = 0; f < 32; f++)
      for (int oy = 0; oy < W1; oy++)
        for (int ox = 0; ox < W1; ox++) begin
          automatic int s = 0;
          for (int c = 0; c < 3; c++)
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++) begin
                automatic int x = 2*ox + dx, y = 2*oy + dy;
                if (x >= 0 && y >= 0 && x < W0 && y < W0)
                  s += int'(img[c][y][x]) * int'(w0[f][c][(dy+1)*3 + dx+1]);
              end
          out0[f][oy][ox] = sat(s, b0[f], SH0);
        end
    for (int f = 0; f < 64; f++)
      for (int y = 0; y < W1; y++)
        for (int x = 0; x < W1; x++) begin
          automatic int s = 0;
          for (int c = 0; c < 32; c++) s += int'(out0[c][y][x]) * int'(w1[f][c]);
          out1[f][y][x] = sat(s, b1[f], SH1);
        end

    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // table
    r = '0; r.mode = MODE_3X3; r.stride = 2; r.w = W0; r.h = W0; r.c = 3; r.f = 32;
    r.rd_base = BASE_IMG; r.wr_base = BASE_L0; r.shift = SH0; r.relu = 1;
    sot_we = 1; sot_waddr = 0; sot_wdata = r; @(negedge clk);
    r = '0; r.mode = MODE_1X1; r.stride = 1; r.w = W1; r.h = W1; r.c = 32; r.f = 64;
    r.rd_base = BASE_L0; r.wr_base = BASE_L1; r.shift = SH1; r.relu = 1; r.last = 1;
    sot_waddr = 1; sot_wdata = r; @(negedge clk);
    sot_we = 0;
    // weights: row 0 uses addresses fg*3+cg (2 x 3), row 1 continues at 6 + fg*2+cg (4 x 2)
    for (int fg = 0; fg < 2; fg++) for (int cg = 0; cg < 3; cg++) for (int i = 0; i < 256; i++) begin
      automatic int f = fg*28 + i/9;
      wl_we = 1; wl_mul = 8'(i); wl_addr = 15'(fg*3 + cg);
      wl_data = (i < 252 && f < 32) ? w0[f][cg][i%9] : 8'sd0;
      @(negedge clk);
    end
    for (int fg = 0; fg < 4; fg++) for (int cg = 0; cg < 2; cg++) for (int i = 0; i < 256; i++) begin
      wl_we = 1; wl_mul = 8'(i); wl_addr = 15'(6 + fg*2 + cg);
      wl_data = w1[fg*16 + i/16][cg*16 + i%16];
      @(negedge clk);
    end
    wl_we = 0;
    for (int fg = 0; fg < 2; fg++) for (int q = 0; q < 28; q++) begin
      bl_we = 1; bl_hn = 6'(q); bl_addr = 10'(fg); bl_data = (fg*28+q < 32) ? b0[fg*28+q] : 0;
      @(negedge clk);
    end
    for (int fg = 0; fg < 4; fg++) for (int q = 0; q < 16; q++) begin
      bl_we = 1; bl_hn = 6'(q); bl_addr = 10'(2 + fg); bl_data = b1[fg*16+q];
      @(negedge clk);
    end
    bl_we = 0;
    foreach (img[c, y, x]) begin
      ext_we = 1; ext_wmem = 5'(c); ext_waddr = 17'(BASE_IMG + y*W0 + x); ext_wdata = img[c][y][x];
      @(negedge clk);
    end
    ext_we = 0;
    // run
    start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    // read back
    bad = 0;
    foreach (out0[f, y, x]) begin
      ext_re = 1; ext_rmem = 5'(f); ext_raddr = 17'(BASE_L0 + y*W1 + x);
      @(negedge clk);
      checks++;
      if (ext_rdata !== out0[f][y][x]) begin
        failures++; bad++;
        if (bad < 8) $display("layer 0 map %0d (%0d,%0d): got %0d exp %0d", f, x, y, ext_rdata, out0[f][y][x]);
      end
    end
    foreach (out1[f, y, x]) begin
      ext_re = 1; ext_rmem = 5'(f % 32); ext_raddr = 17'(BASE_L1 + (f/32)*W1*W1 + y*W1 + x);
      @(negedge clk);
      checks++;
      if (ext_rdata !== out1[f][y][x]) begin
        failures++; bad++;
        if (bad < 8) $display("layer 1 map %0d (%0d,%0d): got %0d exp %0d", f, x, y, ext_rdata, out1[f][y][x]);
      end
    end
    ext_re = 0;
    checks++;
    if (n_valid[0] != 3*2*W0*W0) begin failures++; $display("row 0: %0d data clocks", n_valid[0]); end
    checks++;
    if (n_valid[1] != 2*4*W1*W1) begin failures++; $display("row 1: %0d data clocks", n_valid[1]); end
    $display("row 0 (3x3 s2, 300x300x3 -> 150x150x32): %0d clocks (reference system: 135207)",
             t_end[0] - t_start[0] + 1);
    $display("row 1 (1x1, 150x150x32 -> 150x150x64): %0d clocks (reference system: 180207)",
             t_end[1] - t_start[1] + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
