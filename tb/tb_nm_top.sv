// tb_nm_top: end-to-end test of the CNN engine at reduced memory sizes.
//
// A seven-layer network is loaded into the SOT, its weights and biases into
// the synapse and soma units, and a 3-map 6x6 image into the feature-map
// memories.  The network mixes every mechanism of the design:
//   3x3 layers (P=1, Q=28) and 1x1 layers (P=16, Q=16), stride 1 and 2,
//   several input-map groups (Netsum accumulation), one-pixel maps (Netsum
//   forwarding), output-map groups that leave HNs empty (fragmentation),
//   more maps than memories (placement wraps round the 32 memories), the
//   zero-padding masks, a layer without activation, and auto-repeat of the
//   whole table for a second image.
// Each layer writes to its own MAU region, so after each image every layer's
// output maps are read back and compared with a direct evaluation of the
// convolution formula (zero padding, bias, shift, ReLU, 8-bit saturation)
// done here.  The number of clocks with data in the hardware neurons must be
// exactly ceil(C/P)*ceil(F/Q)*W*H per layer (no idle clock), and each layer's
// fill and drain must stay within W+24 clocks.  Every mechanism is counted
// and must have happened.
//
// What is compared (the convolution formula with zero padding and stride,
// bias and ReLU) follows the paper; the 8-bit re-quantisation with a shift
// and the table, weight and bias layouts are this design's own.
module tb_nm_top;
  import nm_pkg::*;

  localparam int MD = 4096, WD = 512, NSD = 256, BD = 64;
  localparam int NL = 7;

  logic clk = 0, rst_n = 0, start = 0, auto_repeat = 0, busy, done;
  logic sot_we = 0; logic [5:0] sot_waddr = 0; sot_row_t sot_wdata = '0;
  logic wl_we = 0; logic [7:0] wl_mul = 0; logic [8:0] wl_addr = 0; wgt_t wl_data = 0;
  logic bl_we = 0; logic [5:0] bl_hn = 0; logic [5:0] bl_addr = 0; acc_t bl_data = 0;
  logic ext_we = 0, ext_re = 0; logic [4:0] ext_wmem = 0, ext_rmem = 0;
  logic [11:0] ext_waddr = 0, ext_raddr = 0; data_t ext_wdata = 0, ext_rdata;
  logic hn_valid, hn_last; logic [MAP_W-1:0] hn_f0; logic [5:0] hn_nf;
  logic [OPIX_W-1:0] hn_opix; data_t hn_data [QMAX]; logic [5:0] layer_idx;

  nm_top #(.WMAX_P(16), .MAU_DEPTH(MD), .WDEPTH(WD), .NSDEPTH(NSD), .BDEPTH(BD), .SOT_ROWS(64)) dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- network
  typedef struct { int k, s, w, h, c, f, sh, relu; } layer_t;
  layer_t L [NL];
  int fm  [NL+1][48][6][6];     // [layer input][map][y][x]
  int wt  [NL][48][48][9];      // [layer][f][c][tap]
  int bs  [NL][48];

  function automatic int wo(int l); return (L[l].w + L[l].s - 1) / L[l].s; endfunction
  function automatic int ho(int l); return (L[l].h + L[l].s - 1) / L[l].s; endfunction
  function automatic int pp(int l); return L[l].k == 3 ? 1 : 16; endfunction
  function automatic int qq(int l); return L[l].k == 3 ? 28 : 16; endfunction
  function automatic int ncg(int l); return (L[l].c + pp(l) - 1) / pp(l); endfunction
  function automatic int nfg(int l); return (L[l].f + qq(l) - 1) / qq(l); endfunction
  function automatic int base(int l); return l * 256; endfunction  // MAU region of layer l's input

  task automatic set_layer(int l, int k, int s, int w, int h, int c, int f, int sh, int relu);
    L[l].k = k; L[l].s = s; L[l].w = w; L[l].h = h; L[l].c = c; L[l].f = f;
    L[l].sh = sh; L[l].relu = relu;
  endtask

  // reference model of one layer
  task automatic model(int l);
    for (int f = 0; f < L[l].f; f++)
      for (int oy = 0; oy < ho(l); oy++)
        for (int ox = 0; ox < wo(l); ox++) begin
          int s = 0, v;
          for (int c = 0; c < L[l].c; c++)
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++) begin
                int x = ox * L[l].s + dx, y = oy * L[l].s + dy;
                if (L[l].k == 1 && (dx != 0 || dy != 0)) continue;
                if (x < 0 || y < 0 || x >= L[l].w || y >= L[l].h) continue;
                s += fm[l][c][y][x] * wt[l][f][c][(dy+1)*3 + dx+1];
              end
          v = (s + bs[l][f]) >>> L[l].sh;
          if (L[l].relu && v < 0) v = 0;
          if (v > 127) v = 127;
          if (v < -128) v = -128;
          fm[l+1][f][oy][ox] = v;
        end
  endtask

  // ---------------------------------------------------------------- loading
  task automatic load_all();
    int wbase = 0, bbase = 0;
    for (int l = 0; l < NL; l++) begin
      sot_row_t r;
      r = '0;
      r.mode = (L[l].k == 3) ? MODE_3X3 : MODE_1X1;
      r.stride = 2'(L[l].s); r.w = DIM_W'(L[l].w); r.h = DIM_W'(L[l].h);
      r.c = MAP_W'(L[l].c); r.f = MAP_W'(L[l].f);
      r.rd_base = MADDR_W'(base(l)); r.wr_base = MADDR_W'(base(l+1));
      r.shift = SHIFT_W'(L[l].sh); r.relu = L[l].relu[0]; r.last = (l == NL-1);
      sot_we = 1; sot_waddr = 6'(l); sot_wdata = r; @(negedge clk);
      sot_we = 0;
      // weights: multiplier 9q+j (3x3) or 16q+p (1x1), address wbase + fg*ncg + cg
      for (int fg = 0; fg < nfg(l); fg++)
        for (int cg = 0; cg < ncg(l); cg++)
          for (int i = 0; i < NMUL; i++) begin
            int f, c, j, v;
            if (L[l].k == 3) begin f = fg*28 + i/9; c = cg;        j = i % 9; end
            else             begin f = fg*16 + i/16; c = cg*16 + i%16; j = 4; end
            v = (i < 252 || L[l].k == 1) && f < L[l].f && c < L[l].c ? wt[l][f][c][j] : 0;
            wl_we = 1; wl_mul = 8'(i); wl_addr = 9'(wbase + fg*ncg(l) + cg); wl_data = wgt_t'(v);
            @(negedge clk);
          end
      for (int fg = 0; fg < nfg(l); fg++)
        for (int q = 0; q < qq(l); q++) begin
          bl_we = 1; bl_hn = 6'(q); bl_addr = 6'(bbase + fg);
          bl_data = (fg*qq(l) + q < L[l].f) ? acc_t'(bs[l][fg*qq(l) + q]) : 0;
          @(negedge clk);
        end
      wl_we = 0; bl_we = 0;
      wbase += nfg(l) * ncg(l);
      bbase += nfg(l);
    end
    // the image: map c in memory c%32 at base + (c/32)*plane + y*W + x
    for (int c = 0; c < L[0].c; c++)
      for (int y = 0; y < L[0].h; y++)
        for (int x = 0; x < L[0].w; x++) begin
          ext_we = 1; ext_wmem = 5'(c % 32);
          ext_waddr = 12'(base(0) + (c/32)*L[0].w*L[0].h + y*L[0].w + x);
          ext_wdata = data_t'(fm[0][c][y][x]);
          @(negedge clk);
        end
    ext_we = 0;
  endtask

  task automatic check_outputs(int img);
    int bad = 0;
    for (int l = 0; l < NL; l++)
      for (int f = 0; f < L[l].f; f++)
        for (int y = 0; y < ho(l); y++)
          for (int x = 0; x < wo(l); x++) begin
            ext_re = 1; ext_rmem = 5'(f % 32);
            ext_raddr = 12'(base(l+1) + (f/32)*wo(l)*ho(l) + y*wo(l) + x);
            @(negedge clk);
            checks++;
            if (int'(ext_rdata) != fm[l+1][f][y][x]) begin
              failures++; bad++;
              if (bad < 8) $display("image %0d layer %0d map %0d (%0d,%0d): got %0d exp %0d",
                                    img, l, f, x, y, ext_rdata, fm[l+1][f][y][x]);
            end
          end
    ext_re = 0;
  endtask

  // ---------------------------------------------------------------- monitors
  int n_valid [NL];        // clocks with data entering the HNs, per layer
  int t_start [NL], t_end [NL];
  int cyc = 0;
  int ev_3x3, ev_1x1, ev_stride, ev_accum, ev_fwd, ev_frag, ev_wrap, ev_mask, ev_norelu, n_done;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_cu.state == dut.u_cu.S_SETUP) t_start[layer_idx] = cyc;
    if (hn_last) t_end[layer_idx] = cyc;
    if (dut.hn_tag.valid) begin
      n_valid[layer_idx]++;
      if (dut.mode == MODE_3X3) ev_3x3++; else ev_1x1++;
      if (!dut.hn_tag.keep) ev_stride++;
      if (!dut.hn_tag.cg_first) ev_accum++;
    end
    if (dut.u_du.fwd) ev_fwd++;
    if (hn_valid && 32'(hn_nf) < (dut.mode == MODE_3X3 ? 28 : 16)) ev_frag++;
    if (hn_valid && 32'(hn_f0 % 32) + 32'(hn_nf) > 32) ev_wrap++;
    if (dut.hn_tag.valid && dut.cfg_k3 && (dut.u_cu.hs_x == 0 || dut.u_cu.hs_y == 0)) ev_mask++;
    if (hn_valid && !dut.cfg_relu) ev_norelu++;
    if (done) n_done++;
  end

  initial begin
    //        l  k  s  w  h   c   f  sh relu
    set_layer(0, 3, 1, 6, 6,  3, 36, 6, 1);   // 3x3, two HN groups, second: 8 of 28 HNs, maps 28..35 wrap
    set_layer(1, 1, 1, 6, 6, 36, 20, 6, 1);   // 1x1, three input groups (12 padding maps)
    set_layer(2, 3, 2, 6, 6, 20,  8, 7, 1);   // 3x3 stride 2 -> 3x3
    set_layer(3, 1, 1, 3, 3,  8, 40, 5, 1);   // 1x1, 40 maps: placement wraps the 32 memories
    set_layer(4, 3, 2, 3, 3, 40,  5, 7, 1);   // 3x3 stride 2 over 40 input maps -> 2x2
    set_layer(5, 3, 2, 2, 2,  5, 17, 6, 1);   // -> 1x1
    set_layer(6, 1, 1, 1, 1, 17, 33, 5, 0);   // 1x1 on one pixel, no activation
    for (int c = 0; c < 3; c++) for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++)
      fm[0][c][y][x] = $urandom_range(0, 255) - 128;
    for (int l = 0; l < NL; l++) begin
      for (int f = 0; f < L[l].f; f++) begin
        bs[l][f] = $urandom_range(0, 2000) - 1000;
        for (int c = 0; c < L[l].c; c++) for (int j = 0; j < 9; j++)
          wt[l][f][c][j] = $urandom_range(0, 30) - 15;
      end
      model(l);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_all();
    // image 1 and, by auto-repeat, image 2
    auto_repeat = 1;
    start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    auto_repeat = 0;
    for (int l = 0; l < NL; l++) begin
      automatic int exp_n = ncg(l) * nfg(l) * L[l].w * L[l].h;
      checks++;
      if (n_valid[l] != exp_n) begin
        failures++; $display("layer %0d: %0d busy HN clocks, expected %0d", l, n_valid[l], exp_n);
      end
      checks++;
      if (t_end[l] - t_start[l] > exp_n + L[l].w + 24) begin
        failures++; $display("layer %0d took %0d clocks for %0d positions", l, t_end[l] - t_start[l], exp_n);
      end
      $display("layer %0d: %0d clocks, %0d of them with data", l, t_end[l] - t_start[l] + 1, exp_n);
    end
    wait (done); @(negedge clk);
    wait (!busy); @(negedge clk);
    check_outputs(2);
    // mechanisms
    begin
      automatic int ev [10] = '{ev_3x3, ev_1x1, ev_stride, ev_accum, ev_fwd, ev_frag, ev_wrap, ev_mask, ev_norelu, n_done - 1};
      automatic string nm [10] = '{"3x3 layer", "1x1 layer", "stride-2 skip", "Netsum accumulate", "Netsum forward",
                         "empty HNs", "memory wrap", "padding position", "no activation", "auto-repeat"};
      for (int i = 0; i < 10; i++) begin
        checks++;
        $display("%-18s %0d", nm[i], ev[i]);
        if (ev[i] == 0) begin failures++; $display("mechanism never happened: %s", nm[i]); end
      end
    end
    checks++;
    if (n_done != 2) begin failures++; $display("done %0d times, expected 2", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
