// tb_cu: checks the control unit on its own, with a two-row table served by
// a small table model.  Row 0: 3x3, stride 2, 5x3 maps, C=2, F=30; row 1:
// 1x1, 4x2 maps, C=20, F=5, last.  For every clock the test compares
//   - the memory reads (map group c0, pixel) with the scan order x, y, input
//     group, output group, followed by W+1 flush reads for 3x3 and none for 1x1;
//   - the tag entering the hardware neurons, which must start exactly
//     W+4 (3x3) or 3 (1x1) clocks after the first read and carry the expected
//     first/last-group flags, keep flag, output pixel, map group, number of
//     real HNs and the weight and bias addresses (counting on across layers).
// layer_end is returned a few clocks after the last tag, as the pipeline
// would; done must follow the last row.
//
// The scan order and the weight address stepping once per W*H clocks follow
// the paper; the tag layout, the delays W+4 / 3 and the flush reads are this
// design's own timing.
module tb_cu;
  import nm_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, auto_repeat = 0, busy, done;
  logic sot_first, sot_next, layer_end = 0;
  sot_row_t row, rows [2];
  mode_t mode;
  logic cfg_k3, cfg_relu, ru_restart, rd_en;
  logic [DIM_W-1:0] cfg_w, cfg_h;
  logic [SHIFT_W-1:0] cfg_shift;
  logic [MADDR_W-1:0] cfg_rd_base, cfg_wr_base;
  logic [PIX_W-1:0] plane_in, plane_out, rd_pix;
  logic [MAP_W-1:0] rd_c0;
  tag_t hn_tag;
  int checks = 0, failures = 0, cyc = 0;

  cu dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table model: pointer moves on first/next, row readable the clock after
  int ptr = 0;
  always @(posedge clk) begin
    if (sot_first) ptr <= 0;
    else if (sot_next) ptr <= ptr + 1;
  end
  always @(posedge clk) row <= rows[(sot_first ? 0 : sot_next ? ptr + 1 : ptr) % 2];

  // expected streams
  typedef struct { int c0, pix; } rd_t;
  rd_t  rdq [$];
  tag_t tgq [$];
  int   first_rd [2], first_tag [2];
  int   layer = 0, n_rd = 0, n_tag = 0, n_done = 0;

  task automatic build(int l, int wb, int bb);
    int k3 = (rows[l].mode == MODE_3X3);
    int p = k3 ? 1 : 16, q = k3 ? 28 : 16;
    int w = rows[l].w, h = rows[l].h, c = rows[l].c, f = rows[l].f;
    int ncg = (c + p - 1) / p, nfg = (f + q - 1) / q;
    int s2 = (rows[l].stride == 2);
    int wo = s2 ? (w + 1) / 2 : w;
    for (int fg = 0; fg < nfg; fg++)
      for (int cg = 0; cg < ncg; cg++)
        for (int y = 0; y < h; y++)
          for (int x = 0; x < w; x++) begin
            rd_t r; tag_t t;
            r.c0 = cg * p; r.pix = y * w + x; rdq.push_back(r);
            t = '0; t.valid = 1;
            t.last = (fg == nfg-1) && (cg == ncg-1) && (y == h-1) && (x == w-1);
            t.cg_first = (cg == 0); t.cg_last = (cg == ncg-1);
            t.keep = !s2 || (x % 2 == 0 && y % 2 == 0);
            t.f0 = MAP_W'(fg * q); t.nf = 6'((f - fg*q) < q ? f - fg*q : q);
            t.opix = OPIX_W'(s2 ? (y/2) * wo + x/2 : y * w + x);
            t.waddr = WADDR_W'(wb + fg * ncg + cg); t.baddr = BADDR_W'(bb + fg);
            tgq.push_back(t);
          end
    if (k3) for (int i = 0; i < w + 1; i++) begin rd_t r; r.c0 = -1; r.pix = -1; rdq.push_back(r); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (rd_en) begin
      rd_t e;
      checks++;
      if (rdq.size() == 0) begin failures++; $display("extra read"); end
      else begin
        e = rdq.pop_front();
        if (n_rd == 0) first_rd[layer] = cyc;
        n_rd++;
        if (e.c0 >= 0 && (int'(rd_c0) != e.c0 || int'(rd_pix) != e.pix)) begin
          failures++; $display("read %0d: c0 %0d pix %0d, expected %0d %0d", n_rd, rd_c0, rd_pix, e.c0, e.pix);
        end
      end
    end
    if (hn_tag.valid) begin
      tag_t e;
      checks++;
      if (tgq.size() == 0) begin failures++; $display("extra tag"); end
      else begin
        e = tgq.pop_front();
        if (n_tag == 0) begin
          first_tag[layer] = cyc;
          checks++;
          if (cyc - first_rd[layer] != (cfg_k3 ? int'(cfg_w) + 4 : 3)) begin
            failures++; $display("layer %0d: tag %0d clocks after the first read", layer, cyc - first_rd[layer]);
          end
        end
        n_tag++;
        if (hn_tag !== e) begin
          failures++; if (failures < 10) $display("tag %0d: got %h exp %h", n_tag, hn_tag, e);
        end
        if (hn_tag.last) begin
          fork begin
            repeat (12) @(negedge clk);
            layer_end = 1; @(negedge clk); layer_end = 0;
            layer++; n_rd = 0; n_tag = 0;
          end join_none
        end
      end
    end
    if (done) n_done++;
  end

  initial begin
    rows[0] = '0; rows[0].mode = MODE_3X3; rows[0].stride = 2; rows[0].w = 5; rows[0].h = 3;
    rows[0].c = 2; rows[0].f = 30;
    rows[1] = '0; rows[1].mode = MODE_1X1; rows[1].stride = 1; rows[1].w = 4; rows[1].h = 2;
    rows[1].c = 20; rows[1].f = 5; rows[1].last = 1;
    build(0, 0, 0);
    build(1, 2 * 2, 2);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    wait (n_done == 1);
    repeat (5) @(negedge clk);
    checks++;
    if (rdq.size() != 0 || tgq.size() != 0) begin
      failures++; $display("%0d reads and %0d tags missing", rdq.size(), tgq.size());
    end
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
