// tb_mau: checks the memory array unit against a reference model of the
// placement rule (map f in memory f % R at base + (f / R) * plane + pixel).
// Scaled to R=8 memories of 256 words, 4 read lanes and 6 write lanes.
// 1) the host fills every word; 2) the engine reads groups of 4 maps and each
// lane is compared with the model, one clock after the request; 3) the engine
// writes groups of up to 6 maps starting anywhere (so the barrel shifter
// wraps), while reading; 4) the host reads every word back.
//
// The placement of map f in memory f mod R and the selection of P
// consecutive memories follow the paper; the word address layout and the
// host port are this design's own.
module tb_mau;
  import nm_pkg::*;

  localparam int RR = 8, DEP = 256, NRD = 4, NWR = 6;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, rd_valid, wr_en = 0, ext_we = 0, ext_re = 0;
  logic [MAP_W-1:0] rd_c0 = 0, wr_f0 = 0;
  logic [MADDR_W-1:0] rd_base = 0, wr_base = 0;
  logic [PIX_W-1:0] rd_plane = 0, rd_pix = 0, wr_plane = 0, wr_pix = 0;
  logic [5:0] wr_nf = 0;
  data_t rd_data [NRD];
  data_t wr_data [NWR];
  logic [2:0] ext_wmem = 0, ext_rmem = 0;
  logic [7:0] ext_waddr = 0, ext_raddr = 0;
  data_t ext_wdata = 0, ext_rdata;
  int checks = 0, failures = 0;

  mau #(.R_P(RR), .DEPTH(DEP), .NRD(NRD), .NWR(NWR)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t model [RR][DEP];

  initial begin
    for (int q = 0; q < NWR; q++) wr_data[q] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1) host fill
    for (int m = 0; m < RR; m++)
      for (int a = 0; a < DEP; a++) begin
        ext_we = 1; ext_wmem = 3'(m); ext_waddr = 8'(a); ext_wdata = data_t'($urandom);
        model[m][a] = ext_wdata;
        @(negedge clk);
      end
    ext_we = 0;
    // 2) engine reads: maps c0..c0+3, plane 12, base 16
    rd_base = 16; rd_plane = 12;
    for (int g = 0; g < 6; g++)
      for (int pix = 0; pix < 12; pix++) begin
        rd_en = 1; rd_c0 = MAP_W'(g * NRD); rd_pix = PIX_W'(pix);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid) begin failures++; $display("rd_valid low"); end
        for (int p = 0; p < NRD; p++) begin
          automatic int c = g * NRD + p;
          checks++;
          if (rd_data[p] !== model[c % RR][16 + (c / RR) * 12 + pix]) begin
            failures++; $display("read map %0d pix %0d lane %0d wrong", c, pix, p);
          end
        end
      end
    // 3) engine writes: plane 10, base 100, groups of 6 starting at f0 = 0, 6, 12, ...
    wr_base = 100; wr_plane = 10;
    for (int g = 0; g < 5; g++)
      for (int pix = 0; pix < 10; pix++) begin
        wr_en = 1; wr_f0 = MAP_W'(g * NWR); wr_pix = PIX_W'(pix);
        wr_nf = (g == 4) ? 6'd3 : 6'(NWR);
        for (int q = 0; q < NWR; q++) begin
          wr_data[q] = data_t'($urandom);
          if (q < wr_nf) model[(g*NWR + q) % RR][100 + ((g*NWR + q) / RR) * 10 + pix] = wr_data[q];
        end
        @(negedge clk);
      end
    wr_en = 0;
    // 4) host read-back of everything
    for (int m = 0; m < RR; m++)
      for (int a = 0; a < DEP; a++) begin
        ext_re = 1; ext_rmem = 3'(m); ext_raddr = 8'(a);
        @(negedge clk);
        checks++;
        if (ext_rdata !== model[m][a]) begin
          failures++;
          if (failures < 10) $display("mem %0d word %0d: got %0d exp %0d", m, a, ext_rdata, model[m][a]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
