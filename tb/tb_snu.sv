// tb_snu: checks the synapse unit at a reduced size (32 multipliers, 4 lanes,
// 3 HNs in 3x3 mode, 8 HNs in 1x1 mode).  Weights are loaded with random
// values; random windows and weight addresses are streamed, one per clock, in
// both modes, and each product is compared, two clocks later, with
// activation x weight computed here from the mapping rules (inputs set at a
// falling edge are checked at the falling edge after the second rising edge).
//
// One multiplier and one weight memory per product and a shared weight
// address follow the paper; the switch wiring order is this design's own.
module tb_snu;
  import nm_pkg::*;

  localparam int NM = 32, NL = 4, QA = 3, QB = 8, WD = 16;
  logic clk = 0, rst_n = 0;
  mode_t mode = MODE_3X3;
  data_t in_win [NL][KK];
  tag_t in_tag = '0, out_tag;
  prod_t prod [NM];
  logic wl_we = 0;
  logic [7:0] wl_mul = 0;
  logic [3:0] wl_addr = 0;
  wgt_t wl_data = 0;
  int checks = 0, failures = 0;

  snu #(.NMUL_P(NM), .NLANE(NL), .Q3_P(QA), .Q1_P(QB), .WDEPTH(WD)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  wgt_t  wm [NM][WD];
  prod_t expq [$];

  initial begin
    for (int p = 0; p < NL; p++) for (int j = 0; j < KK; j++) in_win[p][j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NM; i++)
      for (int a = 0; a < WD; a++) begin
        wl_we = 1; wl_mul = 8'(i); wl_addr = 4'(a); wl_data = wgt_t'($urandom);
        wm[i][a] = wl_data; @(negedge clk);
      end
    wl_we = 0;
    for (int md = 0; md < 2; md++) begin
      mode = md ? MODE_1X1 : MODE_3X3;
      for (int n = 0; n < 40 + 1; n++) begin
        prod_t e [NM];
        if (n < 40) begin
          for (int p = 0; p < NL; p++) for (int j = 0; j < KK; j++) in_win[p][j] = data_t'($urandom);
          in_tag = '0; in_tag.valid = 1; in_tag.waddr = WADDR_W'($urandom_range(0, WD-1));
          for (int i = 0; i < NM; i++) begin
            data_t a;
            if (!md) a = (i < QA*KK) ? in_win[0][i % KK] : data_t'(0);
            else     a = (i < QB*NL) ? in_win[i % NL][KK/2] : data_t'(0);
            e[i] = prod_t'(a) * prod_t'(wm[i][in_tag.waddr]);
            expq.push_back(e[i]);
          end
        end else in_tag = '0;
        @(negedge clk);
        if (n >= 1) begin
          checks++;
          if (!out_tag.valid) begin failures++; $display("tag lost"); end
          for (int i = 0; i < NM; i++) begin
            automatic prod_t x = expq.pop_front();
            checks++;
            if (prod[i] !== x) begin
              failures++; if (failures < 10) $display("n %0d mode %0d mul %0d got %0d exp %0d", n, md, i, prod[i], x);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
