// tb_du: checks the dendrite unit at a reduced size (32 products, 3 HNs of 9
// inputs in 3x3 mode, 2 HNs of 16 inputs in 1x1 mode, Netsum depth 16).
// Random products are streamed as they would be for a layer of G input-map
// groups over WH positions, some positions not kept (stride).  For every kept
// position of the last group the output must equal the sum over all groups
// of the HN's products, computed here, and must leave exactly five clocks
// after the last group's products went in.  Runs include WH=1, where
// consecutive clocks hit the same Netsum word and the forwarding path is used.
//
// The tree shapes (9 or 16 inputs) and the Netsum accumulation follow the
// paper; the five-clock latency and the forwarding are this design's own.
module tb_du;
  import nm_pkg::*;

  localparam int NM = 32, QA = 3, QB = 2, PB = 16, QM = 3, NSD = 16;
  logic clk = 0, rst_n = 0;
  mode_t mode = MODE_3X3;
  prod_t in_prod [NM];
  tag_t in_tag = '0, out_tag;
  acc_t out_acc [QM];
  int checks = 0, failures = 0, cyc = 0;

  du #(.NMUL_P(NM), .Q3_P(QA), .Q1_P(QB), .P1_P(PB), .QMAX_P(QM), .NSDEPTH(NSD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { acc_t v [QM]; int t; } exp_t;
  exp_t expq [$];
  int seen_last;

  // checker
  always @(negedge clk) if (rst_n) begin
    if (out_tag.last) seen_last++;
    if (out_tag.valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic exp_t e = expq.pop_front();
        if (cyc != e.t + 5) begin failures++; $display("latency %0d", cyc - e.t); end
        for (int q = 0; q < QM; q++) begin
          checks++;
          if (out_acc[q] !== e.v[q]) begin
            failures++; if (failures < 10) $display("hn %0d got %0d exp %0d", q, out_acc[q], e.v[q]);
          end
        end
      end
    end
  end

  task automatic layer(input bit m3, input int groups, input int wh);
    acc_t tot [NSD][QM];
    bit keep [NSD];
    mode = m3 ? MODE_3X3 : MODE_1X1;
    for (int p = 0; p < wh; p++) keep[p] = ($urandom_range(0, 3) != 0);
    for (int g = 0; g < groups; g++)
      for (int p = 0; p < wh; p++) begin
        for (int i = 0; i < NM; i++) in_prod[i] = prod_t'($urandom);
        for (int q = 0; q < QM; q++) begin
          acc_t s = 0;
          if (m3 && q < QA)       for (int j = 0; j < KK; j++) s += acc_t'(in_prod[q*KK + j]);
          else if (!m3 && q < QB) for (int j = 0; j < PB; j++) s += acc_t'(in_prod[q*PB + j]);
          tot[p][q] = (g == 0) ? s : tot[p][q] + s;
        end
        in_tag = '0;
        in_tag.valid = 1; in_tag.cg_first = (g == 0); in_tag.cg_last = (g == groups-1);
        in_tag.keep = keep[p]; in_tag.opix = OPIX_W'(p);
        in_tag.last = (g == groups-1) && (p == wh-1);
        if (g == groups-1 && keep[p]) begin
          exp_t e; e.t = cyc;
          for (int q = 0; q < QM; q++) e.v[q] = tot[p][q];
          expq.push_back(e);
        end
        @(negedge clk);
      end
    in_tag = '0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < NM; i++) in_prod[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    layer(1, 3, 5);
    layer(0, 4, 7);
    layer(1, 5, 1);
    layer(0, 6, 1);
    layer(1, 1, 9);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d sums never came out", expq.size()); end
    checks++;
    if (seen_last != 5) begin failures++; $display("last flag seen %0d times", seen_last); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
