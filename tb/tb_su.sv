// tb_su: checks the soma unit at 4 HNs and 8 bias words.  Biases are loaded
// with random values; random sums, bias addresses and shifts are streamed, with
// and without ReLU, and every output is compared, two clocks later, with
// sat8(max(0, (sum + bias) >>> shift)) computed here.
//
// Bias and activation follow the paper; the shift and 8-bit saturation are
// this design's own (the paper gives no number format).
module tb_su;
  import nm_pkg::*;

  localparam int QM = 4, BD = 8;
  logic clk = 0, rst_n = 0;
  logic [SHIFT_W-1:0] cfg_shift = 0;
  logic cfg_relu = 0;
  acc_t in_acc [QM];
  tag_t in_tag = '0, out_tag;
  data_t out_data [QM];
  logic bl_we = 0;
  logic [5:0] bl_hn = 0;
  logic [2:0] bl_addr = 0;
  acc_t bl_data = 0;
  int checks = 0, failures = 0, cyc = 0;

  su #(.QMAX_P(QM), .BDEPTH(BD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { data_t v [QM]; int t; } exp_t;
  exp_t expq [$];
  acc_t bm [QM][BD];
  int nvalid = 0;

  always @(negedge clk) if (rst_n && out_tag.valid) begin
    automatic exp_t e = expq.pop_front();
    checks++;
    nvalid++;
    if (cyc != e.t + 2) begin failures++; $display("latency %0d", cyc - e.t); end
    for (int q = 0; q < QM; q++) begin
      checks++;
      if (out_data[q] !== e.v[q]) begin
        failures++; if (failures < 10) $display("hn %0d got %0d exp %0d", q, out_data[q], e.v[q]);
      end
    end
  end

  initial begin
    for (int q = 0; q < QM; q++) in_acc[q] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int q = 0; q < QM; q++)
      for (int a = 0; a < BD; a++) begin
        bl_we = 1; bl_hn = 6'(q); bl_addr = 3'(a); bl_data = acc_t'($urandom_range(0, 4000)) - 2000;
        bm[q][a] = bl_data; @(negedge clk);
      end
    bl_we = 0;
    for (int ph = 0; ph < 4; ph++) begin
      cfg_relu = ph[0]; cfg_shift = SHIFT_W'(ph * 3);
      for (int n = 0; n < 50; n++) begin
        exp_t e;
        in_tag = '0; in_tag.valid = 1; in_tag.baddr = BADDR_W'($urandom_range(0, BD-1));
        for (int q = 0; q < QM; q++) begin
          acc_t v;
          in_acc[q] = acc_t'($urandom_range(0, 200000)) - 100000;
          v = (in_acc[q] + bm[q][in_tag.baddr]) >>> cfg_shift;
          if (cfg_relu && v < 0) v = 0;
          e.v[q] = (v > 127) ? 8'sd127 : (v < -128) ? -8'sd128 : data_t'(v);
        end
        e.t = cyc;
        expq.push_back(e);
        @(negedge clk);
      end
      in_tag = '0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (nvalid != 200) begin failures++; $display("%0d outputs, expected 200", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
