// tb_receptor_unit: checks the receptor unit with 4 lanes (lane 0 a full 3x3
// receptor).  k=1: every lane must deliver its own input on the centre tap two
// clocks later, other taps zero.  k=3: lane 0 must deliver the zero-padded
// 3x3 window of a 5x4 map, computed here from the source array.
//
// One receptor per memory lane follows the paper; giving only lane 0 the 3x3
// rows is this design's own choice.
module tb_receptor_unit;
  import nm_pkg::*;

  localparam int NL = 4;
  logic clk = 0, rst_n = 0, restart = 0, cfg_k3 = 0, in_valid = 0;
  logic [DIM_W-1:0] cfg_w = 0, cfg_h = 0;
  data_t in_data [NL];
  logic out_valid;
  data_t out_win [NL][KK];
  int checks = 0, failures = 0;

  receptor_unit #(.WMAX_P(8), .NLANE(NL), .N_K3(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t hist [64][NL];
  data_t img [4][5];

  initial begin
    for (int p = 0; p < NL; p++) in_data[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- k = 1: bypass on every lane
    cfg_k3 = 0; cfg_w = 4; cfg_h = 2;
    restart = 1; @(negedge clk); restart = 0;
    for (int i = 0; i < 20; i++) begin
      in_valid = 1;
      for (int p = 0; p < NL; p++) begin
        in_data[p] = data_t'($urandom); hist[i][p] = in_data[p];
      end
      @(negedge clk);
      if (i >= 2) begin
        checks++;
        if (!out_valid) begin failures++; $display("k1: out_valid low at %0d", i); end
        for (int p = 0; p < NL; p++)
          for (int j = 0; j < KK; j++) begin
            checks++;
            if (out_win[p][j] !== ((j == KK/2) ? hist[i-1][p] : data_t'(0))) begin
              failures++; $display("k1: lane %0d tap %0d wrong at %0d", p, j, i);
            end
          end
      end
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    // ---- k = 3 on lane 0, 5x4 map
    cfg_k3 = 1; cfg_w = 5; cfg_h = 4;
    restart = 1; @(negedge clk); restart = 0;
    for (int y = 0; y < 4; y++) for (int x = 0; x < 5; x++) img[y][x] = data_t'($urandom_range(1, 255));
    begin
      automatic int got = 0;
      for (int i = 0; i < 20 + 6 + 3; i++) begin
        in_valid = (i < 26);
        in_data[0] = (i < 20) ? img[i/5][i%5] : data_t'(7);
        @(posedge clk); #1;
        if (out_valid) begin
          automatic int x = got % 5, y = got / 5;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              automatic data_t e = (x+dx < 0 || x+dx > 4 || y+dy < 0 || y+dy > 3) ? data_t'(0) : img[y+dy][x+dx];
              checks++;
              if (out_win[0][(dy+1)*3+dx+1] !== e) begin
                failures++; $display("k3: (%0d,%0d) tap (%0d,%0d) got %0d exp %0d", x, y, dx, dy,
                                     out_win[0][(dy+1)*3+dx+1], e);
              end
            end
          got++;
        end
        @(negedge clk);
      end
      checks++;
      if (got != 20) begin failures++; $display("k3: %0d windows, expected 20", got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
