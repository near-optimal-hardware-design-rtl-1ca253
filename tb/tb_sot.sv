// tb_sot: checks the stage operation table.  Five rows are written, the last
// one marked last; the pointer is sent to row 0, stepped through all rows and
// must come back to row 0 after the last row.  Each row must be readable one
// clock after the pointer moved, with the contents written.
//
// One row per layer and the return to row 0 for the next image follow the
// paper; the row fields are this design's own.
module tb_sot;
  import nm_pkg::*;

  logic clk = 0, rst_n = 0, tw_we = 0, first = 0, next = 0;
  logic [3:0] tw_addr = 0, row_idx;
  sot_row_t tw_data = '0, row;
  sot_row_t rows [5];
  int checks = 0, failures = 0;

  sot #(.ROWS(16)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_row(int i);
    checks++;
    if (row !== rows[i] || row_idx != 4'(i)) begin
      failures++; $display("expected row %0d, pointer at %0d", i, row_idx);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      rows[i] = sot_row_t'({$urandom, $urandom, $urandom});
      rows[i].last = (i == 4);
      tw_we = 1; tw_addr = 4'(i); tw_data = rows[i]; @(negedge clk);
    end
    tw_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      first = 1; @(negedge clk); first = 0;
      expect_row(0);
      for (int i = 1; i < 8; i++) begin
        next = 1; @(negedge clk); next = 0;
        expect_row(i % 5);
        @(negedge clk);
        expect_row(i % 5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
