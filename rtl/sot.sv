// sot: stage operation table with its row pointer.
//
// Row l of the table holds everything the control unit needs to run
// convolution layer l (layer shape, map sizes, numbers of maps, MAU start
// addresses, re-quantisation); see nm_pkg::sot_row_t.  Running a network is
// stepping through the rows; after the row marked last the pointer returns to
// row 0 for the next image.  The table, its per-layer rows and the return to
// row 0 follow the paper (Stored-Program Control Scheme); the row layout and
// the pointer interface are this design's choices.
//
// Interface: the host writes rows through tw_*.  first sets the pointer to row
// 0, next moves it to the following row (or back to 0 after a last row).
// row/row_idx show the row under the pointer one clock after the pointer
// moved (synchronous table read).
module sot
  import nm_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  localparam int unsigned RAW = $clog2(ROWS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tw_we,
  input  logic [RAW-1:0] tw_addr,
  input  sot_row_t       tw_data,
  input  logic           first,
  input  logic           next,
  output sot_row_t       row,
  output logic [RAW-1:0] row_idx
);

  logic [RAW-1:0] ptr, ptr_n;

  always_comb begin
    ptr_n = ptr;
    if (first)     ptr_n = '0;
    else if (next) ptr_n = row.last ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else        ptr <= ptr_n;
  end

  dp_ram #(.WIDTH($bits(sot_row_t)), .DEPTH(ROWS)) u_table (
    .clk, .we(tw_we), .waddr(tw_addr), .wdata(tw_data),
    .raddr(ptr_n), .rdata(row)
  );

  assign row_idx = ptr;

endmodule
