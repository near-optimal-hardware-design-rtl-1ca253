// dp_ram: simple dual-port memory, one write port and one read port, both
// synchronous on the same clock (the "dual-port memory" the paper relies on
// for every storage unit: it can read and write in the same clock cycle).
//
// Read data appears one clock after the read address.  A read of the address
// being written in the same clock returns the old contents (read-first); the
// users that can hit that case forward the new value themselves.  The memory
// is not reset: its users write before they read.
module dp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
