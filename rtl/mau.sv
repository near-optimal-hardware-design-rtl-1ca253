// mau: memory array unit of the memory part.
//
// R dual-port memories hold the feature maps between layers.  Map f lives in
// memory f % R, at word  base + (f / R) * plane + pixel,  where plane = W*H of
// that layer and pixel = y*W + x.  On the write side a barrel shifter rotates
// the Q results of the hardware neurons (maps f0 .. f0+nf-1) so that each
// lands in its own memory; on the read side a selector picks the P
// consecutive memories holding maps c0 .. c0+P-1 and returns them in lane
// order.  Because of this placement all P lanes of one read, and all Q lanes
// of one write, go to different memories, so each memory sees at most one
// read and one write per clock.  The placement rule (f % R), the barrel
// shifter and the selector follow the paper (Fig. 3, Eq. 6); the address
// formula with a base and a plane size, the depth and the host ports are this
// design's choices.
//
// Read side: rd_en with rd_c0/rd_base/rd_plane/rd_pix; rd_data[p] (map
// rd_c0+p) and rd_valid one clock later.  P must divide R and rd_c0 must be a
// multiple of P, so that all lanes of a read share the word address.
// Write side: wr_en with wr_f0/wr_nf/... writes lanes 0..wr_nf-1 in the same
// clock.  Host ports: ext_we writes one word of one memory when the engine is
// not writing; ext_re reads one word (ext_rdata one clock later) when the
// engine is not reading.
module mau
  import nm_pkg::*;
#(
  parameter int unsigned R_P   = R,
  parameter int unsigned DEPTH = 131072,
  parameter int unsigned NRD   = PMAX,
  parameter int unsigned NWR   = QMAX,
  localparam int unsigned MW   = $clog2(R_P),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // engine read (selector)
  input  logic               rd_en,
  input  logic [MAP_W-1:0]   rd_c0,
  input  logic [MADDR_W-1:0] rd_base,
  input  logic [PIX_W-1:0]   rd_plane,
  input  logic [PIX_W-1:0]   rd_pix,
  output logic               rd_valid,
  output data_t              rd_data [NRD],
  // engine write (barrel shifter)
  input  logic               wr_en,
  input  logic [MAP_W-1:0]   wr_f0,
  input  logic [5:0]         wr_nf,
  input  logic [MADDR_W-1:0] wr_base,
  input  logic [PIX_W-1:0]   wr_plane,
  input  logic [PIX_W-1:0]   wr_pix,
  input  data_t              wr_data [NWR],
  // host access
  input  logic               ext_we,
  input  logic [MW-1:0]      ext_wmem,
  input  logic [AW-1:0]      ext_waddr,
  input  data_t              ext_wdata,
  input  logic               ext_re,
  input  logic [MW-1:0]      ext_rmem,
  input  logic [AW-1:0]      ext_raddr,
  output data_t              ext_rdata
);

  initial begin
    assert (R_P == (1 << MW)) else $fatal(1, "R must be a power of two");
    assert (NRD <= R_P && NWR <= R_P) else $fatal(1, "more lanes than memories");
  end

  logic [MADDR_W-1:0] rd_addr, wr_lo, wr_hi;
  logic [MW-1:0]      rd_rot, wr_rot;
  logic [MW-1:0]      rd_rot_q, ext_rmem_q;
  logic               m_we    [R_P];
  logic [AW-1:0]      m_waddr [R_P];
  data_t              m_wdata [R_P];
  logic [AW-1:0]      m_raddr [R_P];
  data_t              m_rdata [R_P];

  assign rd_rot  = MW'(rd_c0);
  assign wr_rot  = MW'(wr_f0);
  assign rd_addr = rd_base + MADDR_W'(MADDR_W'(rd_c0 >> MW) * rd_plane) + MADDR_W'(rd_pix);
  assign wr_lo   = wr_base + MADDR_W'(MADDR_W'(wr_f0 >> MW) * wr_plane) + MADDR_W'(wr_pix);
  assign wr_hi   = wr_lo + MADDR_W'(wr_plane);

  // barrel shifter (write) and per-memory address (read)
  always_comb begin
    for (int m = 0; m < R_P; m++) begin
      automatic logic [MW-1:0] q = MW'(m) - wr_rot;   // lane landing in memory m
      m_we[m]    = 1'b0;
      m_waddr[m] = AW'(ext_waddr);
      m_wdata[m] = ext_wdata;
      if (wr_en) begin
        if (32'(q) < NWR && 7'(q) < 7'(wr_nf)) begin
          m_we[m]    = 1'b1;
          m_waddr[m] = AW'((MW'(m) >= wr_rot) ? wr_lo : wr_hi);
          m_wdata[m] = wr_data[32'(q) % NWR];
        end
      end else if (ext_we && ext_wmem == MW'(m)) begin
        m_we[m] = 1'b1;
      end
      m_raddr[m] = rd_en ? AW'(rd_addr) : AW'(ext_raddr);
    end
  end

  for (genvar m = 0; m < R_P; m++) begin : g_mem
    dp_ram #(.WIDTH(DATA_W), .DEPTH(DEPTH)) u_mem (
      .clk, .we(m_we[m]), .waddr(m_waddr[m]), .wdata(m_wdata[m]),
      .raddr(m_raddr[m]), .rdata(m_rdata[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0; rd_rot_q <= '0; ext_rmem_q <= '0;
    end else begin
      rd_valid   <= rd_en;
      rd_rot_q   <= rd_rot;
      ext_rmem_q <= ext_rmem;
    end
  end

  // selector: lane p takes memory (c0 + p) % R
  always_comb begin
    for (int p = 0; p < NRD; p++) rd_data[p] = m_rdata[MW'(rd_rot_q + MW'(p))];
    ext_rdata = m_rdata[ext_rmem_q];
  end

  // engine writes and host writes must not meet
  always @(posedge clk) if (rst_n) assert (!(wr_en && ext_we)) else $error("host write during engine write");

endmodule
