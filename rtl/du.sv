// du: dendrite unit of the hardware neurons.
//
// Adds up, per hardware neuron (HN), the k*k*P products of one clock with a
// pipelined adder tree, then accumulates the ceil(C/P) partial sums of the
// input-map groups with an accumulator and a Netsum memory (one per HN, one
// word per output position).  For the first group the tree output is taken
// as is; for the middle groups the previous partial sum is read from Netsum,
// added and written back; for the last group the completed sum is sent to
// the soma unit instead of being stored.  This follows the paper (Sec. III-B,
// III-D, Fig. 2).
//
// Shared adder pool (paper Fig. 5): one set of pipelined two-input adders
// forms either 28 trees of 9 inputs (3x3, P=1) or 16 trees of 16 inputs
// (1x1, P=16).  The adders are arranged in four registered levels; each adder
// input has a two-way switch, set by the layer mode, that picks its operand
// from the previous level.  In 1x1 mode adder j of a level adds values 2j and
// 2j+1 of the level below (a plain binary tree over 16 neighbours).  In 3x3
// mode a 9-input tree reduces 9 -> 5 -> 3 -> 2 -> 1 values; adder i of tree q
// adds the tree's values 2i and 2i+1, and an odd value left over is carried
// to the next level in a pass register.  A level has as many adders as the
// larger of the two needs: 128, 64, 32 and 28, 252 in all (240 used in 1x1
// mode, 224 in 3x3 mode), plus one accumulator adder per HN.  The paper
// gives the two tree shapes and the adder count of 256 but not the switch
// network; the wiring above is this design's.  Tree outputs of both modes
// come out on the same level-4 adders, so HN q always reads adder q.
//
// Timing: out_acc/out_tag come five clocks after in_prod/in_tag (four adder
// levels and the accumulator).  Netsum is read one clock before the tree
// output (address = tag.opix of that clock) and written on the clock of the
// tree output.  When two consecutive clocks use the same address (maps of
// one pixel), the value just written is forwarded.  out_tag.valid is set
// only for a finished sum at a kept position; out_tag.last is passed on in
// any case.
module du
  import nm_pkg::*;
#(
  parameter int unsigned NMUL_P  = NMUL,
  parameter int unsigned Q3_P    = Q3,
  parameter int unsigned Q1_P    = Q1,
  parameter int unsigned P1_P    = P1,
  parameter int unsigned QMAX_P  = QMAX,
  parameter int unsigned NSDEPTH = 22500,
  localparam int unsigned NSAW   = $clog2(NSDEPTH),
  localparam int unsigned TREE_W = PROD_W + 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  mode_t  mode,
  input  prod_t  in_prod [NMUL_P],
  input  tag_t   in_tag,
  output acc_t   out_acc [QMAX_P],
  output tag_t   out_tag
);

  localparam int unsigned LAT = $clog2(KK);   // adder levels
  initial assert ($clog2(P1_P) == LAT && LAT == 4 && Q3_P <= QMAX_P && Q1_P <= QMAX_P &&
                  Q3_P * KK <= NMUL_P && Q1_P * P1_P <= NMUL_P)
    else $fatal(1, "unsupported tree shape");

  // 3x3 tree, per level: values held in adders (A3) and values in all (N3);
  // level 0 is the nine products
  localparam int unsigned A3 [LAT+1] = '{9, 4, 2, 1, 1};
  localparam int unsigned N3 [LAT+1] = '{9, 5, 3, 2, 1};

  function automatic int unsigned nadd(int unsigned l);
    int unsigned a1, a3;
    if (l == 0) return NMUL_P;
    a1 = Q1_P * (P1_P >> l);
    a3 = Q3_P * A3[l];
    return (a1 > a3) ? a1 : a3;
  endfunction

  typedef logic signed [TREE_W-1:0] tree_t;

  tag_t  tg [LAT+1];
  acc_t  tree_sum [QMAX_P];
  acc_t  acc_sum  [QMAX_P];
  acc_t  ns_rdata [QMAX_P];
  acc_t  fwd_data [QMAX_P];
  logic  fwd;
  logic  ns_we;
  logic  m3;

  assign m3 = (mode == MODE_3X3);

  for (genvar l = 1; l <= LAT; l++) begin : g_lv
    tree_t prv  [NMUL_P];   // the level below, zero beyond its adders
    tree_t prvp [Q3_P];     // its pass registers (3x3)
    tree_t s    [nadd(l)];  // this level's adders
    tree_t p    [Q3_P];     // this level's pass registers

    if (l == 1) begin : g_src
      always_comb begin
        for (int i = 0; i < NMUL_P; i++) prv[i] = tree_t'(in_prod[i]);
        for (int q = 0; q < Q3_P; q++) prvp[q] = '0;
      end
    end else begin : g_src
      always_comb begin
        for (int i = 0; i < NMUL_P; i++) prv[i] = '0;
        for (int i = 0; i < nadd(l-1); i++) prv[i] = g_lv[l-1].s[i];
        prvp = g_lv[l-1].p;
      end
    end

    for (genvar j = 0; j < nadd(l); j++) begin : g_add
      // 3x3 role: pair I of tree Q; operand 1 may be the tree's pass value
      localparam int unsigned Q   = j / A3[l];
      localparam int unsigned I   = j % A3[l];
      localparam bit          IN3 = (Q < Q3_P);
      localparam bit          P1S = (2*I + 1 >= A3[l-1]);
      localparam int unsigned X0  = IN3 ? Q * A3[l-1] + 2*I : 0;
      localparam int unsigned X1  = (IN3 && !P1S) ? X0 + 1 : 0;
      localparam int unsigned QP  = IN3 ? Q : 0;
      // 1x1 role: values 2j and 2j+1 of the level below
      localparam bit          IN1 = (2*j + 1 < nadd(l-1));
      tree_t x0, x1;
      always_comb begin
        x0 = '0; x1 = '0;
        if (m3) begin
          if (IN3) begin
            x0 = prv[X0];
            x1 = P1S ? prvp[QP] : prv[X1];
          end
        end else if (IN1) begin
          x0 = prv[2*j];
          x1 = prv[2*j + 1];
        end
      end
      always_ff @(posedge clk) s[j] <= x0 + x1;
    end

    // pass registers: the last value of a 3x3 tree when the level below holds an odd count
    // (none at level 4, where they stay zero and are unused)
    for (genvar q = 0; q < Q3_P; q++) begin : g_pass
      localparam bit          ODD = (N3[l-1] % 2 == 1);
      localparam bit          FRA = (N3[l-1] - 1 < A3[l-1]);   // the odd value is an adder's
      localparam int unsigned XP  = FRA ? q * A3[l-1] + N3[l-1] - 1 : 0;
      always_ff @(posedge clk) p[q] <= !ODD ? '0 : FRA ? prv[XP] : prvp[q];
    end
  end

  // control tag follows the adder levels
  assign tg[0] = in_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int l = 1; l <= LAT; l++) tg[l] <= TAG_IDLE;
    else        for (int l = 1; l <= LAT; l++) tg[l] <= tg[l-1];
  end

  assign ns_we = tg[LAT].valid && tg[LAT].keep && !tg[LAT].cg_last;

  // accumulator
  always_comb begin
    for (int q = 0; q < QMAX_P; q++) begin
      tree_sum[q] = '0;
      if (q < nadd(LAT) && q < (m3 ? Q3_P : Q1_P)) tree_sum[q] = acc_t'(g_lv[LAT].s[q]);
      acc_sum[q] = tree_sum[q] +
                   (tg[LAT].cg_first ? acc_t'(0) : (fwd ? fwd_data[q] : ns_rdata[q]));
    end
  end

  // Netsum memories
  for (genvar q = 0; q < QMAX_P; q++) begin : g_ns
    dp_ram #(.WIDTH(ACC_W), .DEPTH(NSDEPTH)) u_netsum (
      .clk, .we(ns_we), .waddr(NSAW'(tg[LAT].opix)), .wdata(acc_sum[q]),
      .raddr(NSAW'(tg[LAT-1].opix)), .rdata(ns_rdata[q])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd <= 1'b0; out_tag <= TAG_IDLE;
      for (int q = 0; q < QMAX_P; q++) begin fwd_data[q] <= '0; out_acc[q] <= '0; end
    end else begin
      fwd <= ns_we && (tg[LAT-1].opix == tg[LAT].opix);
      out_tag       <= tg[LAT];
      out_tag.valid <= tg[LAT].valid && tg[LAT].keep && tg[LAT].cg_last;
      for (int q = 0; q < QMAX_P; q++) begin
        fwd_data[q] <= acc_sum[q];
        out_acc[q]  <= acc_sum[q];
      end
    end
  end

endmodule
