// nm_pkg: types and constants shared by the neuron-machine CNN engine.
//
// The engine is a fully pipelined convolution datapath (hardware neurons,
// HN) fed every clock by a memory part (MP).  The sizes below are those of
// the reference configuration: 256 shared multipliers that form either
// 28 hardware neurons of 3x3x1 inputs (k=3, P=1, Q=28) or 16 hardware
// neurons of 1x1x16 inputs (k=1, P=16, Q=16), and R=32 feature-map
// memories.  Those numbers follow the paper.  Word widths (8-bit data and
// weights, 32-bit sums), memory depths, the SOT row layout and the control
// tag that travels with the data are this design's own choices.
package nm_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W   = 8;    // feature-map value width
  localparam int unsigned WGT_W    = 8;    // weight width
  localparam int unsigned PROD_W   = DATA_W + WGT_W;
  localparam int unsigned ACC_W    = 32;   // adder tree / Netsum / bias width

  localparam int unsigned NMUL     = 256;  // shared multiplier pool
  localparam int unsigned KMAX     = 3;    // largest filter size
  localparam int unsigned KK       = KMAX * KMAX;
  localparam int unsigned Q3       = 28;   // HNs in 3x3 mode (P=1)
  localparam int unsigned Q1       = 16;   // HNs in 1x1 mode
  localparam int unsigned P1       = 16;   // input maps per HN in 1x1 mode
  localparam int unsigned QMAX     = 28;   // most HNs of any mode
  localparam int unsigned PMAX     = 16;   // most receptors of any mode
  localparam int unsigned R        = 32;   // MAU memories

  // field widths of the control words
  localparam int unsigned DIM_W    = 9;    // W, H up to 511
  localparam int unsigned MAP_W    = 11;   // C, F up to 2047
  localparam int unsigned MADDR_W  = 17;   // MAU word address
  localparam int unsigned PIX_W    = 17;   // pixel index inside one map
  localparam int unsigned OPIX_W   = 15;   // output pixel index (Netsum address)
  localparam int unsigned WADDR_W  = 15;   // weight memory address
  localparam int unsigned BADDR_W  = 10;   // bias memory address
  localparam int unsigned SHIFT_W  = 5;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // layer type; chooses k, P and Q
  typedef enum logic [1:0] {
    MODE_1X1 = 2'd0,   // k=1, P=16, Q=16
    MODE_3X3 = 2'd1    // k=3, P=1,  Q=28
  } mode_t;

  // one row of the stage operation table (one convolution layer)
  typedef struct packed {
    logic               last;     // last layer of the network
    logic               relu;     // apply the activation function
    logic [SHIFT_W-1:0] shift;    // re-quantisation right shift
    logic [MADDR_W-1:0] wr_base;  // MAU start address of the output maps
    logic [MADDR_W-1:0] rd_base;  // MAU start address of the input maps
    logic [MAP_W-1:0]   f;        // output feature maps
    logic [MAP_W-1:0]   c;        // input feature maps
    logic [DIM_W-1:0]   h;        // input map height
    logic [DIM_W-1:0]   w;        // input map width
    logic [1:0]         stride;   // 1 or 2
    mode_t              mode;
  } sot_row_t;

  // control tag that travels down the HN pipeline beside the data
  typedef struct packed {
    logic               valid;    // data of this cycle belongs to the layer
    logic               last;     // final cycle of the layer
    logic               cg_first; // first group of P input maps
    logic               cg_last;  // last group: the sum is complete
    logic               keep;     // output position kept (stride)
    logic [MAP_W-1:0]   f0;       // first output map of this HN group
    logic [5:0]         nf;       // HNs holding a real output map
    logic [OPIX_W-1:0]  opix;     // output pixel index = Netsum address
    logic [WADDR_W-1:0] waddr;    // weight memory address
    logic [BADDR_W-1:0] baddr;    // bias memory address
  } tag_t;

  localparam tag_t TAG_IDLE = '0;

  function automatic int unsigned mode_p(mode_t m);
    return (m == MODE_1X1) ? P1 : 1;
  endfunction

  function automatic int unsigned mode_q(mode_t m);
    return (m == MODE_1X1) ? Q1 : Q3;
  endfunction

endpackage
