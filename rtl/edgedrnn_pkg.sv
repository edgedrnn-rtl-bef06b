// edgedrnn_pkg -- types, sizes and fixed-point arithmetic shared by the
// EdgeDRNN delta-GRU accelerator.
//
// Number formats (the activation and weight widths follow the paper; the
// placement of the binary point of weights is this design's choice):
//   activation  16-bit signed Q8.8 (ACT_W, ACT_FRAC).  Delta thresholds are
//               given in the same Q8.8 integer units.
//   weight      8-bit signed, W_FRAC fractional bits (Q2.6 by default).
//   accumulator 32-bit signed with ACT_FRAC+W_FRAC fractional bits; this is
//               the delta memory M held in each PE's ACC Mem.
//   LUT output  LUT_W bits (5 = Q1.4 by default, 9 = Q1.8 at most) with
//               LUT_W-1 fractional bits; unsigned for sigmoid, signed for tanh.
// The concatenated weight matrix of one layer is stored column-major in DRAM:
// column 0 is the bias, columns 1..I multiply the input vector (whose element 0
// is the constant 1), columns I+1..I+H multiply the previous hidden state.
// Inside a column the 3H rows are ordered r, c, u gate blocks (as in the
// paper's weight-arrangement figure); row n goes to PE n mod K.
package edgedrnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int K        = 8;     // PEs = DRAM width / weight width (64/8)
  localparam int DRAM_W   = 64;    // weight stream width from the Datamover
  localparam int ACT_W    = 16;
  localparam int ACT_FRAC = 8;
  localparam int W_W      = 8;
  localparam int W_FRAC   = 6;
  localparam int ACC_W    = 32;
  localparam int LUT_W    = 5;     // Q1.4
  localparam int ADDR_W   = 40;    // Datamover address width (80-bit command)
  localparam int INST_W   = 80;

  // Largest network the on-chip buffers hold (2L-768H, the biggest network
  // the paper evaluates).
  localparam int MAX_L    = 2;
  localparam int MAX_H    = 768;
  localparam int MAX_I    = 768;   // input width of any layer (layer 2: H)

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Gate blocks of the concatenated matrix and the four delta memories.
  typedef enum logic [1:0] {
    M_R  = 2'd0,
    M_U  = 2'd1,
    M_XC = 2'd2,
    M_HC = 2'd3
  } mbank_e;

  // One entry of the D-FIFO: a nonzero delta element and whether it belongs
  // to the hidden-state part of the vector (its c-gate rows then go to M_hc).
  typedef struct packed {
    logic is_h;
    act_t delta;
  } dfifo_t;

  // Configuration registers as seen by the datapath (written over AXI-Lite).
  typedef struct packed {
    logic [7:0]                          num_layers;
    logic [15:0]                         i_dim;       // input size of layer 0
    logic [15:0]                         h_dim;       // hidden size of every layer
    logic [MAX_L-1:0][ADDR_W-1:0]        wbase;       // byte address of column 0
    logic [MAX_L-1:0][ACT_W-1:0]         th_x;        // input delta threshold
    logic [MAX_L-1:0][ACT_W-1:0]         th_h;        // hidden delta threshold
  } cfg_t;

  // -------------------------------------------------------- arithmetic
  function automatic act_t sat_act(input logic signed [ACC_W+1:0] v);
    if (v > (ACC_W+2)'(32767))       return act_t'(16'sh7fff);
    else if (v < -(ACC_W+2)'(32768)) return act_t'(-16'sh8000);
    else                             return act_t'(v);
  endfunction

  // Delta memory (ACT_FRAC+W_FRAC fractional bits) to Q8.8, truncating.
  function automatic act_t acc_to_act(input acc_t m);
    return sat_act((ACC_W+2)'(m >>> W_FRAC));
  endfunction

  // Q8.8 times a LUT value with LUT_W-1 fractional bits, back to Q8.8.
  function automatic logic signed [ACC_W-1:0] mul_lut_act(input act_t a,
                                                         input logic signed [LUT_W:0] g);
    logic signed [ACC_W-1:0] p;
    p = ACC_W'(a) * ACC_W'(g);
    return p >>> (LUT_W - 1);
  endfunction

endpackage
