// rnn_pkg: types and helpers shared by the recurrent-network datapath.
//
// Every value in the datapath (inputs, weights, biases, sums, activations and
// state) is a signed two's-complement fixed-point number of DATA_W bits, of
// which DATA_I are integer bits (sign included) and DATA_F = DATA_W - DATA_I
// are fractional. The default 16/6 format is the one the top-tagging network
// is evaluated with (6 integer bits, 10 fractional bits). Narrowing a wider
// intermediate back to this format drops low bits (truncation toward minus
// infinity) and keeps the low DATA_W bits of what remains (wrap on overflow),
// which is the default rounding and overflow behaviour of the HLS fixed-point
// type; that choice is this design's, the source only says every quantity is
// fixed point.
//
// The package also holds the enums that select the recurrent cell type, the
// layer mode (static or non-static) and the activation table, and the encoding
// of the weight-load bus that reaches every weight memory.
package rnn_pkg;

  parameter int unsigned DATA_W = 16;
  parameter int unsigned DATA_I = 6;
  parameter int unsigned DATA_F = DATA_W - DATA_I;

  typedef logic signed [DATA_W-1:0] fix_t;

  // Fractional bits and size of the activation tables.
  parameter int unsigned TABLE_F    = 14;
  parameter int unsigned TABLE_SIZE = 1024;

  typedef enum logic [0:0] {CELL_LSTM = 1'b0, CELL_GRU = 1'b1} cell_e;
  typedef enum logic [0:0] {MODE_STATIC = 1'b0, MODE_NONSTATIC = 1'b1} mode_e;
  typedef enum logic [0:0] {ACT_SIGMOID = 1'b0, ACT_TANH = 1'b1} act_e;

  // Weight-load targets. Inside a recurrent cell the first four are used;
  // the network top adds the dense layers after the recurrent layer.
  typedef enum logic [3:0] {
    WSEL_KERNEL   = 4'd0,  // W : N_IN x G*N_H, index o*N_IN + i
    WSEL_KBIAS    = 4'd1,  // b : G*N_H
    WSEL_RECUR    = 4'd2,  // U : N_H x G*N_H, index o*N_H + i
    WSEL_RBIAS    = 4'd3,  // recurrent bias (GRU only)
    WSEL_D1_W     = 4'd4,  // first hidden dense layer
    WSEL_D1_B     = 4'd5,
    WSEL_D2_W     = 4'd6,  // second hidden dense layer, if present
    WSEL_D2_B     = 4'd7,
    WSEL_DO_W     = 4'd8,  // output dense layer
    WSEL_DO_B     = 4'd9
  } wsel_e;

  parameter int unsigned WADDR_W = 20;   // up to 2^20 weights per matrix

  // Value 1.0 in the data format.
  function automatic fix_t fix_one();
    return fix_t'(1 << DATA_F);
  endfunction

  // Product of two data-format numbers, narrowed to the data format.
  function automatic fix_t fix_mul(fix_t a, fix_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fix_t'(p >>> DATA_F);
  endfunction

endpackage
