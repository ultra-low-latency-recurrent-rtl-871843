// rnn_net: recurrent-network classifier, by default the top-quark jet tagger.
//
// The input is a sequence of SEQ_LEN steps of N_IN features (for the top
// tagger: up to 20 jet constituents ordered by transverse momentum, zero
// padded, 6 features each). The network is
//   recurrent layer (LSTM or GRU, N_H units, final hidden state only)
//   -> fully connected N_H -> N_D1, ReLU
//   -> [fully connected N_D1 -> N_D2, ReLU]      only if N_D2 > 0
//   -> fully connected -> N_OUT
//   -> sigmoid (N_OUT = 1) or softmax (N_OUT > 1)
// All arithmetic is 16-bit fixed point with 6 integer bits (rnn_pkg).
// The defaults build the top-quark tagger (20 x 6 inputs, 20 units, dense
// 64, one sigmoid output); the same module with other parameters builds the
// jet-flavour tagger (15 x 6, 120 units, dense 50 and 10, 3-way softmax) and
// the QuickDraw classifier (100 x 3, 128 units, dense 256 and 128, 5-way
// softmax).
//
// The recurrent layer's kernel and recurrent-kernel multiplies use reuse
// factors REUSE_X and REUSE_H (6 and 5 by default: 80 and 320 multipliers);
// MODE picks static (one cell reused for all steps) or non-static (one cell
// per step, sequences overlap). The reuse factors of the fully connected
// layers (REUSE_D1, REUSE_D2, REUSE_DO; by default one multiplier per
// hidden output and a single multiplier for the output layer) are this
// design's choice, as is loading the weights at run time.
//
// Interface and timing: one sequence is accepted when in_valid && in_ready;
// score is valid while out_valid and held until out_ready. In static mode
// the latency from acceptance to out_valid is
//   SEQ_LEN*(max(REUSE_X,REUSE_H)+5) + REUSE_D1 + REUSE_DO + 2
//   (+ REUSE_D2 + 1 with a second hidden layer),
// 306 cycles with the defaults, about 1.5 us at 200 MHz. Weights and biases
// are loaded before use, one word per cycle, through
// wr_en/wr_sel/wr_addr/wr_data; wr_sel picks the memory (rnn_pkg::wsel_e)
// and wr_addr the element (o*N_in + i for a matrix).
module rnn_net
  import rnn_pkg::*;
#(
  parameter cell_e       CELL     = CELL_LSTM,
  parameter mode_e       MODE     = MODE_STATIC,
  parameter int unsigned SEQ_LEN  = 20,
  parameter int unsigned N_IN     = 6,
  parameter int unsigned N_H      = 20,
  parameter int unsigned N_D1     = 64,
  parameter int unsigned N_D2     = 0,
  parameter int unsigned N_OUT    = 1,
  parameter int unsigned REUSE_X  = 6,
  parameter int unsigned REUSE_H  = 5,
  parameter int unsigned REUSE_D1 = 20,
  parameter int unsigned REUSE_D2 = 64,
  parameter int unsigned REUSE_DO = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  fix_t               x_seq [SEQ_LEN][N_IN],
  output logic               out_valid,
  input  logic               out_ready,
  output fix_t               score [N_OUT],
  input  logic               wr_en,
  input  wsel_e              wr_sel,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fix_t               wr_data
);

  localparam int unsigned N_LAST = (N_D2 > 0) ? N_D2 : N_D1;

  logic rnn_valid, rnn_ready, d1_valid, d1_ready, last_valid, last_ready;
  fix_t h_last [N_H];
  fix_t d1_y   [N_D1];
  fix_t d1_act [N_D1];
  fix_t last_act [N_LAST];
  fix_t do_y   [N_OUT];
  logic rnn_wr;

  assign rnn_wr = wr_en && (wr_sel inside {WSEL_KERNEL, WSEL_KBIAS, WSEL_RECUR, WSEL_RBIAS});

  rnn_layer #(
    .CELL(CELL), .MODE(MODE), .SEQ_LEN(SEQ_LEN), .N_IN(N_IN), .N_H(N_H),
    .REUSE_X(REUSE_X), .REUSE_H(REUSE_H)
  ) u_rnn (
    .clk, .rst_n,
    .in_valid, .in_ready, .x_seq,
    .out_valid(rnn_valid), .out_ready(rnn_ready), .h_out(h_last),
    .wr_en(rnn_wr), .wr_sel, .wr_addr, .wr_data
  );

  dense #(.N_IN(N_H), .N_OUT(N_D1), .REUSE(REUSE_D1), .HAS_BIAS(1'b1)) u_dense1 (
    .clk, .rst_n,
    .in_valid(rnn_valid), .in_ready(rnn_ready), .x(h_last),
    .out_valid(d1_valid), .out_ready(d1_ready), .y(d1_y),
    .w_we(wr_en && wr_sel == WSEL_D1_W), .w_addr(wr_addr),
    .b_we(wr_en && wr_sel == WSEL_D1_B), .b_addr(wr_addr),
    .wr_data
  );

  relu_vec #(.N(N_D1)) u_relu1 (.x(d1_y), .y(d1_act));

  if (N_D2 > 0) begin : g_hidden2
    fix_t d2_y [N_D2];
    dense #(.N_IN(N_D1), .N_OUT(N_D2), .REUSE(REUSE_D2), .HAS_BIAS(1'b1)) u_dense2 (
      .clk, .rst_n,
      .in_valid(d1_valid), .in_ready(d1_ready), .x(d1_act),
      .out_valid(last_valid), .out_ready(last_ready), .y(d2_y),
      .w_we(wr_en && wr_sel == WSEL_D2_W), .w_addr(wr_addr),
      .b_we(wr_en && wr_sel == WSEL_D2_B), .b_addr(wr_addr),
      .wr_data
    );
    relu_vec #(.N(N_D2)) u_relu2 (.x(d2_y), .y(last_act));
  end else begin : g_no_hidden2
    assign last_valid = d1_valid;
    assign d1_ready   = last_ready;
    assign last_act   = d1_act;
  end

  dense #(.N_IN(N_LAST), .N_OUT(N_OUT), .REUSE(REUSE_DO), .HAS_BIAS(1'b1)) u_dense_out (
    .clk, .rst_n,
    .in_valid(last_valid), .in_ready(last_ready), .x(last_act),
    .out_valid(out_valid), .out_ready(out_ready), .y(do_y),
    .w_we(wr_en && wr_sel == WSEL_DO_W), .w_addr(wr_addr),
    .b_we(wr_en && wr_sel == WSEL_DO_B), .b_addr(wr_addr),
    .wr_data
  );

  if (N_OUT == 1) begin : g_sigmoid
    act_lut #(.N(1), .FUNC(ACT_SIGMOID)) u_out_act (.x(do_y), .y(score));
  end else begin : g_softmax
    softmax #(.N(N_OUT)) u_out_act (.x(do_y), .y(score));
  end

endmodule
