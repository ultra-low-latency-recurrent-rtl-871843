// lstm_cell: one state update of a long short-term memory layer.
//
// Given the time-step input x_t and the previous state (h_{t-1}, c_{t-1}) it
// computes
//   i = sigmoid(W_i x + U_i h + b_i)      f = sigmoid(W_f x + U_f h + b_f)
//   g = tanh   (W_c x + U_c h + b_c)      o = sigmoid(W_o x + U_o h + b_o)
//   c_t = f.c_{t-1} + i.g                 h_t = o.tanh(c_t)
// where "." is the element-wise product. The four kernel multiplies are done
// as one N_IN x 4*N_H dense multiply and the four recurrent-kernel multiplies
// as one N_H x 4*N_H dense multiply, the two running side by side with their
// own reuse factors REUSE_X and REUSE_H. The rows are ordered i, f, c, o; only
// the kernel has a bias.
//
// After the multiplies the cell spends three registered steps: the gate
// activations (table lookups), the new cell state, and the new hidden state.
// The gate order, the register placement and the handshakes are this
// design's choices.
//
// Interface and timing: x/h_prev/c_prev are taken when in_valid && in_ready;
// out_valid rises max(REUSE_X, REUSE_H) + 3 cycles later and h/c are held
// until out_valid && out_ready. One update is in flight at a time. Weights
// are written through wr_en/wr_sel/wr_addr/wr_data (see rnn_pkg::wsel_e).
module lstm_cell
  import rnn_pkg::*;
#(
  parameter int unsigned N_IN    = 6,
  parameter int unsigned N_H     = 20,
  parameter int unsigned REUSE_X = 6,
  parameter int unsigned REUSE_H = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  fix_t               x      [N_IN],
  input  fix_t               h_prev [N_H],
  input  fix_t               c_prev [N_H],
  output logic               out_valid,
  input  logic               out_ready,
  output fix_t               h      [N_H],
  output fix_t               c      [N_H],
  input  logic               wr_en,
  input  wsel_e              wr_sel,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fix_t               wr_data
);

  localparam int unsigned G = 4;

  typedef enum logic [2:0] {S_IDLE, S_MV, S_CELL, S_HID, S_DONE} state_e;
  state_e state;

  logic kx_in_ready, kh_in_ready, kx_out_valid, kh_out_valid;
  logic start, take;
  fix_t px [G*N_H];
  fix_t ph [G*N_H];

  assign in_ready = (state == S_IDLE) && kx_in_ready && kh_in_ready;
  assign start    = in_valid && in_ready;
  assign take     = (state == S_MV) && kx_out_valid && kh_out_valid;

  dense #(.N_IN(N_IN), .N_OUT(G*N_H), .REUSE(REUSE_X), .HAS_BIAS(1'b1)) u_kernel (
    .clk, .rst_n,
    .in_valid(start), .in_ready(kx_in_ready), .x(x),
    .out_valid(kx_out_valid), .out_ready(take), .y(px),
    .w_we(wr_en && wr_sel == WSEL_KERNEL), .w_addr(wr_addr),
    .b_we(wr_en && wr_sel == WSEL_KBIAS),  .b_addr(wr_addr),
    .wr_data
  );

  dense #(.N_IN(N_H), .N_OUT(G*N_H), .REUSE(REUSE_H), .HAS_BIAS(1'b0)) u_recurrent (
    .clk, .rst_n,
    .in_valid(start), .in_ready(kh_in_ready), .x(h_prev),
    .out_valid(kh_out_valid), .out_ready(take), .y(ph),
    .w_we(wr_en && wr_sel == WSEL_RECUR), .w_addr(wr_addr),
    .b_we(1'b0), .b_addr('0),
    .wr_data
  );

  // Pre-activations, split into the sigmoid gates (i, f, o) and the tanh one.
  fix_t pre_sig [3*N_H];
  fix_t pre_tan [N_H];
  fix_t act_sig [3*N_H];
  fix_t act_tan [N_H];

  always_comb begin
    for (int n = 0; n < N_H; n++) begin
      pre_sig[n]         = px[n]         + ph[n];          // i
      pre_sig[N_H + n]   = px[N_H + n]   + ph[N_H + n];    // f
      pre_tan[n]         = px[2*N_H + n] + ph[2*N_H + n];  // c candidate
      pre_sig[2*N_H + n] = px[3*N_H + n] + ph[3*N_H + n];  // o
    end
  end

  act_lut #(.N(3*N_H), .FUNC(ACT_SIGMOID)) u_sig  (.x(pre_sig), .y(act_sig));
  act_lut #(.N(N_H),   .FUNC(ACT_TANH))    u_tanh (.x(pre_tan), .y(act_tan));

  // Registered gate values and previous cell state.
  fix_t gi [N_H], gf [N_H], gg [N_H], go [N_H], c_old [N_H];

  fix_t fc [N_H], ig [N_H], c_sum [N_H];
  hadamard #(.N(N_H)) u_fc (.a(gf), .b(c_old), .y(fc));
  hadamard #(.N(N_H)) u_ig (.a(gi), .b(gg),    .y(ig));
  always_comb for (int n = 0; n < N_H; n++) c_sum[n] = fc[n] + ig[n];

  fix_t tanh_c [N_H], h_new [N_H];
  act_lut  #(.N(N_H), .FUNC(ACT_TANH)) u_tanh_c (.x(c), .y(tanh_c));
  hadamard #(.N(N_H))                  u_oh     (.a(go), .b(tanh_c), .y(h_new));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) state <= S_MV;
        S_MV:   if (take)  state <= S_CELL;
        S_CELL: state <= S_HID;
        S_HID: begin
          state     <= S_DONE;
          out_valid <= 1'b1;
        end
        S_DONE: if (out_ready) begin
          state     <= S_IDLE;
          out_valid <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (start) c_old <= c_prev;
    if (take) begin
      for (int n = 0; n < N_H; n++) begin
        gi[n] <= act_sig[n];
        gf[n] <= act_sig[N_H + n];
        go[n] <= act_sig[2*N_H + n];
        gg[n] <= act_tan[n];
      end
    end
    if (state == S_CELL) c <= c_sum;
    if (state == S_HID)  h <= h_new;
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);

endmodule
