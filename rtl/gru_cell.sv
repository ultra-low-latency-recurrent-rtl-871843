// gru_cell: one state update of a gated recurrent unit layer.
//
// Given x_t and h_{t-1} it computes, with "." the element-wise product,
//   z    = sigmoid(W_z x + b_z + U_z h + r_z)        (update gate)
//   r    = sigmoid(W_r x + b_r + U_r h + r_r)        (reset gate)
//   cand = tanh   (W_h x + b_h + r . (U_h h + r_h))
//   h_t  = z . h_{t-1} + (1 - z) . cand
// The three kernel multiplies are one N_IN x 3*N_H dense multiply and the
// three recurrent ones one N_H x 3*N_H dense multiply, each with its own bias,
// run side by side with reuse factors REUSE_X and REUSE_H. Rows are ordered
// z, r, h. Applying the reset gate after the recurrent multiply, with two
// bias vectors, is this design's choice; it is the variant whose parameter
// count (3*(N_IN*N_H + N_H*N_H + 2*N_H)) matches the evaluated networks.
//
// Three registered steps follow the multiplies: the gates, the candidate
// state, and the new hidden state.
//
// Interface and timing: x/h_prev are taken when in_valid && in_ready;
// out_valid rises max(REUSE_X, REUSE_H) + 3 cycles later and h is held until
// out_valid && out_ready. Weights are written through
// wr_en/wr_sel/wr_addr/wr_data (see rnn_pkg::wsel_e).
module gru_cell
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
  output logic               out_valid,
  input  logic               out_ready,
  output fix_t               h      [N_H],
  input  logic               wr_en,
  input  wsel_e              wr_sel,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fix_t               wr_data
);

  localparam int unsigned G = 3;

  typedef enum logic [2:0] {S_IDLE, S_MV, S_CAND, S_HID, S_DONE} state_e;
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

  dense #(.N_IN(N_H), .N_OUT(G*N_H), .REUSE(REUSE_H), .HAS_BIAS(1'b1)) u_recurrent (
    .clk, .rst_n,
    .in_valid(start), .in_ready(kh_in_ready), .x(h_prev),
    .out_valid(kh_out_valid), .out_ready(take), .y(ph),
    .w_we(wr_en && wr_sel == WSEL_RECUR), .w_addr(wr_addr),
    .b_we(wr_en && wr_sel == WSEL_RBIAS), .b_addr(wr_addr),
    .wr_data
  );

  fix_t pre_zr [2*N_H];
  fix_t act_zr [2*N_H];
  always_comb
    for (int n = 0; n < 2*N_H; n++) pre_zr[n] = px[n] + ph[n];
  act_lut #(.N(2*N_H), .FUNC(ACT_SIGMOID)) u_sig (.x(pre_zr), .y(act_zr));

  // Registered gates, the two halves of the candidate pre-activation, h_{t-1}.
  fix_t gz [N_H], gr [N_H], xh [N_H], hh [N_H], h_old [N_H];

  fix_t rhh [N_H], pre_c [N_H], cand_n [N_H], cand [N_H];
  hadamard #(.N(N_H)) u_rh (.a(gr), .b(hh), .y(rhh));
  always_comb for (int n = 0; n < N_H; n++) pre_c[n] = xh[n] + rhh[n];
  act_lut #(.N(N_H), .FUNC(ACT_TANH)) u_tanh (.x(pre_c), .y(cand_n));

  fix_t one_m_z [N_H], zh [N_H], zc [N_H];
  always_comb for (int n = 0; n < N_H; n++) one_m_z[n] = fix_one() - gz[n];
  hadamard #(.N(N_H)) u_zh (.a(gz),      .b(h_old), .y(zh));
  hadamard #(.N(N_H)) u_zc (.a(one_m_z), .b(cand),  .y(zc));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) state <= S_MV;
        S_MV:   if (take)  state <= S_CAND;
        S_CAND: state <= S_HID;
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
    if (start) h_old <= h_prev;
    if (take) begin
      for (int n = 0; n < N_H; n++) begin
        gz[n] <= act_zr[n];
        gr[n] <= act_zr[N_H + n];
        xh[n] <= px[2*N_H + n];
        hh[n] <= ph[2*N_H + n];
      end
    end
    if (state == S_CAND) cand <= cand_n;
    if (state == S_HID)
      for (int n = 0; n < N_H; n++) h[n] <= zh[n] + zc[n];
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);

endmodule
