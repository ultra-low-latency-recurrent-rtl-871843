// dense: fixed-point matrix-vector multiply y = W x + b with a reuse factor.
//
// This is the "dense layer call" every recurrent cell is built from: the
// kernel multiply W x_t, the recurrent-kernel multiply U h_{t-1}, and the
// fully connected layers after the recurrent layer. The reuse factor REUSE is
// the number of multiplications each hardware multiplier performs per
// matrix-vector product, so the block has N_IN*N_OUT/REUSE multipliers and
// takes REUSE cycles per product; REUSE = 1 is the fully parallel case.
//
// How the N_IN*N_OUT products are spread over multipliers and cycles is this
// design's choice (the source gives only the reuse definition). Two cases are
// supported, which between them cover every reuse value the evaluated
// networks use:
//   * REUSE divides N_IN: each output owns P = N_IN/REUSE multipliers;
//     in cycle r multiplier j of output o multiplies x[j*REUSE + r].
//   * N_IN divides REUSE: each multiplier serves Q = REUSE/N_IN outputs one
//     after the other; in cycle r multiplier m works on output
//     m*Q + r/N_IN and input r%N_IN.
// The weights sit in a memory of REUSE words, each holding the MULTS weights
// the multipliers need in one cycle, so one word is read per cycle.
//
// Products and partial sums are kept at full precision; the result is
// narrowed to the data format once, after the bias is added.
//
// Interface and timing: a vector is accepted when in_valid && in_ready;
// out_valid rises exactly REUSE cycles later and y is held until
// out_valid && out_ready. in_ready is high when the block is idle and its
// output register is empty or being emptied. Reset (rst_n, active low,
// synchronous) clears the control state only; the memories keep their contents. Weights are written one at a
// time through w_we/w_addr (linear index o*N_IN + i) and biases through
// b_we/b_addr; loading at run time instead of compiling the trained values in
// is this design's choice.
module dense
  import rnn_pkg::*;
#(
  parameter int unsigned N_IN     = 6,
  parameter int unsigned N_OUT    = 80,
  parameter int unsigned REUSE    = 6,
  parameter bit          HAS_BIAS = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  fix_t                x [N_IN],
  output logic                out_valid,
  input  logic                out_ready,
  output fix_t                y [N_OUT],
  input  logic                w_we,
  input  logic [WADDR_W-1:0]  w_addr,
  input  logic                b_we,
  input  logic [WADDR_W-1:0]  b_addr,
  input  fix_t                wr_data
);

  localparam bit          CASE_A = (N_IN % REUSE) == 0;
  localparam int unsigned P      = CASE_A ? N_IN / REUSE : 1;
  localparam int unsigned Q      = CASE_A ? 1 : REUSE / N_IN;
  localparam int unsigned MULTS  = CASE_A ? N_OUT * P : N_OUT / Q;
  localparam int unsigned ACC_W  = 2 * DATA_W + $clog2(N_IN + 1) + 2;
  localparam int unsigned RW     = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int unsigned IW     = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned QW     = (Q > 1) ? $clog2(Q) : 1;

  typedef logic signed [ACC_W-1:0] acc_t;

  initial begin
    assert ((N_IN % REUSE == 0) || (REUSE % N_IN == 0))
      else $error("dense: REUSE must divide N_IN or be a multiple of it");
    assert ((N_IN * N_OUT) % REUSE == 0)
      else $error("dense: REUSE must divide N_IN*N_OUT");
  end

  // ------------------------------------------------------------------
  // Weight and bias memories
  // ------------------------------------------------------------------
  fix_t w_mem [REUSE][MULTS];
  fix_t b_mem [N_OUT];

  logic [WADDR_W-1:0] wo, wi;
  logic [RW-1:0]      wr_r;
  logic [WADDR_W-1:0] wr_m;
  localparam int unsigned MW = (MULTS > 1) ? $clog2(MULTS) : 1;

  always_comb begin
    wo = w_addr / WADDR_W'(N_IN);
    wi = w_addr % WADDR_W'(N_IN);
    if (CASE_A) begin
      wr_r = RW'(wi % WADDR_W'(REUSE));
      wr_m = wo * WADDR_W'(P) + wi / WADDR_W'(REUSE);
    end else begin
      wr_r = RW'((wo % WADDR_W'(Q)) * WADDR_W'(N_IN) + wi);
      wr_m = wo / WADDR_W'(Q);
    end
  end

  always_ff @(posedge clk) begin
    if (w_we && w_addr < WADDR_W'(N_IN * N_OUT))
      w_mem[wr_r][MW'(wr_m)] <= wr_data;
  end

  if (HAS_BIAS) begin : g_bias
    always_ff @(posedge clk) begin
      if (b_we && b_addr < WADDR_W'(N_OUT))
        b_mem[$clog2(N_OUT+1)'(b_addr)] <= wr_data;
    end
  end else begin : g_nobias
    always_comb for (int o = 0; o < N_OUT; o++) b_mem[o] = '0;
  end

  // ------------------------------------------------------------------
  // Control
  // ------------------------------------------------------------------
  logic          busy;
  logic [RW-1:0] r_cnt;     // reuse cycle 0..REUSE-1
  logic [IW-1:0] i_cnt;     // case B: input index r % N_IN
  logic [QW-1:0] q_cnt;     // case B: output slot r / N_IN
  fix_t          x_q [N_IN];
  acc_t          acc     [N_OUT];
  acc_t          acc_nxt [N_OUT];
  logic          last;

  assign in_ready = !busy && (!out_valid || out_ready);
  assign last     = (r_cnt == RW'(REUSE - 1));

  // ------------------------------------------------------------------
  // Multipliers for the current reuse cycle
  // ------------------------------------------------------------------
  logic signed [2*DATA_W-1:0] prod [MULTS];

  always_comb begin
    for (int m = 0; m < MULTS; m++) begin
      fix_t xv;
      if (CASE_A) xv = x_q[(m % P) * REUSE + int'(r_cnt)];
      else        xv = x_q[i_cnt];
      prod[m] = w_mem[r_cnt][m] * xv;
    end
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) acc_nxt[o] = acc[o];
    if (CASE_A) begin
      for (int o = 0; o < N_OUT; o++)
        for (int j = 0; j < P; j++)
          acc_nxt[o] = acc_nxt[o] + acc_t'(prod[o * P + j]);
    end else begin
      for (int m = 0; m < MULTS; m++)
        acc_nxt[m * Q + int'(q_cnt)] = acc[m * Q + int'(q_cnt)] + acc_t'(prod[m]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      r_cnt     <= '0;
      i_cnt     <= '0;
      q_cnt     <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        busy  <= 1'b1;
        r_cnt <= '0;
        i_cnt <= '0;
        q_cnt <= '0;
      end else if (busy) begin
        if (last) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
        r_cnt <= r_cnt + 1'b1;
        if (i_cnt == IW'(N_IN - 1)) begin
          i_cnt <= '0;
          q_cnt <= q_cnt + 1'b1;
        end else begin
          i_cnt <= i_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      x_q <= x;
      for (int o = 0; o < N_OUT; o++) acc[o] <= acc_t'(b_mem[o]) <<< DATA_F;
    end else if (busy) begin
      acc <= acc_nxt;
      if (last)
        for (int o = 0; o < N_OUT; o++) y[o] <= fix_t'(acc_nxt[o] >>> DATA_F);
    end
  end

  // Output must stay stable while it waits to be taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid;
  endproperty
  a_hold: assert property (p_hold);

endmodule
