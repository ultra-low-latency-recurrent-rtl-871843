// rnn_layer: runs a whole input sequence through a recurrent cell, in
// static or non-static mode.
//
// A recurrent layer applies the same cell, with the same weights, to every
// step of the input sequence, carrying the state (h, and c for an LSTM) from
// one step to the next; only the hidden state after the last step leaves the
// layer. The state starts at zero for every sequence.
//
//   MODE_STATIC     one cell is built. It processes every step of a
//                   sequence in turn and keeps the state in registers beside
//                   it, so a new sequence can only start once the previous
//                   one has finished: the initiation interval equals the
//                   latency, SEQ_LEN cell updates.
//   MODE_NONSTATIC  SEQ_LEN cells are built, one per step, each with its own
//                   copy of the weights, and the state is handed from cell t
//                   to cell t+1 together with the rest of the sequence. A new
//                   sequence enters as soon as the first cell has passed its
//                   state on, so up to SEQ_LEN sequences are in flight at
//                   once: SEQ_LEN times the resources for about SEQ_LEN times
//                   the throughput.
//
// CELL selects lstm_cell or gru_cell. Both modes follow the paper's
// description. The cells are not internally pipelined (this design's choice),
// so in non-static mode the interval between sequences is one cell update plus
// the hand-off cycles; the further speed-up from sharing a pipelined cell
// between sequences is not built. The zero initial state, the whole-sequence
// input port and the handshakes are this design's choices.
//
// Interface and timing: x_seq (SEQ_LEN steps of N_IN values) is taken when
// in_valid && in_ready; h_out is valid while out_valid and is held until
// out_ready. With cell latency L = max(REUSE_X, REUSE_H) + 3, a static
// sequence takes SEQ_LEN*(L+2) cycles from acceptance to out_valid.
// Weight writes go to every cell.
module rnn_layer
  import rnn_pkg::*;
#(
  parameter cell_e       CELL    = CELL_LSTM,
  parameter mode_e       MODE    = MODE_STATIC,
  parameter int unsigned SEQ_LEN = 20,
  parameter int unsigned N_IN    = 6,
  parameter int unsigned N_H     = 20,
  parameter int unsigned REUSE_X = 6,
  parameter int unsigned REUSE_H = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  fix_t               x_seq [SEQ_LEN][N_IN],
  output logic               out_valid,
  input  logic               out_ready,
  output fix_t               h_out [N_H],
  input  logic               wr_en,
  input  wsel_e              wr_sel,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fix_t               wr_data
);

  localparam int unsigned NCELL = (MODE == MODE_STATIC) ? 1 : SEQ_LEN;
  localparam int unsigned TW    = (SEQ_LEN > 1) ? $clog2(SEQ_LEN) : 1;

  // Per-cell connections.
  logic cin_valid  [NCELL];
  logic cin_ready  [NCELL];
  logic cout_valid [NCELL];
  logic cout_ready [NCELL];
  fix_t cx    [NCELL][N_IN];
  fix_t ch_in [NCELL][N_H];
  fix_t cc_in [NCELL][N_H];
  fix_t ch    [NCELL][N_H];
  fix_t cc    [NCELL][N_H];

  for (genvar k = 0; k < NCELL; k++) begin : g_cell
    if (CELL == CELL_LSTM) begin : g_lstm
      lstm_cell #(.N_IN(N_IN), .N_H(N_H), .REUSE_X(REUSE_X), .REUSE_H(REUSE_H)) u_cell (
        .clk, .rst_n,
        .in_valid(cin_valid[k]), .in_ready(cin_ready[k]),
        .x(cx[k]), .h_prev(ch_in[k]), .c_prev(cc_in[k]),
        .out_valid(cout_valid[k]), .out_ready(cout_ready[k]),
        .h(ch[k]), .c(cc[k]),
        .wr_en, .wr_sel, .wr_addr, .wr_data
      );
    end else begin : g_gru
      gru_cell #(.N_IN(N_IN), .N_H(N_H), .REUSE_X(REUSE_X), .REUSE_H(REUSE_H)) u_cell (
        .clk, .rst_n,
        .in_valid(cin_valid[k]), .in_ready(cin_ready[k]),
        .x(cx[k]), .h_prev(ch_in[k]),
        .out_valid(cout_valid[k]), .out_ready(cout_ready[k]),
        .h(ch[k]),
        .wr_en, .wr_sel, .wr_addr, .wr_data
      );
      always_comb for (int n = 0; n < N_H; n++) cc[k][n] = '0;
    end
  end

  if (MODE == MODE_STATIC) begin : g_static
    // ---------------------------------------------------------------
    // One cell, state kept here, step counter walks the sequence.
    // ---------------------------------------------------------------
    logic          running, cell_busy;
    logic [TW-1:0] t;
    fix_t          seq_q [SEQ_LEN][N_IN];
    fix_t          h_q [N_H];
    fix_t          c_q [N_H];

    assign in_ready      = !running && (!out_valid || out_ready);
    assign cin_valid[0]  = running && !cell_busy;
    assign cx[0]         = seq_q[t];
    assign ch_in[0]      = h_q;
    assign cc_in[0]      = c_q;
    assign cout_ready[0] = running;
    assign h_out         = h_q;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        running   <= 1'b0;
        cell_busy <= 1'b0;
        out_valid <= 1'b0;
        t         <= '0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          running <= 1'b1;
          t       <= '0;
        end
        if (cin_valid[0] && cin_ready[0]) cell_busy <= 1'b1;
        if (cout_valid[0] && cout_ready[0]) begin
          cell_busy <= 1'b0;
          if (t == TW'(SEQ_LEN - 1)) begin
            running   <= 1'b0;
            out_valid <= 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end
      end
    end

    always_ff @(posedge clk) begin
      if (in_valid && in_ready) begin
        seq_q <= x_seq;
        for (int n = 0; n < N_H; n++) begin
          h_q[n] <= '0;
          c_q[n] <= '0;
        end
      end else if (cout_valid[0] && cout_ready[0]) begin
        h_q <= ch[0];
        c_q <= cc[0];
      end
    end

    a_step_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   running |-> t < TW'(SEQ_LEN));

  end else begin : g_nonstatic
    // ---------------------------------------------------------------
    // One cell per step. Stage k holds a sequence, the state entering
    // step k, and whether its cell has been started.
    // ---------------------------------------------------------------
    logic occ     [SEQ_LEN];
    logic started [SEQ_LEN];
    logic pass    [SEQ_LEN];   // stage k hands its result to stage k+1 / output
    fix_t seq_q   [SEQ_LEN][SEQ_LEN][N_IN];
    fix_t h_q     [SEQ_LEN][N_H];
    fix_t c_q     [SEQ_LEN][N_H];
    fix_t hout_q  [N_H];

    assign in_ready = !occ[0];
    assign h_out    = hout_q;

    always_comb begin
      for (int k = 0; k < SEQ_LEN; k++) begin
        cin_valid[k] = occ[k] && !started[k];
        cx[k]        = seq_q[k][k];
        ch_in[k]     = h_q[k];
        cc_in[k]     = c_q[k];
        if (k == SEQ_LEN - 1) pass[k] = cout_valid[k] && (!out_valid || out_ready);
        else                  pass[k] = cout_valid[k] && !occ[k+1];
        cout_ready[k] = pass[k];
      end
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int k = 0; k < SEQ_LEN; k++) begin
          occ[k]     <= 1'b0;
          started[k] <= 1'b0;
        end
        out_valid <= 1'b0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        for (int k = 0; k < SEQ_LEN; k++) begin
          if (cin_valid[k] && cin_ready[k]) started[k] <= 1'b1;
          if (pass[k]) begin
            occ[k]     <= 1'b0;
            started[k] <= 1'b0;
            if (k == SEQ_LEN - 1) out_valid <= 1'b1;
            else                  occ[k+1]  <= 1'b1;
          end
        end
        if (in_valid && in_ready) occ[0] <= 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (in_valid && in_ready) begin
        seq_q[0] <= x_seq;
        for (int n = 0; n < N_H; n++) begin
          h_q[0][n] <= '0;
          c_q[0][n] <= '0;
        end
      end
      for (int k = 0; k < SEQ_LEN; k++) begin
        if (pass[k]) begin
          if (k == SEQ_LEN - 1) hout_q <= ch[k];
          else begin
            seq_q[k+1] <= seq_q[k];
            h_q[k+1]   <= ch[k];
            c_q[k+1]   <= cc[k];
          end
        end
      end
    end

  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid);

endmodule
