// tb_rnn_layer_case: drives one rnn_layer configuration with NSEQ random
// sequences, issued back to back, and checks each final hidden state against
// the software reference, in order. Static mode: the latency of every
// sequence must be SEQ_LEN*(L+2) cycles and no two sequences may overlap.
// Non-static mode: sequences must overlap (more than one in flight) and the
// interval between acceptances must be shorter than one sequence's latency.
// Reports its counts through ports; used by tb_rnn_layer and tb_toptag_net.
module tb_rnn_layer_case
  import rnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter cell_e       CELL    = CELL_LSTM,
  parameter mode_e       MODE    = MODE_STATIC,
  parameter int unsigned SEQ_LEN = 20,
  parameter int unsigned N_IN    = 6,
  parameter int unsigned N_H     = 20,
  parameter int unsigned REUSE_X = 6,
  parameter int unsigned REUSE_H = 5,
  parameter int unsigned NSEQ    = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   max_inflight,
  output logic done
);
  localparam int G   = (CELL == CELL_LSTM) ? 4 : 3;
  localparam int LAT = ((REUSE_X > REUSE_H) ? REUSE_X : REUSE_H) + 3;

  logic in_valid, in_ready, out_valid, out_ready, wr_en;
  wsel_e wr_sel;
  logic [WADDR_W-1:0] wr_addr;
  fix_t wr_data;
  fix_t x_seq [SEQ_LEN][N_IN];
  fix_t h_out [N_H];

  rnn_layer #(.CELL(CELL), .MODE(MODE), .SEQ_LEN(SEQ_LEN), .N_IN(N_IN), .N_H(N_H),
              .REUSE_X(REUSE_X), .REUSE_H(REUSE_H)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  vec_t wk, bk, u, br;
  vec_t expq [$];
  int   t_in [$];
  int   n_in = 0, n_out = 0, last_acc = -1, min_ii = 1 << 30;
  logic loaded = 0;

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  // The driver works 2 time units after an edge, after the collector has
  // set out_ready, since in_ready may depend on it.
  task automatic step2();
    @(posedge clk);
    #2;
  endtask

  task automatic load(wsel_e sel, vec_t v);
    foreach (v[k]) begin
      wr_en = 1; wr_sel = sel; wr_addr = WADDR_W'(k); wr_data = fix_t'(v[k]);
      step();
    end
    wr_en = 0;
  endtask

  function automatic vec_t run_ref(vec_t xs [SEQ_LEN]);
    vec_t h, c, r;
    h = new[N_H]; c = new[N_H];
    foreach (h[k]) begin h[k] = 0; c[k] = 0; end
    for (int t = 0; t < SEQ_LEN; t++) begin
      if (CELL == CELL_LSTM) begin
        r = lstm_step(wk, bk, u, xs[t], h, c, N_IN, N_H);
        for (int k = 0; k < N_H; k++) begin h[k] = r[k]; c[k] = r[N_H+k]; end
      end else begin
        h = gru_step(wk, bk, u, br, xs[t], h, N_IN, N_H);
      end
    end
    return h;
  endfunction

  // driver
  initial begin
    vec_t xs [SEQ_LEN];
    checks = 0; failures = 0; max_inflight = 0; done = 0;
    in_valid = 0; wr_en = 0; wr_sel = WSEL_KERNEL; wr_addr = '0; wr_data = '0;
    foreach (x_seq[t, i]) x_seq[t][i] = '0;
    wait (rst_n);
    step2();
    wk = rnd_vec(G*N_H*N_IN, 512);
    bk = rnd_vec(G*N_H, 1024);
    u  = rnd_vec(G*N_H*N_H, 512);
    br = rnd_vec(G*N_H, 1024);
    load(WSEL_KERNEL, wk);
    load(WSEL_KBIAS, bk);
    load(WSEL_RECUR, u);
    if (CELL == CELL_GRU) load(WSEL_RBIAS, br);
    loaded = 1;
    for (int s = 0; s < NSEQ; s++) begin
      for (int t = 0; t < SEQ_LEN; t++) begin
        xs[t] = rnd_vec(N_IN, 2048);
        for (int i = 0; i < N_IN; i++) x_seq[t][i] = fix_t'(xs[t][i]);
      end
      in_valid = 1;
      while (!in_ready) step2();
      step2();
      expq.push_back(run_ref(xs));
      t_in.push_back(cyc);
      if (last_acc >= 0 && cyc - last_acc < min_ii) min_ii = cyc - last_acc;
      last_acc = cyc;
      n_in++;
      if (n_in - n_out > max_inflight) max_inflight = n_in - n_out;
      in_valid = 0;
    end
  end

  // collector, with random back-pressure. Everything is sampled 1 time unit
  // after an edge: out_valid && out_ready then means the handshake happens on
  // the next edge.
  initial begin
    vec_t e;
    int t0, vcyc;
    logic prev_v;
    out_ready = 0;
    prev_v = 0;
    vcyc = 0;
    wait (rst_n);
    while (n_out < NSEQ) begin
      out_ready = ($urandom_range(0, 3) != 0);
      if (out_valid && !prev_v) vcyc = cyc;
      prev_v = out_valid;
      if (out_valid && out_ready) begin
        e  = expq.pop_front();
        t0 = t_in.pop_front();
        for (int n = 0; n < N_H; n++) begin
          checks++;
          if (int'(h_out[n]) != e[n]) begin
            failures++;
            if (failures < 10) $display("layer cell=%0d mode=%0d seq %0d h[%0d]: got %0d expected %0d",
                                        CELL, MODE, n_out, n, h_out[n], e[n]);
          end
        end
        if (MODE == MODE_STATIC) begin
          checks++;
          if (vcyc - t0 != int'(SEQ_LEN) * (LAT + 2)) begin
            failures++;
            $display("static layer latency %0d, expected %0d", vcyc - t0, int'(SEQ_LEN) * (LAT + 2));
          end
        end
        n_out++;
        prev_v = 0;
      end
      step();
    end
    out_ready = 0;
    checks++;
    if (MODE == MODE_STATIC) begin
      if (max_inflight != 1) begin
        failures++;
        $display("static layer: %0d sequences in flight", max_inflight);
      end
    end else begin
      if (max_inflight < 2) begin
        failures++;
        $display("non-static layer: sequences never overlapped");
      end
      checks++;
      if (NSEQ > 1 && min_ii >= int'(SEQ_LEN) * (LAT + 2)) begin
        failures++;
        $display("non-static layer: interval %0d not shorter than a sequence", min_ii);
      end
    end
    done = 1;
  end
endmodule
