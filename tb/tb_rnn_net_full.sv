// tb_rnn_net_full: the network top exactly as built by default, i.e. the
// top-quark tagger
// (static LSTM, 20 particles x 6 features, 20 units, dense 64, reuse
// 6/5/20/64, no parameter overrides), taken through complete inferences:
// weights loaded over the weight bus, then four jets, each score checked
// bit for bit against the software reference and the latency checked
// against 306 cycles.
module tb_rnn_net_full;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam cell_e CELL  = CELL_LSTM;
  localparam mode_e MODE  = MODE_STATIC;
  localparam int SEQ_LEN  = 20, N_IN = 6, N_H = 20, N_D1 = 64, N_D2 = 0, N_OUT = 1;
  localparam int REUSE_X  = 6, REUSE_H = 5, REUSE_D1 = 20, REUSE_D2 = 64, REUSE_DO = 64;
  localparam int NJET = 4, BURST = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks, failures, n_jets, max_inflight, n_stalls, n_relu_zero, n_clamp;
  logic done;

  localparam int G   = (CELL == CELL_LSTM) ? 4 : 3;
  localparam int N_LAST = (N_D2 > 0) ? N_D2 : N_D1;
  localparam int LAT = SEQ_LEN * (((REUSE_X > REUSE_H) ? REUSE_X : REUSE_H) + 5) + REUSE_D1 + REUSE_DO + 2
                       + ((N_D2 > 0) ? REUSE_D2 + 1 : 0);

  logic in_valid, in_ready, out_valid, out_ready, wr_en;
  wsel_e wr_sel;
  logic [WADDR_W-1:0] wr_addr;
  fix_t wr_data;
  fix_t score [N_OUT];
  fix_t x_seq [SEQ_LEN][N_IN];

  rnn_net dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  vec_t wk, bk, u, br, w1, b1, w2, b2, wo, bo;
  vec_t expq [$];
  int   t_in [$];
  int   n_in = 0, n_out = 0;

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  task automatic step2();
    @(posedge clk);
    #2;
  endtask

  task automatic load(wsel_e sel, vec_t v);
    foreach (v[k]) begin
      wr_en = 1; wr_sel = sel; wr_addr = WADDR_W'(k); wr_data = fix_t'(v[k]);
      step2();
    end
    wr_en = 0;
  endtask

  function automatic vec_t net_ref(seq_t xs);
    vec_t h, a1, a2, yo, r;
    h  = rnn_ref(CELL == CELL_GRU, wk, bk, u, br, xs, N_IN, N_H);
    a1 = dense(w1, b1, h, N_H, N_D1);
    foreach (a1[k]) if (a1[k] < 0) begin a1[k] = 0; n_relu_zero++; end
    if (N_D2 > 0) begin
      a2 = dense(w2, b2, a1, N_D1, N_D2);
      foreach (a2[k]) if (a2[k] < 0) begin a2[k] = 0; n_relu_zero++; end
    end else begin
      a2 = a1;
    end
    yo = dense(wo, bo, a2, N_LAST, N_OUT);
    if (N_OUT == 1) begin
      if (clamps(yo[0], 6)) n_clamp++;
      r = new[1];
      r[0] = sigmoid(yo[0]);
    end else begin
      foreach (yo[k]) if (yo[k] - yo.max()[0] < -16 * 1024) n_clamp++;
      r = softmax_ref(yo);
    end
    return r;
  endfunction

  // driver
  initial begin
    seq_t xs;
    checks = 0; failures = 0; n_jets = 0; max_inflight = 0; n_stalls = 0;
    n_relu_zero = 0; n_clamp = 0; done = 0;
    in_valid = 0; wr_en = 0; wr_sel = WSEL_KERNEL; wr_addr = '0; wr_data = '0;
    foreach (x_seq[t, i]) x_seq[t][i] = '0;
    wait (rst_n);
    step2();
    wk = rnd_vec(G*N_H*N_IN, 512);
    bk = rnd_vec(G*N_H, 1024);
    u  = rnd_vec(G*N_H*N_H, 512);
    br = rnd_vec(G*N_H, 1024);
    w1 = rnd_vec(N_D1*N_H, 512);
    b1 = rnd_vec(N_D1, 512);
    w2 = rnd_vec(N_D2*N_D1, 512);
    b2 = rnd_vec(N_D2, 512);
    wo = rnd_vec(N_OUT*N_LAST, 2048);
    bo = new[N_OUT];
    foreach (bo[k]) bo[k] = 0;
    load(WSEL_KERNEL, wk);
    load(WSEL_KBIAS, bk);
    load(WSEL_RECUR, u);
    if (CELL == CELL_GRU) load(WSEL_RBIAS, br);
    load(WSEL_D1_W, w1);
    load(WSEL_D1_B, b1);
    if (N_D2 > 0) begin
      load(WSEL_D2_W, w2);
      load(WSEL_D2_B, b2);
    end
    load(WSEL_DO_W, wo);
    xs = new[SEQ_LEN];
    for (int j = 0; j < NJET; j++) begin
      // the output bias swings the final sigmoid into and out of its
      // table range
      // (sigmoid) or, for a softmax, one class far below the others
      bo[0] = (j % 2 == 0) ? 0 : ((j % 4 == 1) ? 12 * 1024 : -12 * 1024);
      if (N_OUT > 1) bo[N_OUT-1] = (j % 2 == 0) ? 0 : 30 * 1024;
      // wait until the network is empty before changing a weight
      while (n_out != n_in) step2();
      load(WSEL_DO_B, bo);
      for (int t = 0; t < SEQ_LEN; t++) begin
        xs[t] = rnd_vec(N_IN, 2048);
        for (int i = 0; i < N_IN; i++) x_seq[t][i] = fix_t'(xs[t][i]);
      end
      expq.push_back(net_ref(xs));
      in_valid = 1;
      while (!in_ready) step2();
      step2();
      t_in.push_back(cyc);
      n_in++;
      if (n_in - n_out > max_inflight) max_inflight = n_in - n_out;
      in_valid = 0;
      // in non-static mode send a burst of jets with the same weights
      if (MODE == MODE_NONSTATIC) begin
        for (int k = 0; k < int'(BURST); k++) begin
          for (int t = 0; t < SEQ_LEN; t++) begin
            xs[t] = rnd_vec(N_IN, 2048);
            for (int i = 0; i < N_IN; i++) x_seq[t][i] = fix_t'(xs[t][i]);
          end
          expq.push_back(net_ref(xs));
          in_valid = 1;
          while (!in_ready) step2();
          step2();
          t_in.push_back(cyc);
          n_in++;
          if (n_in - n_out > max_inflight) max_inflight = n_in - n_out;
          in_valid = 0;
        end
      end
    end
  end

  // collector
  initial begin
    vec_t e;
    int t0, vcyc, total;
    logic prev_v;
    total = (MODE == MODE_NONSTATIC) ? (BURST + 1) * NJET : NJET;
    out_ready = 0;
    prev_v = 0;
    vcyc = 0;
    wait (rst_n);
    while (n_out < total) begin
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && !prev_v) vcyc = cyc;
      prev_v = out_valid;
      if (out_valid && !out_ready) n_stalls++;
      if (out_valid && out_ready) begin
        e  = expq.pop_front();
        t0 = t_in.pop_front();
        for (int k = 0; k < N_OUT; k++) begin
          checks++;
          if (int'(score[k]) != e[k]) begin
            failures++;
            $display("net cell=%0d mode=%0d jet %0d: score[%0d] %0d expected %0d", CELL, MODE, n_out, k, score[k], e[k]);
          end
        end
        if (MODE == MODE_STATIC) begin
          checks++;
          if (vcyc - t0 != LAT) begin
            failures++;
            $display("net latency %0d, expected %0d", vcyc - t0, LAT);
          end
        end
        n_out++;
        n_jets++;
        prev_v = 0;
      end
      step();
    end
    out_ready = 0;
    done = 1;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wait (done);
    checks++;
    if (n_jets != NJET) failures++;
    $display("jets: %0d, output stalls: %0d, ReLU zeros: %0d, clamped outputs: %0d",
             n_jets, n_stalls, n_relu_zero, n_clamp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
