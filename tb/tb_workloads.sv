// tb_workloads: the two larger evaluated networks at their full sizes, each
// with an LSTM and with a GRU recurrent layer, run through the network top:
//   jet-flavour tagger: 15 tracks x 6 features, 120 units, reuse (48, 40),
//                       dense 50 and 10 with ReLU, 3-way softmax;
//   QuickDraw:          100 pen samples x 3 values, 128 units, reuse (48, 32),
//                       dense 256 and 128 with ReLU, 5-way softmax.
// Also the top-quark tagger at its full size with a GRU, and with an LSTM in
// non-static mode (20 cells, five jets sent back to back).
// Weights are random; each network classifies two sequences, scores checked
// bit for bit against the software reference and the latency against the
// formula in rnn_net. The reuse factors of the dense layers after the
// recurrent layer are this design's choice (N_in cycles per layer).
module tb_workloads;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NC = 6;
  int   c [NC], f [NC], nj [NC], mi [NC], ns [NC], nr [NC], ncl [NC];
  logic d [NC];

  tb_rnn_net_case #(.CELL(CELL_LSTM), .SEQ_LEN(15), .N_IN(6), .N_H(120), .N_D1(50), .N_D2(10), .N_OUT(3),
                    .REUSE_X(48), .REUSE_H(40), .REUSE_D1(120), .REUSE_D2(50), .REUSE_DO(10), .NJET(2)) u_flavor_lstm
    (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .n_jets(nj[0]), .max_inflight(mi[0]),
     .n_stalls(ns[0]), .n_relu_zero(nr[0]), .n_clamp(ncl[0]), .done(d[0]));
  tb_rnn_net_case #(.CELL(CELL_GRU), .SEQ_LEN(15), .N_IN(6), .N_H(120), .N_D1(50), .N_D2(10), .N_OUT(3),
                    .REUSE_X(48), .REUSE_H(40), .REUSE_D1(120), .REUSE_D2(50), .REUSE_DO(10), .NJET(2)) u_flavor_gru
    (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .n_jets(nj[1]), .max_inflight(mi[1]),
     .n_stalls(ns[1]), .n_relu_zero(nr[1]), .n_clamp(ncl[1]), .done(d[1]));
  tb_rnn_net_case #(.CELL(CELL_LSTM), .SEQ_LEN(100), .N_IN(3), .N_H(128), .N_D1(256), .N_D2(128), .N_OUT(5),
                    .REUSE_X(48), .REUSE_H(32), .REUSE_D1(128), .REUSE_D2(256), .REUSE_DO(128), .NJET(2)) u_qdraw_lstm
    (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .n_jets(nj[2]), .max_inflight(mi[2]),
     .n_stalls(ns[2]), .n_relu_zero(nr[2]), .n_clamp(ncl[2]), .done(d[2]));
  tb_rnn_net_case #(.CELL(CELL_GRU), .SEQ_LEN(100), .N_IN(3), .N_H(128), .N_D1(256), .N_D2(128), .N_OUT(5),
                    .REUSE_X(48), .REUSE_H(32), .REUSE_D1(128), .REUSE_D2(256), .REUSE_DO(128), .NJET(2)) u_qdraw_gru
    (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .n_jets(nj[3]), .max_inflight(mi[3]),
     .n_stalls(ns[3]), .n_relu_zero(nr[3]), .n_clamp(ncl[3]), .done(d[3]));
  tb_rnn_net_case #(.CELL(CELL_GRU), .NJET(2)) u_top_gru
    (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .n_jets(nj[4]), .max_inflight(mi[4]),
     .n_stalls(ns[4]), .n_relu_zero(nr[4]), .n_clamp(ncl[4]), .done(d[4]));
  tb_rnn_net_case #(.CELL(CELL_LSTM), .MODE(MODE_NONSTATIC), .NJET(1), .BURST(4)) u_top_nonstatic
    (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .n_jets(nj[5]), .max_inflight(mi[5]),
     .n_stalls(ns[5]), .n_relu_zero(nr[5]), .n_clamp(ncl[5]), .done(d[5]));

  function automatic int sum(int a [NC]);
    int s = 0;
    foreach (a[k]) s += a[k];
    return s;
  endfunction

  initial begin
    int checks, failures;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    checks = sum(c);
    failures = sum(f);
    for (int k = 0; k < NC; k++) begin
      checks++;
      if (nj[k] != ((k == 5) ? 5 : 2)) failures++;
    end
    checks++;
    if (mi[5] < 2) failures++;
    $display("sequences classified: %0d %0d %0d %0d %0d %0d", nj[0], nj[1], nj[2], nj[3], nj[4], nj[5]);
    $display("non-static top tagger: up to %0d jets in flight", mi[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f) + 1);
    $finish;
  end
endmodule
