// tb_rnn_net: end-to-end test of the network top. Four configurations run
// side by side:
//   u0  the default network (static LSTM, 20 steps, 6 inputs, 20 units,
//       dense 64, reuse 6/5/20/64), four jets;
//   u1  a static GRU network, reduced size;
//   u2  a non-static LSTM network, reduced size, jets sent in bursts;
//   u3  a static LSTM network with two hidden layers and a 3-way softmax
//       (the jet-flavour layout), reduced size.
// Every score is checked against the reference. The test also fails if any
// of these never happened: a jet through a static and a non-static network,
// two jets in flight at once in non-static mode, an output stall, a hidden
// unit zeroed by the ReLU, an output sigmoid input clamped to the table
// range, a softmax input far enough below the maximum to clamp.
module tb_rnn_net;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NC = 4;
  int   c [NC], f [NC], nj [NC], mi [NC], ns [NC], nr [NC], ncl [NC];
  logic d [NC];

  tb_rnn_net_case #(.NJET(4)) u0
    (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .n_jets(nj[0]), .max_inflight(mi[0]),
     .n_stalls(ns[0]), .n_relu_zero(nr[0]), .n_clamp(ncl[0]), .done(d[0]));
  tb_rnn_net_case #(.CELL(CELL_GRU), .SEQ_LEN(6), .N_H(8), .N_D1(16), .REUSE_X(6), .REUSE_H(4),
                   .REUSE_D1(8), .REUSE_DO(16), .NJET(4)) u1
    (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .n_jets(nj[1]), .max_inflight(mi[1]),
     .n_stalls(ns[1]), .n_relu_zero(nr[1]), .n_clamp(ncl[1]), .done(d[1]));
  tb_rnn_net_case #(.MODE(MODE_NONSTATIC), .SEQ_LEN(4), .N_H(8), .N_D1(16), .REUSE_X(6), .REUSE_H(4),
                   .REUSE_D1(4), .REUSE_DO(8), .NJET(2)) u2
    (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .n_jets(nj[2]), .max_inflight(mi[2]),
     .n_stalls(ns[2]), .n_relu_zero(nr[2]), .n_clamp(ncl[2]), .done(d[2]));
  tb_rnn_net_case #(.SEQ_LEN(5), .N_H(12), .N_D1(10), .N_D2(6), .N_OUT(3), .REUSE_X(6), .REUSE_H(6),
                    .REUSE_D1(12), .REUSE_D2(10), .REUSE_DO(6), .NJET(4)) u3
    (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .n_jets(nj[3]), .max_inflight(mi[3]),
     .n_stalls(ns[3]), .n_relu_zero(nr[3]), .n_clamp(ncl[3]), .done(d[3]));

  function automatic int sum(int a [NC]);
    int s = 0;
    foreach (a[k]) s += a[k];
    return s;
  endfunction

  task automatic need(string what, int count, inout int checks, inout int failures);
    checks++;
    $display("%s: %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("  never happened");
    end
  endtask

  initial begin
    int checks, failures;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = sum(c);
    failures = sum(f);
    need("jets through static LSTM network", nj[0], checks, failures);
    need("jets through static GRU network", nj[1], checks, failures);
    need("jets through non-static network", nj[2], checks, failures);
    need("non-static: jets in flight together beyond one", mi[2] - 1, checks, failures);
    need("output stalls", sum(ns), checks, failures);
    need("hidden units zeroed by ReLU", sum(nr), checks, failures);
    need("jets through two-hidden-layer softmax network", nj[3], checks, failures);
    need("output sigmoid inputs clamped", ncl[0] + ncl[1] + ncl[2], checks, failures);
    need("softmax exponentials clamped", ncl[3], checks, failures);
    checks++;
    if (mi[0] != 1 || mi[1] != 1 || mi[3] != 1) begin
      failures++;
      $display("static network had more than one jet in flight");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f) + 1);
    $finish;
  end
endmodule
