// tb_rnn_layer: self-checking test of the recurrent layer in both modes and
// with both cells: static LSTM at the top-tagging size (20 steps, 6 inputs,
// 20 units, reuse 6/5), static GRU, and non-static LSTM and GRU layers with
// short sequences so that several sequences are in flight at once.
module tb_rnn_layer;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NC = 4;
  int   c [NC], f [NC], mi [NC];
  logic d [NC];

  tb_rnn_layer_case #(.CELL(CELL_LSTM), .MODE(MODE_STATIC), .NSEQ(3)) u0
    (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .max_inflight(mi[0]), .done(d[0]));
  tb_rnn_layer_case #(.CELL(CELL_GRU), .MODE(MODE_STATIC), .SEQ_LEN(5), .N_H(8), .REUSE_X(3), .REUSE_H(8), .NSEQ(3)) u1
    (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .max_inflight(mi[1]), .done(d[1]));
  tb_rnn_layer_case #(.CELL(CELL_LSTM), .MODE(MODE_NONSTATIC), .SEQ_LEN(4), .N_H(8), .REUSE_X(6), .REUSE_H(4), .NSEQ(8)) u2
    (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .max_inflight(mi[2]), .done(d[2]));
  tb_rnn_layer_case #(.CELL(CELL_GRU), .MODE(MODE_NONSTATIC), .SEQ_LEN(3), .N_H(6), .REUSE_X(1), .REUSE_H(1), .NSEQ(8)) u3
    (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .max_inflight(mi[3]), .done(d[3]));

  function automatic int sum(int a [NC]);
    int s = 0;
    foreach (a[k]) s += a[k];
    return s;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3]);
    $display("sequences in flight at most: %0d %0d %0d %0d", mi[0], mi[1], mi[2], mi[3]);
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f));
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(c), sum(f) + 1);
    $finish;
  end
endmodule
