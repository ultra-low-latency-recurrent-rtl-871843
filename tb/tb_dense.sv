// tb_dense: self-checking test of the reuse-factor matrix-vector multiply.
// Four shapes: the default kernel shape of the top-tagging LSTM (6x80, R=6),
// several multipliers per output (R divides N_IN), several outputs per
// multiplier (N_IN divides R), and the fully parallel case R=1.
module tb_dense;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int   c [4], f [4];
  logic d [4];

  tb_dense_case #(.N_IN(6), .N_OUT(80), .REUSE(6))  u0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_dense_case #(.N_IN(8), .N_OUT(5),  .REUSE(4))  u1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_dense_case #(.N_IN(4), .N_OUT(6),  .REUSE(8))  u2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));
  tb_dense_case #(.N_IN(3), .N_OUT(4),  .REUSE(1))  u3 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .done(d[3]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3], f[0]+f[1]+f[2]+f[3]);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3], f[0]+f[1]+f[2]+f[3]+1);
    $finish;
  end
endmodule
