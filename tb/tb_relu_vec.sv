// tb_relu_vec: random and corner-value test of the ReLU.
module tb_relu_vec;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 64;
  fix_t x [N], y [N];
  int checks = 0, failures = 0, neg = 0;

  relu_vec #(.N(N)) dut (.x, .y);

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int n = 0; n < N; n++) x[n] = fix_t'(rnd(32768));
      x[0] = 16'sh8000; x[1] = 16'sh7fff; x[2] = '0; x[3] = -16'sd1;
      #1;
      for (int n = 0; n < N; n++) begin
        int e;
        e = (int'(x[n]) < 0) ? 0 : int'(x[n]);
        if (int'(x[n]) < 0) neg++;
        checks++;
        if (int'(y[n]) != e) begin
          failures++;
          if (failures < 10) $display("relu(%0d): got %0d", x[n], y[n]);
        end
      end
    end
    checks++;
    if (neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
