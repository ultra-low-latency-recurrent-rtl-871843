// tb_hadamard: random test of the element-wise product, including the
// extreme operand values, against the software reference.
module tb_hadamard;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 20;
  fix_t a [N], b [N], y [N];
  int checks = 0, failures = 0;

  hadamard #(.N(N)) dut (.a, .b, .y);

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int n = 0; n < N; n++) begin
        a[n] = fix_t'(rnd(32768));
        b[n] = fix_t'(rnd(it < 250 ? 2048 : 32768));
      end
      if (it == 0) begin
        a[0] = 16'sh8000; b[0] = 16'sh8000;
        a[1] = 16'sh7fff; b[1] = 16'sh8000;
        a[2] = 16'sd1024; b[2] = 16'sd1024;
      end
      #1;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (int'(y[n]) != fmul(int'(a[n]), int'(b[n]))) begin
          failures++;
          if (failures < 10) $display("%0d * %0d: got %0d expected %0d", a[n], b[n], y[n], fmul(int'(a[n]), int'(b[n])));
        end
      end
      if (it == 0) begin
        checks++;
        if (y[2] != 16'sd1024) failures++;   // 1.0 * 1.0
      end
    end
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
