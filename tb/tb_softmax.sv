// tb_softmax: random test of the softmax output layer for 3 and 5 classes
// (the jet-flavour and QuickDraw outputs). Outputs are compared with the
// software reference, and checked to sum to 1 within 3% and to keep the
// largest input's class on top.
module tb_softmax;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  fix_t x3 [3], y3 [3], x5 [5], y5 [5];
  int checks = 0, failures = 0;

  softmax #(.N(3)) u3 (.x(x3), .y(y3));
  softmax #(.N(5)) u5 (.x(x5), .y(y5));

  task automatic check(vec_t xv, fix_t y [], string tag);
    vec_t e;
    int s, am, ay;
    e = softmax_ref(xv);
    s = 0; am = 0; ay = 0;
    foreach (xv[k]) begin
      checks++;
      if (int'(y[k]) != e[k]) begin
        failures++;
        if (failures < 10) $display("%s y[%0d]=%0d expected %0d", tag, k, y[k], e[k]);
      end
      s += int'(y[k]);
      if (xv[k] > xv[am]) am = k;
      if (y[k] > y[ay]) ay = k;
    end
    checks += 2;
    if (s < 993 || s > 1055) begin
      failures++;
      $display("%s outputs sum to %0d/1024", tag, s);
    end
    if (y[am] != y[ay]) begin
      failures++;
      $display("%s largest input is not the largest output", tag);
    end
  endtask

  initial begin
    vec_t v3, v5;
    fix_t t3 [], t5 [];
    t3 = new[3]; t5 = new[5];
    for (int it = 0; it < 2000; it++) begin
      int lim;
      lim = (it < 1000) ? 4096 : 32768;
      v3 = rnd_vec(3, lim);
      v5 = rnd_vec(5, lim);
      foreach (x3[k]) x3[k] = fix_t'(v3[k]);
      foreach (x5[k]) x5[k] = fix_t'(v5[k]);
      #1;
      foreach (t3[k]) t3[k] = y3[k];
      foreach (t5[k]) t5[k] = y5[k];
      check(v3, t3, "N=3");
      check(v5, t5, "N=5");
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
