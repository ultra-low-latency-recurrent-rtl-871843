// tb_act_lut: exhaustive test of the sigmoid and tanh table lookups. Every
// 16-bit input is applied (four per step) and the output is compared with
// the real function evaluated at the table grid point, truncated to 10
// fractional bits. Also counts inputs that fall outside the table range.
module tb_act_lut;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 4;
  fix_t x [N], ys [N], yt [N];
  int checks = 0, failures = 0, clamped = 0;

  act_lut #(.N(N), .FUNC(ACT_SIGMOID)) u_sig  (.x(x), .y(ys));
  act_lut #(.N(N), .FUNC(ACT_TANH))    u_tanh (.x(x), .y(yt));

  initial begin
    for (int v = -32768; v < 32768; v += N) begin
      for (int n = 0; n < N; n++) x[n] = fix_t'(v + n);
      #1;
      for (int n = 0; n < N; n++) begin
        checks += 2;
        if (clamps(v + n, 6)) clamped++;
        if (int'(ys[n]) != sigmoid(v + n)) begin
          failures++;
          if (failures < 10) $display("sigmoid(%0d): got %0d expected %0d", v+n, ys[n], sigmoid(v+n));
        end
        if (int'(yt[n]) != tanh_f(v + n)) begin
          failures++;
          if (failures < 10) $display("tanh(%0d): got %0d expected %0d", v+n, yt[n], tanh_f(v+n));
        end
      end
    end
    // spot values: sigmoid(0) = 0.5, tanh(0) = 0
    x[0] = '0; #1;
    checks += 2;
    if (ys[0] != 16'sd512) failures++;
    if (yt[0] != 16'sd0)   failures++;
    checks++;
    if (clamped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
