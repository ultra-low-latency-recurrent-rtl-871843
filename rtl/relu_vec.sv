// relu_vec: element-wise rectified linear unit, y[n] = max(x[n], 0).
//
// The activation of the hidden fully connected layers that follow the
// recurrent layer. Combinational; negative inputs become zero, all others
// pass unchanged.
module relu_vec
  import rnn_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  fix_t x [N],
  output fix_t y [N]
);

  always_comb
    for (int n = 0; n < N; n++) y[n] = x[n][DATA_W-1] ? '0 : x[n];

endmodule
