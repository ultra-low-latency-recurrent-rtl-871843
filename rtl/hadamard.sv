// hadamard: element-wise (Hadamard) product of two fixed-point vectors.
//
// y[n] = a[n] * b[n], the full 2*DATA_W-bit product narrowed back to the data
// format by dropping DATA_F fractional bits (truncation) and wrapping. These
// products complete the recurrent state update once the matrix multiplies
// and activations are done: f.c, i.g and o.tanh(c) in the LSTM, r.(U h),
// z.h and (1-z).candidate in the GRU.
//
// One multiplier per element, purely combinational (y follows a and b in the
// same cycle). Spending one multiplier per element, rather than sharing them
// over several cycles, is this design's choice.
module hadamard
  import rnn_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  fix_t a [N],
  input  fix_t b [N],
  output fix_t y [N]
);

  always_comb
    for (int n = 0; n < N; n++) y[n] = fix_mul(a[n], b[n]);

endmodule
