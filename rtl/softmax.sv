// softmax: softmax output layer, y_i = exp(x_i) / sum_j exp(x_j), by tables.
//
// Used as the last activation of the multi-class networks (three jet
// flavours, five drawing classes). It works in the numerically stable form
// exp(x_i - max) / sum_j exp(x_j - max):
//   1. the largest input is found and subtracted from every input, so each
//      difference d_i is <= 0 and the largest term is exp(0) = 1;
//   2. exp(d_i) is read from a 1024-entry table over [-16, 0] in steps of
//      1/64 (entry k = floor(exp(-k/64) * 2^14), k = min(-64*d_i, 1023));
//   3. the terms are summed (14 fractional bits; the sum lies in [1, N]);
//   4. 1/sum is read from a 1024-entry table over [0, NP), NP the power of
//      two >= N (entry k = floor(2^14 / ((k + 0.5) * NP/1024)), limited
//      to 2^14);
//   5. each term is multiplied by 1/sum and narrowed to the data format.
// The source says only that the softmax is computed with a lookup table and
// that this table needed more precision and more entries than the rest of
// the network; the table sizes, ranges and the max subtraction are this
// design's choices. Both tables are constants computed at elaboration.
//
// Interface and timing: purely combinational, N inputs to N outputs in the
// data format (rnn_pkg); the outputs are non-negative and sum to about 1.
module softmax
  import rnn_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  fix_t x [N],
  output fix_t y [N]
);

  localparam int unsigned TF  = 14;
  localparam int unsigned NP  = (N <= 1) ? 1 : (1 << $clog2(N));
  localparam int unsigned NPL = $clog2(NP);
  localparam int unsigned SW  = TF + NPL + 1;           // sum width

  typedef logic [TF:0] ent_t;                           // unsigned, <= 2^14
  typedef ent_t tab_t [TABLE_SIZE];

  function automatic tab_t make_exp();
    tab_t t;
    for (int k = 0; k < TABLE_SIZE; k++)
      t[k] = ent_t'(longint'($floor($exp(-real'(k) / 64.0) * real'(1 << TF))));
    return t;
  endfunction

  function automatic tab_t make_inv();
    tab_t t;
    for (int k = 0; k < TABLE_SIZE; k++) begin
      real s, v;
      s = (real'(k) + 0.5) * real'(NP) / real'(TABLE_SIZE);
      v = $floor(real'(1 << TF) / s);
      if (v > real'(1 << TF)) v = real'(1 << TF);
      t[k] = ent_t'(longint'(v));
    end
    return t;
  endfunction

  localparam tab_t EXP_T = make_exp();
  localparam tab_t INV_T = make_inv();

  always_comb begin
    fix_t                 mx;
    logic [SW-1:0]        sum;
    ent_t                 e [N];
    ent_t                 inv;
    logic [SW-1:0]        sidx;
    for (int n = 0; n < N; n++) e[n] = '0;
    mx = x[0];
    for (int n = 1; n < N; n++) if (x[n] > mx) mx = x[n];
    sum = '0;
    for (int n = 0; n < N; n++) begin
      logic signed [DATA_W:0] d;     // x - max, <= 0, one extra bit
      logic        [DATA_W:0] k;
      d = (DATA_W+1)'(x[n]) - (DATA_W+1)'(mx);
      k = (DATA_W+1)'((-d) >>> (DATA_F - 6));
      e[n] = EXP_T[(k > (DATA_W+1)'(TABLE_SIZE - 1)) ? 10'(TABLE_SIZE - 1) : 10'(k)];
      sum  = sum + SW'(e[n]);
    end
    // index = sum * 1024 / NP with the sum's 14 fractional bits dropped
    sidx = sum >> (TF + NPL - 10);
    inv  = INV_T[(sidx > SW'(TABLE_SIZE - 1)) ? 10'(TABLE_SIZE - 1) : 10'(sidx)];
    for (int n = 0; n < N; n++)
      y[n] = fix_t'((32'(e[n]) * 32'(inv)) >> (2*TF - DATA_F));
  end

endmodule
