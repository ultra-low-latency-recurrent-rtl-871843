// act_lut: element-wise sigmoid or tanh of a fixed-point vector by table lookup.
//
// The gate non-linearities of the recurrent cells, and the sigmoid of the
// network output, are evaluated from a 1024-entry table sampled uniformly over
// [-8, 8) for the sigmoid and [-4, 4) for tanh; inputs outside the range use
// the first or last entry. The table, the range and the clamping are the
// usual settings of the HLS activation library the source builds on; the
// source itself only names the functions.
//
// Table entry k holds floor(f(x_k) * 2^14) as a 16-bit two's-complement word,
// with x_k = -8 + 16*k/1024 (sigmoid) or x_k = -4 + 8*k/1024 (tanh); tanh is
// evaluated as (e^2x - 1)/(e^2x + 1). The table is a constant computed by a
// function during elaboration, so it synthesizes to a ROM. The index is
// floor(x * 1024 / range) + 512, taken straight from the bits of x with an
// arithmetic shift, and the entry is truncated to the data format.
//
// All N lookups share one table and are combinational: y follows x in the
// same cycle. Needs DATA_F >= 7.
module act_lut
  import rnn_pkg::*;
#(
  parameter int unsigned N    = 80,
  parameter act_e        FUNC = ACT_SIGMOID
) (
  input  fix_t x [N],
  output fix_t y [N]
);

  // log2 of table steps per unit input: 1024/16 = 64 (sigmoid), 1024/8 = 128 (tanh)
  localparam int unsigned STEP_LOG2 = (FUNC == ACT_SIGMOID) ? 6 : 7;
  localparam int unsigned HALF      = TABLE_SIZE / 2;

  typedef logic signed [15:0] table_t [TABLE_SIZE];

  // Table contents, computed at elaboration: entry k holds
  // floor(f(x_k) * 2^TABLE_F) with x_k the left edge of bin k.
  function automatic table_t make_table();
    table_t t;
    for (int k = 0; k < TABLE_SIZE; k++) begin
      real xr, e, v;
      if (FUNC == ACT_SIGMOID) begin
        xr = -8.0 + 16.0 * real'(k) / real'(TABLE_SIZE);
        v  = 1.0 / (1.0 + $exp(-xr));
      end else begin
        xr = -4.0 + 8.0 * real'(k) / real'(TABLE_SIZE);
        e  = $exp(2.0 * xr);
        v  = (e - 1.0) / (e + 1.0);
      end
      t[k] = 16'(longint'($floor(v * real'(1 << TABLE_F))));
    end
    return t;
  endfunction

  localparam table_t ROM = make_table();

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [DATA_W:0] idx;
      logic [$clog2(TABLE_SIZE)-1:0] a;
      idx = (DATA_W+1)'(x[n] >>> (DATA_F - STEP_LOG2)) + (DATA_W+1)'(HALF);
      if (idx < 0)                          a = '0;
      else if (idx > (DATA_W+1)'(TABLE_SIZE - 1)) a = '1;
      else                                  a = idx[$clog2(TABLE_SIZE)-1:0];
      y[n] = fix_t'(ROM[a] >>> (TABLE_F - DATA_F));
    end
  end

endmodule
