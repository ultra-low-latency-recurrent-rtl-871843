// tb_dense_case: drives one dense instance of a given shape and reuse with
// random weights and inputs, random output back-pressure, and checks every
// result against the software reference and the REUSE-cycle latency.
// Reports its counts through ports; used by tb_dense.
module tb_dense_case
  import rnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned N_OUT = 80,
  parameter int unsigned REUSE = 6,
  parameter int unsigned NVEC  = 20
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  logic in_valid, in_ready, out_valid, out_ready, w_we, b_we;
  logic [WADDR_W-1:0] w_addr, b_addr;
  fix_t wr_data, x [N_IN], y [N_OUT];

  dense #(.N_IN(N_IN), .N_OUT(N_OUT), .REUSE(REUSE), .HAS_BIAS(1'b1)) dut (.*);

  vec_t wv, bv, xv, exp_y;
  int   t_acc, cyc;

  always @(posedge clk) cyc <= cyc + 1;

  // Inputs are driven and outputs sampled 1 time unit after a clock edge.
  task automatic step();
    @(posedge clk);
    #1;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; cyc = 0;
    in_valid = 0; out_ready = 0; w_we = 0; b_we = 0; w_addr = '0; b_addr = '0; wr_data = '0;
    foreach (x[i]) x[i] = '0;
    wv = rnd_vec(N_IN*N_OUT, 1024);
    bv = rnd_vec(N_OUT, 2048);
    wait (rst_n);
    step();
    for (int k = 0; k < N_IN*N_OUT; k++) begin
      w_we = 1; w_addr = WADDR_W'(k); wr_data = fix_t'(wv[k]); step();
    end
    w_we = 0;
    for (int k = 0; k < N_OUT; k++) begin
      b_we = 1; b_addr = WADDR_W'(k); wr_data = fix_t'(bv[k]); step();
    end
    b_we = 0;
    for (int v = 0; v < NVEC; v++) begin
      xv = rnd_vec(N_IN, 4096);
      exp_y = dense(wv, bv, xv, N_IN, N_OUT);
      for (int i = 0; i < N_IN; i++) x[i] = fix_t'(xv[i]);
      in_valid = 1;
      while (!in_ready) step();
      step();
      t_acc = cyc;
      in_valid = 0;
      out_ready = 0;
      while (!out_valid) step();
      checks++;
      if (cyc - t_acc != int'(REUSE)) begin
        failures++;
        $display("dense %0dx%0d R=%0d: latency %0d, expected %0d", N_IN, N_OUT, REUSE, cyc - t_acc, REUSE);
      end
      // hold the output a few cycles, then take it
      repeat ($urandom_range(0, 3)) step();
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (int'(y[o]) != exp_y[o]) begin
          failures++;
          if (failures < 10) $display("dense %0dx%0d R=%0d vec %0d out %0d: got %0d expected %0d",
                                      N_IN, N_OUT, REUSE, v, o, y[o], exp_y[o]);
        end
      end
      out_ready = 1;
      step();
      out_ready = 0;
    end
    done = 1;
  end
endmodule
