// tb_gru_cell: self-checking test of one GRU state update at the
// top-tagging size (6 inputs, 20 units, reuse 6 and 5). Random weights,
// inputs and states; h is compared bit for bit with the software
// reference, the latency with max(REUSE_X, REUSE_H) + 3, and the outputs
// must hold while out_ready is low.
module tb_gru_cell;
  import rnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_IN = 6, N_H = 20, RX = 6, RH = 5, NT = 30;
  localparam int LAT  = ((RX > RH) ? RX : RH) + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid, in_ready, out_valid, out_ready, wr_en;
  wsel_e wr_sel;
  logic [WADDR_W-1:0] wr_addr;
  fix_t wr_data;
  fix_t x [N_IN], h_prev [N_H], h [N_H];

  gru_cell #(.N_IN(N_IN), .N_H(N_H), .REUSE_X(RX), .REUSE_H(RH)) dut (.*);

  int checks = 0, failures = 0;
  vec_t wk, bk, u, br, xv, hv, r;

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  task automatic load(wsel_e sel, vec_t v);
    foreach (v[k]) begin
      wr_en = 1; wr_sel = sel; wr_addr = WADDR_W'(k); wr_data = fix_t'(v[k]);
      step();
    end
    wr_en = 0;
  endtask

  initial begin
    int t0;
    in_valid = 0; out_ready = 0; wr_en = 0; wr_sel = WSEL_KERNEL; wr_addr = '0; wr_data = '0;
    repeat (3) step();
    rst_n = 1;
    wk = rnd_vec(3*N_H*N_IN, 512);
    bk = rnd_vec(3*N_H, 1024);
    u  = rnd_vec(3*N_H*N_H, 512);
    load(WSEL_KERNEL, wk);
    load(WSEL_KBIAS, bk);
    br = rnd_vec(3*N_H, 1024);
    load(WSEL_RECUR, u);
    load(WSEL_RBIAS, br);
    for (int it = 0; it < NT; it++) begin
      xv = rnd_vec(N_IN, 2048);
      hv = rnd_vec(N_H, 1024);
      foreach (x[i]) x[i] = fix_t'(xv[i]);
      foreach (h_prev[i]) h_prev[i] = fix_t'(hv[i]);
      r = gru_step(wk, bk, u, br, xv, hv, N_IN, N_H);
      in_valid = 1;
      while (!in_ready) step();
      step();
      t0 = cyc;
      in_valid = 0;
      // scramble the inputs: the cell must have captured them
      foreach (x[i]) x[i] = fix_t'(rnd(4096));
      foreach (h_prev[i]) h_prev[i] = fix_t'(rnd(4096));
      while (!out_valid) step();
      checks++;
      if (cyc - t0 != LAT) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - t0, LAT);
      end
      repeat ($urandom_range(0, 3)) step();
      for (int n = 0; n < N_H; n++) begin
        checks++;
        if (int'(h[n]) != r[n]) begin
          failures++;
          if (failures < 10) $display("it %0d h[%0d]: got %0d expected %0d", it, n, h[n], r[n]);
        end
      end
      out_ready = 1;
      step();
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
