// tb_sparse_pe: random windows and pruned weights (2 of every 8 channels,
// 3x3 taps, 16 channels). The reference expands the {index, weight}
// entries into a dense kernel and sums all K*K*N_I products, so it does not
// share the PE's selection logic. Checks psum one cycle after en and that
// psum holds while en is low.
module tb_sparse_pe;
  import aoc_pkg::*;
  localparam int K = 3, N_I = 16, BLK = 8, KEEP = 2, NB = N_I / BLK;
  localparam int NMUL = K * K * NB * KEEP, ENTW = WW + 3;
  logic clk = 0, en = 0;
  act_t [K-1:0][K-1:0][N_I-1:0] win;
  logic [NMUL*ENTW-1:0] wents;
  acc_t psum;
  int checks = 0, failures = 0;

  sparse_pe #(.K(K), .N_I(N_I), .BLK(BLK), .KEEP(KEEP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dense [K][K][N_I];
    int expv, prev;
    prev = 0;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        for (int c = 0; c < N_I; c++) begin
          win[i][j][c] = act_t'($urandom);
          dense[i][j][c] = 0;
        end
      for (int t = 0; t < K * K; t++)
        for (int b = 0; b < NB; b++) begin
          // two distinct positions inside the block of 8
          automatic int i0 = $urandom_range(BLK - 1);
          automatic int i1 = (i0 + 1 + $urandom_range(BLK - 2)) % BLK;
          for (int k = 0; k < KEEP; k++) begin
            automatic int e = (t * NB + b) * KEEP + k;
            automatic int ix = (k == 0) ? i0 : i1;
            automatic wgt_t w = wgt_t'($urandom);
            wents[e*ENTW +: ENTW] = {3'(ix), w};
            dense[t / K][t % K][b * BLK + ix] = int'(w);
          end
        end
      expv = 0;
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        for (int c = 0; c < N_I; c++) expv += dense[i][j][c] * int'(win[i][j][c]);
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (psum !== acc_t'(expv)) begin
        failures++;
        if (failures < 5) $display("it %0d: psum %0d expected %0d", it, psum, expv);
      end
      win[0][0][0] = ~win[0][0][0];
      @(posedge clk); #1;
      checks++;
      if (psum !== acc_t'(expv)) failures++;
      prev = expv;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
