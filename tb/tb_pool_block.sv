// tb_pool_block: 2x2 stride-2 max pooling of a random 7x6 frame with 8
// channels in 2 groups of 4, groups arriving every cycle or with gaps. The
// reference takes the channel-wise maximum of each window (odd last
// row/column dropped, no padding). Checks every output value, the count
// and the 3-cycle latency from the last group of a window.
module tb_pool_block;
  import aoc_pkg::*;
  localparam int W = 7, H = 6, N = 8, N_I = 4, G_I = N / N_I;
  localparam int OW = (W - 2) / 2 + 1, OH = (H - 2) / 2 + 1;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  act_t [N_I-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  act_t img [H][W][N];
  typedef struct { act_t [N_I-1:0] d; int c; } exp_t;
  exp_t expq [$];

  pool_block #(.W(W), .H(H), .K(2), .S(2), .N(N), .N_I(N_I)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      if (out_data !== expq[0].d) begin failures++; $display("out %0d mismatch", nout); end
      checks++;
      if (cyc - expq[0].c != 3) begin failures++; $display("latency %0d", cyc - expq[0].c); end
      void'(expq.pop_front());
    end
    nout++;
  end

  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int n = 0; n < N; n++)
      img[y][x][n] = act_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int g = 0; g < G_I; g++) begin
      in_valid = 1;
      for (int c = 0; c < N_I; c++) in_data[c] = img[y][x][g*N_I+c];
      if (y % 2 == 1 && x % 2 == 1 && x < 2 * OW && y < 2 * OH) begin
        automatic exp_t e;
        for (int c = 0; c < N_I; c++) begin
          automatic act_t m = img[y-1][x-1][g*N_I+c];
          if (img[y-1][x][g*N_I+c] > m) m = img[y-1][x][g*N_I+c];
          if (img[y][x-1][g*N_I+c] > m) m = img[y][x-1][g*N_I+c];
          if (img[y][x][g*N_I+c] > m) m = img[y][x][g*N_I+c];
          e.d[c] = m;
        end
        e.c = cyc + 1;
        expq.push_back(e);
      end
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(1)) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (nout != OW * OH * G_I) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
