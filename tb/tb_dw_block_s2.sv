// tb_dw_block_s2: the depth-wise block test with stride 2 on a random 9x8
// frame (8 channels, 2 groups of 4, 2 PEs): eq. (2) computed directly at
// every second position; values, output interval, overflow and latency
// checked as in tb_dw_block.
module tb_dw_block_s2;
  import aoc_pkg::*;
  localparam int W = 9, H = 8, K = 3, N = 8, N_I = 4, I_I = 18, P = 2, M_O = 4, I_O = 8, SHIFT = 3, S = 2;
  localparam int G_I = N / N_I, B = N_I / P, T = K * K;
  localparam int OW = (W - K) / S + 1, OH = (H - K) / S + 1;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, overflow;
  act_t [N_I-1:0] in_data = '0;
  act_t [M_O-1:0] out_data;
  logic w_we = 0, b_we = 0;
  logic [5:0] w_addr = '0;
  logic [P*WW-1:0] w_wdata = '0;
  logic [1:0] b_addr = '0;
  logic [P*BW-1:0] b_wdata = '0;

  dw_block #(.W(W), .H(H), .K(K), .S(S), .N(N), .N_I(N_I), .I_I(I_I), .P(P),
             .M_O(M_O), .I_O(I_O), .SHIFT(SHIFT), .RELU(1'b1)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, last_out = -100, nout = 0, last_in = 0;
  act_t img [H][W][N];
  wgt_t wk [N][K][K];
  bias_t bs [N];
  act_t expv [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - last_out < I_O) begin failures++; $display("output interval %0d", cyc - last_out); end
    last_out = cyc;
    for (int c = 0; c < M_O; c++) begin
      checks++;
      if (expv.size() == 0) failures++;
      else begin
        if (out_data[c] !== expv[0]) begin
          failures++;
          if (failures < 6) $display("out %0d ch %0d: %0d expected %0d", nout, c, out_data[c], expv[0]);
        end
        void'(expv.pop_front());
      end
    end
    nout++;
  end

  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int n = 0; n < N; n++)
      img[y][x][n] = act_t'($urandom);
    for (int n = 0; n < N; n++) begin
      bs[n] = bias_t'($urandom_range(2000)) - bias_t'(500);
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) wk[n][i][j] = wgt_t'($urandom);
    end
    for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) for (int n = 0; n < N; n++) begin
      automatic longint s = longint'(bs[n]);
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        s += longint'(wk[n][i][j]) * longint'(img[S*y+i][S*x+j][n]);
      expv.push_back(requant(acc_t'(s), SHIFT, 1'b1));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < G_I; g++) for (int b = 0; b < B; b++) begin
      for (int tp = 0; tp < T; tp++) begin
        w_we = 1; w_addr = 6'((g * B + b) * T + tp);
        for (int p = 0; p < P; p++) w_wdata[p*WW +: WW] = wk[g*N_I + b*P + p][tp/K][tp%K];
        @(negedge clk);
      end
      w_we = 0;
      b_we = 1; b_addr = 2'(g * B + b);
      for (int p = 0; p < P; p++) b_wdata[p*BW +: BW] = bs[g*N_I + b*P + p];
      @(negedge clk);
      b_we = 0;
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int g = 0; g < G_I; g++) begin
      in_valid = 1;
      for (int c = 0; c < N_I; c++) in_data[c] = img[y][x][g*N_I+c];
      @(negedge clk);
      in_valid = 0;
      repeat (I_I - 1) @(negedge clk);
    end
    last_in = cyc;
    repeat (80) @(negedge clk);
    checks++;
    if (nout != OH * OW * (N / M_O)) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (last_out - last_in > S * I_I + (N / M_O) * I_O + 8) begin failures++; $display("latency %0d", last_out - last_in); end
    checks++;
    if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
