// tb_conv_block: a 3x3 convolution, 16 -> 8 channels, on a random 6x5
// frame, with weights pruned 2-of-8 along the channel axis. Input groups of
// 8 channels arrive at the full rate, one every I_I = 4 cycles. The
// reference computes eq. (1) directly from a dense copy of the pruned
// kernel, adds the bias and requantises (shift 4, no ReLU, so negative
// results and saturation occur). Checked: every output value in stream
// order, output groups at least I_O apart, no overflow at the full rate,
// and the last output within a fixed latency of the last input.
module tb_conv_block;
  import aoc_pkg::*;
  localparam int W = 6, H = 5, K = 3, N = 16, N_I = 8, M = 8, I_I = 4, M_O = 4, I_O = 4;
  localparam int BLK = 8, KEEP = 2, SHIFT = 4, S = 1;
  localparam int G_I = N / N_I, M_I = M / I_I, NB = N_I / BLK, NMUL = K * K * NB * KEEP;
  localparam int ENTW = WW + 3, PEW = NMUL * ENTW;
  localparam int OW = (W - K) / S + 1, OH = (H - K) / S + 1;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, overflow;
  act_t [N_I-1:0] in_data = '0;
  act_t [M_O-1:0] out_data;
  logic w_we = 0, b_we = 0;
  logic [2:0] w_addr = '0;
  logic [M_I*PEW-1:0] w_wdata = '0;
  logic [1:0] b_addr = '0;
  logic [M_I*BW-1:0] b_wdata = '0;

  conv_block #(.W(W), .H(H), .K(K), .S(S), .N(N), .N_I(N_I), .M(M), .I_I(I_I),
               .M_O(M_O), .I_O(I_O), .BLK(BLK), .KEEP(KEEP), .SHIFT(SHIFT),
               .RELU(1'b0)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, last_out = -100, nout = 0, last_in = 0;
  act_t img [H][W][N];
  int   wd [M][N][K][K];      // dense copy of the pruned kernel
  logic [2:0] wix [M][G_I][K*K][KEEP];
  wgt_t wv  [M][G_I][K*K][KEEP];
  bias_t bs [M];
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
    // ---- random data and pruned weights ----
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int n = 0; n < N; n++)
      img[y][x][n] = act_t'($urandom);
    for (int m = 0; m < M; m++) begin
      bs[m] = bias_t'($urandom_range(4000)) - bias_t'(2000);
      for (int n = 0; n < N; n++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) wd[m][n][i][j] = 0;
      for (int g = 0; g < G_I; g++) for (int t = 0; t < K * K; t++) begin
        automatic int i0 = $urandom_range(BLK - 1);
        automatic int i1 = (i0 + 1 + $urandom_range(BLK - 2)) % BLK;
        for (int k = 0; k < KEEP; k++) begin
          wix[m][g][t][k] = 3'((k == 0) ? i0 : i1);
          wv[m][g][t][k]  = wgt_t'($urandom);
          wd[m][g*N_I + int'(wix[m][g][t][k])][t/K][t%K] = int'(wv[m][g][t][k]);
        end
      end
    end
    // ---- expected outputs ----
    for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) for (int m = 0; m < M; m++) begin
      automatic longint s = longint'(bs[m]);
      for (int n = 0; n < N; n++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        s += longint'(wd[m][n][i][j]) * longint'(img[S*y+i][S*x+j][n]);
      expv.push_back(requant(acc_t'(s), SHIFT, 1'b0));
    end
    // ---- load weights: word g*I_I+t, PE p -> channel m = t*M_I+p ----
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < G_I; g++) for (int t = 0; t < I_I; t++) begin
      w_we = 1; w_addr = 3'(g * I_I + t);
      for (int p = 0; p < M_I; p++) for (int tp = 0; tp < K * K; tp++) for (int k = 0; k < KEEP; k++)
        w_wdata[p*PEW + (tp*KEEP + k)*ENTW +: ENTW] = {wix[t*M_I+p][g][tp][k], wv[t*M_I+p][g][tp][k]};
      @(negedge clk);
    end
    w_we = 0;
    for (int t = 0; t < I_I; t++) begin
      b_we = 1; b_addr = 2'(t);
      for (int p = 0; p < M_I; p++) b_wdata[p*BW +: BW] = bs[t*M_I+p];
      @(negedge clk);
    end
    b_we = 0;
    // ---- stream the frame at one group every I_I cycles ----
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int g = 0; g < G_I; g++) begin
      in_valid = 1;
      for (int c = 0; c < N_I; c++) in_data[c] = img[y][x][g*N_I+c];
      @(negedge clk);
      in_valid = 0;
      repeat (I_I - 1) @(negedge clk);
    end
    last_in = cyc;
    repeat (60) @(negedge clk);
    checks++;
    if (nout != OH * OW * (M / M_O)) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (last_out - last_in > 2 * G_I * I_I + S * 12) begin failures++; $display("latency %0d", last_out - last_in); end
    checks++;
    if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
