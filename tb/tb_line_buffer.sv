// tb_line_buffer: streams two random 7x6 frames (2 groups of 2 channels per
// pixel) into two line buffers, K = 3 with stride 1 and stride 2. The first
// frame arrives one group per cycle, the second with random gaps. Each
// emitted window is compared with the frame array at the position the
// reference expects next; the window count per frame, the group tag and
// the 2-cycle latency are checked too.
module tb_line_buffer;
  import aoc_pkg::*;
  localparam int W = 7, H = 6, K = 3, N_I = 2, G_I = 2, FR = 2;
  logic clk = 0, rst_n = 0, in_valid = 0;
  act_t [N_I-1:0] in_data = '0;
  int checks = 0, failures = 0, cyc = 0;
  act_t frame [FR][H][W][G_I*N_I];

  logic v1, v2, l1, l2;
  act_t [K-1:0][K-1:0][N_I-1:0] d1, d2;
  logic [0:0] g1, g2;

  line_buffer #(.W(W), .H(H), .K(K), .S(1), .N_I(N_I), .G_I(G_I)) dut1 (
    .clk, .rst_n, .in_valid, .in_data, .win_valid(v1), .win_data(d1), .win_group(g1), .win_last(l1));
  line_buffer #(.W(W), .H(H), .K(K), .S(2), .N_I(N_I), .G_I(G_I)) dut2 (
    .clk, .rst_n, .in_valid, .in_data, .win_valid(v2), .win_data(d2), .win_group(g2), .win_last(l2));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected windows: {frame, Y, X, g, cycle of input}
  typedef struct { int f, y, x, g, c; } exp_t;
  exp_t q1 [$], q2 [$];
  int n1 = 0, n2 = 0;

  task automatic check(input exp_t e, input act_t [K-1:0][K-1:0][N_I-1:0] d,
                       input logic [0:0] g, input logic l);
    checks++;
    if (cyc - e.c != 2) begin failures++; $display("latency %0d", cyc - e.c); end
    checks++;
    if (int'(g) != e.g || l != (e.g == G_I - 1)) failures++;
    for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) for (int c = 0; c < N_I; c++) begin
      checks++;
      if (d[i][j][c] !== frame[e.f][e.y+i][e.x+j][e.g*N_I+c]) begin
        failures++;
        if (failures < 6) $display("f%0d Y%0d X%0d g%0d i%0d j%0d c%0d", e.f, e.y, e.x, e.g, i, j, c);
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (v1) begin
      if (q1.size() == 0) failures++; else begin check(q1[0], d1, g1, l1); void'(q1.pop_front()); end
      n1++;
    end
    if (v2) begin
      if (q2.size() == 0) failures++; else begin check(q2[0], d2, g2, l2); void'(q2.pop_front()); end
      n2++;
    end
  end

  initial begin
    for (int f = 0; f < FR; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int c = 0; c < G_I * N_I; c++) frame[f][y][x][c] = act_t'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int g = 0; g < G_I; g++) begin
        @(negedge clk);
        in_valid = 1;
        for (int c = 0; c < N_I; c++) in_data[c] = frame[f][y][x][g*N_I+c];
        if (y >= K - 1 && x >= K - 1) begin
          q1.push_back('{f, y-K+1, x-K+1, g, cyc + 1});
          if ((y - K + 1) % 2 == 0 && (x - K + 1) % 2 == 0)
            q2.push_back('{f, y-K+1, x-K+1, g, cyc + 1});
        end
        if (f == 1) begin
          @(negedge clk);
          in_valid = 0;
          repeat ($urandom_range(2)) @(negedge clk);
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n1 != FR * (H-K+1) * (W-K+1) * G_I) begin failures++; $display("n1 %0d", n1); end
    checks++;
    if (n2 != FR * 2 * 3 * G_I) begin failures++; $display("n2 %0d", n2); end
    checks++;
    if (q1.size() != 0 || q2.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
