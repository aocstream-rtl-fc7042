// tb_aocstream_full: end-to-end test of aocstream_top with every parameter at its
// default: a full 512x512 image (layer maps 255x255x32, 253x253x32,
// 253x253x64, 126x126x64).
//
// Loads random weights and biases into all three weighted layers (L2
// pruned to 2 of every 8 channels with random positions), streams a
// random 512x512x3 image at one pixel every 16 cycles, and compares every
// output group with a reference model of the four layers written directly
// from the convolution equations (stride-2 dense 3x3 conv, 3x3 depth-wise,
// pruned 1x1 point-wise, 2x2 max pool; shift/ReLU/saturate requantisation).
// It also checks the output stream rate, that no output unit overflows, and
// that the last output leaves within a fixed latency of the last pixel, and
// it counts how often each mechanism of the design happened; one that
// never happened is a failure: stride-2 window skipping, windows formed
// from the line buffers, accumulation across input groups, sparse index
// selection with a non-zero index, use of both output-unit banks, multi-
// batch/multi-group depth-wise scheduling, pooled outputs.
module tb_aocstream_full;
  import aoc_pkg::*;
  localparam int IMG = 512, FRAMES = 1;
  localparam int W1 = (IMG - 3) / 2 + 1, W2 = W1 - 2, W3 = (W2 - 2) / 2 + 1;
  // run-time copies of the sizes, so loop bounds are not constants
  int nimg = IMG, nw1 = W1, nw2 = W2, nw3 = W3;
  localparam int L0_PEW = 27 * 9, L2_ENTW = 11, L2_PEW = 2 * L2_ENTW;

  logic clk = 0, rst_n = 0;
  logic img_valid = 0;
  act_t [2:0] img_data = '0;
  logic out_valid;
  act_t [7:0] out_data;
  logic [2:0] overflow;
  logic l0_w_we = 0, l0_b_we = 0, l1_w_we = 0, l1_b_we = 0, l2_w_we = 0, l2_b_we = 0;
  logic [3:0] l0_w_addr = '0, l0_b_addr = '0;
  logic [485:0] l0_w_wdata = '0;
  logic [31:0] l0_b_wdata = '0;
  logic [4:0] l1_w_addr = '0;
  logic [0:0] l1_b_addr = '0;
  logic [127:0] l1_w_wdata = '0;
  logic [255:0] l1_b_wdata = '0;
  logic [4:0] l2_w_addr = '0;
  logic [2:0] l2_b_addr = '0;
  logic [175:0] l2_w_wdata = '0;
  logic [127:0] l2_b_wdata = '0;

  aocstream_top dut (.*);

  int checks = 0, failures = 0, nout = 0;
  longint cyc = 0, last_out = -100, last_in = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (4400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network parameters ----------------
  wgt_t  w0 [32][3][3][3];         // [m][n][i][j]
  bias_t b0 [32];
  wgt_t  w1 [32][3][3];            // [c][i][j]
  bias_t b1 [32];
  logic [2:0] ix2 [64][4][2];      // [m][channel block][k]
  wgt_t  w2 [64][4][2];
  bias_t b2 [64];

  // ---------------- reference feature maps (flat, [y][x][c]) ----------------
  act_t img [];
  act_t f0 [], f1 [], f2 [], f3 [];

  function automatic int ix(input int y, input int x, input int c, input int w, input int n);
    return (y * w + x) * n + c;
  endfunction

  task automatic build_reference(input int fr);
    automatic int ib = fr * nimg * nimg * 3, ob = fr * nw3 * nw3 * 64;
    f0 = new[nw1 * nw1 * 32];
    f1 = new[nw2 * nw2 * 32];
    f2 = new[nw2 * nw2 * 64];
    for (int k = ib; k < ib + nimg * nimg * 3; k++) img[k] = act_t'($urandom_range(127));
    for (int y = 0; y < nw1; y++) for (int x = 0; x < nw1; x++) for (int m = 0; m < 32; m++) begin
      automatic acc_t s = acc_t'(b0[m]);
      for (int n = 0; n < 3; n++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        s += acc_t'(w0[m][n][i][j]) * acc_t'(img[ib + ix(2*y+i, 2*x+j, n, IMG, 3)]);
      f0[ix(y, x, m, W1, 32)] = requant(s, 8, 1'b1);
    end
    for (int y = 0; y < nw2; y++) for (int x = 0; x < nw2; x++) for (int c = 0; c < 32; c++) begin
      automatic acc_t s = acc_t'(b1[c]);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        s += acc_t'(w1[c][i][j]) * acc_t'(f0[ix(y+i, x+j, c, W1, 32)]);
      f1[ix(y, x, c, W2, 32)] = requant(s, 7, 1'b1);
    end
    for (int y = 0; y < nw2; y++) for (int x = 0; x < nw2; x++) for (int m = 0; m < 64; m++) begin
      automatic acc_t s = acc_t'(b2[m]);
      for (int b = 0; b < 4; b++) for (int k = 0; k < 2; k++)
        s += acc_t'(w2[m][b][k]) * acc_t'(f1[ix(y, x, b*8 + int'(ix2[m][b][k]), W2, 32)]);
      f2[ix(y, x, m, W2, 64)] = requant(s, 6, 1'b1);
    end
    for (int y = 0; y < nw3; y++) for (int x = 0; x < nw3; x++) for (int m = 0; m < 64; m++) begin
      automatic act_t v = f2[ix(2*y, 2*x, m, W2, 64)];
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++)
        if (f2[ix(2*y+i, 2*x+j, m, W2, 64)] > v) v = f2[ix(2*y+i, 2*x+j, m, W2, 64)];
      f3[ob + ix(y, x, m, W3, 64)] = v;
    end
  endtask

  // ---------------- output check ----------------
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int pos = nout / 8, q = nout % 8;
    checks++;
    if (cyc - last_out < 4) begin failures++; $display("output interval %0d", cyc - last_out); end
    last_out = cyc;
    if (pos >= FRAMES * W3 * W3) begin
      failures++;
      $display("extra output");
    end else begin
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (out_data[c] !== f3[pos * 64 + q * 8 + c]) begin
          failures++;
          if (failures < 8) $display("pos %0d ch %0d: %0d expected %0d", pos, q*8+c, out_data[c], f3[pos*64 + q*8 + c]);
        end
      end
    end
    nout++;
  end

  // ---------------- mechanism counters ----------------
  longint n_pix = 0, n_win0 = 0, n_acc = 0, n_bank1 = 0, n_idx = 0, n_dwbatch = 0, n_pool = 0, n_l1grp = 0;
  always @(posedge clk) if (rst_n) begin
    if (img_valid) n_pix++;
    if (dut.u_l0.win_valid) n_win0++;
    if (dut.u_l2.u_acc.we) n_acc++;
    if (dut.u_l0.u_out.wr_en && dut.u_l0.u_out.wr_commit && dut.u_l0.u_out.wbank) n_bank1++;
    if (dut.u_l2.v1 && dut.u_l2.u_wbuf.rdata[L2_PEW*3 + L2_ENTW + 8 +: 3] != 3'd0) n_idx++;
    if (dut.u_l1.pe_v[0] && dut.u_l1.g2 != '0) n_l1grp++;
    if (out_valid) n_pool++;
  end

  initial begin
    // random parameters
    for (int m = 0; m < 32; m++) begin
      b0[m] = bias_t'($urandom_range(1500));
      b1[m] = bias_t'($urandom_range(1000));
      for (int n = 0; n < 3; n++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        w0[m][n][i][j] = wgt_t'($urandom_range(63)) - wgt_t'(32);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        w1[m][i][j] = wgt_t'($urandom_range(63)) - wgt_t'(32);
    end
    for (int m = 0; m < 64; m++) begin
      b2[m] = bias_t'($urandom_range(600)) - bias_t'(200);
      for (int b = 0; b < 4; b++) begin
        automatic int i0 = $urandom_range(7);
        ix2[m][b][0] = 3'(i0);
        ix2[m][b][1] = 3'((i0 + 1 + $urandom_range(6)) % 8);
        for (int k = 0; k < 2; k++) w2[m][b][k] = wgt_t'($urandom_range(127)) - wgt_t'(64);
      end
    end
    img = new[FRAMES * nimg * nimg * 3];
    f3 = new[FRAMES * nw3 * nw3 * 64];
    for (int fr = 0; fr < FRAMES; fr++) build_reference(fr);
    begin
      automatic int nz = 0, sat = 0;
      foreach (f3[k]) begin
        if (f3[k] != 0) nz++;
        if (f3[k] == 127) sat++;
      end
      $display("reference output: %0d of %0d values non-zero, %0d saturated", nz, f3.size(), sat);
    end

    repeat (2) @(negedge clk);
    rst_n = 1;
    // L0: word t, PE p -> m = 2t+p; entry tap*3+n = {1'b0, w}
    for (int t = 0; t < 16; t++) begin
      l0_w_we = 1; l0_w_addr = 4'(t);
      for (int p = 0; p < 2; p++) for (int tp = 0; tp < 9; tp++) for (int n = 0; n < 3; n++)
        l0_w_wdata[p*L0_PEW + (tp*3 + n)*9 +: 9] = {1'b0, w0[2*t+p][n][tp/3][tp%3]};
      l0_b_we = 1; l0_b_addr = 4'(t);
      for (int p = 0; p < 2; p++) l0_b_wdata[p*16 +: 16] = b0[2*t+p];
      @(negedge clk);
    end
    l0_w_we = 0; l0_b_we = 0;
    // L1: word g*9+tap, PE p -> channel 16g+p; bias word g
    for (int g = 0; g < 2; g++) begin
      for (int tp = 0; tp < 9; tp++) begin
        l1_w_we = 1; l1_w_addr = 5'(g * 9 + tp);
        for (int p = 0; p < 16; p++) l1_w_wdata[p*8 +: 8] = w1[16*g+p][tp/3][tp%3];
        @(negedge clk);
      end
      l1_w_we = 0;
      l1_b_we = 1; l1_b_addr = 1'(g);
      for (int p = 0; p < 16; p++) l1_b_wdata[p*16 +: 16] = b1[16*g+p];
      @(negedge clk);
      l1_b_we = 0;
    end
    // L2: word g*8+t, PE p -> m = 8t+p; entry k = {index, w}; bias word t
    for (int g = 0; g < 4; g++) for (int t = 0; t < 8; t++) begin
      l2_w_we = 1; l2_w_addr = 5'(g * 8 + t);
      for (int p = 0; p < 8; p++) for (int k = 0; k < 2; k++)
        l2_w_wdata[p*L2_PEW + k*L2_ENTW +: L2_ENTW] = {ix2[8*t+p][g][k], w2[8*t+p][g][k]};
      @(negedge clk);
    end
    l2_w_we = 0;
    for (int t = 0; t < 8; t++) begin
      l2_b_we = 1; l2_b_addr = 3'(t);
      for (int p = 0; p < 8; p++) l2_b_wdata[p*16 +: 16] = b2[8*t+p];
      @(negedge clk);
    end
    l2_b_we = 0;

    // stream the image, one pixel every 16 cycles
    for (int fr = 0; fr < FRAMES; fr++)
    for (int y = 0; y < nimg; y++) for (int x = 0; x < nimg; x++) begin
      img_valid = 1;
      for (int n = 0; n < 3; n++) img_data[n] = img[fr * nimg * nimg * 3 + ix(y, x, n, IMG, 3)];
      @(negedge clk);
      img_valid = 0;
      repeat (15) @(negedge clk);
    end
    last_in = cyc;
    repeat (400) @(negedge clk);

    checks++;
    if (nout != FRAMES * W3 * W3 * 8) begin failures++; $display("output groups %0d, expected %0d", nout, FRAMES*W3*W3*8); end
    checks++;
    if (last_out - last_in > 300) begin failures++; $display("drain latency %0d", last_out - last_in); end
    checks++;
    if (overflow != 3'b000) begin failures++; $display("overflow %b", overflow); end
    $display("mechanisms: pixels %0d, L0 windows (stride 2) %0d, L2 accumulations %0d, L0 bank-1 commits %0d,",
             n_pix, n_win0, n_acc, n_bank1);
    $display("            non-zero sparse indices %0d, L1 group-1 batches %0d, pooled output groups %0d",
             n_idx, n_l1grp, n_pool);
    checks++; if (!(n_win0 > 0 && n_win0 < n_pix)) failures++;
    checks++; if (n_acc == 0) failures++;
    checks++; if (n_bank1 == 0) failures++;
    checks++; if (n_idx == 0) failures++;
    checks++; if (n_l1grp == 0) failures++;
    checks++; if (n_pool == 0) failures++;
    $display("%0d image(s) of %0dx%0d streamed in %0d cycles", FRAMES, IMG, IMG, last_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
