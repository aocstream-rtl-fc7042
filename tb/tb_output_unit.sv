// tb_output_unit: writes whole output positions (M = 16 values as 4 words
// of 4, in random word order, commit on the last write) and checks the
// stream: 4 groups of 4 channels in channel order, at least I_O = 3 cycles
// apart and exactly I_O apart inside a position, both banks in use.
// Finally six positions arrive faster than they can leave, which must set the
// overflow flag.
module tb_output_unit;
  import aoc_pkg::*;
  localparam int M = 16, WR_N = 4, M_O = 4, I_O = 3, G_O = M / M_O;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_commit = 0, out_valid, overflow;
  logic [1:0] wr_idx = '0;
  act_t [WR_N-1:0] wr_data = '0;
  act_t [M_O-1:0] out_data;
  int checks = 0, failures = 0;
  act_t expq [$];
  int last_out = -100, cyc = 0, ngroups = 0, nposition = 0;
  bit chk_data = 1;

  output_unit #(.M(M), .WR_N(WR_N), .M_O(M_O), .I_O(I_O)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid && chk_data) begin
    checks++;
    if (cyc - last_out < I_O) begin
      failures++; $display("groups %0d cycles apart", cyc - last_out);
    end
    if (ngroups % G_O != 0 && cyc - last_out != I_O) begin
      failures++; $display("groups of one position %0d cycles apart", cyc - last_out);
    end
    last_out = cyc;
    for (int c = 0; c < M_O; c++) begin
      checks++;
      if (expq.size() == 0 || out_data[c] !== expq[0]) failures++;
      if (expq.size() != 0) void'(expq.pop_front());
    end
    ngroups++;
  end

  task automatic write_position(input int gap);
    act_t vals [M];
    int order [4] = '{2, 0, 3, 1};
    for (int c = 0; c < M; c++) begin
      vals[c] = act_t'($urandom);
      expq.push_back(vals[c]);
    end
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 2'(order[k]); wr_commit = (k == 3);
      for (int j = 0; j < WR_N; j++) wr_data[j] = vals[order[k] * WR_N + j];
      @(negedge clk);
      wr_en = 0; wr_commit = 0;
      repeat (gap) @(negedge clk);
    end
    nposition++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rate-matched: one position every G_O*I_O = 12 cycles or slower
    for (int p = 0; p < 20; p++) write_position(1 + (p % 2));
    repeat (40) @(posedge clk);
    checks++;
    if (ngroups != 20 * G_O) begin failures++; $display("groups %0d", ngroups); end
    checks++;
    if (overflow !== 1'b0) failures++;
    // too fast: positions every 8 cycles (12 needed) must overflow
    chk_data = 0;
    for (int p = 0; p < 6; p++) write_position(0);
    repeat (2) @(posedge clk);
    checks++;
    if (overflow !== 1'b1) begin failures++; $display("no overflow flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
