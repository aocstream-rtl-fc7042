// tb_dw_pe: feeds random runs of 9 MACs (first tap starts from the bias)
// with random idle cycles in between and checks the result and out_valid
// one cycle after the last tap.
module tb_dw_pe;
  import aoc_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  act_t x = '0; wgt_t w = '0; bias_t bias = '0; acc_t acc;
  int checks = 0, failures = 0;

  dw_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      automatic int expv;
      bias = bias_t'($urandom);
      expv = int'(bias);
      for (int t = 0; t < 9; t++) begin
        x = act_t'($urandom); w = wgt_t'($urandom);
        expv += int'(x) * int'(w);
        in_valid = 1; first = (t == 0); last = (t == 8);
        @(posedge clk); #1;
        in_valid = 0;
        checks++;
        if (out_valid !== (t == 8)) failures++;
        repeat ($urandom_range(1)) begin @(posedge clk); #1; end
      end
      checks++;
      if (acc !== acc_t'(expv)) begin
        failures++;
        if (failures < 5) $display("it %0d: %0d vs %0d", it, acc, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
