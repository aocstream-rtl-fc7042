// tb_acc_buffer: random writes and reads of the accumulation buffer against
// a reference array, including same-cycle read/write of one address, which
// must return the data being written.
module tb_acc_buffer;
  import aoc_pkg::*;
  localparam int I_I = 6, M_I = 3;
  logic clk = 0, rd_en = 0, we = 0;
  logic [2:0] raddr = '0, waddr = '0;
  acc_t [M_I-1:0] rdata, wdata = '0, exp_d;
  acc_t [M_I-1:0] ref_mem [I_I];
  int checks = 0, failures = 0;

  acc_buffer #(.I_I(I_I), .M_I(M_I)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < I_I; a++) begin
      for (int p = 0; p < M_I; p++) ref_mem[a][p] = acc_t'($urandom);
      we <= 1; waddr <= 3'(a); wdata <= ref_mem[a];
      @(posedge clk);
    end
    we <= 0;
    for (int k = 0; k < 400; k++) begin
      automatic int ra = $urandom_range(I_I - 1);
      automatic int wa = ($urandom_range(3) == 0) ? ra : $urandom_range(I_I - 1);
      automatic bit dw = $urandom_range(1);
      automatic acc_t [M_I-1:0] nd;
      for (int p = 0; p < M_I; p++) nd[p] = acc_t'($urandom);
      rd_en <= 1; raddr <= 3'(ra);
      we <= dw; waddr <= 3'(wa); wdata <= nd;
      exp_d = (dw && wa == ra) ? nd : ref_mem[ra];
      @(posedge clk);
      if (dw) ref_mem[wa] = nd;
      rd_en <= 0; we <= 0;
      #1;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        if (failures < 5) $display("mismatch k=%0d ra=%0d wa=%0d", k, ra, wa);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
