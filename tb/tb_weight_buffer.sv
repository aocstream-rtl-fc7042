// tb_weight_buffer: loads random words through the write port, reads them
// back in a shuffled order and checks the one-cycle read latency and the
// data, including a read that is not enabled (output must hold).
module tb_weight_buffer;
  localparam int DEPTH = 24, WIDTH = 70;
  logic clk = 0, we = 0, rd_en = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = {$urandom, $urandom, $urandom};
      we <= 1; waddr <= 5'(a); wdata <= ref_mem[a];
      @(posedge clk);
    end
    we <= 0;
    for (int k = 0; k < 3 * DEPTH; k++) begin
      automatic int a = (k * 7 + 3) % DEPTH;
      rd_en <= 1; raddr <= 5'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("mismatch addr %0d: %h vs %h", a, rdata, ref_mem[a]);
      end
      raddr <= 5'((a + 1) % DEPTH);   // not enabled: output must hold
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
