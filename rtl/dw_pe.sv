// dw_pe: processing element of a depth-wise convolutional layer block.
//
// One MAC unit with its accumulator. A depth-wise output needs K*K MACs on
// one channel; the block feeds them one per cycle. On the first tap the
// accumulator starts from the bias, on the last tap the finished sum is
// presented on acc with out_valid (one cycle after the last in_valid).
//
// The single MAC per PE follows the paper; starting from the bias is this
// design's choice.
module dw_pe import aoc_pkg::*; (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  act_t  x,
  input  wgt_t  w,
  input  bias_t bias,
  output logic  out_valid,
  output acc_t  acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) acc <= (first ? acc_t'(bias) : acc) + acc_t'(x) * acc_t'(w);
    end
  end
endmodule
