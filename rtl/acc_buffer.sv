// acc_buffer: accumulation buffer of a convolutional layer block.
//
// It holds the running partial sums of all M output channels of the
// current output position while the G_I input groups stream in: I_I words,
// each with the M_I partial sums the PEs produce in one cycle
// (M = I_I * M_I). One synchronous read port and one write port; a read of
// the address written in the same cycle returns the new data (write-first
// bypass), so back-to-back groups with I_I = 1 accumulate correctly.
//
// The size M comes from the paper; the word organisation and the bypass
// are this design's choices.
module acc_buffer import aoc_pkg::*; #(
  parameter int unsigned I_I = 8,
  parameter int unsigned M_I = 8,
  localparam int unsigned AW = (I_I > 1) ? $clog2(I_I) : 1
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [AW-1:0]        raddr,
  output acc_t [M_I-1:0]       rdata,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  acc_t [M_I-1:0]       wdata
);
  acc_t [M_I-1:0] mem [I_I];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= (we && waddr == raddr) ? wdata : mem[raddr];
  end
endmodule
