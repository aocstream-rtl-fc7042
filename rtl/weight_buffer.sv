// weight_buffer: on-chip weight (or bias) memory of one layer block.
//
// Every weight of the layer lives on chip; nothing is fetched from an
// external memory. The memory is a plain array of DEPTH words of WIDTH
// bits with one write port, used to load the trained weights before the
// stream starts, and one synchronous read port used by the block's
// controller (read data valid one cycle after rd_en).
//
// The paper names this buffer and requires it to hold all weights; the load
// port, the word layout (set by the layer block) and the one-cycle read
// latency are this design's choices.
module weight_buffer #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 176,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
