// pool_block: max-pooling layer block.
//
// Same stream interface as the convolutional blocks: G_I = N/N_I groups of
// N_I channels per input pixel, row-major. Like them it owns a (K-1)-line
// buffer; for every window (K x K, stride S, no padding) it outputs the
// channel-wise maximum of the N_I channels of the group, one cycle after
// the window, so the output keeps the input's grouping (M_O = N_I) and
// interval.
//
// The paper lists the pooling layer block among the blocks with a line
// buffer but gives nothing more; max pooling and the timing are this
// design's choices.
module pool_block import aoc_pkg::*; #(
  parameter int unsigned W   = 253,
  parameter int unsigned H   = 253,
  parameter int unsigned K   = 2,
  parameter int unsigned S   = 2,
  parameter int unsigned N   = 64,
  parameter int unsigned N_I = 8,
  localparam int unsigned G_I = N / N_I
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  act_t [N_I-1:0]  in_data,
  output logic            out_valid,
  output act_t [N_I-1:0]  out_data
);
  localparam int unsigned GW = (G_I > 1) ? $clog2(G_I) : 1;

  logic                         win_valid, win_last;
  act_t [K-1:0][K-1:0][N_I-1:0] win_data;
  logic [GW-1:0]                win_group;

  line_buffer #(.W(W), .H(H), .K(K), .S(S), .N_I(N_I), .G_I(G_I)) u_lb (
    .clk, .rst_n, .in_valid, .in_data,
    .win_valid, .win_data, .win_group, .win_last);

  act_t [N_I-1:0] mx;
  always_comb begin
    for (int c = 0; c < N_I; c++) begin
      mx[c] = win_data[0][0][c];
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          if (win_data[i][j][c] > mx[c]) mx[c] = win_data[i][j][c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= win_valid;
      if (win_valid) out_data <= mx;
    end
  end
endmodule
