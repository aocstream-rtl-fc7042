// aocstream_top: layer-pipelined stream accelerator, a four-layer
// MobileNetV1-style front end built from the layer blocks.
//
// Every layer has its own block, and the blocks are chained by valid-only
// streams: a block starts computing as soon as a group of input data
// arrives and passes its outputs on at once, so all layers run at the same
// time and only (K-1) lines of each layer's input are stored on chip.
//
//   image IMG_H x IMG_W x 3, one pixel per 16 cycles
//   L0 conv_block  3x3 stride 2, 3 -> 32 channels, dense weights,
//                  2 PEs x 27 multipliers                    -> W1 x W1 x 32
//   L1 dw_block    3x3 depth-wise, 32 channels, 16 MAC PEs   -> W2 x W2 x 32
//   L2 conv_block  1x1 point-wise, 32 -> 64, 75 % pruned (2 of 8 kept),
//                  8 PEs x 2 multipliers                     -> W2 x W2 x 64
//   L3 pool_block  2x2 max pool stride 2                     -> W3 x W3 x 64
//
// With no padding W1 = (IMG_W-3)/2+1, W2 = W1-2, W3 = (W2-2)/2+1
// (255, 253, 126 for a 512 x 512 image). Stream rates (group size /
// interval in cycles): image 3/16, L0 out 16/16, L1 out 8/8, L2 out 8/4,
// L3 out 8/4. Each block satisfies (N/N_i)*I_i*S >= (M/M_o)*I_o, so no
// output unit overflows; the overflow outputs report it if it happens.
//
// The layer chain, channel counts and rates are this design's choice for a
// network start in the style the paper evaluates (MobileNetV1 + SSDLiteX);
// the paper's full 512x512 network is not given in enough detail to build.
// Weights and biases of each layer are written through its load ports
// (word layouts in conv_block and dw_block) before the image is streamed.
module aocstream_top import aoc_pkg::*; #(
  parameter int unsigned IMG_W = 512,
  parameter int unsigned IMG_H = 512,
  localparam int unsigned W1 = (IMG_W - 3) / 2 + 1,
  localparam int unsigned H1 = (IMG_H - 3) / 2 + 1,
  localparam int unsigned W2 = W1 - 2,
  localparam int unsigned H2 = H1 - 2,
  // L0 weight / bias memories: 16 words; 2 PEs x 27 entries x 9 bits
  localparam int unsigned L0_WAW = 4,
  localparam int unsigned L0_WW  = 2 * 27 * (WW + 1),
  localparam int unsigned L0_BAW = 4,
  localparam int unsigned L0_BWD = 2 * BW,
  // L1: weights 2 groups x 9 taps = 18 words of 16 weights, 2 bias words
  localparam int unsigned L1_WAW = 5,
  localparam int unsigned L1_WW  = 16 * WW,
  localparam int unsigned L1_BAW = 1,
  localparam int unsigned L1_BWD = 16 * BW,
  // L2: 4 groups x 8 cycles = 32 words; 8 PEs x 2 entries x 11 bits
  localparam int unsigned L2_WAW = 5,
  localparam int unsigned L2_WW  = 8 * 2 * (WW + 3),
  localparam int unsigned L2_BAW = 3,
  localparam int unsigned L2_BWD = 8 * BW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                img_valid,
  input  act_t [2:0]          img_data,
  output logic                out_valid,
  output act_t [7:0]          out_data,
  output logic [2:0]          overflow,
  input  logic                l0_w_we,
  input  logic [L0_WAW-1:0]   l0_w_addr,
  input  logic [L0_WW-1:0]    l0_w_wdata,
  input  logic                l0_b_we,
  input  logic [L0_BAW-1:0]   l0_b_addr,
  input  logic [L0_BWD-1:0]   l0_b_wdata,
  input  logic                l1_w_we,
  input  logic [L1_WAW-1:0]   l1_w_addr,
  input  logic [L1_WW-1:0]    l1_w_wdata,
  input  logic                l1_b_we,
  input  logic [L1_BAW-1:0]   l1_b_addr,
  input  logic [L1_BWD-1:0]   l1_b_wdata,
  input  logic                l2_w_we,
  input  logic [L2_WAW-1:0]   l2_w_addr,
  input  logic [L2_WW-1:0]    l2_w_wdata,
  input  logic                l2_b_we,
  input  logic [L2_BAW-1:0]   l2_b_addr,
  input  logic [L2_BWD-1:0]   l2_b_wdata
);
  logic        v0, v1, v2;
  act_t [15:0] d0;
  act_t [7:0]  d1, d2;

  conv_block #(.W(IMG_W), .H(IMG_H), .K(3), .S(2), .N(3), .N_I(3), .M(32),
               .I_I(16), .M_O(16), .I_O(16), .BLK(1), .KEEP(1), .SHIFT(8),
               .RELU(1'b1)) u_l0 (
    .clk, .rst_n, .in_valid(img_valid), .in_data(img_data),
    .out_valid(v0), .out_data(d0), .overflow(overflow[0]),
    .w_we(l0_w_we), .w_addr(l0_w_addr), .w_wdata(l0_w_wdata),
    .b_we(l0_b_we), .b_addr(l0_b_addr), .b_wdata(l0_b_wdata));

  dw_block #(.W(W1), .H(H1), .K(3), .S(1), .N(32), .N_I(16), .I_I(16), .P(16),
             .M_O(8), .I_O(8), .SHIFT(7), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(v0), .in_data(d0),
    .out_valid(v1), .out_data(d1), .overflow(overflow[1]),
    .w_we(l1_w_we), .w_addr(l1_w_addr), .w_wdata(l1_w_wdata),
    .b_we(l1_b_we), .b_addr(l1_b_addr), .b_wdata(l1_b_wdata));

  conv_block #(.W(W2), .H(H2), .K(1), .S(1), .N(32), .N_I(8), .M(64),
               .I_I(8), .M_O(8), .I_O(4), .BLK(8), .KEEP(2), .SHIFT(6),
               .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .in_data(d1),
    .out_valid(v2), .out_data(d2), .overflow(overflow[2]),
    .w_we(l2_w_we), .w_addr(l2_w_addr), .w_wdata(l2_w_wdata),
    .b_we(l2_b_we), .b_addr(l2_b_addr), .b_wdata(l2_b_wdata));

  pool_block #(.W(W2), .H(H2), .K(2), .S(2), .N(64), .N_I(8)) u_l3 (
    .clk, .rst_n, .in_valid(v2), .in_data(d2),
    .out_valid, .out_data);
endmodule
