// dw_block: depth-wise convolutional layer block.
//
// Same stream interface as conv_block: G_I = N/N_I groups of N_I channels
// per input pixel, at least I_I cycles apart; the N outputs of each output
// position leave as G_O = N/M_O groups of M_O, at least I_O cycles apart.
//
// A depth-wise output uses one input channel only, so no accumulation
// across groups is needed: the window of group g yields the outputs of
// channels g*N_I .. g*N_I+N_I-1 directly. The block has P single-MAC PEs
// (P >= K*K*N_I/I_I). PE p computes channel g*N_I + b*P + p for the
// batches b = 0 .. N_I/P-1, one kernel tap per cycle, so one group takes
// (N_I/P)*K*K <= I_I cycles. Each finished batch of P outputs is
// requantised and written to the output unit; the last batch of the last
// group closes the position.
//
// Pipeline: window -> s0 (weight/bias read, activation select) -> s1 (MAC)
// -> s2 (output write). Memories, loaded before streaming:
//   weights: word (g*B + b)*K*K + tap, PE p at [p*WW +: WW]   (B = N_I/P)
//   biases:  word g*B + b,             PE p at [p*BW +: BW]
//
// From the paper: (K-1)-line buffer, no accumulation between groups, one
// MAC per PE, PE count >= K*K*N_I/I_I. Own choices: the batch/tap
// schedule, memory layouts, requantisation, no padding.
module dw_block import aoc_pkg::*; #(
  parameter int unsigned W     = 255,
  parameter int unsigned H     = 255,
  parameter int unsigned K     = 3,
  parameter int unsigned S     = 1,
  parameter int unsigned N     = 32,
  parameter int unsigned N_I   = 16,
  parameter int unsigned I_I   = 16,
  parameter int unsigned P     = 16,
  parameter int unsigned M_O   = 8,
  parameter int unsigned I_O   = 8,
  parameter int unsigned SHIFT = 6,
  parameter bit          RELU  = 1'b1,
  localparam int unsigned G_I  = N / N_I,
  localparam int unsigned B    = N_I / P,
  localparam int unsigned T    = K * K,
  localparam int unsigned WDEP = G_I * B * T,
  localparam int unsigned BDEP = G_I * B,
  localparam int unsigned WAW  = (WDEP > 1) ? $clog2(WDEP) : 1,
  localparam int unsigned BAW  = (BDEP > 1) ? $clog2(BDEP) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  act_t [N_I-1:0]     in_data,
  output logic               out_valid,
  output act_t [M_O-1:0]     out_data,
  output logic               overflow,
  input  logic               w_we,
  input  logic [WAW-1:0]     w_addr,
  input  logic [P*WW-1:0]    w_wdata,
  input  logic               b_we,
  input  logic [BAW-1:0]     b_addr,
  input  logic [P*BW-1:0]    b_wdata
);
  localparam int unsigned GW  = (G_I > 1) ? $clog2(G_I) : 1;
  localparam int unsigned BBW = (B > 1) ? $clog2(B) : 1;
  localparam int unsigned TPW = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned OIW = (G_I * B > 1) ? $clog2(G_I * B) : 1;
  typedef act_t [K-1:0][K-1:0][N_I-1:0] win_t;

  if (B * T > I_I) begin : g_rate_check
    $error("dw_block: (N_I/P)*K*K must not exceed I_I");
  end
  if (G_I * I_I * S < (N / M_O) * I_O) begin : g_rate_check_out
    $error("dw_block: (N/N_I)*I_I*S must be at least (N/M_O)*I_O");
  end

  logic          win_valid, win_last;
  win_t          win_data;
  logic [GW-1:0] win_group;

  line_buffer #(.W(W), .H(H), .K(K), .S(S), .N_I(N_I), .G_I(G_I)) u_lb (
    .clk, .rst_n, .in_valid, .in_data,
    .win_valid, .win_data, .win_group, .win_last);

  // ---------------- s0 ----------------
  logic           busy;
  logic [BBW-1:0] b0;
  logic [TPW-1:0] tap0;
  logic [GW-1:0]  g0;
  win_t           win0;

  wire end_tap   = (32'(tap0) == T - 1);
  wire end_batch = (32'(b0) == B - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; b0 <= '0; tap0 <= '0; g0 <= '0; win0 <= '0;
    end else if (win_valid) begin
      busy <= 1'b1; b0 <= '0; tap0 <= '0; g0 <= win_group; win0 <= win_data;
    end else if (busy) begin
      if (!end_tap) tap0 <= tap0 + 1'b1;
      else begin
        tap0 <= '0;
        if (!end_batch) b0 <= b0 + 1'b1;
        else            busy <= 1'b0;
      end
    end
  end

  a_interval: assert property (@(posedge clk) disable iff (!rst_n) win_valid |-> (!busy || (end_tap && end_batch)))
    else $error("dw_block: input groups closer than the PE schedule allows");

  logic [P*WW-1:0] wword;
  logic [P*BW-1:0] bword;
  weight_buffer #(.DEPTH(WDEP), .WIDTH(P*WW)) u_wbuf (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_wdata), .rd_en(busy),
    .raddr(WAW'((32'(g0) * B + 32'(b0)) * T + 32'(tap0))), .rdata(wword));
  weight_buffer #(.DEPTH(BDEP), .WIDTH(P*BW)) u_bbuf (
    .clk, .we(b_we), .waddr(b_addr), .wdata(b_wdata), .rd_en(busy),
    .raddr(BAW'(32'(g0) * B + 32'(b0))), .rdata(bword));

  // ---------------- s1 ----------------
  logic           v1, first1, last1;
  logic [BBW-1:0] b1;
  logic [GW-1:0]  g1;
  act_t [P-1:0]   x1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; b1 <= '0; g1 <= '0; x1 <= '0;
    end else begin
      v1 <= busy;
      if (busy) begin
        first1 <= (tap0 == '0);
        last1  <= end_tap;
        b1     <= b0;
        g1     <= g0;
        for (int p = 0; p < P; p++)
          x1[p] <= win0[32'(tap0) / K][32'(tap0) % K][32'(b0) * P + p];
      end
    end
  end

  logic [P-1:0]  pe_v;
  acc_t [P-1:0]  pe_acc;
  for (genvar p = 0; p < P; p++) begin : g_pe
    dw_pe u_pe (.clk, .rst_n, .in_valid(v1), .first(first1), .last(last1),
                .x(x1[p]), .w(wgt_t'(wword[p*WW +: WW])), .bias(bias_t'(bword[p*BW +: BW])),
                .out_valid(pe_v[p]), .acc(pe_acc[p]));
  end

  // ---------------- s2 ----------------
  logic [BBW-1:0] b2;
  logic [GW-1:0]  g2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b2 <= '0; g2 <= '0;
    end else if (v1 && last1) begin
      b2 <= b1; g2 <= g1;
    end
  end

  act_t [P-1:0] res;
  always_comb
    for (int p = 0; p < P; p++) res[p] = requant(pe_acc[p], SHIFT, RELU);

  output_unit #(.M(N), .WR_N(P), .M_O(M_O), .I_O(I_O)) u_out (
    .clk, .rst_n, .wr_en(pe_v[0]),
    .wr_idx(OIW'(32'(g2) * B + 32'(b2))),
    .wr_data(res),
    .wr_commit(pe_v[0] && 32'(g2) == G_I - 1 && 32'(b2) == B - 1),
    .out_valid, .out_data, .overflow);

endmodule
