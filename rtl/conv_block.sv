// conv_block: convolutional layer block (normal or point-wise convolution).
//
// Input: a row-major stream of the N input channels of a W x H feature
// map, G_I = N/N_I groups of N_I channels per pixel, one group per
// in_valid, at least I_I cycles apart. Output: the M output channels of
// every output position as G_O = M/M_O groups of M_O, at least I_O cycles
// apart (output_unit).
//
// Dataflow (input-stationary): when group g arrives, the line buffer hands
// over the KxKxN_I window of output position (Y,X), and during the next
// I_I cycles the M_I = M/I_I PEs compute every partial sum this window
// contributes: in cycle t PE p works on output channel m = t*M_I + p,
// reading the weight word g*I_I + t. Partial sums are added into the
// accumulation buffer (size M = I_I words of M_I sums); group 0 starts from
// the bias instead of the buffer. After the last group the sums go through
// requant() into the output unit; the write of t = I_I-1 closes the
// position. The weights are never re-read for another window position, so
// all of them stay in the on-chip weight buffer.
//
// Pipeline: window -> s0 (weight read, I_I cycles) -> s1 (PE, acc/bias
// read) -> s2 (add, write back or output). The window is copied with s1 so
// that the next window may arrive right after s0 finishes.
//
// Weight word layout (depth G_I*I_I): PE p at [p*PEW +: PEW], entries as in
// sparse_pe. Bias word t (depth I_I): bias of channel t*M_I+p at [p*BW +: BW].
// Both memories are loaded through their write ports before streaming.
//
// From the paper: the (K-1)-line buffer, M_I = M/I_I PEs of K*K*N_I*(1-r)
// multipliers, the accumulation buffer of size M, the output unit, the
// group/interval stream timing. Own choices: pipeline depth, memory
// layouts, bias at group 0, requantisation, load ports, no padding.
module conv_block import aoc_pkg::*; #(
  parameter int unsigned W     = 253,
  parameter int unsigned H     = 253,
  parameter int unsigned K     = 1,
  parameter int unsigned S     = 1,
  parameter int unsigned N     = 32,
  parameter int unsigned N_I   = 8,
  parameter int unsigned M     = 64,
  parameter int unsigned I_I   = 8,
  parameter int unsigned M_O   = 8,
  parameter int unsigned I_O   = 4,
  parameter int unsigned BLK   = 8,
  parameter int unsigned KEEP  = 2,
  parameter int unsigned SHIFT = 6,
  parameter bit          RELU  = 1'b1,
  localparam int unsigned G_I  = N / N_I,
  localparam int unsigned M_I  = M / I_I,
  localparam int unsigned NMUL = K * K * (N_I / BLK) * KEEP,
  localparam int unsigned ENTW = WW + idx_w(BLK),
  localparam int unsigned PEW  = NMUL * ENTW,
  localparam int unsigned WDEP = G_I * I_I,
  localparam int unsigned WAW  = (WDEP > 1) ? $clog2(WDEP) : 1,
  localparam int unsigned TW   = (I_I > 1) ? $clog2(I_I) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  act_t [N_I-1:0]        in_data,
  output logic                  out_valid,
  output act_t [M_O-1:0]        out_data,
  output logic                  overflow,
  input  logic                  w_we,
  input  logic [WAW-1:0]        w_addr,
  input  logic [M_I*PEW-1:0]    w_wdata,
  input  logic                  b_we,
  input  logic [TW-1:0]         b_addr,
  input  logic [M_I*BW-1:0]     b_wdata
);
  localparam int unsigned GW = (G_I > 1) ? $clog2(G_I) : 1;
  typedef act_t [K-1:0][K-1:0][N_I-1:0] win_t;

  // rate condition: one output position (S input pixels apart in a row)
  // must leave before the next one is finished
  if (G_I * I_I * S < (M / M_O) * I_O) begin : g_rate_check
    $error("conv_block: (N/N_I)*I_I*S must be at least (M/M_O)*I_O");
  end

  // ---------------- line buffer ----------------
  logic          win_valid, win_last;
  win_t          win_data;
  logic [GW-1:0] win_group;

  line_buffer #(.W(W), .H(H), .K(K), .S(S), .N_I(N_I), .G_I(G_I)) u_lb (
    .clk, .rst_n, .in_valid, .in_data,
    .win_valid, .win_data, .win_group, .win_last);

  // ---------------- s0: sequence over I_I cycles ----------------
  logic          busy;
  logic [TW-1:0] t0;
  logic [GW-1:0] g0;
  logic          last0;
  win_t          win0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; t0 <= '0; g0 <= '0; last0 <= 1'b0; win0 <= '0;
    end else if (win_valid) begin
      busy  <= 1'b1;
      t0    <= '0;
      g0    <= win_group;
      last0 <= win_last;
      win0  <= win_data;
    end else if (busy) begin
      if (32'(t0) == I_I - 1) busy <= 1'b0;
      else                    t0   <= t0 + 1'b1;
    end
  end

  // a new window may only arrive once the previous sequence is done
  a_interval: assert property (@(posedge clk) disable iff (!rst_n) win_valid |-> (!busy || 32'(t0) == I_I - 1))
    else $error("conv_block: input groups closer than I_I cycles");

  logic [M_I*PEW-1:0] wword;
  weight_buffer #(.DEPTH(WDEP), .WIDTH(M_I*PEW)) u_wbuf (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_wdata),
    .rd_en(busy), .raddr(WAW'(32'(g0) * I_I + 32'(t0))), .rdata(wword));

  // ---------------- s1: PEs, accumulator and bias read ----------------
  logic          v1, last1, first1;
  logic [TW-1:0] t1;
  win_t          win1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; first1 <= 1'b0; t1 <= '0; win1 <= '0;
    end else begin
      v1 <= busy;
      if (busy) begin
        t1     <= t0;
        last1  <= last0;
        first1 <= (g0 == '0);
        win1   <= win0;
      end
    end
  end

  acc_t [M_I-1:0] psum;
  for (genvar p = 0; p < M_I; p++) begin : g_pe
    sparse_pe #(.K(K), .N_I(N_I), .BLK(BLK), .KEEP(KEEP)) u_pe (
      .clk, .en(v1), .win(win1), .wents(wword[p*PEW +: PEW]), .psum(psum[p]));
  end

  logic [M_I*BW-1:0] bword;
  weight_buffer #(.DEPTH(I_I), .WIDTH(M_I*BW)) u_bbuf (
    .clk, .we(b_we), .waddr(b_addr), .wdata(b_wdata),
    .rd_en(v1), .raddr(t1), .rdata(bword));

  // ---------------- s2: accumulate, write back or output ----------------
  logic          v2, last2, first2;
  logic [TW-1:0] t2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; last2 <= 1'b0; first2 <= 1'b0; t2 <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        t2 <= t1; last2 <= last1; first2 <= first1;
      end
    end
  end

  acc_t [M_I-1:0] acc_rd, acc_new;
  act_t [M_I-1:0] res;

  always_comb begin
    for (int p = 0; p < M_I; p++) begin
      acc_new[p] = (first2 ? acc_t'(bias_t'(bword[p*BW +: BW])) : acc_rd[p]) + psum[p];
      res[p]     = requant(acc_new[p], SHIFT, RELU);
    end
  end

  acc_buffer #(.I_I(I_I), .M_I(M_I)) u_acc (
    .clk, .rd_en(v1), .raddr(t1), .rdata(acc_rd),
    .we(v2 && !last2), .waddr(t2), .wdata(acc_new));

  output_unit #(.M(M), .WR_N(M_I), .M_O(M_O), .I_O(I_O)) u_out (
    .clk, .rst_n, .wr_en(v2 && last2), .wr_idx(t2), .wr_data(res),
    .wr_commit(v2 && last2 && 32'(t2) == I_I - 1),
    .out_valid, .out_data, .overflow);

endmodule
