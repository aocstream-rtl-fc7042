// output_unit: output unit of a layer block.
//
// The PEs deliver the M finished outputs of one output position as a
// number of writes of WR_N values (word wr_idx holds channels
// wr_idx*WR_N .. wr_idx*WR_N+WR_N-1); the write with wr_commit closes the
// position. The unit then streams the M values to the next block as
// G_O = M/M_O groups of M_O channels, channel 0 first, with at least I_O
// cycles between two groups (also across positions).
//
// Storage is two banks of M activations (ping-pong): the PEs fill one
// while the other is streamed out, because the last groups of position X-1
// are still leaving while the outputs of X are produced. A commit into a
// bank that has not been fully sent raises the sticky overflow flag; with
// rates that satisfy (N/N_i)*I_i >= (M/M_o)*I_o this never happens.
//
// From the paper: collecting M outputs and streaming G_o groups of M_o at
// interval I_o. Own choices: two banks, the overflow flag, no back-pressure
// (the stream is valid-only, like the block inputs).
module output_unit import aoc_pkg::*; #(
  parameter int unsigned M    = 64,
  parameter int unsigned WR_N = 8,
  parameter int unsigned M_O  = 8,
  parameter int unsigned I_O  = 4,
  localparam int unsigned NW  = M / WR_N,
  localparam int unsigned WIW = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [WIW-1:0]      wr_idx,
  input  act_t [WR_N-1:0]     wr_data,
  input  logic                wr_commit,
  output logic                out_valid,
  output act_t [M_O-1:0]      out_data,
  output logic                overflow
);
  localparam int unsigned G_O = M / M_O;
  localparam int unsigned QW  = (G_O > 1) ? $clog2(G_O) : 1;
  localparam int unsigned CW  = $clog2(I_O + 1);

  act_t [M-1:0] bank [2];
  logic [1:0]   full;
  logic         wbank, rbank;
  logic [QW-1:0] q;       // next group to send
  logic [CW-1:0] gap;     // cycles still to wait before the next group

  wire send = full[rbank] && (gap == '0);

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < WR_N; k++) bank[wbank][32'(wr_idx) * WR_N + k] <= wr_data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wbank <= 1'b0; rbank <= 1'b0; q <= '0; gap <= '0;
      out_valid <= 1'b0; out_data <= '0; overflow <= 1'b0;
    end else begin
      out_valid <= send;
      if (gap != '0) gap <= gap - 1'b1;
      if (send) begin
        out_data <= bank[rbank][32'(q) * M_O +: M_O];
        gap      <= CW'(I_O - 1);
        if (32'(q) == G_O - 1) begin
          q           <= '0;
          full[rbank] <= 1'b0;
          rbank       <= ~rbank;
        end else begin
          q <= q + 1'b1;
        end
      end
      if (wr_en && wr_commit) begin
        if (full[wbank] && !(send && rbank == wbank && 32'(q) == G_O - 1)) overflow <= 1'b1;
        full[wbank] <= 1'b1;
        wbank       <= ~wbank;
      end
    end
  end

  // a position may only be closed into a bank that is free (or freed now)
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_en && wr_commit) |-> !(full[wbank] && !(send && rbank == wbank && 32'(q) == G_O - 1)))
    else $warning("output_unit: position committed into a bank still being sent");
endmodule
