// line_buffer: (K-1)-line buffer and KxK window former of a layer block.
//
// Input activations arrive in row-major order, one group of N_I channels
// per in_valid pulse, G_I groups per pixel (N = G_I*N_I channels). The
// block keeps only the previous K-1 rows, as K-1 memories of W*G_I words
// (one word = N_I activations), addressed by x*G_I+g. When group g of
// pixel (y,x) arrives, the K-1 stored values at that address and the new
// group form the newest window column. A small column register per group
// (K rows x K-1 columns x N_I) holds the older columns, so the complete
// KxKxN_I window of the output position (Y,X) = (y-K+1, x-K+1) is
// available as soon as the group arrives, which is what keeps the storage
// at K-1 lines. The row memories are shifted up at the same address
// (row k takes row k+1, the last row takes the new data).
//
// Windows are emitted only for positions inside the image (no padding) and,
// for stride S, only when (y-K+1) and (x-K+1) are multiples of S.
//
// Timing: stage 0 registers the input and reads the row memories
// (synchronous read); stage 1 writes them back and forms the window;
// win_valid rises 2 cycles after in_valid. win_data is held until the next
// window. win_data[i][j][c] is fi(g*N_I+c, Y+i, X+j) (i = row, j = column).
// The row/column counters wrap after a full H x W frame.
// K = 1 (point-wise layers) needs no line memory: the window is the input.
//
// Follows the paper: K-1 line storage, row-major streaming of channel
// groups, window (Y,X) = (y-K+1, x-K+1). Own choices: the column registers,
// the two-stage timing, no padding, the stride phase counters.
module line_buffer import aoc_pkg::*; #(
  parameter int unsigned W   = 512,
  parameter int unsigned H   = 512,
  parameter int unsigned K   = 3,
  parameter int unsigned S   = 1,
  parameter int unsigned N_I = 8,
  parameter int unsigned G_I = 4,
  localparam int unsigned GW = (G_I > 1) ? $clog2(G_I) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  act_t [N_I-1:0]                       in_data,
  output logic                                 win_valid,
  output act_t [K-1:0][K-1:0][N_I-1:0]         win_data,
  output logic [GW-1:0]                        win_group,
  output logic                                 win_last
);
  localparam int unsigned XW    = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned YW    = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned DEPTH = W * G_I;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned SW    = (S > 1) ? $clog2(S) : 1;
  localparam int unsigned PH0   = (S - ((K - 1) % S)) % S;

  typedef act_t [N_I-1:0] grp_t;

  // ---------------- position counters ----------------
  logic [GW-1:0] g_q;
  logic [XW-1:0] x_q;
  logic [YW-1:0] y_q;
  logic [SW-1:0] xph_q, yph_q;   // (x-K+1) mod S, (y-K+1) mod S
  logic [AW-1:0] addr_q;         // x*G_I + g

  wire last_g = (32'(g_q) == G_I - 1);
  wire last_x = (32'(x_q) == W - 1);
  wire last_y = (32'(y_q) == H - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q <= '0; x_q <= '0; y_q <= '0; addr_q <= '0;
      xph_q <= SW'(PH0); yph_q <= SW'(PH0);
    end else if (in_valid) begin
      if (!last_g) begin
        g_q    <= g_q + 1'b1;
        addr_q <= addr_q + 1'b1;
      end else begin
        g_q <= '0;
        if (!last_x) begin
          x_q    <= x_q + 1'b1;
          addr_q <= addr_q + 1'b1;
          xph_q  <= (32'(xph_q) == S - 1) ? '0 : xph_q + 1'b1;
        end else begin
          x_q    <= '0;
          addr_q <= '0;
          xph_q  <= SW'(PH0);
          if (!last_y) begin
            y_q   <= y_q + 1'b1;
            yph_q <= (32'(yph_q) == S - 1) ? '0 : yph_q + 1'b1;
          end else begin
            y_q   <= '0;
            yph_q <= SW'(PH0);
          end
        end
      end
    end
  end

  wire win_ok = (32'(x_q) >= K - 1) && (32'(y_q) >= K - 1) &&
                (xph_q == '0) && (yph_q == '0);

  // ---------------- stage 0 -> stage 1 registers ----------------
  logic          s1_valid, s1_ok, s1_last;
  logic [GW-1:0] s1_g;
  logic [AW-1:0] s1_addr;
  grp_t          s1_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_ok <= 1'b0; s1_last <= 1'b0;
      s1_g <= '0; s1_addr <= '0; s1_data <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_ok   <= win_ok;
        s1_last <= last_g;
        s1_g    <= g_q;
        s1_addr <= addr_q;
        s1_data <= in_data;
      end
    end
  end

  // newest column of the window: rows Y..Y+K-1 at column x
  grp_t [K-1:0] newcol;
  act_t [K-1:0][K-1:0][N_I-1:0] win_next;

  generate
    if (K > 1) begin : g_lines
      grp_t rd [K-1];                       // stage-1 read data, row 0 = oldest
      for (genvar k = 0; k < K - 1; k++) begin : g_row
        grp_t mem [DEPTH];
        always_ff @(posedge clk) begin
          if (in_valid) rd[k] <= mem[addr_q];
          if (s1_valid) mem[s1_addr] <= (k == K - 2) ? s1_data : rd[(k == K - 2) ? k : k + 1];
        end
        assign newcol[k] = rd[k];
      end
      assign newcol[K-1] = s1_data;

      // older K-1 columns of every group: colreg[g][row][col], col 0 = X
      grp_t [K-1:0][K-2:0] colreg [G_I];

      always_ff @(posedge clk) begin
        if (s1_valid) begin
          for (int r = 0; r < K; r++) begin
            for (int c = 0; c < K - 2; c++) colreg[s1_g][r][c] <= colreg[s1_g][r][c+1];
            colreg[s1_g][r][K-2] <= newcol[r];
          end
        end
      end

      always_comb begin
        for (int r = 0; r < K; r++) begin
          for (int c = 0; c < K - 1; c++) win_next[r][c] = colreg[s1_g][r][c];
          win_next[r][K-1] = newcol[r];
        end
      end
    end else begin : g_nolines
      assign newcol[0]   = s1_data;
      assign win_next[0][0] = s1_data;
    end
  endgenerate

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= 1'b0; win_group <= '0; win_last <= 1'b0; win_data <= '0;
    end else begin
      win_valid <= s1_valid && s1_ok;
      if (s1_valid && s1_ok) begin
        win_data  <= win_next;
        win_group <= s1_g;
        win_last  <= s1_last;
      end
    end
  end

endmodule
