// sparse_pe: processing element of a convolutional layer block for
// weights pruned with accelerator-aware pruning.
//
// Along the channel axis the N_I channels of every kernel tap are split
// into blocks of BLK channels, and only KEEP weights per block are kept
// (BLK = 8, KEEP = 2 is the 75 % pruning ratio: 6 of every 8 weights are
// zero). Each kept weight is stored with its index inside the block. The
// PE has one multiplier per kept weight, K*K*N_I*KEEP/BLK of them
// (= K*K*N_I*(1-r)): each multiplier selects its activation from the
// window with the index, and an adder tree sums all products. The result,
// a partial sum of one output channel over one input group, is registered:
// psum is valid one cycle after en.
//
// A dense layer is the special case BLK = KEEP = 1.
//
// Weight entry e (tap t = e/(NB*KEEP), channel block b = (e/KEEP)%NB) sits
// at wents[e*ENTW +: ENTW] as {index, weight}; NB = N_I/BLK.
//
// From the paper: the multiplier count K*K*N_I*(1-r), multipliers feeding
// an adder tree (Fig. 3), 6-of-8 pruning along the channel axis. Own
// choice: the {index, weight} entry format and the single register stage.
module sparse_pe import aoc_pkg::*; #(
  parameter int unsigned K    = 1,
  parameter int unsigned N_I  = 8,
  parameter int unsigned BLK  = 8,
  parameter int unsigned KEEP = 2,
  localparam int unsigned NB   = N_I / BLK,
  localparam int unsigned NMUL = K * K * NB * KEEP,
  localparam int unsigned IW   = idx_w(BLK),
  localparam int unsigned ENTW = WW + IW
) (
  input  logic                          clk,
  input  logic                          en,
  input  act_t [K-1:0][K-1:0][N_I-1:0]  win,
  input  logic [NMUL*ENTW-1:0]          wents,
  output acc_t                          psum
);
  acc_t sum;

  always_comb begin
    sum = '0;
    for (int e = 0; e < NMUL; e++) begin
      automatic int unsigned t   = e / (NB * KEEP);
      automatic int unsigned b   = (e / KEEP) % NB;
      automatic wgt_t        w   = wgt_t'(wents[e*ENTW +: WW]);
      automatic logic [IW-1:0] ix = wents[e*ENTW + WW +: IW];
      automatic act_t        a   = win[t / K][t % K][b * BLK + ((BLK > 1) ? 32'(ix) : 0)];
      sum = sum + acc_t'(w) * acc_t'(a);
    end
  end

  always_ff @(posedge clk) begin
    if (en) psum <= sum;
  end
endmodule
