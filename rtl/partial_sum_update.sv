// partial_sum_update: partial-sum (beta) storage update of a decoder tree.
//
// A subtree of LEVELS levels above leaves that each return LEAF_W partial-sum
// bits is decoded leaf by leaf. Only the betas of finished left children are
// kept: level k (0..LEVELS-1) stores LEAF_W*2^k bits at offset LEAF_W*(2^k-1)
// of the flat vector beta_in. When leaf idx returns its beta, the beta of each
// finished ancestor is formed by the paper's rule (Eq. 4)
//   beta[i] = beta_l[i] ^ beta_r[i],  beta[i + half] = beta_r[i],
// (the paper prints the upper half with an out-of-range index into beta_r;
// it is read here as the plain copy above, the standard rule),
// climbing while the node just finished is a right child; the first left child
// met (level k = trailing ones of idx) is stored at level k. After the last
// leaf (idx all ones) nothing is stored. Used with LEAF_W = 1 for the bits of a
// partition and with LEAF_W = partition length for the SC tree above the
// partitions. Purely combinational.
module partial_sum_update #(
  parameter int unsigned LEVELS = 9,
  parameter int unsigned LEAF_W = 1
) (
  input  logic [LEAF_W*((1<<LEVELS)-1)-1:0]  beta_in,
  input  logic [LEVELS-1:0]                  idx,
  input  logic [LEAF_W-1:0]                  leaf,
  output logic [LEAF_W*((1<<LEVELS)-1)-1:0]  beta_out
);
  // chain holds the beta of the node finished at each level, level k at
  // offset LEAF_W*(2^k - 1), width LEAF_W*2^k (the full root beta is never
  // stored, so it is not formed).
  logic [LEAF_W*((1<<LEVELS)-1)-1:0] chain;
  logic [LEVELS-1:0]                 store;   // one-hot: level to store at

  assign chain[LEAF_W-1:0] = leaf;

  for (genvar k = 0; k < LEVELS; k++) begin : g_lvl
    localparam int unsigned OFF = LEAF_W * ((1 << k) - 1);
    localparam int unsigned WK  = LEAF_W * (1 << k);
    localparam int unsigned NXT = LEAF_W * ((2 << k) - 1);
    if (k < LEVELS - 1) begin : g_up
      assign chain[NXT +: WK]      = beta_in[OFF +: WK] ^ chain[OFF +: WK];
      assign chain[NXT + WK +: WK] = chain[OFF +: WK];
    end
    if (k == 0) begin : g_s0
      assign store[k] = ~idx[0];
    end else begin : g_sk
      assign store[k] = ~idx[k] & (&idx[k-1:0]);
    end
    assign beta_out[OFF +: WK] = store[k] ? chain[OFF +: WK] : beta_in[OFF +: WK];
  end
endmodule
