// decomp_adder_tree: final addition of the decomposition multiplier.
//
// Function: given the four sub-products of a 2H x 2H two's complement
// multiplication split into H-bit halves, A = Ah*2^H + Al and B = Bh*2^H + Bl
// (Ah, Bh signed, Al, Bl unsigned), it forms
//     P = p_hh*2^(2H) + (p_hl + p_lh)*2^H + p_ll        (mod 2^(4H))
// where p_hh = Ah*Bh, p_hl = Ah*Bl, p_lh = Al*Bh and p_ll = Al*Bl, each 2H bits.
//
// How it works: the additions are arranged as a two-level tree. Level 1 adds the
// two cross products, which have the same weight, sign-extended to 2H+1 bits.
// p_hh and p_ll do not overlap, so they are simply placed side by side as one
// 4H-bit word; level 2 adds the level-1 sum, sign-extended and shifted by H
// columns, to that word. That the four sub-products are combined as a tree and
// aligned as in the decomposition figure follows the source; the adders are
// plain carry-propagate adders, the simplest choice, since the source does not
// say how they are built.
//
// Interface: p_hh and p_lh/p_hl are two's complement, p_ll unsigned. Timing:
// purely combinational.
module decomp_adder_tree #(
  parameter int unsigned H = 4
) (
  input  logic [2*H-1:0] p_hh,   // Ah * Bh, signed
  input  logic [2*H-1:0] p_hl,   // Ah * Bl, signed
  input  logic [2*H-1:0] p_lh,   // Al * Bh, signed
  input  logic [2*H-1:0] p_ll,   // Al * Bl, unsigned
  output logic [4*H-1:0] p
);

  // Level 1: cross products, same weight 2^H.
  logic signed [2*H:0] mid;
  assign mid = $signed({p_hl[2*H-1], p_hl}) + $signed({p_lh[2*H-1], p_lh});

  // Level 2: {p_hh, p_ll} plus the shifted level-1 sum.
  logic [4*H-1:0] outer;
  logic [4*H-1:0] mid_aligned;
  assign outer       = {p_hh, p_ll};
  assign mid_aligned = (4*H)'(mid) << H;   // sign-extends mid to 4H bits, then shifts
  assign p           = outer + mid_aligned;

endmodule
