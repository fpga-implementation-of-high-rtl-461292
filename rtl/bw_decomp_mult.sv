// bw_decomp_mult: N x N two's complement multiplier built by decomposition
// from four (N/2) x (N/2) Baugh-Wooley multipliers. The default, N = 8, is the
// 8x8 multiplier of the design, made of four 4x4 units.
//
// How it works: each operand is split into a signed upper half and an unsigned
// lower half, A = Ah*2^H + Al, B = Bh*2^H + Bl, H = N/2. Four Baugh-Wooley
// sub-multipliers compute Ah*Bh, Ah*Bl, Al*Bh and Al*Bl in parallel, and
// decomp_adder_tree adds them with their weights. The split into four smaller
// multipliers working in parallel, followed by tree-shaped addition, follows the
// source. The source says the 4x4 units use the Baugh-Wooley method but not how
// the unsigned lower halves are handled; here the sub-multipliers that take a
// lower half treat it as unsigned (a Baugh-Wooley array with that operand's
// sign correction switched off), so that the product is exact for all inputs.
//
// Interface: a, b are N-bit two's complement; p is the 2N-bit two's complement
// product. Timing: purely combinational (no clock), as in the source's
// implementation; the result follows the inputs after the propagation delay.
// N must be even. N = 16 gives the 16x16 structure built from 8x8 Baugh-Wooley
// units that the source mentions as one of its 16x16 options.
module bw_decomp_mult #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  localparam int unsigned H = N / 2;

  if (N % 2 != 0 || N < 4) begin : g_bad_n
    $error("bw_decomp_mult: N must be even and at least 4");
  end

  logic [H-1:0]   a_hi, a_lo, b_hi, b_lo;
  logic [2*H-1:0] p_hh, p_hl, p_lh, p_ll;

  assign a_hi = a[N-1:H];
  assign a_lo = a[H-1:0];
  assign b_hi = b[N-1:H];
  assign b_lo = b[H-1:0];

  // signed x signed
  baugh_wooley #(.N(H), .A_SIGNED(1'b1), .B_SIGNED(1'b1)) u_bw_hh (.a(a_hi), .b(b_hi), .o(p_hh));
  // signed x unsigned
  baugh_wooley #(.N(H), .A_SIGNED(1'b1), .B_SIGNED(1'b0)) u_bw_hl (.a(a_hi), .b(b_lo), .o(p_hl));
  // unsigned x signed
  baugh_wooley #(.N(H), .A_SIGNED(1'b0), .B_SIGNED(1'b1)) u_bw_lh (.a(a_lo), .b(b_hi), .o(p_lh));
  // unsigned x unsigned
  baugh_wooley #(.N(H), .A_SIGNED(1'b0), .B_SIGNED(1'b0)) u_bw_ll (.a(a_lo), .b(b_lo), .o(p_ll));

  decomp_adder_tree #(.H(H)) u_tree (
    .p_hh(p_hh), .p_hl(p_hl), .p_lh(p_lh), .p_ll(p_ll), .p(p)
  );

endmodule
