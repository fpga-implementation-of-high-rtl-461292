// bw_pkg: constants shared by the Baugh-Wooley multipliers.
//
// A Baugh-Wooley array never subtracts. Every partial-product bit a_i*b_j whose
// weight is negative (one of the two bits is the sign bit of a two's complement
// operand, the other is not) is complemented, and the constant that this
// complementing leaves over is added as one more row of the array. For a weight w
// the identity is  -x*2^w = (~x)*2^w - 2^w, so the correction row is minus the
// sum of 2^w over all complemented positions, taken modulo 2^(2N).
//
// For two signed operands this gives the classic constant 2^(2N-1) + 2^N (a one
// in column N and a one in column 2N-1). The same rule is used here to also give
// the mixed signed/unsigned multipliers that the decomposition structure needs;
// that generalisation is this design's own, the source describes only the
// signed x signed case.
package bw_pkg;

  // Correction constant for an N x N array. A_SIGNED / B_SIGNED say whether the
  // top bit of that operand carries the weight -2^(N-1).
  function automatic logic [63:0] bw_correction(int unsigned n, bit a_signed, bit b_signed);
    logic [63:0] neg_sum;
    neg_sum = '0;
    for (int unsigned j = 0; j < n; j++) begin
      for (int unsigned i = 0; i < n; i++) begin
        if ((a_signed && i == n - 1) != (b_signed && j == n - 1))
          neg_sum += 64'(1) << (i + j);
      end
    end
    return (~neg_sum + 64'(1)) & ((64'(1) << (2 * n)) - 64'(1));
  endfunction

endpackage
