// baugh_wooley: combinational N x N Baugh-Wooley array multiplier.
//
// Function: o = a * b, full precision (2N bits). With the defaults (N = 4, both
// operands signed) it is the 4x4 two's complement multiplier of the design, with
// the ports a(3:0), b(3:0) and o(7:0) of its RTL view.
//
// How it works: the N x N partial-product bits a_i & b_j are formed in parallel.
// Bits of negative weight (exactly one of i, j is the sign position of a signed
// operand) are inverted instead of being subtracted, and one constant correction
// row (bw_pkg::bw_correction) makes up for the inversions. All rows are then
// positive, so they are summed by a plain carry-save array: one row of full
// adders per partial-product row, followed by one carry-propagate adder. The
// result is taken modulo 2^(2N), which holds every product of two N-bit
// operands of the chosen signedness.
//
// Parameters A_SIGNED / B_SIGNED select whether each operand is two's complement
// or unsigned. The source uses only the signed x signed form; the unsigned and
// mixed forms are this design's addition so that the same unit can supply all
// four sub-products of the decomposed multiplier (bw_decomp_mult).
//
// Timing: purely combinational, no clock and no registers; the result is valid
// one propagation delay after the inputs settle.
module baugh_wooley #(
  parameter int unsigned N        = 4,
  parameter bit          A_SIGNED = 1'b1,
  parameter bit          B_SIGNED = 1'b1
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] o
);

  localparam int unsigned W = 2 * N;
  localparam logic [W-1:0] CORRECTION = W'(bw_pkg::bw_correction(N, A_SIGNED, B_SIGNED));

  // Partial-product bits, with the negative-weight bits already complemented.
  logic [N-1:0] pp [N];

  for (genvar j = 0; j < N; j++) begin : g_row
    for (genvar i = 0; i < N; i++) begin : g_col
      localparam bit NEG = (A_SIGNED && i == N - 1) != (B_SIGNED && j == N - 1);
      if (NEG) begin : g_neg
        assign pp[j][i] = ~(a[i] & b[j]);
      end else begin : g_pos
        assign pp[j][i] = a[i] & b[j];
      end
    end
  end

  // Carry-save array: row j (weight 2^j) is added into the running sum/carry
  // pair by one row of full adders; the correction row goes in as the first row.
  logic [W-1:0] sum_q [N+1];
  logic [W-1:0] cry_q [N+1];

  always_comb begin
    logic [W-1:0] row;
    sum_q[0] = CORRECTION;
    cry_q[0] = '0;
    for (int j = 0; j < N; j++) begin
      row          = W'(pp[j]) << j;
      sum_q[j+1]   = sum_q[j] ^ cry_q[j] ^ row;
      cry_q[j+1]   = ((sum_q[j] & cry_q[j]) | (sum_q[j] & row) | (cry_q[j] & row)) << 1;
    end
  end

  // Final carry-propagate addition.
  assign o = sum_q[N] + cry_q[N];

endmodule
