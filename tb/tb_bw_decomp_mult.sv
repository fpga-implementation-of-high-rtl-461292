// tb_bw_decomp_mult: end-to-end testbench of the decomposed multiplier at its
// default size (8x8, no parameter overrides).
//
// All 65,536 operand pairs are applied, one per clock cycle, and the 16-bit
// product is compared with a*b computed by integer arithmetic. (The 4x4
// sub-multipliers are checked on their own by tb_baugh_wooley.)
//
// The testbench also counts how often each mechanism of the design was exercised
// and fails if one never was: each sign combination of the operands (which
// exercises the Baugh-Wooley sign handling of the 4x4 units), a negative sum of
// the two cross products (sign extension in the adder tree), and a carry out of
// the lower byte when the cross products are added to {p_hh, p_ll}.
module tb_bw_decomp_mult;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [7:0]  a, b;
  logic [15:0] p;

  bw_decomp_mult dut (.a(a), .b(b), .p(p));

  task automatic check(string what, logic [15:0] got, logic [15:0] expected);
    checks++;
    if (got !== expected) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s a=%0d b=%0d got=%h expected=%h", what,
                 $signed(a), $signed(b), got, expected);
    end
  endtask

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %s: seen %0d times", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism %s never exercised", what);
    end
  endtask

  initial begin
    int av, bv, ah, al, bh, bl, mid;
    int n_pp, n_pn, n_np, n_nn, n_mid_neg, n_carry_lo;
    a = '0; b = '0;
    n_pp = 0; n_pn = 0; n_np = 0; n_nn = 0; n_mid_neg = 0; n_carry_lo = 0;
    // One flat loop over all pairs: a = k[15:8] - 128, b = k[7:0] - 128.
    for (int k = 0; k < 65536; k++) begin
      av = (k >> 8) - 128; bv = (k & 255) - 128;
      al = av & 15; ah = (av - al) / 16;
      bl = bv & 15; bh = (bv - bl) / 16;
      @(posedge clk);
      a = 8'(av); b = 8'(bv);
      #1;
      check("product", p, 16'(av * bv));
      mid = ah * bl + al * bh;
      if (av >= 0 && bv >= 0) n_pp = n_pp + 1;
      if (av >= 0 && bv <  0) n_pn = n_pn + 1;
      if (av <  0 && bv >= 0) n_np = n_np + 1;
      if (av <  0 && bv <  0) n_nn = n_nn + 1;
      if (mid < 0) n_mid_neg = n_mid_neg + 1;
      if (((mid & 15) * 16 + al * bl) >= 256) n_carry_lo = n_carry_lo + 1;
    end
    need("positive x positive", n_pp);
    need("positive x negative", n_pn);
    need("negative x positive", n_np);
    need("negative x negative", n_nn);
    need("negative cross-product sum", n_mid_neg);
    need("carry out of low byte", n_carry_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
