// tb_decomp_adder_tree: self-checking testbench for the decomposition adder tree.
//
// For every pair of 8-bit two's complement operands the testbench splits each
// operand into a signed upper and an unsigned lower nibble, forms the four
// sub-products itself with integer arithmetic, and drives them into the tree.
// The tree's output must equal the full 16-bit product a*b. A second pass drives
// random 8-bit words on all four inputs and compares with the weighted sum
// p_hh*256 + (p_hl + p_lh)*16 + p_ll (p_ll unsigned, the rest signed), mod 2^16.
// One vector per clock cycle; a watchdog ends a run that hangs.
module tb_decomp_adder_tree;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [7:0]  p_hh, p_hl, p_lh, p_ll;
  logic [15:0] p;

  decomp_adder_tree dut (.p_hh(p_hh), .p_hl(p_hl), .p_lh(p_lh), .p_ll(p_ll), .p(p));

  task automatic check(logic [15:0] expected);
    checks++;
    if (p !== expected) begin
      failures++;
      if (failures <= 10)
        $display("FAIL hh=%h hl=%h lh=%h ll=%h got=%h expected=%h",
                 p_hh, p_hl, p_lh, p_ll, p, expected);
    end
  endtask

  initial begin
    int ah, al, bh, bl, av, bv;
    p_hh = '0; p_hl = '0; p_lh = '0; p_ll = '0;
    for (int i = -128; i < 128; i++) begin
      for (int j = -128; j < 128; j++) begin
        av = i; bv = j;
        al = av & 15; ah = (av - al) / 16;   // ah in -8..7, al in 0..15
        bl = bv & 15; bh = (bv - bl) / 16;
        @(posedge clk);
        p_hh = 8'(ah * bh);
        p_hl = 8'(ah * bl);
        p_lh = 8'(al * bh);
        p_ll = 8'(al * bl);
        #1;
        check(16'(av * bv));
      end
    end
    for (int k = 0; k < 20000; k++) begin
      @(posedge clk);
      p_hh = 8'($urandom); p_hl = 8'($urandom); p_lh = 8'($urandom); p_ll = 8'($urandom);
      #1;
      check(16'(int'($signed(p_hh)) * 256 + (int'($signed(p_hl)) + int'($signed(p_lh))) * 16
                + int'(p_ll)));
    end
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
