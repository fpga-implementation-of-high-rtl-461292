// tb_bw_decomp_mult16: checks the decomposed multiplier at N = 16, the 16x16
// structure made of four 8x8 Baugh-Wooley arrays.
//
// 100,000 random operand pairs plus the corner values (0, 1, -1, the largest
// and the most negative number, in all combinations) are applied, one per clock
// cycle, and the 32-bit product is compared with a*b computed with 64-bit
// integer arithmetic. A watchdog ends a run that hangs.
module tb_bw_decomp_mult16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [15:0] a, b;
  logic [31:0] p;

  bw_decomp_mult #(.N(16)) dut (.a(a), .b(b), .p(p));

  localparam logic [15:0] CORNERS [5] = '{16'h0000, 16'h0001, 16'hffff, 16'h7fff, 16'h8000};

  task automatic apply(logic [15:0] x, logic [15:0] y);
    longint expected;
    @(posedge clk);
    a = x; b = y;
    #1;
    expected = longint'($signed(x)) * longint'($signed(y));
    checks++;
    if (p !== 32'(expected)) begin
      failures++;
      if (failures <= 10)
        $display("FAIL a=%0d b=%0d got=%h expected=%h", $signed(x), $signed(y), p, 32'(expected));
    end
  endtask

  initial begin
    a = '0; b = '0;
    for (int k = 0; k < 25; k++) apply(CORNERS[k / 5], CORNERS[k % 5]);
    for (int k = 0; k < 100_000; k++) apply(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
