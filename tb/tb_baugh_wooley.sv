// tb_baugh_wooley: self-checking testbench for the Baugh-Wooley array multiplier.
//
// Five instances are checked side by side: the 4x4 unit in all four signedness
// combinations (signed/unsigned for each operand), exhaustively over all 256
// input pairs, and an 8x8 signed x signed unit over all 65,536 pairs. The
// expected product is computed with integer arithmetic on the operand values,
// independently of the array. The multiplier is combinational; a new input pair
// is applied every clock cycle and checked one step later in the same cycle.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_baugh_wooley;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [3:0]  a4, b4;
  logic [7:0]  o_ss, o_su, o_us, o_uu;
  logic [7:0]  a8, b8;
  logic [15:0] o8;

  // dut_ss uses the defaults: the 4x4 signed x signed unit.
  baugh_wooley dut_ss (.a(a4), .b(b4), .o(o_ss));
  baugh_wooley #(.N(4), .A_SIGNED(1'b1), .B_SIGNED(1'b0)) dut_su (.a(a4), .b(b4), .o(o_su));
  baugh_wooley #(.N(4), .A_SIGNED(1'b0), .B_SIGNED(1'b1)) dut_us (.a(a4), .b(b4), .o(o_us));
  baugh_wooley #(.N(4), .A_SIGNED(1'b0), .B_SIGNED(1'b0)) dut_uu (.a(a4), .b(b4), .o(o_uu));
  baugh_wooley #(.N(8)) dut_8 (.a(a8), .b(b8), .o(o8));

  // Operand value as an integer, two's complement if sgn is set.
  function automatic int val(logic [7:0] x, int n, bit sgn);
    int v;
    v = int'(x) & ((1 << n) - 1);
    if (sgn && v >= (1 << (n - 1))) v -= (1 << n);
    return v;
  endfunction

  task automatic check(string name, logic [15:0] got, int expected, int width);
    logic [15:0] exp_bits;
    exp_bits = 16'(expected) & 16'((32'(1) << width) - 1);
    checks++;
    if (got != exp_bits) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s a=%h b=%h got=%h expected=%h", name,
                 (width == 8) ? 8'(a4) : a8, (width == 8) ? 8'(b4) : b8, got, exp_bits);
    end
  endtask

  initial begin
    a4 = '0; b4 = '0; a8 = '0; b8 = '0;
    // 4x4, all combinations of signedness, exhaustive.
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        @(posedge clk);
        a4 = 4'(i); b4 = 4'(j);
        #1;
        check("ss", 16'(o_ss), val(8'(a4), 4, 1) * val(8'(b4), 4, 1), 8);
        check("su", 16'(o_su), val(8'(a4), 4, 1) * val(8'(b4), 4, 0), 8);
        check("us", 16'(o_us), val(8'(a4), 4, 0) * val(8'(b4), 4, 1), 8);
        check("uu", 16'(o_uu), val(8'(a4), 4, 0) * val(8'(b4), 4, 0), 8);
      end
    end
    // The worked example of the source: +4 and -4 in 4-bit two's complement.
    @(posedge clk);
    a4 = 4'b0100; b4 = 4'b1100;
    #1;
    check("ss_example", 16'(o_ss), -16, 8);
    // 8x8 signed, exhaustive.
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        @(posedge clk);
        a8 = 8'(i); b8 = 8'(j);
        #1;
        check("ss8", o8, val(a8, 8, 1) * val(b8, 8, 1), 16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: the test needs about 66,000 cycles.
  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
