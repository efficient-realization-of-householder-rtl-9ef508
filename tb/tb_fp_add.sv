// tb_fp_add: self-checking test of the binary64 adder/subtractor. Random
// operands with exponents close together (cancellation) and far apart
// (alignment, sticky) are compared bit-exactly with the simulator's own
// double-precision arithmetic; a few special operands are checked too.
module tb_fp_add;
  import tb_util_pkg::*;

  logic [63:0] a, b, y;
  logic        sub;
  int          checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check(logic [63:0] exp_v, string what);
    checks++;
    if (y !== exp_v) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: a=%h b=%h sub=%0d got %h exp %h", what, a, b, sub, y, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a   = rand_fp((i % 3 == 0) ? 2 : 60);
      b   = (i % 5 == 0) ? {~a[63], a[62:52], a[51:8], 8'($urandom)} : rand_fp((i % 3 == 0) ? 2 : 60);
      sub = $urandom_range(1);
      #1;
      check(ftz(r2b(sub ? b2r(a) - b2r(b) : b2r(a) + b2r(b))), "random");
    end
    // specials
    a = r2b(1.5); b = r2b(1.5); sub = 1; #1; check(64'h0, "x-x=+0");
    a = 64'h7FF0_0000_0000_0000; b = r2b(3.0); sub = 0; #1; check(64'h7FF0_0000_0000_0000, "inf+x");
    a = 64'h7FF0_0000_0000_0000; b = 64'h7FF0_0000_0000_0000; sub = 1; #1; check(64'h7FF8_0000_0000_0000, "inf-inf");
    a = 64'h8000_0000_0000_0000; b = 64'h8000_0000_0000_0000; sub = 0; #1; check(64'h8000_0000_0000_0000, "-0+-0");
    a = r2b(0.0); b = r2b(-2.25); sub = 0; #1; check(r2b(-2.25), "0+x");
    a = 64'h7FEF_FFFF_FFFF_FFFF; b = 64'h7FEF_FFFF_FFFF_FFFF; sub = 0; #1; check(64'h7FF0_0000_0000_0000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
