// tb_fp_mul: self-checking test of the binary64 multiplier against the
// simulator's double-precision arithmetic (bit-exact), plus exact halfway
// cases (round-half-to-even) and special operands.
module tb_fp_mul;
  import tb_util_pkg::*;

  logic [63:0] a, b, y;
  int          checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [63:0] exp_v, string what);
    checks++;
    if (y !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: a=%h b=%h got %h exp %h", what, a, b, y, exp_v);
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
      a = rand_fp(200);
      b = rand_fp(200);
      #1;
      check(ftz(r2b(b2r(a) * b2r(b))), "random");
    end
    // halfway cases: (1 + k*2^-52) * 1.5 with odd k lies exactly between two
    // doubles; the two possible roundings alternate with k
    for (int i = 0; i < 2000; i++) begin
      a = {1'($urandom_range(1)), 11'(900 + $urandom_range(200)), 51'($urandom), 1'b1};
      b = {1'($urandom_range(1)), 11'(900 + $urandom_range(200)), 52'h8_0000_0000_0000};
      #1;
      check(ftz(r2b(b2r(a) * b2r(b))), "tie");
    end
    a = r2b(3.0);  b = r2b(0.0);  #1; check(64'h0, "x*0");
    a = r2b(-3.0); b = 64'h7FF0_0000_0000_0000; #1; check(64'hFFF0_0000_0000_0000, "x*inf");
    a = r2b(0.0);  b = 64'h7FF0_0000_0000_0000; #1; check(64'h7FF8_0000_0000_0000, "0*inf");
    a = 64'h7FE0_0000_0000_0000; b = r2b(4.0); #1; check(64'h7FF0_0000_0000_0000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
