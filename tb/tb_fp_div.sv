// tb_fp_div: self-checking test of the iterative binary64 divider. Random
// quotients are compared bit-exactly with the simulator's double division,
// special operands are checked, and every operation must take exactly 57
// clocks from start to done (1 load, 55 quotient bits, 1 rounding).
module tb_fp_div;
  import tb_util_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] a, b, y;
  int          checks = 0, failures = 0;
  int          cyc;

  fp_div dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b), .busy(busy), .done(done), .y(y));

  always #5 clk = ~clk;

  task automatic run(logic [63:0] av, logic [63:0] bv, logic [63:0] exp_v, string what);
    @(negedge clk);
    a = av; b = bv; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (y !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h / %h got %h exp %h", what, av, bv, y, exp_v);
    end
    if (cyc != 57) begin
      failures++;
      if (failures < 10) $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] av, bv;
      av = rand_fp(300);
      bv = (i % 4 == 0) ? {1'b0, av[62:0]} : rand_fp(300);
      run(av, bv, ftz(r2b(b2r(av) / b2r(bv))), "random");
    end
    run(r2b(1.0), r2b(3.0), r2b(1.0 / 3.0), "1/3");
    run(r2b(5.0), r2b(0.0), 64'h7FF0_0000_0000_0000, "x/0");
    run(r2b(0.0), r2b(0.0), 64'h7FF8_0000_0000_0000, "0/0");
    run(r2b(0.0), r2b(-7.0), 64'h8000_0000_0000_0000, "0/x");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
