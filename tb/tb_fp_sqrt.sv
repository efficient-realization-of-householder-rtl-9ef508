// tb_fp_sqrt: self-checking test of the iterative binary64 square root.
// Random positive operands with odd and even exponents are compared
// bit-exactly with the simulator's $sqrt (correctly rounded), special
// operands are checked, and each operation must take exactly 57 clocks.
module tb_fp_sqrt;
  import tb_util_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] a, y;
  int          checks = 0, failures = 0;
  int          cyc;

  fp_sqrt dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .busy(busy), .done(done), .y(y));

  always #5 clk = ~clk;

  task automatic run(logic [63:0] av, logic [63:0] exp_v, string what);
    @(negedge clk);
    a = av; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (y !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: sqrt(%h) got %h exp %h", what, av, y, exp_v);
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
    a = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] av;
      av = {1'b0, rand_fp(900)};
      av[63] = 1'b0;
      run(av, r2b($sqrt(b2r(av))), "random");
    end
    run(r2b(4.0), r2b(2.0), "4");
    run(r2b(2.0), r2b($sqrt(2.0)), "2");
    run(r2b(0.0), r2b(0.0), "0");
    run(r2b(-1.0), 64'h7FF8_0000_0000_0000, "-1");
    run(64'h7FF0_0000_0000_0000, 64'h7FF0_0000_0000_0000, "inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
