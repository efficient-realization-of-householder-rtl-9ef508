// tb_dot4: self-checking test of the DOT4 data-path in both configurations.
// Runs of operations in one configuration are issued back to back, with
// random switches between the inner-product and MHT configurations. Each
// result must match, bit for bit, the same sequence of double-precision
// operations done by the simulator: (p0 +/- p1) +/- (p2 +/- p3) for the inner
// product and a - 2v1*(v1a1 + (v2a2 + v3a3)) for MHT. The latency must be 3
// clocks (inner product) or 5 clocks (MHT), results must keep issue order,
// and every configuration switch must be seen to stall the input.
module tb_dot4;
  import tb_util_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_ready, mht = 0, out_valid, reconfig;
  logic [2:0]  sub = 0;
  logic [63:0] op [8];
  logic [7:0]  in_tag = 0, out_tag;
  logic [63:0] y;
  int          checks = 0, failures = 0, n_mht = 0, n_dot = 0, n_reconfig = 0;
  longint      cycle = 0;

  logic [63:0] exp_q[$];
  logic [7:0]  tag_q[$];
  longint      due_q[$];

  dot4 dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .mht(mht),
            .sub(sub), .op(op), .in_tag(in_tag), .out_valid(out_valid), .out_tag(out_tag),
            .y(y), .reconfig(reconfig));

  always #5 clk = ~clk;

  function automatic logic [63:0] model(logic m, logic [2:0] s, logic [63:0] o [8]);
    real p0, p1, p2, p3, t0, t1;
    p0 = b2r(o[0]) * b2r(o[1]);
    p1 = b2r(o[2]) * b2r(o[3]);
    p2 = b2r(o[4]) * b2r(o[5]);
    if (m) begin
      t1 = p1 + p2;
      t0 = p0 + t1;
      return r2b(b2r(o[7]) - b2r(o[6]) * t0);
    end
    p3 = b2r(o[6]) * b2r(o[7]);
    t0 = s[0] ? p0 - p1 : p0 + p1;
    t1 = s[1] ? p2 - p3 : p2 + p3;
    return r2b(s[2] ? t0 - t1 : t0 + t1);
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (reconfig) n_reconfig++;
    if (in_valid && in_ready) begin
      exp_q.push_back(ftz(model(mht, sub, op)));
      tag_q.push_back(in_tag);
      due_q.push_back(cycle + (mht ? 5 : 3));
      if (mht) n_mht++; else n_dot++;
    end
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected result");
      end else begin
        logic [63:0] e; logic [7:0] t; longint d;
        e = exp_q.pop_front(); t = tag_q.pop_front(); d = due_q.pop_front();
        if (y !== e || out_tag !== t || cycle != d) begin
          failures++;
          if (failures < 10) $display("FAIL got %h/%0d@%0d exp %h/%0d@%0d", y, out_tag, cycle, e, t, d);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (op[i]) op[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 10000; i++) begin
      @(negedge clk);
      in_valid = 1;
      if ($urandom_range(15) == 0) mht = ~mht;
      sub = 3'($urandom);
      in_tag = 8'(i);
      foreach (op[k]) op[k] = rand_fp(8);
      if (mht) op[6] = r2b(2.0 * b2r(op[0]));
      @(posedge clk);
      while (!in_ready) @(posedge clk);   // handshake completes at this edge
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_mht == 0 || n_dot == 0 || n_reconfig == 0) begin
      failures++; $display("FAIL missing results or mechanism never used");
    end
    $display("mht=%0d dot=%0d reconfig=%0d", n_mht, n_dot, n_reconfig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
