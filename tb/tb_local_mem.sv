// tb_local_mem: self-checking test of the dual-port local memory. Random
// reads and writes on both ports (never to the same word in one clock) are
// compared with a model array; read data must appear the clock after the
// read and hold until the next read on that port.
module tb_local_mem;
  localparam int D = 4096;
  logic        clk = 0;
  logic        a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = 0, b_addr = 0;
  logic [63:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [63:0] model [D];
  logic [63:0] exp_a, exp_b;
  logic        chk_a = 0, chk_b = 0;
  int checks = 0, failures = 0;

  local_mem #(.DEPTH(D)) dut (.clk(clk),
    .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .b_en(b_en), .b_we(b_we), .b_addr(b_addr), .b_wdata(b_wdata), .b_rdata(b_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 12'(a);     a_wdata = {$urandom, $urandom};
      b_en = 1; b_we = 1; b_addr = 12'(a + 1); b_wdata = {$urandom, $urandom};
      model[a] = a_wdata; model[a + 1] = b_wdata;
    end
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if (chk_a) begin
        checks++;
        if (a_rdata !== exp_a) begin failures++; if (failures < 10) $display("FAIL A got %h exp %h", a_rdata, exp_a); end
      end
      if (chk_b) begin
        checks++;
        if (b_rdata !== exp_b) begin failures++; if (failures < 10) $display("FAIL B got %h exp %h", b_rdata, exp_b); end
      end
      a_en = $urandom_range(3) != 0; a_we = $urandom_range(1); a_addr = 12'($urandom);
      b_en = $urandom_range(3) != 0; b_we = $urandom_range(1); b_addr = 12'($urandom);
      if (b_addr == a_addr) b_addr = a_addr + 12'd1;
      a_wdata = {$urandom, $urandom}; b_wdata = {$urandom, $urandom};
      if (a_en && !a_we) begin exp_a = model[a_addr]; chk_a = 1; end
      if (b_en && !b_we) begin exp_b = model[b_addr]; chk_b = 1; end
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
