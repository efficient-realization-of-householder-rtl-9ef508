// tb_instr_mem: self-checking test of the instruction memory: every word is
// written through the load port and read back asynchronously at random
// addresses, compared with a model array.
module tb_instr_mem;
  logic        clk = 0, we = 0;
  logic [9:0]  waddr = 0, raddr = 0;
  logic [95:0] wdata = 0, rdata;
  logic [95:0] model [1024];
  int checks = 0, failures = 0;

  instr_mem #(.WIDTH(96), .DEPTH(1024)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                             .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = {$urandom, $urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      raddr = 10'($urandom);
      #1;
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", raddr, rdata, model[raddr]);
      end
      if (t % 4 == 0) begin
        we = 1; waddr = 10'($urandom); wdata = {$urandom, $urandom, $urandom};
        @(posedge clk); model[waddr] = wdata;
        #1 we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
