// tb_reg_file: self-checking test of the 256 x 64 register file. Random
// writes on all four write ports (distinct addresses in a clock) and random
// reads on all nine read ports are compared with a model array; a read in
// the clock after a write must see the new value.
module tb_reg_file;
  logic        clk = 0;
  logic [7:0]  raddr [9];
  logic [63:0] rdata [9];
  logic        we    [4];
  logic [7:0]  waddr [4];
  logic [63:0] wdata [4];
  logic [63:0] model [256];
  int checks = 0, failures = 0;

  reg_file dut (.clk(clk), .raddr(raddr), .rdata(rdata), .we(we), .waddr(waddr), .wdata(wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (we[w]) begin we[w] = 0; waddr[w] = 0; wdata[w] = 0; end
    foreach (raddr[r]) raddr[r] = 0;
    // initialise every register through port 3
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we[3] = 1; waddr[3] = 8'(a); wdata[3] = {$urandom, $urandom};
      model[a] = wdata[3];
    end
    @(negedge clk); we[3] = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // check reads of the previous clock's state
      foreach (raddr[r]) raddr[r] = 8'($urandom);
      #1;
      foreach (raddr[r]) begin
        checks++;
        if (rdata[r] !== model[raddr[r]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d addr %0d got %h exp %h", r, raddr[r], rdata[r], model[raddr[r]]);
        end
      end
      foreach (we[w]) begin
        we[w]    = $urandom_range(1);
        waddr[w] = 8'(w * 64 + $urandom_range(63));
        wdata[w] = {$urandom, $urandom};
      end
      @(posedge clk);
      foreach (we[w]) if (we[w]) model[waddr[w]] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
