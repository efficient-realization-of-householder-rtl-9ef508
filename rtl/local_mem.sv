// local_mem: the PE's private Local Memory (LM), DEPTH x 64 bits.
//
// Two independent synchronous ports: port A is used by the global
// load/store unit (GM <-> LM), port B by the local load/store unit
// (LM <-> register file). A read returns data on rdata the clock after
// en is high with we low; rdata holds until the next read on that port. The
// paper describes LM only as the PE's private memory between GM and the
// register file; the depth and the two-port organisation are this
// design's choices.
module local_mem
  import pe_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  fp64_t                    a_wdata,
  output fp64_t                    a_rdata,
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  fp64_t                    b_wdata,
  output fp64_t                    b_rdata
);

  fp64_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

endmodule
