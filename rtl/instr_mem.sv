// instr_mem: instruction memory of one sequencer (used three times in the
// PE: the FPS instruction memory and the global and local load/store
// instruction memories).
//
// A DEPTH x WIDTH array written through a load port (we/waddr/wdata, one
// word per clock) before the PE is started, and read asynchronously at the
// sequencer's program counter. The paper names these memories only; depth,
// width and the load port are this design's choices.
module instr_mem #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
