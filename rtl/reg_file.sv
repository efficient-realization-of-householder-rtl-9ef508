// reg_file: the Floating Point Sequencer's register file, 256 x 64 bits.
//
// The depth of 256 registers is the paper's; the port count is this
// design's: NR asynchronous read ports (eight feed the DOT4 operands, one
// serves the local load/store unit) and NW write ports (DOT4, divider,
// square root and the local load/store unit each have their own, so results
// never wait for a write slot). Writes take effect at the clock edge; when
// two ports write the same register in one cycle, the higher-numbered port
// wins (the sequencers never do this). Contents are not reset.
module reg_file
  import pe_pkg::*;
#(
  parameter int unsigned DEPTH = RF_DEPTH,
  parameter int unsigned NR    = 9,
  parameter int unsigned NW    = 4
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] raddr [NR],
  output fp64_t                    rdata [NR],
  input  logic                     we    [NW],
  input  logic [$clog2(DEPTH)-1:0] waddr [NW],
  input  fp64_t                    wdata [NW]
);

  fp64_t mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int w = 0; w < int'(NW); w++) begin
      if (we[w]) mem[waddr[w]] <= wdata[w];
    end
  end

  always_comb begin
    for (int r = 0; r < int'(NR); r++) rdata[r] = mem[raddr[r]];
  end

endmodule
