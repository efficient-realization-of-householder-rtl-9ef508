// pe_sem: counting semaphores that order the PE's three sequencers.
//
// The paper lists the PE's steps (GM -> LM -> register file -> compute ->
// register file -> LM -> GM) and says the PE overlaps computation with
// communication, but not how the global load/store, local load/store and
// floating point sequencers hand work to each other. This design uses NSEM
// counting semaphores: a sequencer "gives" one count when it reaches an
// instruction marked sig_en (after all its earlier work is complete) and
// "takes" one count when it starts an instruction marked wait_en, which may
// only start while avail[sem] is high. Each semaphore is meant to have a
// single taker; a take and gives in the same clock are summed.
module pe_sem
  import pe_pkg::*;
#(
  parameter int unsigned NREQ = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,          // zero all counts (at PE start)
  input  sem_req_t req [NREQ],
  output logic     avail [NSEM]
);

  logic [7:0] count [NSEM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NSEM); s++) count[s] <= '0;
    end else if (clear) begin
      for (int s = 0; s < int'(NSEM); s++) count[s] <= '0;
    end else begin
      for (int s = 0; s < int'(NSEM); s++) begin
        logic [7:0] nxt;
        nxt = count[s];
        for (int r = 0; r < int'(NREQ); r++) begin
          if (req[r].give && req[r].give_id == 2'(s)) nxt = nxt + 8'd1;
          if (req[r].take && req[r].take_id == 2'(s)) nxt = nxt - 8'd1;
        end
        count[s] <= nxt;
      end
    end
  end

  always_comb begin
    for (int s = 0; s < int'(NSEM); s++) avail[s] = (count[s] != '0);
  end

  // a take is only legal on a semaphore that holds a count
  for (genvar r = 0; r < NREQ; r++) begin : g_chk
    a_take_nonempty: assert property (@(posedge clk) disable iff (!rst_n || clear)
                                      req[r].take |-> avail[req[r].take_id])
      else $error("pe_sem: take on empty semaphore %0d", req[r].take_id);
  end

endmodule
