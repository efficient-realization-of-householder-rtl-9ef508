// gm_model: behavioural model of the Global Memory seen by one PE (not
// synthesizable; in a multi-tile system GM is reached through the NoC).
// Accepts a request when gm_req_ready is high (ready is randomly withheld
// one clock in READY_GAP to exercise back-pressure), performs writes at
// once and returns read data in order LAT clocks after the request.
module gm_model #(
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned LAT       = 4,
  parameter int unsigned READY_GAP = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gm_req_valid,
  output logic        gm_req_ready,
  input  logic        gm_req_we,
  input  logic [31:0] gm_req_addr,
  input  logic [63:0] gm_req_wdata,
  output logic        gm_rsp_valid,
  output logic [63:0] gm_rsp_data
);

  logic [63:0] mem [DEPTH];
  logic [63:0] rsp_data_q [$];
  longint      rsp_due_q  [$];
  longint      now = 0;
  int          n_backpressure = 0;

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      gm_req_ready <= 1'b0;
      gm_rsp_valid <= 1'b0;
    end else begin
      if (gm_req_valid && gm_req_ready) begin
        if (gm_req_we) mem[gm_req_addr % DEPTH] <= gm_req_wdata;
        else begin
          rsp_data_q.push_back(mem[gm_req_addr % DEPTH]);
          rsp_due_q.push_back(now + longint'(LAT));
        end
      end
      if (gm_req_valid && !gm_req_ready) n_backpressure++;
      gm_req_ready <= (READY_GAP == 0) || ($urandom_range(READY_GAP - 1) != 0);
      gm_rsp_valid <= 1'b0;
      if (rsp_due_q.size() != 0 && rsp_due_q[0] <= now) begin
        void'(rsp_due_q.pop_front());
        gm_rsp_valid <= 1'b1;
        gm_rsp_data  <= rsp_data_q.pop_front();
      end
    end
  end

endmodule
