// cdb_arbiter: serialises accelerator completions onto the Common Data Bus
// (CDB) with a ticket lock.
//
// Every accelerator that finishes a task raises its completion request and
// holds it until acknowledged. A request that has no ticket yet takes the
// next ticket number; requests raised in the same cycle take consecutive
// numbers in accelerator-index order. The arbiter serves tickets strictly in
// number order: the requester whose ticket equals the "now serving" counter
// owns the CDB for one cycle, gets req_ack, and the counter moves on. So
// completions are announced one per cycle, first come first served, and no
// requester can starve.
//
// Timing: a request raised in cycle t gets its ticket at the edge ending t
// and can be granted from cycle t+1. grant_valid/grant_idx are combinational
// from registered state. The requester must drop req in the cycle after its
// req_ack.
//
// The scheduler's description asks for a ticket-lock arbiter in front of the
// CDB; the one-grant-per-cycle rate and the tie order are this design's.
module cdb_arbiter #(
  parameter int unsigned NUM_REQ = 20
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_REQ-1:0] req,
  output logic [NUM_REQ-1:0] req_ack,
  output logic               grant_valid,
  output logic [$clog2(NUM_REQ)-1:0] grant_idx
);
  localparam int unsigned TK_W = $clog2(NUM_REQ) + 1;
  localparam int unsigned IDX_W = $clog2(NUM_REQ);

  logic [NUM_REQ-1:0] has_ticket;
  logic [TK_W-1:0]    ticket [NUM_REQ];
  logic [TK_W-1:0]    next_ticket, now_serving;

  // Grant: the holder of the ticket now being served.
  always_comb begin
    grant_valid = 1'b0;
    grant_idx   = '0;
    req_ack     = '0;
    for (int i = 0; i < NUM_REQ; i++) begin
      if (has_ticket[i] && ticket[i] == now_serving) begin
        grant_valid = 1'b1;
        grant_idx   = IDX_W'(i);
      end
    end
    if (grant_valid) req_ack[grant_idx] = 1'b1;
  end

  // New tickets, numbered in index order.
  logic [TK_W-1:0] issue_cnt;
  logic [TK_W-1:0] new_ticket [NUM_REQ];
  always_comb begin
    issue_cnt = '0;
    for (int i = 0; i < NUM_REQ; i++) begin
      new_ticket[i] = next_ticket + issue_cnt;
      if (req[i] && !has_ticket[i]) issue_cnt = issue_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      has_ticket  <= '0;
      next_ticket <= '0;
      now_serving <= '0;
      for (int i = 0; i < NUM_REQ; i++) ticket[i] <= '0;
    end else begin
      next_ticket <= next_ticket + issue_cnt;
      if (grant_valid) now_serving <= now_serving + 1'b1;
      for (int i = 0; i < NUM_REQ; i++) begin
        if (req_ack[i]) begin
          has_ticket[i] <= 1'b0;
        end else if (req[i] && !has_ticket[i]) begin
          has_ticket[i] <= 1'b1;
          ticket[i]     <= new_ticket[i];
        end
      end
    end
  end

  // At most one requester holds the ticket being served.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_ack));
  // A requester keeps its request up until it is served.
  a_hold_req: assert property (@(posedge clk) disable iff (!rst_n)
                               grant_valid |-> req[grant_idx]);
endmodule
