// tb_cdb_arbiter: self-checking test of the ticket-lock CDB arbiter.
// Four requesters raise completion requests at random times and hold them
// until acknowledged. An independent model keeps the requests in arrival
// order (same-cycle arrivals by index) and every grant must be the head of
// that queue, one per cycle, granted no earlier than the cycle after the
// request was raised. A directed case checks the exact order 2,0,3,1.
module tb_cdb_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, ack;
  logic gv;
  logic [$clog2(N)-1:0] gi;
  int checks = 0, failures = 0;

  cdb_arbiter #(.NUM_REQ(N)) dut (.clk, .rst_n, .req, .req_ack(ack), .grant_valid(gv), .grant_idx(gi));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int q[$];          // expected service order
  int raised_at [N];
  int cycle = 0;
  int grants = 0;
  int order[$];

  always @(posedge clk) cycle <= cycle + 1;

  // Checker: sample before the edge.
  always @(negedge clk) if (rst_n) begin
    if (gv) begin
      check(q.size() > 0 && gi == q[0], $sformatf("grant %0d expected %0d", gi, q.size() ? q[0] : -1));
      check(req[gi], "granted requester is requesting");
      check(cycle > raised_at[gi], "grant not before the cycle after the request");
      if (q.size() > 0) void'(q.pop_front());
      order.push_back(int'(gi));
      grants++;
    end
  end

  // Requesters.
  task automatic raise(input int i);
    req[i] = 1'b1; raised_at[i] = cycle; q.push_back(i);
  endtask

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (ack[i]) req[i] <= 1'b0;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Directed: 2 first, then 0 and 3 together, then 1.
    @(negedge clk); raise(2);
    @(negedge clk); raise(0); raise(3);
    @(negedge clk); raise(1);
    repeat (8) @(negedge clk);
    check(order.size() == 4 && order[0] == 2 && order[1] == 0 && order[2] == 3 && order[3] == 1,
          "directed order 2,0,3,1");
    // Random traffic.
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      #1;
      for (int i = 0; i < N; i++) if (!req[i] && ($urandom % 4) == 0) raise(i);
    end
    repeat (20) @(negedge clk);
    check(q.size() == 0, "all requests served");
    check(grants > 300, $sformatf("enough grants (%0d)", grants));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
