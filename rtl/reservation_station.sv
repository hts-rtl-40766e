// reservation_station: holds the dispatched tasks of one accelerator class
// until they may run, then hands each to an idle accelerator of the class.
//
// Each entry keeps the task (physical regions, sizes, metadata), its
// scheduler tag and, if the Memory Tracker found a producer, the producer's
// tag. An entry waits while that producer is in flight and wakes up when the
// producer's tag is announced on the Common Data Bus (CDB), as in Tomasulo's
// scheme. Every cycle, the lowest-numbered ready entry is issued to the
// lowest-numbered accelerator of the class that the Accelerator Status
// Register shows idle. Stations of different classes issue in the same
// cycle, so several tasks can start per cycle. Entries whose tag is in
// kill_mask (a squashed speculation) are dropped.
//
// One issue per station per cycle, the entry count and the lowest-index pick
// are this design's choices. Timing: an entry written at edge t can issue in
// cycle t+1 at the earliest; issue_* is combinational from registered state
// and the idle vector, and the entry leaves at the edge that ends the cycle.
module reservation_station
  import hts_pkg::*;
#(
  parameter int unsigned DEPTH         = 4,
  parameter int unsigned ACC_PER_CLASS = 2,
  parameter int unsigned NUM_TAGS      = 16,
  localparam int unsigned TAG_W = $clog2(NUM_TAGS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  acc_task_t                in_task,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic                     in_wait,
  input  logic [TAG_W-1:0]         in_dep_tag,
  input  logic [ACC_PER_CLASS-1:0] acc_busy,
  output logic [ACC_PER_CLASS-1:0] issue_valid,
  output acc_task_t                issue_task,
  output logic [TAG_W-1:0]         issue_tag,
  input  logic                     cdb_valid,
  input  logic [TAG_W-1:0]         cdb_tag,
  input  logic [NUM_TAGS-1:0]      kill_mask,
  output logic                     pending
);
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DEPTH-1:0] valid, waiting;
  acc_task_t        task_q [DEPTH];
  logic [TAG_W-1:0] tag_q  [DEPTH];
  logic [TAG_W-1:0] dep_q  [DEPTH];

  logic             free_any, rdy_any, acc_any;
  logic [IDX_W-1:0] free_idx, rdy_idx;
  localparam int unsigned AI_W = (ACC_PER_CLASS > 1) ? $clog2(ACC_PER_CLASS) : 1;
  logic [AI_W-1:0]  acc_idx;

  always_comb begin
    free_any = 1'b0; free_idx = '0; rdy_any = 1'b0; rdy_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!valid[i]) begin free_any = 1'b1; free_idx = IDX_W'(i); end
      if (valid[i] && !waiting[i] && !kill_mask[tag_q[i]]) begin
        rdy_any = 1'b1; rdy_idx = IDX_W'(i);
      end
    end
    acc_any = 1'b0; acc_idx = '0;
    for (int a = ACC_PER_CLASS - 1; a >= 0; a--)
      if (!acc_busy[a]) begin acc_any = 1'b1; acc_idx = AI_W'(a); end
    issue_valid = '0;
    if (rdy_any && acc_any) issue_valid[acc_idx] = 1'b1;
    issue_task = task_q[rdy_idx];
    issue_tag  = tag_q[rdy_idx];
  end

  assign in_ready = free_any;
  assign pending  = |valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= '0;
      waiting <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        task_q[i] <= '0; tag_q[i] <= '0; dep_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (valid[i] && kill_mask[tag_q[i]]) valid[i] <= 1'b0;
        if (valid[i] && waiting[i] && cdb_valid && cdb_tag == dep_q[i]) waiting[i] <= 1'b0;
      end
      if (rdy_any && acc_any) valid[rdy_idx] <= 1'b0;
      if (in_valid && free_any) begin
        valid[free_idx]   <= 1'b1;
        waiting[free_idx] <= in_wait;
        task_q[free_idx]  <= in_task;
        tag_q[free_idx]   <= in_tag;
        dep_q[free_idx]   <= in_dep_tag;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready);
endmodule
