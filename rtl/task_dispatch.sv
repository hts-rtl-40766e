// task_dispatch: the Task Dispatch stage, which turns a decoded task into a
// reservation-station entry.
//
// For each task it
//  1. assigns a scheduler tag (the task's ID inside the scheduler) from a
//     free list of NUM_TAGS tags;
//  2. maps the input region through the TLB (speculative results live in
//     Transactional Memory slots) and looks the mapped region up in the
//     Memory Tracker; a hit makes the task wait for the producer's tag;
//  3. maps the output region through the TLB, which allocates a fresh TM
//     slot while speculating, and records that region with the new tag in
//     the Memory Tracker;
//  4. writes the task into the reservation station of its accelerator class.
// A task is dispatched in the cycle it is presented if a tag, a station
// entry and (when speculating) a TLB slot are free; otherwise the decoder is
// held. One task per cycle.
//
// A tag returns to the free list when its task's completion is announced on
// the Common Data Bus (CDB). The CPUs are told of each completion with the
// task and process IDs the program gave the task, and whether it was
// speculative. On a squash, kill_mask names every speculative tag for one
// cycle: tags still waiting in a station are freed at once, tags already
// running are marked killed (their accelerators are aborted) and freed,
// without a CPU notice, when the aborted accelerator reports on the CDB.
//
// The tag count, the free-list order and the notice format are this design's
// choices. Timing: combinational accept; all state changes at the edge.
module task_dispatch
  import hts_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = 10,
  parameter int unsigned NUM_TAGS    = 16,
  localparam int unsigned TAG_W = $clog2(NUM_TAGS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from decode
  input  logic                   task_valid,
  output logic                   task_ready,
  input  task_req_t              task_req,
  // TLB
  output region_t                tlb_in_region,
  input  region_t                tlb_in_phys,
  output region_t                tlb_out_region,
  output size_t                  tlb_out_size,
  input  region_t                tlb_out_phys,
  input  logic                   tlb_out_ok,
  output logic                   tlb_out_fire,
  // Memory Tracker
  output region_t                mt_lookup_region,
  input  logic                   mt_hit,
  input  logic [TAG_W-1:0]       mt_tag,
  output logic                   mt_insert,
  output logic [TAG_W-1:0]       mt_insert_tag,
  output region_t                mt_insert_region,
  // reservation stations
  output logic [NUM_CLASSES-1:0] rs_valid,
  input  logic [NUM_CLASSES-1:0] rs_ready,
  output acc_task_t              rs_task,
  output logic [TAG_W-1:0]       rs_tag,
  output logic                   rs_wait,
  output logic [TAG_W-1:0]       rs_dep_tag,
  input  logic [NUM_CLASSES-1:0] rs_issued,
  input  logic [TAG_W-1:0]       rs_issued_tag [NUM_CLASSES],
  // CDB and speculation
  input  logic                   cdb_valid,
  input  logic [TAG_W-1:0]       cdb_tag,
  input  logic                   spec_mode,
  input  logic                   squash,
  input  logic                   commit,
  output logic [NUM_TAGS-1:0]    kill_mask,
  // completion notice to the CPUs
  output logic                   done_valid,
  output logic [3:0]             done_task_id,
  output logic [3:0]             done_pid,
  output logic                   done_spec,
  output logic                   idle,
  output logic                   ev_raw_wait
);
  logic [NUM_TAGS-1:0] used, spec, issued, killed;
  logic [3:0]          tid_q [NUM_TAGS];
  logic [3:0]          pid_q [NUM_TAGS];

  logic             free_any;
  logic [TAG_W-1:0] free_tag;
  always_comb begin
    free_any = 1'b0; free_tag = '0;
    for (int t = NUM_TAGS - 1; t >= 0; t--)
      if (!used[t]) begin free_any = 1'b1; free_tag = TAG_W'(t); end
  end

  wire logic cls_ok = task_req.acc_class < 8'(NUM_CLASSES);
  wire logic [$clog2(NUM_CLASSES)-1:0] cls = task_req.acc_class[$clog2(NUM_CLASSES)-1:0];
  logic fire;

  always_comb begin
    tlb_in_region    = task_req.in_region;
    tlb_out_region   = task_req.out_region;
    tlb_out_size     = task_req.out_size;
    mt_lookup_region = tlb_in_phys;
    // A task naming no existing class is dropped rather than stalling forever.
    task_ready = !cls_ok || (free_any && rs_ready[cls] && tlb_out_ok && !squash);
    fire       = task_valid && cls_ok && task_ready;
    tlb_out_fire     = fire;
    mt_insert        = fire;
    mt_insert_tag    = free_tag;
    mt_insert_region = tlb_out_phys;
    rs_valid = '0;
    if (fire) rs_valid[cls] = 1'b1;
    rs_task.in_region  = tlb_in_phys;
    rs_task.in_size    = task_req.in_size;
    rs_task.out_region = tlb_out_phys;
    rs_task.out_size   = task_req.out_size;
    rs_task.meta       = task_req.meta;
    rs_tag     = free_tag;
    rs_wait    = mt_hit;
    rs_dep_tag = mt_tag;
    ev_raw_wait = fire && mt_hit;
    kill_mask  = squash ? (spec & used) : '0;
    done_valid   = cdb_valid && used[cdb_tag] && !killed[cdb_tag];
    done_task_id = tid_q[cdb_tag];
    done_pid     = pid_q[cdb_tag];
    done_spec    = spec[cdb_tag];
    idle         = used == '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; spec <= '0; issued <= '0; killed <= '0;
      for (int t = 0; t < NUM_TAGS; t++) begin tid_q[t] <= '0; pid_q[t] <= '0; end
    end else begin
      for (int c = 0; c < NUM_CLASSES; c++)
        if (rs_issued[c]) issued[rs_issued_tag[c]] <= 1'b1;
      if (commit) spec <= '0;
      for (int t = 0; t < NUM_TAGS; t++) begin
        if (kill_mask[t]) begin
          if (issued[t]) killed[t] <= 1'b1;
          else begin used[t] <= 1'b0; spec[t] <= 1'b0; end
        end
      end
      if (cdb_valid) begin
        used[cdb_tag]   <= 1'b0;
        spec[cdb_tag]   <= 1'b0;
        killed[cdb_tag] <= 1'b0;
        issued[cdb_tag] <= 1'b0;
      end
      if (fire) begin
        used[free_tag]   <= 1'b1;
        spec[free_tag]   <= spec_mode;
        issued[free_tag] <= 1'b0;
        killed[free_tag] <= 1'b0;
        tid_q[free_tag]  <= task_req.task_id;
        pid_q[free_tag]  <= task_req.pid;
      end
    end
  end

  a_cdb_used: assert property (@(posedge clk) disable iff (!rst_n) cdb_valid |-> used[cdb_tag]);
endmodule
