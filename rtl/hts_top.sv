// hts_top: the Hardware Task Scheduler (HTS), which sits between the CPUs
// and a pool of function-level accelerators and schedules tasks onto them
// out of order and speculatively, the way an out-of-order processor
// schedules instructions onto functional units.
//
// Structure (one block per file):
//   task_fetch          task queue filled by the CPUs, PC-driven fetch
//   task_decode + gpr_file
//                       decode; runs mov/add/mul/jump/lbeg/lend/if itself
//   task_dispatch       tags, RAW check, TLB remap, station write
//     mem_tracker       output region -> tag of the in-flight writer
//     task_tlb          speculative output remapping to Transactional Memory
//   branch_unit         memory-read / bus-read branches and speculation
//   reservation_station one per accelerator class
//   acc_status_reg      busy directory (ASR), abort and power enables
//   cdb_arbiter         ticket lock in front of the Common Data Bus (CDB)
//
// Accelerator a (class a / ACC_PER_CLASS) receives a task as a one-cycle
// acc_task_valid[a] with acc_task[a] (physical regions, sizes, metadata).
// When done, or after an abort, it raises acc_done_req[a] and holds it until
// acc_done_ack[a]; the arbiter then announces the completion on the CDB,
// which wakes up waiting tasks, frees the accelerator in the ASR, frees the
// tag and sends a completion notice (done_*) to the CPUs.
// Branch conditions in memory are read through mem_rd_*: mem_rd_req stays
// high with mem_rd_region until a cycle with mem_rd_valid and the word.
// TLB copy-back uses wb_*: wb_valid with source (TM slot), destination and
// size stays high until a cycle with wb_done.
//
// Default sizes: 10 accelerator classes (the ten DSP functions evaluated
// with the scheduler) with 2 accelerators each (the "2 FUs per kernel"
// configuration); queue, tag, station, TLB, register and loop sizes are this
// design's choices.
module hts_top
  import hts_pkg::*;
#(
  parameter int unsigned NUM_CLASSES   = 10,
  parameter int unsigned ACC_PER_CLASS = 2,
  parameter int unsigned NUM_TAGS      = 16,
  parameter int unsigned RS_DEPTH      = 4,
  parameter int unsigned TQ_DEPTH      = 64,
  parameter int unsigned NUM_GPR       = 16,
  parameter int unsigned LOOP_DEPTH    = 4,
  parameter int unsigned TLB_DEPTH     = 8,
  parameter logic [15:0] TM_BASE       = 16'hF800,
  parameter int unsigned TM_SLOT       = 256,
  parameter bit          SPECULATE     = 1'b1,
  localparam int unsigned NUM_ACC = NUM_CLASSES * ACC_PER_CLASS,
  localparam int unsigned TAG_W   = $clog2(NUM_TAGS),
  localparam int unsigned ACC_W   = $clog2(NUM_ACC),
  localparam int unsigned PC_W    = $clog2(TQ_DEPTH) + 1,
  localparam int unsigned RA_W    = $clog2(NUM_GPR),
  localparam int unsigned SPEC_ID_W = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // CPU side: task queue and completion notices
  input  logic               clear,
  input  logic               push_valid,
  output logic               push_ready,
  input  instr_t             push_instr,
  output logic               done_valid,
  output logic [3:0]         done_task_id,
  output logic [3:0]         done_pid,
  output logic               done_spec,
  output logic               idle,
  // accelerators
  output logic [NUM_ACC-1:0] acc_task_valid,
  output acc_task_t          acc_task [NUM_ACC],
  output logic [NUM_ACC-1:0] acc_abort,
  output logic [NUM_ACC-1:0] acc_pwr_en,
  input  logic [NUM_ACC-1:0] acc_done_req,
  output logic [NUM_ACC-1:0] acc_done_ack,
  // memory read for branch conditions
  output logic               mem_rd_req,
  output region_t            mem_rd_region,
  input  logic               mem_rd_valid,
  input  data_t              mem_rd_data,
  // TLB copy-back to memory
  output logic               wb_valid,
  output region_t            wb_src,
  output region_t            wb_dst,
  output size_t              wb_size,
  input  logic               wb_done,
  // observation
  output logic               spec_mode,
  output hts_events_t        events
);
  // ---------------- fetch ----------------
  instr_t          f_instr;
  logic            f_valid, dec_adv, dec_redir;
  logic [PC_W-1:0] f_pc, dec_redir_pc;

  task_fetch #(.DEPTH(TQ_DEPTH)) u_fetch (
    .clk, .rst_n, .clear, .push_valid, .push_ready, .push_instr,
    .instr_valid(f_valid), .instr(f_instr), .pc(f_pc),
    .advance(dec_adv), .redirect(dec_redir), .redirect_pc(dec_redir_pc));

  // ---------------- decode + GPR ----------------
  logic [RA_W-1:0] g_raddr [3];
  data_t           g_rdata [3];
  logic            g_we;
  logic [RA_W-1:0] g_waddr;
  data_t           g_wdata;

  gpr_file #(.NUM_GPR(NUM_GPR)) u_gpr (
    .clk, .rst_n, .raddr(g_raddr), .rdata(g_rdata), .we(g_we), .waddr(g_waddr), .wdata(g_wdata));

  logic            t_valid, t_ready;
  task_req_t       t_req;
  logic            br_start, bu_busy, bu_resolve, bu_taken, bu_squash, bu_commit;
  region_t         br_region;
  data_t           br_operand;
  cmp_e            br_cmp;
  logic [PC_W-1:0] br_target, bu_target;
  logic [SPEC_ID_W-1:0] spec_id;
  logic            ev_rr, ev_loop;

  task_decode #(.SPECULATE(SPECULATE), .PC_W(PC_W), .NUM_GPR(NUM_GPR), .LOOP_DEPTH(LOOP_DEPTH)) u_dec (
    .clk, .rst_n, .instr_valid(f_valid), .instr(f_instr), .pc(f_pc),
    .advance(dec_adv), .redirect(dec_redir), .redirect_pc(dec_redir_pc),
    .gpr_raddr(g_raddr), .gpr_rdata(g_rdata), .gpr_we(g_we), .gpr_waddr(g_waddr), .gpr_wdata(g_wdata),
    .task_valid(t_valid), .task_ready(t_ready), .task_req(t_req),
    .br_start, .br_region, .br_operand, .br_cmp, .br_target, .br_busy(bu_busy),
    .spec_mode, .resolve_valid(bu_resolve), .resolve_taken(bu_taken), .resolve_target(bu_target),
    .ev_rr_branch(ev_rr), .ev_loop_back(ev_loop));

  // ---------------- TLB and Memory Tracker ----------------
  region_t tlb_in [2], tlb_phys [2];
  region_t tlb_out_region, tlb_out_phys;
  size_t   tlb_out_size;
  logic    tlb_out_ok, tlb_out_fire, tlb_draining, disp_idle;

  logic              cdb_valid;
  logic [ACC_W-1:0]  cdb_acc;
  logic [TAG_W-1:0]  cdb_tag;
  logic [NUM_TAGS-1:0] kill_mask;

  assign tlb_in[1] = br_region;

  task_tlb #(.DEPTH(TLB_DEPTH), .TM_BASE(TM_BASE), .TM_SLOT(TM_SLOT), .SPEC_ID_W(SPEC_ID_W)) u_tlb (
    .clk, .rst_n, .in_region(tlb_in), .in_phys(tlb_phys), .spec_mode, .spec_id,
    .out_region(tlb_out_region), .out_size(tlb_out_size), .out_phys(tlb_out_phys), .out_ok(tlb_out_ok),
    .out_fire(tlb_out_fire), .commit(bu_commit), .squash(bu_squash),
    .drain_en(!spec_mode && disp_idle), .draining(tlb_draining),
    .wb_valid, .wb_src, .wb_dst, .wb_size, .wb_done, .entry_valid());

  region_t          mt_region [2];
  logic [1:0]       mt_hit;
  logic [TAG_W-1:0] mt_tag [2];
  logic             mt_ins;
  logic [TAG_W-1:0] mt_ins_tag;
  region_t          mt_ins_region;

  assign mt_region[1] = tlb_phys[1];

  mem_tracker #(.NUM_TAGS(NUM_TAGS), .NUM_LOOKUP(2)) u_mt (
    .clk, .rst_n, .insert_valid(mt_ins), .insert_tag(mt_ins_tag), .insert_region(mt_ins_region),
    .lookup_region(mt_region), .lookup_hit(mt_hit), .lookup_tag(mt_tag),
    .cdb_valid, .cdb_tag, .kill_mask);

  // ---------------- branch unit ----------------
  branch_unit #(.SPECULATE(SPECULATE), .PC_W(PC_W), .NUM_TAGS(NUM_TAGS), .SPEC_ID_W(SPEC_ID_W)) u_bu (
    .clk, .rst_n, .start(br_start), .start_region(tlb_phys[1]), .start_dep(mt_hit[1]),
    .start_dep_tag(mt_tag[1]), .start_operand(br_operand), .start_cmp(br_cmp), .start_target(br_target),
    .busy(bu_busy), .spec_mode, .spec_id, .cdb_valid, .cdb_tag,
    .rd_req(mem_rd_req), .rd_region(mem_rd_region), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .resolve_valid(bu_resolve), .resolve_taken(bu_taken), .target_pc(bu_target),
    .squash(bu_squash), .commit(bu_commit));

  // ---------------- dispatch ----------------
  logic [NUM_CLASSES-1:0] rs_valid, rs_ready, rs_pending, rs_issued;
  acc_task_t              rs_task;
  logic [TAG_W-1:0]       rs_tag, rs_dep_tag;
  logic                   rs_wait, ev_raw;
  logic [TAG_W-1:0]       iss_tag [NUM_CLASSES];
  acc_task_t              iss_task [NUM_CLASSES];

  task_dispatch #(.NUM_CLASSES(NUM_CLASSES), .NUM_TAGS(NUM_TAGS)) u_disp (
    .clk, .rst_n, .task_valid(t_valid), .task_ready(t_ready), .task_req(t_req),
    .tlb_in_region(tlb_in[0]), .tlb_in_phys(tlb_phys[0]),
    .tlb_out_region, .tlb_out_size, .tlb_out_phys, .tlb_out_ok, .tlb_out_fire,
    .mt_lookup_region(mt_region[0]), .mt_hit(mt_hit[0]), .mt_tag(mt_tag[0]),
    .mt_insert(mt_ins), .mt_insert_tag(mt_ins_tag), .mt_insert_region(mt_ins_region),
    .rs_valid, .rs_ready, .rs_task, .rs_tag, .rs_wait, .rs_dep_tag,
    .rs_issued, .rs_issued_tag(iss_tag),
    .cdb_valid, .cdb_tag, .spec_mode, .squash(bu_squash), .commit(bu_commit), .kill_mask,
    .done_valid, .done_task_id, .done_pid, .done_spec, .idle(disp_idle), .ev_raw_wait(ev_raw));

  // ---------------- reservation stations ----------------
  logic [NUM_ACC-1:0] asr_busy;
  logic [TAG_W-1:0]   asr_tag [NUM_ACC];
  logic [TAG_W-1:0]   acc_issue_tag [NUM_ACC];

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_rs
    logic [ACC_PER_CLASS-1:0] iss;
    reservation_station #(.DEPTH(RS_DEPTH), .ACC_PER_CLASS(ACC_PER_CLASS), .NUM_TAGS(NUM_TAGS)) u_rs (
      .clk, .rst_n, .in_valid(rs_valid[c]), .in_ready(rs_ready[c]), .in_task(rs_task),
      .in_tag(rs_tag), .in_wait(rs_wait), .in_dep_tag(rs_dep_tag),
      .acc_busy(asr_busy[c*ACC_PER_CLASS +: ACC_PER_CLASS]),
      .issue_valid(iss), .issue_task(iss_task[c]), .issue_tag(iss_tag[c]),
      .cdb_valid, .cdb_tag, .kill_mask, .pending(rs_pending[c]));
    assign acc_task_valid[c*ACC_PER_CLASS +: ACC_PER_CLASS] = iss;
    assign rs_issued[c] = |iss;
    for (genvar k = 0; k < ACC_PER_CLASS; k++) begin : g_acc
      assign acc_task[c*ACC_PER_CLASS + k]      = iss_task[c];
      assign acc_issue_tag[c*ACC_PER_CLASS + k] = iss_tag[c];
    end
  end

  // ---------------- ASR and CDB ----------------
  acc_status_reg #(.NUM_CLASSES(NUM_CLASSES), .ACC_PER_CLASS(ACC_PER_CLASS), .NUM_TAGS(NUM_TAGS)) u_asr (
    .clk, .rst_n, .issue_valid(acc_task_valid), .issue_tag(acc_issue_tag),
    .cdb_valid, .cdb_acc, .kill_mask, .rs_pending,
    .busy(asr_busy), .cur_tag(asr_tag), .abort(acc_abort), .pwr_en(acc_pwr_en));

  cdb_arbiter #(.NUM_REQ(NUM_ACC)) u_arb (
    .clk, .rst_n, .req(acc_done_req), .req_ack(acc_done_ack),
    .grant_valid(cdb_valid), .grant_idx(cdb_acc));

  assign cdb_tag = asr_tag[cdb_acc];
  assign idle    = disp_idle && !bu_busy && !(f_valid) && !tlb_draining;

  always_comb begin
    events             = '0;
    events.dispatch    = |rs_valid;
    events.raw_wait    = ev_raw;
    events.multi_issue = $countones(acc_task_valid) > 1;
    events.rr_branch   = ev_rr;
    events.spec_start  = br_start && !bu_busy;
    events.br_dep      = br_start && !bu_busy && mt_hit[1];
    events.tlb_stall   = t_valid && !tlb_out_ok && spec_mode;
    events.squash      = bu_squash;
    events.commit      = bu_commit;
    events.loop_back   = ev_loop;
    events.copy_back   = wb_done;
    events.task_abort       = |acc_abort;
  end
endmodule
