// hts_pkg: types and constants shared by the blocks of the Hardware Task
// Scheduler (HTS).
//
// The 128-bit instruction layout follows the scheduler's instruction format
// exactly: [7:0] accelerator ID, [23:8] input memory region, [31:24] input
// size, [47:32] output region, [55:48] output size, [59:56] task ID,
// [63:60] process ID, [67:64] control, [127:68] accelerator metadata.
//
// The format names the fields but not the numeric opcodes of the non-task
// instructions (add, mul, mov, jump, if, lbeg, lend), nor how the control
// field is coded. This design reserves accelerator IDs 0xF0..0xF6 for those
// instructions, so every value below 0xF0 names an accelerator class, and
// codes the control nibble as:
//   bit 0      task: input and output region fields name GPRs (indirect)
//   bits [1:0] if: comparison, 0 EQ, 1 NEQ, 2 GE, 3 LE
//   bits [3:2] if: branch kind, 3 memory-read (MR), 2 bus-read (BR),
//              0/1 register-read (RR)
// In the register forms, register numbers are the low bits of a field.
package hts_pkg;

  localparam int unsigned REGION_W = 16;
  localparam int unsigned SIZE_W   = 8;
  localparam int unsigned META_W   = 60;
  localparam int unsigned DATA_W   = 16;   // GPR and condition word width

  typedef logic [REGION_W-1:0] region_t;
  typedef logic [SIZE_W-1:0]   size_t;
  typedef logic [DATA_W-1:0]   data_t;

  // Instruction fields, MSB first so that the packed struct matches the
  // bit ranges of the instruction format.
  typedef struct packed {
    logic [META_W-1:0] meta;        // [127:68]
    logic [3:0]        control;     // [67:64]
    logic [3:0]        pid;         // [63:60]
    logic [3:0]        task_id;     // [59:56]
    size_t             out_size;    // [55:48]
    region_t           out_region;  // [47:32]
    size_t             in_size;     // [31:24]
    region_t           in_region;   // [23:8]
    logic [7:0]        acc_id;      // [7:0]
  } instr_t;

  // Opcodes of the scheduler's own instructions (this design's encoding).
  localparam logic [7:0] OP_ADD  = 8'hF0;
  localparam logic [7:0] OP_MUL  = 8'hF1;
  localparam logic [7:0] OP_MOV  = 8'hF2;
  localparam logic [7:0] OP_JUMP = 8'hF3;
  localparam logic [7:0] OP_IF   = 8'hF4;
  localparam logic [7:0] OP_LBEG = 8'hF5;
  localparam logic [7:0] OP_LEND = 8'hF6;

  typedef enum logic [1:0] {CMP_EQ = 2'd0, CMP_NEQ = 2'd1, CMP_GE = 2'd2, CMP_LE = 2'd3} cmp_e;

  // Branch kind coded in control[3:2].
  localparam logic [1:0] BK_BR = 2'd2;
  localparam logic [1:0] BK_MR = 2'd3;

  // A task as decoded, before remapping (architectural regions).
  typedef struct packed {
    logic [7:0]        acc_class;
    region_t           in_region;
    size_t             in_size;
    region_t           out_region;
    size_t             out_size;
    logic [3:0]        task_id;
    logic [3:0]        pid;
    logic [META_W-1:0] meta;
  } task_req_t;

  // What the scheduler delivers to an accelerator (physical regions).
  typedef struct packed {
    region_t           in_region;
    size_t             in_size;
    region_t           out_region;
    size_t             out_size;
    logic [META_W-1:0] meta;
  } acc_task_t;

  // One-cycle event strobes of the scheduler, for performance counters.
  typedef struct packed {
    logic dispatch;      // a task entered a reservation station
    logic raw_wait;      // ... and had to wait for a producer (RAW)
    logic multi_issue;   // two or more tasks started in one cycle
    logic rr_branch;     // a register-read branch resolved in decode
    logic spec_start;    // a memory/bus-read branch started
    logic br_dep;        // ... and had to wait for a task on the CDB (BR)
    logic tlb_stall;     // a task waited for a free TLB slot
    logic squash;        // mis-speculation
    logic commit;        // correct speculation
    logic loop_back;     // a loop iterated
    logic copy_back;     // a TLB slot was copied back to memory
    logic task_abort;    // a running task was aborted
  } hts_events_t;

  function automatic logic cmp_true(cmp_e c, data_t a, data_t b);
    unique case (c)
      CMP_EQ:  return a == b;
      CMP_NEQ: return a != b;
      CMP_GE:  return a >= b;
      default: return a <= b;
    endcase
  endfunction

endpackage
