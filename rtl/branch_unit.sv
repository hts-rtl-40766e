// branch_unit: resolves the branches whose condition lies in memory and runs
// the speculation around them.
//
// Register-read (RR) branches are resolved by the decoder itself. For a
// memory-read (MR) branch the condition word is in a memory region: the unit
// reads it through its memory read port. For a bus-read (BR) branch the
// region is still being written by an in-flight task: the unit first watches
// the Common Data Bus (CDB) for that task's tag, then reads the region. The
// word read is compared with the operand the decoder supplied (EQ, NEQ, GE,
// LE) and the branch resolves as taken or not taken.
//
// With SPECULATE=1 the scheduler predicts every such branch not taken and
// keeps dispatching tasks past it; spec_mode is high meanwhile and each
// speculation gets a new spec_id. On resolution, a taken branch is a
// mis-speculation (squash, and the decoder jumps to target_pc); a not-taken
// branch commits the speculative work. With SPECULATE=0 the decoder waits
// for resolve_valid instead (the "without speculation" mode).
//
// Only one branch is outstanding at a time; that, the memory read handshake
// (rd_req held until rd_valid returns the word) and whether a producer is
// waited for being decided by the Memory Tracker rather than by the branch's
// declared kind are this design's choices. Timing: start is taken at the
// edge; resolve_valid/squash/commit are one-cycle pulses from registered
// state.
module branch_unit
  import hts_pkg::*;
#(
  parameter bit          SPECULATE = 1'b1,
  parameter int unsigned PC_W      = 7,
  parameter int unsigned NUM_TAGS  = 16,
  parameter int unsigned SPEC_ID_W = 2,
  localparam int unsigned TAG_W = $clog2(NUM_TAGS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  region_t              start_region,
  input  logic                 start_dep,
  input  logic [TAG_W-1:0]     start_dep_tag,
  input  data_t                start_operand,
  input  cmp_e                 start_cmp,
  input  logic [PC_W-1:0]      start_target,
  output logic                 busy,
  output logic                 spec_mode,
  output logic [SPEC_ID_W-1:0] spec_id,
  input  logic                 cdb_valid,
  input  logic [TAG_W-1:0]     cdb_tag,
  output logic                 rd_req,
  output region_t              rd_region,
  input  logic                 rd_valid,
  input  data_t                rd_data,
  output logic                 resolve_valid,
  output logic                 resolve_taken,
  output logic [PC_W-1:0]      target_pc,
  output logic                 squash,
  output logic                 commit
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT_DEP, S_READ, S_RESOLVE} state_e;
  state_e           state;
  logic [TAG_W-1:0] dep_tag;
  data_t            operand;
  cmp_e             cmp;
  logic             taken_q;

  assign busy          = state != S_IDLE;
  assign spec_mode     = SPECULATE && busy;
  assign rd_req        = state == S_READ;
  assign resolve_valid = state == S_RESOLVE;
  assign resolve_taken = taken_q;
  assign squash        = SPECULATE && resolve_valid && taken_q;
  assign commit        = SPECULATE && resolve_valid && !taken_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      dep_tag   <= '0;
      operand   <= '0;
      cmp       <= CMP_EQ;
      taken_q   <= 1'b0;
      rd_region <= '0;
      target_pc <= '0;
      spec_id   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state     <= start_dep ? S_WAIT_DEP : S_READ;
          dep_tag   <= start_dep_tag;
          operand   <= start_operand;
          cmp       <= start_cmp;
          rd_region <= start_region;
          target_pc <= start_target;
          spec_id   <= spec_id + 1'b1;
        end
        S_WAIT_DEP: if (cdb_valid && cdb_tag == dep_tag) state <= S_READ;
        S_READ: if (rd_valid) begin
          taken_q <= cmp_true(cmp, rd_data, operand);
          state   <= S_RESOLVE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
