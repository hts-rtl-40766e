// task_decode: the Task Decode stage. It decodes the instruction at the PC
// and carries out everything that does not need an accelerator.
//
//  task (accelerator ID below 0xF0): forms a task request for the dispatch.
//       With control bit 0 set, the input and output region fields name GPRs
//       that hold the regions (used inside loops). The PC advances when the
//       dispatch accepts the task.
//  mov  R[out] = in_region field (immediate), or R[in_region] when control
//       bit 0 is set (register to register)
//  add  R[out] = R[in_region] + R[in_size];   mul: the same with a product
//  jump PC = in_region field
//  lbeg R[in_size] = loop count (in_region field); pushes the loop start
//  lend decrements R[in_size]; jumps back to the loop start while the count
//       is above one before the decrement, else leaves the loop
//  if   compares the condition word with R[in_size] (EQ, NEQ, GE, LE from
//       control[1:0]); if taken, the PC moves by the out_region field.
//       Register-read (RR) branches read the word from R[in_region] and cost
//       one bubble cycle. Memory-read and bus-read branches are handed to the
//       branch unit; with speculation on, decoding goes on past them as if
//       not taken, otherwise it waits for the resolution.
//
// While speculating, only task instructions are decoded; any other one waits
// for the branch to resolve, so no register or loop state ever needs to be
// rolled back. On a mis-speculation the PC is redirected to the branch
// target. The register operand order, loop counting, one loop stack of
// LOOP_DEPTH levels and this stall rule are this design's choices; the
// instruction set and fields follow the scheduler's instruction format.
//
// Timing: combinational decode of the fetched instruction; the GPR write,
// the PC update and the loop stack act at the clock edge. One instruction is
// decoded per cycle at most.
module task_decode
  import hts_pkg::*;
#(
  parameter bit          SPECULATE  = 1'b1,
  parameter int unsigned PC_W       = 7,
  parameter int unsigned NUM_GPR    = 16,
  parameter int unsigned LOOP_DEPTH = 4,
  localparam int unsigned RA_W = $clog2(NUM_GPR)
) (
  input  logic            clk,
  input  logic            rst_n,
  // fetch
  input  logic            instr_valid,
  input  instr_t          instr,
  input  logic [PC_W-1:0] pc,
  output logic            advance,
  output logic            redirect,
  output logic [PC_W-1:0] redirect_pc,
  // GPR bank
  output logic [RA_W-1:0] gpr_raddr [3],
  input  data_t           gpr_rdata [3],
  output logic            gpr_we,
  output logic [RA_W-1:0] gpr_waddr,
  output data_t           gpr_wdata,
  // dispatch
  output logic            task_valid,
  input  logic            task_ready,
  output task_req_t       task_req,
  // branch unit
  output logic            br_start,
  output region_t         br_region,
  output data_t           br_operand,
  output cmp_e            br_cmp,
  output logic [PC_W-1:0] br_target,
  input  logic            br_busy,
  input  logic            spec_mode,
  input  logic            resolve_valid,
  input  logic            resolve_taken,
  input  logic [PC_W-1:0] resolve_target,
  // events, for observation
  output logic            ev_rr_branch,
  output logic            ev_loop_back
);
  localparam int unsigned LS_W = (LOOP_DEPTH > 1) ? $clog2(LOOP_DEPTH) : 1;

  logic            rr_bubble;
  logic [PC_W-1:0] loop_pc [LOOP_DEPTH];
  logic [LS_W:0]   loop_sp;
  logic            push, pop;

  wire logic [7:0] op      = instr.acc_id;
  wire logic       is_task = op < OP_ADD;
  wire data_t      ra      = gpr_rdata[0];   // R[in_region]
  wire data_t      rb      = gpr_rdata[1];   // R[in_size]
  wire data_t      rc      = gpr_rdata[2];   // R[out_region]
  wire logic [PC_W-1:0] br_tgt = pc + PC_W'(instr.out_region);
  wire logic [PC_W-1:0] top_pc = loop_pc[loop_sp[LS_W-1:0] - 1'b1];

  always_comb begin
    gpr_raddr[0] = instr.in_region[RA_W-1:0];
    gpr_raddr[1] = instr.in_size[RA_W-1:0];
    gpr_raddr[2] = instr.out_region[RA_W-1:0];
    advance = 1'b0; redirect = 1'b0; redirect_pc = '0;
    gpr_we = 1'b0; gpr_waddr = '0; gpr_wdata = '0;
    task_valid = 1'b0;
    br_start = 1'b0;
    push = 1'b0; pop = 1'b0;
    ev_rr_branch = 1'b0; ev_loop_back = 1'b0;

    task_req.acc_class  = op;
    task_req.in_region  = instr.control[0] ? ra : instr.in_region;
    task_req.in_size    = instr.in_size;
    task_req.out_region = instr.control[0] ? rc : instr.out_region;
    task_req.out_size   = instr.out_size;
    task_req.task_id    = instr.task_id;
    task_req.pid        = instr.pid;
    task_req.meta       = instr.meta;

    br_region  = instr.in_region;
    br_operand = rb;
    br_cmp     = cmp_e'(instr.control[1:0]);
    br_target  = br_tgt;

    if (resolve_valid) begin
      // The cycle a branch resolves belongs to the branch.
      if (resolve_taken) begin
        redirect    = 1'b1;
        redirect_pc = resolve_target;
      end else if (!SPECULATE) begin
        advance = 1'b1;
      end
    end else if (instr_valid) begin
      if (is_task) begin
        task_valid = 1'b1;
        advance    = task_ready;
      end else if (!spec_mode && !br_busy) begin
        unique case (op)
          OP_MOV: begin
            gpr_we = 1'b1; gpr_waddr = instr.out_region[RA_W-1:0];
            gpr_wdata = instr.control[0] ? ra : instr.in_region; advance = 1'b1;
          end
          OP_ADD: begin
            gpr_we = 1'b1; gpr_waddr = instr.out_region[RA_W-1:0];
            gpr_wdata = ra + rb; advance = 1'b1;
          end
          OP_MUL: begin
            gpr_we = 1'b1; gpr_waddr = instr.out_region[RA_W-1:0];
            gpr_wdata = DATA_W'(ra * rb); advance = 1'b1;
          end
          OP_JUMP: begin
            redirect = 1'b1; redirect_pc = PC_W'(instr.in_region);
          end
          OP_LBEG: if (loop_sp != (LS_W+1)'(LOOP_DEPTH)) begin
            gpr_we = 1'b1; gpr_waddr = instr.in_size[RA_W-1:0];
            gpr_wdata = instr.in_region; push = 1'b1; advance = 1'b1;
          end
          OP_LEND: begin
            gpr_we = 1'b1; gpr_waddr = instr.in_size[RA_W-1:0];
            gpr_wdata = rb - 1'b1;
            if (rb > 1 && loop_sp != '0) begin
              redirect = 1'b1; redirect_pc = top_pc; ev_loop_back = 1'b1;
            end else begin
              pop = loop_sp != '0; advance = 1'b1;
            end
          end
          OP_IF: begin
            if (instr.control[3:2] == BK_MR || instr.control[3:2] == BK_BR) begin
              br_start = 1'b1;
              advance  = SPECULATE;
            end else if (rr_bubble) begin
              ev_rr_branch = 1'b1;
              if (cmp_true(br_cmp, ra, rb)) begin
                redirect = 1'b1; redirect_pc = br_tgt;
              end else begin
                advance = 1'b1;
              end
            end
          end
          default: advance = 1'b1;   // unused opcodes are no-ops
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_bubble <= 1'b0;
      loop_sp   <= '0;
      for (int i = 0; i < LOOP_DEPTH; i++) loop_pc[i] <= '0;
    end else begin
      // Register-read branch: one bubble cycle, then resolve.
      rr_bubble <= instr_valid && !resolve_valid && op == OP_IF && !spec_mode && !br_busy &&
                   instr.control[3:2] != BK_MR && instr.control[3:2] != BK_BR && !rr_bubble;
      if (push) begin
        loop_pc[loop_sp[LS_W-1:0]] <= pc + 1'b1;
        loop_sp <= loop_sp + 1'b1;
      end else if (pop) begin
        loop_sp <= loop_sp - 1'b1;
      end
    end
  end

  a_one_action: assert property (@(posedge clk) disable iff (!rst_n) !(advance && redirect));
endmodule
