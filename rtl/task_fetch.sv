// task_fetch: the Task Queue that CPUs fill and the Task Fetch stage that
// reads it.
//
// CPUs push 128-bit task instructions over the common bus (push_valid /
// push_ready); they are stored in order in a buffer of DEPTH entries. The
// fetch stage keeps a program counter (PC) into that buffer and presents the
// instruction at the PC to the decoder, with instr_valid low while the PC
// has caught up with the CPUs (or points past the end). The decoder moves
// the PC on with `advance` or sets it with `redirect` for jumps, loops and
// branches. Because loops and branches jump backwards and forwards, pushed
// instructions stay in the buffer until `clear` empties it and resets the
// PC for a new program.
//
// The buffer depth, the push handshake and keeping the whole program are
// this design's choices. Timing: the instruction at the PC is a
// combinational read; push, advance and redirect act at the clock edge.
module task_fetch
  import hts_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned PC_W = $clog2(DEPTH) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            push_valid,
  output logic            push_ready,
  input  instr_t          push_instr,
  output logic            instr_valid,
  output instr_t          instr,
  output logic [PC_W-1:0] pc,
  input  logic            advance,
  input  logic            redirect,
  input  logic [PC_W-1:0] redirect_pc
);
  instr_t mem [DEPTH];
  logic [PC_W-1:0] wr_ptr;

  assign push_ready  = wr_ptr < PC_W'(DEPTH);
  assign instr_valid = pc < wr_ptr;
  assign instr       = mem[pc[PC_W-2:0]];

  always_ff @(posedge clk) begin
    if (push_valid && push_ready) mem[wr_ptr[PC_W-2:0]] <= push_instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      pc     <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      pc     <= '0;
    end else begin
      if (push_valid && push_ready) wr_ptr <= wr_ptr + 1'b1;
      if (redirect)     pc <= redirect_pc;
      else if (advance) pc <= pc + 1'b1;
    end
  end

  a_adv_valid: assert property (@(posedge clk) disable iff (!rst_n) advance |-> instr_valid);
endmodule
