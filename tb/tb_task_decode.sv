// tb_task_decode: self-checking test of the decoder, run together with the
// task queue and the GPR bank, on a program built from the scheduler's
// example loop: three movs, a four-iteration loop whose body computes its
// regions with add and runs an iir task with register-indirect regions, a
// mul, a taken register-read branch, a memory-read branch (with a stand-in
// branch unit that later reports a mis-speculation), a jump, and tasks.
// The expected task stream and register values are worked out by hand here.
// It also checks that the register-read branch costs exactly one bubble
// cycle over a plain instruction.
module tb_task_decode;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, push_valid, push_ready, instr_valid, advance, redirect;
  instr_t push_instr, instr;
  logic [6:0] pc, redirect_pc;
  logic [3:0] gpr_raddr [3];
  data_t gpr_rdata [3];
  logic gpr_we;
  logic [3:0] gpr_waddr;
  data_t gpr_wdata;
  logic task_valid, task_ready;
  task_req_t task_req;
  logic br_start, br_busy, spec_mode, resolve_valid, resolve_taken, ev_rr_branch, ev_loop_back;
  region_t br_region;
  data_t br_operand;
  cmp_e br_cmp;
  logic [6:0] br_target, resolve_target;
  int checks = 0, failures = 0;

  task_fetch #(.DEPTH(64)) u_f (.clk, .rst_n, .clear, .push_valid, .push_ready, .push_instr,
    .instr_valid, .instr, .pc, .advance, .redirect, .redirect_pc);
  gpr_file #(.NUM_GPR(16)) u_g (.clk, .rst_n, .raddr(gpr_raddr), .rdata(gpr_rdata),
    .we(gpr_we), .waddr(gpr_waddr), .wdata(gpr_wdata));
  task_decode #(.SPECULATE(1'b1), .PC_W(7), .NUM_GPR(16), .LOOP_DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic instr_t mk(input int op, input int inr, input int insz, input int outr,
                                input int outsz, input int tid, input int ctrl);
    instr_t i = '0;
    i.acc_id = 8'(op); i.in_region = 16'(inr); i.in_size = 8'(insz); i.out_region = 16'(outr);
    i.out_size = 8'(outsz); i.task_id = 4'(tid); i.control = 4'(ctrl);
    return i;
  endfunction

  instr_t prog [$];
  task_req_t seen [$];
  int rr_events = 0, loop_events = 0, starts = 0;
  int if_cycles = 0, mul_cycles = 0;   // cycles the decoder holds pc 9 / pc 8

  always @(posedge clk) if (rst_n) begin
    if (instr_valid && pc == 7'd9) if_cycles++;
    if (instr_valid && pc == 7'd8) mul_cycles++;
    if (task_valid && task_ready) seen.push_back(task_req);
    if (ev_rr_branch) rr_events++;
    if (ev_loop_back) loop_events++;
  end

  // Stand-in branch unit: a start makes it busy and speculative.
  always @(posedge clk) if (rst_n && br_start) begin
    starts++;
    check(br_region == 16'h93 && br_operand == 16'd3 && br_cmp == CMP_NEQ && br_target == 7'd14,
          "memory-read branch handed over with region, operand, condition and target");
    br_busy <= 1'b1; spec_mode <= 1'b1;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; push_valid = 0; push_instr = '0; task_ready = 1;
    br_busy = 0; spec_mode = 0; resolve_valid = 0; resolve_taken = 0; resolve_target = 0;
    prog.push_back(mk(OP_MOV, 'h58, 0, 2, 0, 1, 0));   // 0  R2 = 0x58
    prog.push_back(mk(OP_MOV, 'h3, 0, 3, 0, 2, 0));    // 1  R3 = 3
    prog.push_back(mk(OP_MOV, 'h75, 0, 6, 0, 3, 0));   // 2  R6 = 0x75
    prog.push_back(mk(OP_LBEG, 4, 4, 0, 0, 4, 0));     // 3  loop 4 times, counter R4
    prog.push_back(mk(OP_ADD, 4, 2, 5, 0, 5, 0));      // 4  R5 = R4 + R2
    prog.push_back(mk(OP_ADD, 4, 6, 7, 0, 6, 0));      // 5  R7 = R4 + R6
    prog.push_back(mk(3, 5, 3, 7, 3, 7, 1));           // 6  iir R5 -> R7 (indirect)
    prog.push_back(mk(OP_LEND, 0, 4, 2, 0, 8, 0));     // 7  end of loop, counter R4
    prog.push_back(mk(OP_MUL, 3, 2, 8, 0, 9, 0));      // 8  R8 = R3 * R2
    prog.push_back(mk(OP_IF, 3, 9, 2, 0, 10, 2));      // 9  RR: R3 >= R9 -> pc + 2
    prog.push_back(mk(0, 'h10, 2, 'h13, 2, 11, 0));    // 10 real_fir, skipped
    prog.push_back(mk(OP_IF, 'h93, 3, 3, 0, 12, 13));  // 11 MR: mem[0x93] != R3 -> pc + 3
    prog.push_back(mk(4, 'h40, 4, 'h48, 4, 13, 0));    // 12 vector_dot (speculative)
    prog.push_back(mk(OP_MOV, 1, 0, 9, 0, 14, 0));     // 13 mov, waits in speculation
    prog.push_back(mk(OP_JUMP, 16, 0, 0, 0, 15, 0));   // 14 jump 16
    prog.push_back(mk(9, 'h110, 3, 'h115, 3, 0, 0));   // 15 correlation, skipped
    prog.push_back(mk(8, 'h102, 2, 'h106, 2, 1, 0));   // 16 dct_64
    prog.push_back(mk(OP_MOV, 8, 0, 10, 0, 2, 1));     // 17 R10 = R8 (register move)
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (prog[i]) begin push_valid = 1; push_instr = prog[i]; @(negedge clk); end
    push_valid = 0;
    // Let it run into the speculation.
    while (!(spec_mode && pc == 7'd13)) @(negedge clk);
    repeat (5) @(negedge clk);
    check(pc == 7'd13 && !gpr_we, "mov waits while speculating");
    check(starts == 1, "one branch handed over");
    // Resolve: taken, so a mis-speculation; the decoder jumps to 14.
    resolve_valid = 1; resolve_taken = 1; resolve_target = 7'd14;
    #1 check(redirect && redirect_pc == 7'd14 && !advance, "redirect to the branch target");
    @(negedge clk);
    resolve_valid = 0; resolve_taken = 0; br_busy = 0; spec_mode = 0;
    repeat (10) @(negedge clk);
    check(seen.size() == 6, $sformatf("six tasks decoded (%0d)", seen.size()));
    for (int k = 0; k < 4 && k < seen.size(); k++) begin
      check(seen[k].acc_class == 3 && seen[k].in_region == 16'(4 - k + 'h58) &&
            seen[k].out_region == 16'(4 - k + 'h75) && seen[k].in_size == 3 && seen[k].task_id == 7,
            $sformatf("iir iteration %0d regions", k));
    end
    if (seen.size() >= 6) begin
      check(seen[4].acc_class == 4 && seen[4].in_region == 16'h40 && seen[4].out_region == 16'h48,
            "speculative vector_dot");
      check(seen[5].acc_class == 8 && seen[5].in_region == 16'h102, "dct after the jump");
    end
    check(rr_events == 1, "one register-read branch");
    check(mul_cycles == 1, $sformatf("mul decodes in one cycle (%0d)", mul_cycles));
    check(if_cycles == 2, $sformatf("register-read branch costs one bubble cycle (%0d)", if_cycles));
    check(loop_events == 3, "loop jumped back three times");
    check(u_g.regs[8] == 16'(3 * 'h58), "mul result");
    check(u_g.regs[4] == 0, "loop counter ends at zero");
    check(u_g.regs[9] == 0, "squashed-path mov never ran");
    check(u_g.regs[10] == 16'(3 * 'h58), "register-to-register mov");
    check(pc == 7'd18 && !instr_valid, "program finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
