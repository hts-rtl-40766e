// tb_task_fetch: self-checking test of the task queue and fetch stage.
// Pushes instructions, reads them back at the PC, checks advance, redirect
// (backwards and past the end), the "caught up" condition, back-pressure
// when the queue is full, and clear.
module tb_task_fetch;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, push_valid, push_ready, instr_valid, advance, redirect;
  instr_t push_instr, instr;
  logic [3:0] pc, redirect_pc;
  int checks = 0, failures = 0;

  task_fetch #(.DEPTH(8)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic instr_t mk(input int n);
    instr_t i = '0;
    i.acc_id = 8'(n); i.in_region = 16'(n * 3); i.meta = 60'(n * 7);
    return i;
  endfunction

  task automatic push(input int n);
    push_valid = 1; push_instr = mk(n);
    @(negedge clk); push_valid = 0;
  endtask

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; push_valid = 0; push_instr = '0; advance = 0; redirect = 0; redirect_pc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!instr_valid && pc == 0, "empty queue: nothing to fetch");
    push(10); push(11); push(12);
    check(instr_valid && instr == mk(10), "first instruction at PC 0");
    advance = 1; @(negedge clk); advance = 0;
    check(pc == 1 && instr == mk(11), "advance");
    redirect = 1; redirect_pc = 2; @(negedge clk); redirect = 0;
    check(instr == mk(12), "redirect forward");
    redirect = 1; redirect_pc = 0; @(negedge clk); redirect = 0;
    check(instr == mk(10), "redirect backward: program kept");
    redirect = 1; redirect_pc = 3; @(negedge clk); redirect = 0;
    check(!instr_valid, "caught up with the CPUs");
    push(13);
    check(instr_valid && instr == mk(13), "new push becomes visible");
    for (int n = 14; n < 17; n++) push(n);
    check(push_ready, "seven of eight used");
    push(17);
    check(!push_ready, "queue full");
    push(18);
    redirect = 1; redirect_pc = 7; @(negedge clk); redirect = 0;
    check(instr == mk(17) , "full push was refused, last entry intact");
    clear = 1; @(negedge clk); clear = 0;
    check(pc == 0 && !instr_valid && push_ready, "clear empties the queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
