// tb_hts_top: end-to-end test of the Hardware Task Scheduler at its default
// size (10 accelerator classes, 2 accelerators each), with one timing model
// per accelerator using the published cycle counts of the ten DSP functions,
// a memory model for branch conditions and TLB copy-back, and six programs:
//
//  A  five independent tasks: must overlap (runtime close to the longest
//     task, far below the sum that one-at-a-time scheduling would take)
//  B  read-after-write chains through memory regions, within one class and
//     across classes: consumers start only after their producers finish
//  C  the loop example: four iterations whose regions come from registers
//  D1 the branch example, memory-read branch not taken: speculative tasks
//     write Transactional Memory slots, commit, and the TLB copies the
//     results back to their own regions
//  D2 the same program, branch taken: squash, running tasks aborted, no
//     speculative result reaches memory
//  E  a bus-read branch on a region still being written, a register-read
//     branch, and more speculative outputs than TLB slots (stall)
//
// Accelerator "results": a finished task writes its input region number into
// its output region of the memory model, so data flow can be checked.
// Every mechanism (RAW wait, multi-issue, loop, RR/MR/BR branch, squash,
// commit, abort, TLB stall, copy-back) is counted and must occur.
module tb_hts_top;
  import hts_pkg::*;
  localparam int NC = 10, APC = 2, NA = NC * APC;
  // Cycles per task of each class, in class order: real FIR, complex FIR,
  // adaptive FIR, IIR, vector dot, vector add, vector max, FFT-256, DCT-64,
  // correlation.
  localparam int LAT [NC] = '{921, 3696, 4384, 2450, 53, 131, 55, 18673, 874, 753};
  localparam logic [7:0] C_RFIR = 0, C_CFIR = 1, C_AFIR = 2, C_IIR = 3, C_VDOT = 4, C_VADD = 5,
                 C_VMAX = 6, C_FFT = 7, C_DCT = 8, C_CORR = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, push_valid, push_ready, done_valid, done_spec, idle;
  instr_t push_instr;
  logic [3:0] done_task_id, done_pid;
  logic [NA-1:0] acc_task_valid, acc_abort, acc_pwr_en, acc_done_req, acc_done_ack;
  acc_task_t acc_task [NA];
  logic mem_rd_req, mem_rd_valid, wb_valid, wb_done, spec_mode;
  region_t mem_rd_region, wb_src, wb_dst;
  data_t mem_rd_data;
  size_t wb_size;
  hts_events_t events;

  hts_top dut (.*);

  // ---------------- accelerators ----------------
  logic [NA-1:0] working, aborted;
  acc_task_t cur_task [NA];
  for (genvar a = 0; a < NA; a++) begin : g_acc
    acc_model #(.LATENCY(LAT[a / APC])) u_acc (
      .clk, .rst_n, .task_valid(acc_task_valid[a]), .task_in(acc_task[a]), .abort(acc_abort[a]),
      .done_req(acc_done_req[a]), .done_ack(acc_done_ack[a]), .working(working[a]),
      .aborted(aborted[a]), .cur_task(cur_task[a]));
  end

  // ---------------- memory model ----------------
  data_t mem [region_t];
  function automatic data_t rd(input region_t r);
    return mem.exists(r) ? mem[r] : 16'h0;
  endfunction

  int rd_cnt = 0, wb_cnt = 0;
  localparam int RD_LAT = 40;
  always @(posedge clk) begin
    mem_rd_valid <= 1'b0;
    wb_done      <= 1'b0;
    if (!rst_n) mem_rd_data <= '0;
    else if (mem_rd_req && !mem_rd_valid) begin
      if (rd_cnt == RD_LAT) begin
        mem_rd_valid <= 1'b1; mem_rd_data <= rd(mem_rd_region); rd_cnt <= 0;
      end else rd_cnt <= rd_cnt + 1;
    end
    if (wb_valid && !wb_done) begin
      if (wb_cnt == 4) begin
        mem[wb_dst] = rd(wb_src); wb_done <= 1'b1; wb_cnt <= 0;
      end else wb_cnt <= wb_cnt + 1;
    end
  end

  // ---------------- observation ----------------
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { int cls; region_t inr; region_t outr; int start; int done; bit abrt; } run_t;
  run_t runs [$];
  int   run_of [NA];
  typedef struct { int tid; int pid; bit spec; } note_t;
  note_t notes [$];
  int ev_cnt [string];
  int max_issue = 0;

  always @(posedge clk) if (rst_n) begin
    for (int a = 0; a < NA; a++) begin
      if (acc_task_valid[a]) begin
        run_t r;
        r.cls = a / APC; r.inr = acc_task[a].in_region; r.outr = acc_task[a].out_region;
        r.start = cycle; r.done = -1; r.abrt = 0;
        run_of[a] = runs.size();
        runs.push_back(r);
      end
      if (acc_done_ack[a]) begin
        runs[run_of[a]].done = cycle;
        runs[run_of[a]].abrt = aborted[a];
        if (!aborted[a]) mem[cur_task[a].out_region] = cur_task[a].in_region;
      end
    end
    if (done_valid) notes.push_back('{int'(done_task_id), int'(done_pid), done_spec});
    if ($countones(acc_task_valid) > max_issue) max_issue = $countones(acc_task_valid);
    if (events.raw_wait)    ev_cnt["raw_wait"]++;
    if (events.multi_issue) ev_cnt["multi_issue"]++;
    if (events.rr_branch)   ev_cnt["rr_branch"]++;
    if (events.spec_start)  ev_cnt["spec_start"]++;
    if (events.br_dep)      ev_cnt["br_dep"]++;
    if (events.tlb_stall)   ev_cnt["tlb_stall"]++;
    if (events.squash)      ev_cnt["squash"]++;
    if (events.commit)      ev_cnt["commit"]++;
    if (events.loop_back)   ev_cnt["loop_back"]++;
    if (events.copy_back)   ev_cnt["copy_back"]++;
    if (events.task_abort)  ev_cnt["task_abort"]++;
    if (|(acc_pwr_en & ~working & ~acc_done_req)) ev_cnt["pwr_wait"]++;
  end

  // ---------------- helpers ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic instr_t mk(input logic [7:0] op, input int inr, input int insz, input int outr,
                                input int outsz, input int tid, input int pid, input int ctrl);
    instr_t i = '0;
    i.acc_id = op; i.in_region = 16'(inr); i.in_size = 8'(insz); i.out_region = 16'(outr);
    i.out_size = 8'(outsz); i.task_id = 4'(tid); i.pid = 4'(pid); i.control = 4'(ctrl);
    return i;
  endfunction

  instr_t prog [$];
  int t0;

  // Loads prog into a cleared queue and runs until the scheduler is idle.
  task automatic run_prog(input string name, output int cycles);
    runs.delete(); notes.delete();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    t0 = cycle;
    foreach (prog[i]) begin
      push_valid = 1; push_instr = prog[i];
      @(negedge clk);
      while (!push_ready) @(negedge clk);
    end
    push_valid = 0;
    begin
      int quiet = 0;
      while (quiet < 8) begin
        @(negedge clk);
        quiet = (idle && (acc_done_req == '0) && (working == '0)) ? quiet + 1 : 0;
      end
    end
    cycles = cycle - t0 - 8;
    $display("program %s: %0d cycles, %0d task runs, %0d notices", name, cycles, runs.size(), notes.size());
  endtask

  function automatic int find_run(input logic [7:0] cls, input int inr);
    foreach (runs[i]) if (runs[i].cls == int'(cls) && runs[i].inr == 16'(inr)) return i;
    return -1;
  endfunction

  function automatic int count_notes(input bit spec_too);
    int n = 0;
    foreach (notes[i]) if (spec_too || !notes[i].spec) n++;
    return n;
  endfunction

  function automatic bit has_note(input int tid, input int pid);
    foreach (notes[i]) if (notes[i].tid == tid && notes[i].pid == pid) return 1;
    return 0;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, i0, i1, i2;
    clear = 0; push_valid = 0; push_instr = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(idle && acc_pwr_en == '0, "idle and all accelerators gated after reset");

    // ---- A: no dependency (the paper's independent-node example) ----
    prog.delete();
    prog.push_back(mk(C_RFIR, 'h10, 2, 'h13, 2, 0, 1, 0));
    prog.push_back(mk(C_CFIR, 'h16, 2, 'h19, 2, 1, 1, 0));
    prog.push_back(mk(C_AFIR, 'h23, 3, 'h28, 3, 2, 1, 0));
    prog.push_back(mk(C_VDOT, 'h40, 4, 'h48, 4, 3, 1, 0));
    prog.push_back(mk(C_IIR,  'h32, 3, 'h36, 3, 4, 1, 0));
    run_prog("A", cyc);
    check(runs.size() == 5 && count_notes(1) == 5, "A: five tasks run and notified");
    for (int t = 0; t < 5; t++) check(has_note(t, 1), $sformatf("A: notice for task %0d", t));
    check(cyc >= 4384 && cyc < 4384 + 40, $sformatf("A: overlapped, %0d cycles vs 4384 longest", cyc));
    check(cyc < (921 + 3696 + 4384 + 53 + 2450) / 2, "A: well under the serial sum");

    // ---- B: RAW chains ----
    prog.delete();
    prog.push_back(mk(C_VDOT, 'h100, 4, 'h104, 4, 0, 2, 0));  // P1
    prog.push_back(mk(C_VDOT, 'h104, 4, 'h108, 4, 1, 2, 0));  // same class, needs P1
    prog.push_back(mk(C_VADD, 'h108, 4, 'h10c, 4, 2, 2, 0));  // other class, needs previous
    prog.push_back(mk(C_VMAX, 'h200, 4, 'h204, 4, 3, 2, 0));  // independent
    prog.push_back(mk(C_VMAX, 'h104, 4, 'h20c, 4, 5, 2, 0));  // 2nd consumer of P1
    prog.push_back(mk(C_VDOT, 'h300, 4, 'h304, 4, 4, 2, 0));  // independent, same class
    run_prog("B", cyc);
    i0 = find_run(C_VDOT, 'h100); i1 = find_run(C_VDOT, 'h104); i2 = find_run(C_VADD, 'h108);
    check(i0 >= 0 && i1 >= 0 && i2 >= 0, "B: chain ran");
    if (i0 >= 0 && i1 >= 0 && i2 >= 0) begin
      check(runs[i1].start > runs[i0].done, "B: same-class consumer after its producer");
      check(runs[i2].start > runs[i1].done, "B: other-class consumer after its producer");
      check(runs[i1].start - runs[i0].done <= 4, "B: consumer starts within 4 cycles of the CDB");
    end
    i0 = find_run(C_VMAX, 'h200); i1 = find_run(C_VDOT, 'h300);
    check(i0 >= 0 && runs[i0].start - t0 < 20, "B: independent task not held back");
    check(i1 >= 0 && runs[i1].start - t0 < 20, "B: independent same-class task uses the 2nd accelerator");
    check(rd(16'h10c) == 16'h108 && rd(16'h108) == 16'h104, "B: results in memory");
    check(count_notes(1) == 6, "B: six notices");
    i0 = find_run(C_VDOT, 'h104); i1 = find_run(C_VMAX, 'h104);
    check(i0 >= 0 && i1 >= 0 && runs[i0].start == runs[i1].start, "B: both consumers of P1 start in one cycle");
    check(max_issue >= 2, "B: several tasks started in one cycle");

    // ---- C: the loop example ----
    prog.delete();
    prog.push_back(mk(OP_MOV, 'h58, 0, 2, 0, 1, 3, 0));
    prog.push_back(mk(OP_MOV, 'h3, 0, 3, 0, 2, 3, 0));
    prog.push_back(mk(OP_MOV, 'h75, 0, 6, 0, 3, 3, 0));
    prog.push_back(mk(OP_LBEG, 4, 4, 0, 0, 4, 3, 0));
    prog.push_back(mk(OP_ADD, 4, 2, 5, 0, 5, 3, 0));
    prog.push_back(mk(OP_ADD, 4, 6, 7, 0, 6, 3, 0));
    prog.push_back(mk(C_IIR, 5, 3, 7, 3, 7, 3, 1));
    prog.push_back(mk(OP_LEND, 0, 4, 2, 0, 8, 3, 0));
    run_prog("C", cyc);
    check(runs.size() == 4 && count_notes(1) == 4, "C: four iterations");
    for (int k = 1; k <= 4; k++) begin
      int r;
      r = find_run(C_IIR, 'h58 + k);
      check(r >= 0 && runs[r].outr == 16'('h75 + k), $sformatf("C: iteration with R4=%0d", k));
    end
    // Two IIR accelerators: four 2450-cycle tasks take two rounds.
    check(cyc >= 2 * 2450 && cyc < 2 * 2450 + 60, $sformatf("C: two rounds on two accelerators (%0d)", cyc));

    // ---- D1: the branch example, memory-read branch not taken ----
    prog.delete();
    prog.push_back(mk(OP_MOV, 3, 0, 'ha, 0, 0, 4, 0));
    prog.push_back(mk(C_RFIR, 'h10, 2, 'h13, 2, 0, 4, 0));
    prog.push_back(mk(C_CFIR, 'h16, 2, 'h19, 2, 1, 4, 0));
    prog.push_back(mk(OP_IF, 'h93, 'ha, 'h12, 0, 1, 4, 'hd));
    prog.push_back(mk(C_AFIR, 'h23, 3, 'h28, 3, 2, 4, 0));
    prog.push_back(mk(C_IIR,  'h32, 3, 'h36, 3, 3, 4, 0));
    prog.push_back(mk(C_VDOT, 'h40, 4, 'h48, 4, 4, 4, 0));
    prog.push_back(mk(C_VADD, 'h55, 4, 'h62, 4, 5, 4, 0));
    prog.push_back(mk(C_VMAX, 'h68, 5, 'h76, 5, 6, 4, 0));
    prog.push_back(mk(C_FFT,  'h84, 6, 'h93, 6, 7, 4, 0));
    prog.push_back(mk(C_DCT,  'h102, 2, 'h106, 2, 8, 4, 0));
    prog.push_back(mk(C_CORR, 'h110, 3, 'h115, 3, 9, 4, 0));
    mem[16'h93] = 16'd3;     // equal to R10: NEQ is false, branch not taken
    mem[16'h115] = 16'hdead;
    run_prog("D1", cyc);
    check(ev_cnt["commit"] == 1 && ev_cnt["squash"] == 0, "D1: speculation committed");
    check(runs.size() == 10 && count_notes(1) == 10, "D1: all ten tasks ran and were notified");
    i0 = find_run(C_CORR, 'h110);
    check(i0 >= 0 && runs[i0].outr >= 16'hF800, "D1: speculative output went to a TM slot");
    check(rd(16'h115) == 16'h110, "D1: committed result copied back to its region");
    check(rd(16'h93) == 16'h84 && rd(16'h106) == 16'h102, "D1: other results copied back");
    check(ev_cnt["copy_back"] == 8, $sformatf("D1: eight slots copied back (%0d)", ev_cnt["copy_back"]));
    check(cyc < 18673 + 100, "D1: FFT overlapped with the rest");

    // ---- D2: same program, branch taken ----
    mem[16'h93] = 16'd5;     // differs from R10: taken, mis-speculation
    mem[16'h115] = 16'hdead;
    mem[16'h28] = 16'hbeef;
    run_prog("D2", cyc);
    check(ev_cnt["squash"] == 1, "D2: one squash");
    check(ev_cnt["task_abort"] >= 1, "D2: running speculative tasks aborted");
    check(count_notes(0) == 2 && has_note(0, 4) && has_note(1, 4), "D2: only the two real tasks notified as final");
    foreach (runs[i]) if (runs[i].outr >= 16'hF800) check(runs[i].abrt || runs[i].done - runs[i].start < 100,
                                                            "D2: speculative tasks end early");
    check(rd(16'h115) == 16'hdead && rd(16'h28) == 16'hbeef, "D2: squashed results never reach memory");
    check(cyc < 3696 + 100, $sformatf("D2: done soon after the real tasks (%0d)", cyc));

    // ---- E: bus-read branch, register-read branch, TLB full ----
    prog.delete();
    prog.push_back(mk(OP_MOV, 'h10, 0, 'ha, 0, 0, 5, 0));        // R10 = 0x10
    prog.push_back(mk(OP_MOV, 2, 0, 'hb, 0, 0, 5, 0));           // R11 = 2
    prog.push_back(mk(OP_IF, 'hb, 'ha, 2, 0, 0, 5, 'h3));        // RR: R11 <= R10 -> skip next
    prog.push_back(mk(C_FFT, 'h1, 1, 'h2, 1, 15, 5, 0));         // skipped
    prog.push_back(mk(C_RFIR, 'h10, 2, 'h93, 2, 1, 5, 0));       // writes 0x93
    prog.push_back(mk(OP_IF, 'h93, 'ha, 'h20, 0, 2, 5, 'h9));    // BR: mem[0x93] != R10 ?
    for (int k = 0; k < 10; k++)
      prog.push_back(mk(C_VDOT, 'h400 + k, 1, 'h500 + k, 1, 3, 5, 0));
    mem[16'h93] = 16'h0;
    run_prog("E", cyc);
    check(ev_cnt["rr_branch"] == 1, "E: register-read branch resolved in decode");
    check(find_run(C_FFT, 'h1) < 0, "E: RR branch taken, FFT skipped");
    check(ev_cnt["br_dep"] == 1, "E: bus-read branch waited for its producer");
    check(ev_cnt["commit"] == 2, "E: bus-read branch not taken after the producer's write");
    check(ev_cnt["tlb_stall"] > 0, "E: tenth speculative output waited for a TLB slot");
    check(count_notes(1) == 11, $sformatf("E: eleven notices (%0d)", count_notes(1)));
    for (int k = 0; k < 10; k++) check(rd(16'(16'h500 + k)) == 16'(16'h400 + k), $sformatf("E: result %0d in memory", k));

    // ---- mechanisms seen at least once ----
    foreach (ev_cnt[k]) $display("  %-12s %0d", k, ev_cnt[k]);
    check(ev_cnt["raw_wait"] > 0, "RAW waits seen");
    check(ev_cnt["multi_issue"] > 0, "multi-issue seen");
    check(ev_cnt["loop_back"] == 3, "loop iterations seen");
    check(ev_cnt["spec_start"] == 3, "memory/bus-read branches seen");
    check(ev_cnt["pwr_wait"] >= 0, "power enables observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
