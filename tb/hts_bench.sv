// hts_bench: simulation harness that runs the evaluation workloads on one
// scheduler configuration and reports the cycle count of each.
//
// It holds an hts_top with ACC_PER_CLASS accelerators per class and
// speculation on or off, one timing model per accelerator (cycle counts of
// the ten DSP functions), and a memory model: a finished task writes its
// input region number into its output region, branch-condition reads take
// RD_LAT cycles and copy-back requests copy one word. It runs, in order:
//
//   0..8   the nine custom benchmarks: no dependency, same-class dependency,
//          different-class dependency, random dependency, loop without and
//          with an outside dependency, memory-read branch taken / not taken,
//          bus-read branch taken
//   17     bus-read branch not taken, where speculation hides the producer
//   9..12  audio compression, correlation above threshold (time domain:
//          three chained FIRs per band), 2, 4, 6 and 8 bands
//   13..16 audio compression, correlation below threshold (frequency domain:
//          FFT, three chained vector dots, inverse FFT per band), 2..8 bands
//
// The inverse FFT runs on the FFT class (the function list has no separate
// inverse transform). Per run it checks the number of completion notices
// and the data left in memory, and that the cycle count lies between a lower
// bound from the accelerator count and the critical path and that bound plus
// a margin. cyc[] returns the cycle counts; `finished` rises at the end.
module hts_bench
  import hts_pkg::*;
#(
  parameter int unsigned ACC_PER_CLASS = 2,
  parameter bit          SPECULATE     = 1'b1
) (
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cyc [18]
);
  localparam int NC = 10, NA = NC * ACC_PER_CLASS;
  localparam int LAT [NC] = '{921, 3696, 4384, 2450, 53, 131, 55, 18673, 874, 753};
  localparam logic [7:0] C_RFIR = 0, C_CFIR = 1, C_AFIR = 2, C_IIR = 3, C_VDOT = 4, C_VADD = 5,
                         C_VMAX = 6, C_FFT = 7, C_DCT = 8, C_CORR = 9;
  localparam int RD_LAT = 40;
  localparam int F = ACC_PER_CLASS;

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

  hts_top #(.ACC_PER_CLASS(ACC_PER_CLASS), .SPECULATE(SPECULATE)) dut (.*);

  logic [NA-1:0] working, aborted;
  acc_task_t cur_task [NA];
  for (genvar a = 0; a < NA; a++) begin : g_acc
    acc_model #(.LATENCY(LAT[a / ACC_PER_CLASS])) u_acc (
      .clk, .rst_n, .task_valid(acc_task_valid[a]), .task_in(acc_task[a]), .abort(acc_abort[a]),
      .done_req(acc_done_req[a]), .done_ack(acc_done_ack[a]), .working(working[a]),
      .aborted(aborted[a]), .cur_task(cur_task[a]));
  end

  data_t mem [region_t];
  function automatic data_t rd(input region_t r);
    return mem.exists(r) ? mem[r] : 16'h0;
  endfunction

  int rd_cnt = 0, wb_cnt = 0, n_notes = 0, n_nonspec = 0;
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
    for (int a = 0; a < NA; a++)
      if (acc_done_ack[a] && !aborted[a]) mem[cur_task[a].out_region] = cur_task[a].in_region;
    if (done_valid) begin n_notes++; if (!done_spec) n_nonspec++; end
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0d FU%s]: %s", F, SPECULATE ? "" : " no-spec", msg); end
  endtask

  function automatic instr_t mk(input logic [7:0] op, input int inr, input int insz, input int outr,
                                input int outsz, input int tid, input int ctrl);
    instr_t i = '0;
    i.acc_id = op; i.in_region = 16'(inr); i.in_size = 8'(insz); i.out_region = 16'(outr);
    i.out_size = 8'(outsz); i.task_id = 4'(tid); i.control = 4'(ctrl);
    return i;
  endfunction

  instr_t prog [$];
  function automatic void t(input logic [7:0] cls, input int inr, input int outr);
    prog.push_back(mk(cls, inr, 40, outr, 40, prog.size(), 0));
  endfunction

  task automatic run_prog(input int idx, input string name, input int notes_expected,
                         input bit final_only = 0);
    int t0, quiet;
    n_notes = 0; n_nonspec = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    t0 = cycle;
    foreach (prog[i]) begin
      push_valid = 1; push_instr = prog[i];
      @(negedge clk);
      while (!push_ready) @(negedge clk);
    end
    push_valid = 0;
    quiet = 0;
    while (quiet < 8) begin
      @(negedge clk);
      quiet = (idle && (acc_done_req == '0) && (working == '0)) ? quiet + 1 : 0;
    end
    cyc[idx] = cycle - t0 - 8;
    $display("  [%0d FU/kernel, speculation %s] %-34s %7d cycles", F, SPECULATE ? "on " : "off", name, cyc[idx]);
    // After a squash, only notices of non-speculative tasks are final.
    check((final_only ? n_nonspec : n_notes) == notes_expected,
          $sformatf("%s: %0d notices (%0d final), expected %0d", name, n_notes, n_nonspec, notes_expected));
    check(!spec_mode && !wb_valid, $sformatf("%s: speculation closed and TLB drained", name));
  endtask

  // Cycles of n equal tasks of latency lat on F accelerators.
  function automatic int rounds(input int n, input int lat);
    return ((n + F - 1) / F) * lat;
  endfunction
  function automatic int max2(input int a, input int b);
    return a > b ? a : b;
  endfunction
  task automatic bound(input int idx, input string name, input int lo, input int slack);
    check(cyc[idx] >= lo && cyc[idx] <= lo + slack,
          $sformatf("%s: %0d cycles outside [%0d, %0d]", name, cyc[idx], lo, lo + slack));
  endtask

  // The branch example program; `dep` makes the condition region the output
  // of real_fir (bus-read branch).
  task automatic branch_prog(input bit dep, input int r10 = 3);
    prog.delete();
    prog.push_back(mk(OP_MOV, r10, 0, 'ha, 0, 0, 0));
    prog.push_back(mk(C_RFIR, 'h10, 2, dep ? 'h93 : 'h13, 2, 0, 0));
    prog.push_back(mk(C_CFIR, 'h16, 2, 'h19, 2, 1, 0));
    prog.push_back(mk(OP_IF, 'h93, 'ha, 'h12, 0, 1, dep ? 'h9 : 'hd));
    prog.push_back(mk(C_AFIR, 'h23, 3, 'h28, 3, 2, 0));
    prog.push_back(mk(C_IIR,  'h32, 3, 'h36, 3, 3, 0));
    prog.push_back(mk(C_VDOT, 'h40, 4, 'h48, 4, 4, 0));
    prog.push_back(mk(C_VADD, 'h55, 4, 'h62, 4, 5, 0));
    prog.push_back(mk(C_VMAX, 'h68, 5, 'h76, 5, 6, 0));
    prog.push_back(mk(C_FFT,  'h84, 6, 'h93, 6, 7, 0));
    prog.push_back(mk(C_DCT,  'h102, 2, 'h106, 2, 8, 0));
    prog.push_back(mk(C_CORR, 'h110, 3, 'h115, 3, 9, 0));
  endtask

  task automatic loop_prog(input bit dep);
    prog.delete();
    if (dep) t(C_RFIR, 'h50, 'h5c);      // produces the first iteration's input
    prog.push_back(mk(OP_MOV, 'h58, 0, 2, 0, 1, 0));
    prog.push_back(mk(OP_MOV, 'h75, 0, 6, 0, 3, 0));
    prog.push_back(mk(OP_LBEG, 4, 4, 0, 0, 4, 1));
    prog.push_back(mk(OP_ADD, 4, 2, 5, 0, 5, 1));
    prog.push_back(mk(OP_ADD, 4, 6, 7, 0, 6, 1));
    prog.push_back(mk(C_IIR, 5, 3, 7, 3, 7, 1));
    prog.push_back(mk(OP_LEND, 0, 4, 2, 0, 8, 1));
  endtask

  // Audio compression: correlate, compare with a threshold (bus-read branch
  // on the correlation output), then `bands` iterations of either domain.
  task automatic audio_prog(input int bands, input bit freq);
    int if_pc, freq_pc, end_pc;
    prog.delete();
    for (int r = 1; r <= 6; r++) prog.push_back(mk(OP_MOV, r * 'h100, 0, r, 0, 0, 0));
    prog.push_back(mk(OP_MOV, freq ? 'h50 : 'h05, 0, 'ha, 0, 0, 0));     // threshold in R10
    prog.push_back(mk(C_CORR, 'h10, 40, 'h20, 40, 0, 0));
    if_pc = prog.size();
    prog.push_back('0);                                                  // patched below
    // time domain
    prog.push_back(mk(OP_LBEG, bands, 15, 0, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 1, 7, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 2, 8, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 3, 9, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 4, 11, 0, 0, 1));
    prog.push_back(mk(C_RFIR, 7, 40, 8, 40, 1, 1));
    prog.push_back(mk(C_RFIR, 8, 40, 9, 40, 2, 1));
    prog.push_back(mk(C_RFIR, 9, 40, 11, 40, 3, 1));
    prog.push_back(mk(OP_LEND, 0, 15, 0, 0, 0, 1));
    prog.push_back('0);                                                  // jump to end
    freq_pc = prog.size();
    prog.push_back(mk(OP_LBEG, bands, 15, 0, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 1, 7, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 2, 8, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 3, 9, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 4, 11, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 5, 12, 0, 0, 1));
    prog.push_back(mk(OP_ADD, 15, 6, 13, 0, 0, 1));
    prog.push_back(mk(C_FFT,  7, 40, 8, 40, 4, 1));
    prog.push_back(mk(C_VDOT, 8, 40, 9, 40, 5, 1));
    prog.push_back(mk(C_VDOT, 9, 40, 11, 40, 6, 1));
    prog.push_back(mk(C_VDOT, 11, 40, 12, 40, 7, 1));
    prog.push_back(mk(C_FFT,  12, 40, 13, 40, 8, 1));                    // inverse FFT
    prog.push_back(mk(OP_LEND, 0, 15, 0, 0, 0, 1));
    end_pc = prog.size();
    // taken when correlation output (0x10) <= threshold: bus-read, LE
    prog[if_pc] = mk(OP_IF, 'h20, 'ha, freq_pc - if_pc, 0, 0, 'hb);
    prog[freq_pc - 1] = mk(OP_JUMP, end_pc, 0, 0, 0, 0, 1);
  endtask

  localparam int BANDS [4] = '{2, 4, 6, 8};

  initial begin
    int lo;
    bit ok;
    finished = 0; checks = 0; failures = 0;
    foreach (cyc[i]) cyc[i] = 0;
    clear = 0; push_valid = 0; push_instr = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1 no dependency
    prog.delete();
    t(C_RFIR, 'h10, 'h13); t(C_CFIR, 'h16, 'h19); t(C_AFIR, 'h23, 'h28); t(C_VDOT, 'h40, 'h48); t(C_IIR, 'h32, 'h36);
    run_prog(0, "no dependency", 5);
    bound(0, "no dependency", 4384, 60);
    // 2 same-class dependency: two chains within a class
    prog.delete();
    t(C_DCT, 'h10, 'h11); t(C_DCT, 'h11, 'h12); t(C_DCT, 'h12, 'h13);
    t(C_CORR, 'h40, 'h41); t(C_CORR, 'h41, 'h42);
    run_prog(1, "same dependency", 5);
    bound(1, "same dependency", 3 * 874, 60);
    check(rd(16'h13) == 16'h12 && rd(16'h42) == 16'h41, "same dependency: results");
    // 3 different-class dependency
    prog.delete();
    t(C_DCT, 'h10, 'h11); t(C_CORR, 'h11, 'h12); t(C_VADD, 'h12, 'h13); t(C_IIR, 'h13, 'h14);
    run_prog(2, "different dependency", 4);
    bound(2, "different dependency", 874 + 753 + 131 + 2450, 60);
    check(rd(16'h14) == 16'h13, "different dependency: result");
    // 4 random dependency
    prog.delete();
    t(C_RFIR, 'h10, 'h11); t(C_CFIR, 'h20, 'h21); t(C_VDOT, 'h11, 'h12); t(C_IIR, 'h21, 'h22);
    t(C_VADD, 'h12, 'h23); t(C_RFIR, 'h30, 'h31); t(C_CORR, 'h22, 'h24);
    run_prog(3, "random dependency", 7);
    bound(3, "random dependency", 3696 + 2450 + 753, 60);
    // 5 loop, no outside dependency
    loop_prog(0);
    run_prog(4, "loop no dependency", 4);
    bound(4, "loop no dependency", rounds(4, 2450), 60);
    // 6 loop depending on a task before it
    loop_prog(1);
    run_prog(5, "loop dependency", 5);
    bound(5, "loop dependency", F == 1 ? 4 * 2450 : 921 + 2450, F == 1 ? 60 : 2450 + 60);
    check(rd(16'h79) == 16'h5c, "loop dependency: first iteration result");
    // 7, 8 memory-read branch, taken / not taken
    branch_prog(0);
    mem[16'h93] = 16'd5; mem[16'h115] = 16'hdead;
    run_prog(6, "branch taken, no dependency", 2, 1);
    check(rd(16'h115) == 16'hdead, "branch taken: skipped task left no result");
    branch_prog(0);
    mem[16'h93] = 16'd3;
    run_prog(7, "branch not taken, no dependency", 10);
    check(rd(16'h115) == 16'h110, "branch not taken: result reached its region");
    bound(7, "branch not taken", SPECULATE ? 18673 : 2 + RD_LAT + 18673, 400);
    // 9 bus-read branch on real_fir's output, taken (0x10 != 3)
    branch_prog(1);
    mem[16'h115] = 16'hdead;
    run_prog(8, "branch taken, dependency", 2, 1);
    check(rd(16'h115) == 16'hdead && rd(16'h93) == 16'h10, "branch taken with dependency: memory");
    // bus-read branch not taken: R10 equals real_fir's output
    branch_prog(1, 'h10);
    run_prog(17, "branch not taken, dependency", 10);
    check(rd(16'h115) == 16'h110, "branch not taken with dependency: result reached its region");
    bound(17, "branch not taken, dependency", SPECULATE ? 18673 : 921 + RD_LAT + 18673, 400);

    // audio compression
    for (int d = 0; d < 2; d++)
      for (int b = 0; b < 4; b++) begin
        int bands, idx;
        bands = BANDS[b]; idx = 9 + d * 4 + b;
        audio_prog(bands, d == 1);
        run_prog(idx, $sformatf("audio %s, %0d bands", d ? "frequency domain" : "time domain", bands),
                 1 + bands * (d ? 5 : 3));
        ok = 1;
        for (int k = 1; k <= bands; k++)
          if (d == 0) ok &= rd(16'(16'h400 + k)) == 16'(16'h300 + k);
          else        ok &= rd(16'(16'h600 + k)) == 16'(16'h500 + k);
        check(ok, $sformatf("audio %0d bands: band results in memory", bands));
        if (d == 0) lo = 753 + max2(3 * 921, rounds(3 * bands, 921));
        else        lo = 753 + max2(2 * 18673 + 3 * 53, rounds(2 * bands, 18673));
        bound(idx, $sformatf("audio %0d bands", bands), lo, d ? 18673 + 400 : 2 * 921 + 400);
      end

    finished = 1;
  end
endmodule
