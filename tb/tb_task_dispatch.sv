// tb_task_dispatch: self-checking test of the dispatch stage with four tags
// and four classes. The TLB and Memory Tracker answers are driven by the
// test. Checks tag assignment, the station write (class, regions, wait and
// producer tag), stalls on a full station, on no TLB slot and on no free
// tag, dropping of an unknown class, CDB completion notices and tag reuse,
// and the squash rules: waiting speculative tags are freed at once, running
// ones only after their aborted accelerator reports, without a notice.
module tb_task_dispatch;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic task_valid, task_ready;
  task_req_t task_req;
  region_t tlb_in_region, tlb_in_phys, tlb_out_region, tlb_out_phys, mt_lookup_region, mt_insert_region;
  size_t tlb_out_size;
  logic tlb_out_ok, tlb_out_fire, mt_hit, mt_insert;
  logic [1:0] mt_tag, mt_insert_tag, rs_tag, rs_dep_tag, cdb_tag;
  logic [3:0] rs_valid, rs_ready, rs_issued;
  logic [1:0] rs_issued_tag [4];
  acc_task_t rs_task;
  logic rs_wait, cdb_valid, spec_mode, squash, commit, done_valid, done_spec, idle, ev_raw_wait;
  logic [3:0] kill_mask;
  logic [3:0] done_task_id, done_pid;
  int checks = 0, failures = 0;

  task_dispatch #(.NUM_CLASSES(4), .NUM_TAGS(4)) dut (.*);

  // Stand-in TLB: identity input map, output map adds 0x1000 while speculating.
  assign tlb_in_phys  = tlb_in_region;
  assign tlb_out_phys = spec_mode ? tlb_out_region + 16'h1000 : tlb_out_region;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic present(input int cls, input int inr, input int outr, input int tid);
    task_valid = 1; task_req = '0; task_req.acc_class = 8'(cls);
    task_req.in_region = 16'(inr); task_req.out_region = 16'(outr); task_req.task_id = 4'(tid);
    task_req.pid = 4'(tid + 1); task_req.in_size = 8'd2; task_req.out_size = 8'd3;
  endtask

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    task_valid = 0; task_req = '0; tlb_out_ok = 1; mt_hit = 0; mt_tag = 0; rs_ready = 4'hF;
    rs_issued = '0; for (int c = 0; c < 4; c++) rs_issued_tag[c] = '0;
    cdb_valid = 0; cdb_tag = 0; spec_mode = 0; squash = 0; commit = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(idle, "idle after reset");
    present(2, 'h10, 'h13, 5); #1;
    check(task_ready && rs_valid == 4'b0100 && rs_tag == 0 && !rs_wait, "first task: tag 0 to class 2");
    check(rs_task.in_region == 16'h10 && rs_task.out_region == 16'h13 && rs_task.in_size == 2 &&
          rs_task.out_size == 3, "regions and sizes delivered");
    check(mt_insert && mt_insert_tag == 0 && mt_insert_region == 16'h13 && mt_lookup_region == 16'h10,
          "tracker told of the writer");
    @(negedge clk);
    present(1, 'h13, 'h20, 6); mt_hit = 1; mt_tag = 0; #1;
    check(rs_valid == 4'b0010 && rs_tag == 1 && rs_wait && rs_dep_tag == 0 && ev_raw_wait,
          "RAW: second task waits for tag 0");
    @(negedge clk); mt_hit = 0;
    present(3, 'h30, 'h31, 7); rs_ready[3] = 0; #1;
    check(!task_ready && rs_valid == 0, "stall on a full station");
    rs_ready[3] = 1; tlb_out_ok = 0; #1;
    check(!task_ready && rs_valid == 0, "stall on no TLB slot");
    tlb_out_ok = 1;
    present(12, 'h30, 'h31, 7); #1;
    check(task_ready && rs_valid == 0 && !mt_insert, "unknown class dropped");
    @(negedge clk);
    present(3, 'h30, 'h31, 7); @(negedge clk);   // tag 2
    present(0, 'h40, 'h41, 8); @(negedge clk);   // tag 3
    present(0, 'h50, 'h51, 9); #1;
    check(!task_ready, "stall with no free tag");
    task_valid = 0;
    cdb_valid = 1; cdb_tag = 0; #1;
    check(done_valid && done_task_id == 5 && done_pid == 6 && !done_spec, "completion notice of tag 0");
    @(negedge clk); cdb_valid = 0;
    present(0, 'h50, 'h51, 9); #1;
    check(task_ready && rs_tag == 0, "tag 0 reused");
    @(negedge clk);
    task_valid = 0;
    for (int t = 1; t < 4; t++) begin cdb_valid = 1; cdb_tag = 2'(t); @(negedge clk); end
    cdb_valid = 0;
    // Speculation: tags 1,2 speculative, tag 1 running.
    spec_mode = 1;
    present(1, 'h60, 'h61, 10); #1;
    check(rs_task.out_region == 16'h1061, "speculative output goes to the remapped region");
    @(negedge clk);
    present(2, 'h62, 'h63, 11); @(negedge clk); task_valid = 0;
    rs_issued[1] = 1; rs_issued_tag[1] = 2'd1; @(negedge clk); rs_issued = '0;
    squash = 1; #1;
    check(kill_mask == 4'b0110, "kill mask names the speculative tags");
    check(!task_ready, "no dispatch in the squash cycle");
    @(negedge clk); squash = 0; spec_mode = 0;
    present(3, 'h70, 'h71, 12); #1;
    check(rs_tag == 2, "waiting speculative tag 2 freed at once");
    @(negedge clk); task_valid = 0;
    cdb_valid = 1; cdb_tag = 1; #1;
    check(!done_valid, "aborted task gives no completion notice");
    @(negedge clk); cdb_valid = 0;
    cdb_valid = 1; cdb_tag = 0; @(negedge clk);
    cdb_valid = 1; cdb_tag = 2; #1;
    check(done_valid && done_task_id == 12, "notice for the task after the squash");
    @(negedge clk); cdb_valid = 0;
    check(idle, "idle again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
