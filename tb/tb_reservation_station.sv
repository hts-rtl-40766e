// tb_reservation_station: self-checking test of one reservation station
// (two entries, two accelerators). Checks that a ready task issues in the
// cycle after it is written, to the lowest idle accelerator; that a task
// with a producer waits until the producer's tag is on the CDB; that nothing
// issues while every accelerator is busy; that a full station refuses input;
// and that killed tags are dropped without issuing.
module tb_reservation_station;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_wait, cdb_valid, pending;
  acc_task_t in_task, issue_task;
  logic [3:0] in_tag, in_dep_tag, issue_tag, cdb_tag;
  logic [1:0] acc_busy, issue_valid;
  logic [15:0] kill_mask;
  int checks = 0, failures = 0;

  reservation_station #(.DEPTH(2), .ACC_PER_CLASS(2), .NUM_TAGS(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic put(input int tag, input bit w, input int dep, input int inr);
    in_valid = 1; in_tag = 4'(tag); in_wait = w; in_dep_tag = 4'(dep);
    in_task = '0; in_task.in_region = 16'(inr); in_task.out_region = 16'(inr + 1);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_wait = 0; in_tag = 0; in_dep_tag = 0; in_task = '0;
    acc_busy = 2'b00; cdb_valid = 0; cdb_tag = 0; kill_mask = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!pending && issue_valid == 2'b00, "empty after reset");
    put(1, 0, 0, 'h10);
    check(issue_valid == 2'b01 && issue_tag == 1 && issue_task.in_region == 16'h10,
          "ready task issues next cycle to accelerator 0");
    acc_busy = 2'b01; @(negedge clk);
    check(!pending, "issued entry left the station");
    put(2, 1, 9, 'h20);
    check(issue_valid == 2'b00 && pending, "task waiting on tag 9 does not issue");
    cdb_valid = 1; cdb_tag = 4'd8; @(negedge clk); cdb_valid = 0;
    check(issue_valid == 2'b00, "other tags do not wake it");
    cdb_valid = 1; cdb_tag = 4'd9; @(negedge clk); cdb_valid = 0;
    check(issue_valid == 2'b10 && issue_tag == 2, "woken by tag 9, issues to idle accelerator 1");
    @(negedge clk); acc_busy = 2'b11;
    put(3, 0, 0, 'h30);
    put(4, 0, 0, 'h40);
    check(!in_ready, "two entries: full");
    check(issue_valid == 2'b00, "no issue while all accelerators busy");
    kill_mask = 16'h0008; #1;
    check(issue_valid == 2'b00, "killed tag not issued");
    @(negedge clk); kill_mask = '0;
    acc_busy = 2'b10; #1;
    check(in_ready && issue_valid == 2'b01 && issue_tag == 4, "tag 3 dropped, tag 4 issues");
    @(negedge clk);
    check(!pending, "station empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
