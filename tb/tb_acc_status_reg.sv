// tb_acc_status_reg: self-checking test of the Accelerator Status Register.
// Two classes of two accelerators and four tags. Checks that an issue marks
// an accelerator busy with its tag, that a CDB completion clears only that
// accelerator, that a kill mask aborts exactly the accelerators running a
// killed tag, and that power enables follow busy and pending work.
module tb_acc_status_reg;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] issue_valid, busy, abort, pwr_en;
  logic [1:0] issue_tag [4];
  logic [1:0] cur_tag [4];
  logic cdb_valid;
  logic [1:0] cdb_acc;
  logic [3:0] kill_mask;
  logic [1:0] rs_pending;
  int checks = 0, failures = 0;

  acc_status_reg #(.NUM_CLASSES(2), .ACC_PER_CLASS(2), .NUM_TAGS(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    issue_valid = '0; cdb_valid = 0; cdb_acc = '0; kill_mask = '0; rs_pending = '0;
    for (int i = 0; i < 4; i++) issue_tag[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(busy == 4'b0000 && pwr_en == 4'b0000, "idle after reset, all gated");
    rs_pending = 2'b10; #1;
    check(pwr_en == 4'b1100, "pending class 1 powers accelerators 2,3");
    rs_pending = 2'b00;
    issue_valid = 4'b0010; issue_tag[1] = 2'd3;
    issue_valid[2] = 1'b1; issue_tag[2] = 2'd1;
    @(negedge clk);
    issue_valid = '0;
    check(busy == 4'b0110, "accelerators 1 and 2 busy");
    check(cur_tag[1] == 2'd3 && cur_tag[2] == 2'd1, "tags recorded");
    check(pwr_en == 4'b0110, "busy accelerators powered");
    check(abort == 4'b0000, "no abort without kill");
    kill_mask = 4'b1000; #1;
    check(abort == 4'b0010, "kill of tag 3 aborts accelerator 1 only");
    kill_mask = 4'b0000;
    cdb_valid = 1; cdb_acc = 2'd2;
    @(negedge clk);
    cdb_valid = 0;
    check(busy == 4'b0010, "CDB from accelerator 2 frees it only");
    kill_mask = 4'b0010; #1;
    check(abort == 4'b0000, "kill of a finished tag aborts nothing");
    kill_mask = '0;
    cdb_valid = 1; cdb_acc = 2'd1;
    @(negedge clk);
    cdb_valid = 0;
    check(busy == 4'b0000, "all idle again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
