// tb_task_tlb: self-checking test of the Task Lookup Buffer with two slots.
// Covers pass-through outside speculation, slot allocation and reuse while
// speculating, the full condition, squash (speculative data discarded),
// commit (mapping kept and used by later readers and writers), and the
// copy-back of committed slots when the buffer is full and drain is allowed.
// Expected slot regions are TM_BASE + i*TM_SLOT, worked out here.
module tb_task_tlb;
  import hts_pkg::*;
  localparam region_t TMB = 16'hF800;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  region_t in_region [2], in_phys [2];
  logic spec_mode;
  logic [1:0] spec_id;
  region_t out_region, out_phys;
  size_t out_size;
  logic out_ok, out_fire, commit, squash, drain_en, draining, wb_valid, wb_done;
  region_t wb_src, wb_dst;
  size_t wb_size;
  logic [1:0] entry_valid;
  int checks = 0, failures = 0;

  task_tlb #(.DEPTH(2), .TM_BASE(TMB), .TM_SLOT(256), .SPEC_ID_W(2)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write_out(input int r, input int sz);
    out_region = 16'(r); out_size = 8'(sz); #1;
    out_fire = out_ok;
    @(negedge clk); out_fire = 0;
  endtask

  initial begin
    repeat (400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_region[0] = 16'h13; in_region[1] = 16'h20;
    spec_mode = 0; spec_id = 0; out_region = 16'h13; out_size = 2;
    out_fire = 0; commit = 0; squash = 0; drain_en = 0; wb_done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(out_ok && out_phys == 16'h13 && in_phys[0] == 16'h13, "pass-through outside speculation");
    // Speculation 1: two regions get slots 0 and 1.
    spec_mode = 1; spec_id = 1;
    write_out('h13, 2);
    check(entry_valid == 2'b01 && in_phys[0] == TMB, "0x13 remapped to slot 0");
    write_out('h13, 5);
    check(entry_valid == 2'b01, "same region reuses its slot");
    write_out('h20, 3);
    check(entry_valid == 2'b11 && in_phys[1] == TMB + 256, "0x20 remapped to slot 1");
    out_region = 16'h30; #1;
    check(!out_ok, "no slot left for a third region");
    // Mis-speculation.
    squash = 1; @(negedge clk); squash = 0;
    check(entry_valid == 2'b00 && in_phys[0] == 16'h13, "squash discards the mappings");
    // Speculation 2, correct.
    spec_id = 2;
    write_out('h13, 4);
    commit = 1; @(negedge clk); commit = 0; spec_mode = 0;
    check(entry_valid == 2'b01 && in_phys[0] == TMB, "commit keeps the mapping");
    out_region = 16'h13; #1;
    check(out_phys == TMB, "later writer of 0x13 keeps using its slot");
    out_region = 16'h44; #1;
    check(out_phys == 16'h44, "other regions pass through");
    // Speculation 3 remaps 0x13 again and commits: old entry is superseded.
    spec_mode = 1; spec_id = 3;
    write_out('h13, 6);
    check(entry_valid == 2'b11 && in_phys[0] == TMB + 256, "speculative entry wins on lookup");
    commit = 1; @(negedge clk); commit = 0; spec_mode = 0;
    check(entry_valid == 2'b10 && in_phys[0] == TMB + 256, "superseded committed entry dropped");
    // Fill and copy back.
    spec_mode = 1; spec_id = 0;
    write_out('h20, 7);
    commit = 1; @(negedge clk); commit = 0; spec_mode = 0;
    check(entry_valid == 2'b11 && !draining, "full, drain not yet allowed");
    drain_en = 1; @(negedge clk); drain_en = 0;
    check(draining && wb_valid, "copy-back starts when full and allowed");
    out_region = 16'h55; #1;
    check(!out_ok, "dispatch stalled while draining");
    check(wb_src == TMB && wb_dst == 16'h20 && wb_size == 7, "first copy: slot 0 -> 0x20, 7 units");
    wb_done = 1; @(negedge clk); wb_done = 0;
    check(wb_valid && wb_src == TMB + 256 && wb_dst == 16'h13 && wb_size == 6, "second copy: slot 1 -> 0x13");
    wb_done = 1; @(negedge clk); wb_done = 0;
    @(negedge clk);
    check(entry_valid == 2'b00 && !draining && in_phys[0] == 16'h13, "buffer empty after copy-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
