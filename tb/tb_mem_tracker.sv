// tb_mem_tracker: self-checking test of the Memory Tracker.
// Records writers of regions and checks that lookups return the youngest
// writer's tag, that a CDB completion or a kill mask clears the entry, and
// that a producer being announced in the lookup cycle is not reported.
module tb_mem_tracker;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic insert_valid;
  logic [3:0] insert_tag;
  region_t insert_region;
  region_t lookup_region [2];
  logic [1:0] lookup_hit;
  logic [3:0] lookup_tag [2];
  logic cdb_valid;
  logic [3:0] cdb_tag;
  logic [15:0] kill_mask;
  int checks = 0, failures = 0;

  mem_tracker #(.NUM_TAGS(16), .NUM_LOOKUP(2)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic ins(input int tag, input int reg_n);
    insert_valid = 1; insert_tag = 4'(tag); insert_region = 16'(reg_n);
    @(negedge clk);
    insert_valid = 0;
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    insert_valid = 0; insert_tag = '0; insert_region = '0; cdb_valid = 0; cdb_tag = '0; kill_mask = '0;
    lookup_region[0] = 16'h0010; lookup_region[1] = 16'h0020;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(lookup_hit == 2'b00, "empty after reset");
    ins(1, 'h10);
    ins(5, 'h20);
    check(lookup_hit == 2'b11 && lookup_tag[0] == 1 && lookup_tag[1] == 5, "both writers found");
    ins(7, 'h10);
    check(lookup_hit[0] && lookup_tag[0] == 7, "youngest writer of 0x10 is tag 7");
    lookup_region[0] = 16'h0011; #1;
    check(!lookup_hit[0], "exact region match only");
    lookup_region[0] = 16'h0010;
    cdb_valid = 1; cdb_tag = 4'd7; #1;
    check(!lookup_hit[0], "producer on the CDB this cycle is not reported");
    @(negedge clk); cdb_valid = 0;
    check(!lookup_hit[0], "older writer 1 was superseded, entry cleared by CDB");
    kill_mask = 16'h0020; @(negedge clk); kill_mask = '0;
    check(!lookup_hit[1], "kill mask clears tag 5");
    ins(3, 'h30); lookup_region[1] = 16'h0030; #1;
    check(lookup_hit[1] && lookup_tag[1] == 3, "tag reused for a new region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
