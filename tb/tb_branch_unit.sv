// tb_branch_unit: self-checking test of the branch unit with speculation on.
// A memory-read (MR) branch reads its condition at once; a bus-read (BR)
// branch first waits for its producer's tag on the CDB. A small memory model
// answers reads after a fixed delay. Checks spec_mode while unresolved, the
// spec_id step, the comparison (EQ, NEQ, GE, LE against a reference), and
// squash on a taken branch versus commit on a not-taken one, and the cycle
// counts of both paths.
module tb_branch_unit;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, start_dep, busy, spec_mode, cdb_valid, rd_req, rd_valid;
  logic resolve_valid, resolve_taken, squash, commit;
  region_t start_region, rd_region;
  logic [3:0] start_dep_tag, cdb_tag;
  data_t start_operand, rd_data;
  cmp_e start_cmp;
  logic [6:0] start_target, target_pc;
  logic [1:0] spec_id;
  int checks = 0, failures = 0;
  data_t memv [region_t];

  branch_unit #(.SPECULATE(1'b1), .PC_W(7), .NUM_TAGS(16), .SPEC_ID_W(2)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Memory model: answers a read three cycles after the request.
  int rd_wait = 0;
  always @(posedge clk) begin
    rd_valid <= 1'b0;
    if (rd_req && !rd_valid) begin
      if (rd_wait == 2) begin
        rd_valid <= 1'b1; rd_data <= memv.exists(rd_region) ? memv[rd_region] : 16'h0; rd_wait <= 0;
      end else rd_wait <= rd_wait + 1;
    end
  end

  function automatic bit ref_cmp(input int c, input int a, input int b);
    case (c) 0: return a == b; 1: return a != b; 2: return a >= b; default: return a <= b; endcase
  endfunction

  // Runs one branch; returns the cycles from start to resolve.
  task automatic run(input int region, input int operand, input int c, input bit dep, output int cyc);
    logic [1:0] sid0 = spec_id;
    start = 1; start_region = 16'(region); start_operand = 16'(operand); start_cmp = cmp_e'(c);
    start_dep = dep; start_dep_tag = 4'd6; start_target = 7'd40;
    @(negedge clk); start = 0;
    check(spec_mode && busy, "speculating while unresolved");
    check(spec_id == sid0 + 2'd1, "new speculation ID");
    cyc = 1;
    if (dep) begin
      repeat (5) begin @(negedge clk); cyc++; end
      check(!rd_req && !resolve_valid, "BR branch waits for its producer");
      cdb_valid = 1; cdb_tag = 4'd5; @(negedge clk); cyc++;
      cdb_valid = 1; cdb_tag = 4'd6; @(negedge clk); cyc++;
      cdb_valid = 0;
    end
    while (!resolve_valid && cyc < 50) begin @(negedge clk); cyc++; end
    begin
      bit exp = ref_cmp(c, memv[16'(region)], operand);
      check(resolve_valid && resolve_taken == exp, $sformatf("condition %0d on region %0h", c, region));
      check(squash == exp && commit == !exp, "squash if taken, commit if not");
      check(target_pc == 7'd40, "target kept");
    end
    @(negedge clk);
    check(!busy && !spec_mode, "idle after resolution");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0; start_dep = 0; cdb_valid = 0; cdb_tag = 0; start_region = 0; start_dep_tag = 0;
    start_operand = 0; start_cmp = CMP_EQ; start_target = 0; rd_valid = 0; rd_data = 0;
    memv[16'h93] = 16'd3; memv[16'h40] = 16'd100;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!busy && !spec_mode && !rd_req, "idle after reset");
    run('h93, 3, 0, 0, cyc);   // EQ: taken
    check(cyc == 5, $sformatf("MR branch resolves in 5 cycles (%0d)", cyc));
    run('h93, 3, 1, 0, cyc);   // NEQ: not taken
    run('h40, 99, 2, 0, cyc);  // GE: taken
    run('h40, 99, 3, 1, cyc);  // LE after a producer: not taken
    check(cyc == 12, $sformatf("BR branch resolves 5 cycles after its producer (%0d)", cyc));
    for (int i = 0; i < 20; i++) begin
      memv[16'h50] = 16'($urandom % 8);
      run('h50, $urandom % 8, $urandom % 4, 0, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
