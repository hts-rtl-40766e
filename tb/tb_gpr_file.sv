// tb_gpr_file: self-checking test of the GPR bank against a model array:
// reset to zero, then 300 random writes with random reads on all three
// ports, every read compared with the model.
module tb_gpr_file;
  import hts_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] raddr [3];
  data_t rdata [3];
  logic we;
  logic [3:0] waddr;
  data_t wdata;
  data_t model [16];
  int checks = 0, failures = 0;

  gpr_file #(.NUM_GPR(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int p = 0; p < 3; p++) raddr[p] = 0;
    for (int r = 0; r < 16; r++) model[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      raddr[0] = 4'(r); #1; check(rdata[0] == 0, "reset value");
    end
    for (int i = 0; i < 300; i++) begin
      we = ($urandom % 2) == 1; waddr = 4'($urandom); wdata = 16'($urandom);
      @(negedge clk);
      if (we) model[waddr] = wdata;
      we = 0;
      for (int p = 0; p < 3; p++) raddr[p] = 4'($urandom);
      #1;
      for (int p = 0; p < 3; p++) check(rdata[p] == model[raddr[p]], $sformatf("read port %0d", p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
