// tb_workloads: runs the evaluation workloads (nine custom benchmarks and
// audio compression with 2 to 8 bands, both branch outcomes) on four
// scheduler configurations side by side: 1, 2 and 3 accelerators per
// function with speculation, and 2 per function without speculation.
//
// Each configuration checks its own results and cycle bounds (hts_bench).
// Across configurations it checks the trends the scheduler is meant to show:
// more accelerators per function never slow a workload down and speed up
// the larger ones, by more the more tasks there are, speculation speeds up a correctly predicted branch, and a
// mispredicted branch costs speculation almost nothing.
// It also checks that the two audio branch outcomes take different times.
module tb_workloads;
  localparam int NR = 18;
  logic fin [4];
  int   chk [4], fl [4];
  int   c1 [NR], c2 [NR], c3 [NR], c2n [NR];

  hts_bench #(.ACC_PER_CLASS(1))                    u_fu1 (.finished(fin[0]), .checks(chk[0]), .failures(fl[0]), .cyc(c1));
  hts_bench #(.ACC_PER_CLASS(2))                    u_fu2 (.finished(fin[1]), .checks(chk[1]), .failures(fl[1]), .cyc(c2));
  hts_bench #(.ACC_PER_CLASS(3))                    u_fu3 (.finished(fin[2]), .checks(chk[2]), .failures(fl[2]), .cyc(c3));
  hts_bench #(.ACC_PER_CLASS(2), .SPECULATE(1'b0))  u_nsp (.finished(fin[3]), .checks(chk[3]), .failures(fl[3]), .cyc(c2n));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #(10 * 3_000_000);
    $display("watchdog: workloads did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk[0] + chk[1] + chk[2] + chk[3],
             failures + 1 + fl[0] + fl[1] + fl[2] + fl[3]);
    $finish;
  end

  initial begin
    #100;   // let each harness clear its outputs first
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int i = 0; i < NR; i++) begin
      check(c3[i] <= c2[i] && c2[i] <= c1[i], $sformatf("run %0d: more FUs not slower (%0d %0d %0d)", i, c1[i], c2[i], c3[i]));
    end
    // audio 8 bands: both domains gain from extra accelerators
    check(c2[12] < c1[12] && c2[16] < c1[16], "audio 8 bands: 2 FUs faster than 1");
    check(c3[16] < c2[16], "audio 8 bands, frequency domain: 3 FUs faster than 2");
    // the cycles saved by extra accelerators grow with the number of tasks
    for (int b = 0; b < 3; b++) begin
      check(c1[10+b] - c3[10+b] > c1[9+b] - c3[9+b],
            $sformatf("time domain: FU gain grows with bands (%0d bands)", 4 + 2*b));
      check(c1[14+b] - c3[14+b] > c1[13+b] - c3[13+b],
            $sformatf("frequency domain: FU gain grows with bands (%0d bands)", 4 + 2*b));
    end
    // the branch outcome decides the audio run time
    for (int b = 0; b < 4; b++)
      check(c2[13+b] > c2[9+b], $sformatf("audio %0d bands: frequency path slower than time path", 2 + 2*b));
    // speculation
    check(c2[17] + 800 < c2n[17], $sformatf("bus-read branch not taken: speculation gains (%0d vs %0d)", c2[17], c2n[17]));
    check(c2[7] <= c2n[7] + 100, $sformatf("memory-read branch not taken: (%0d vs %0d)", c2[7], c2n[7]));
    check(c2[6] <= c2n[6] + 10, $sformatf("branch taken: mis-speculation costs little (%0d vs %0d)", c2[6], c2n[6]));
    check(c2[8] <= c2n[8] + 10, $sformatf("branch taken with dependency: (%0d vs %0d)", c2[8], c2n[8]));
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk[0] + chk[1] + chk[2] + chk[3],
             failures + fl[0] + fl[1] + fl[2] + fl[3]);
    $finish;
  end
endmodule
