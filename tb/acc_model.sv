// acc_model: timing-only behavioural model of one function-level
// accelerator, for simulation only. The accelerators themselves (datapaths,
// scratchpads, DMA engine) are not part of this RTL.
//
// It accepts a task in a cycle with task_valid, works for LATENCY cycles,
// then raises done_req and holds it until done_ack. An abort while working
// ends the task at once: done_req rises in the next cycle and `aborted`
// tells the environment that no result was written. The environment sees
// the running task on cur_task and can count starts on `started`.
module acc_model
  import hts_pkg::*;
#(
  parameter int LATENCY = 100
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      task_valid,
  input  acc_task_t task_in,
  input  logic      abort,
  output logic      done_req,
  input  logic      done_ack,
  output logic      working,
  output logic      aborted,
  output acc_task_t cur_task
);
  int remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_req <= 1'b0; working <= 1'b0; aborted <= 1'b0; remaining <= 0; cur_task <= '0;
    end else begin
      if (task_valid) begin
        working   <= 1'b1;
        aborted   <= 1'b0;
        remaining <= LATENCY - 1;
        cur_task  <= task_in;
      end else if (working && abort) begin
        working  <= 1'b0;
        aborted  <= 1'b1;
        done_req <= 1'b1;
      end else if (working) begin
        if (remaining <= 1) begin
          working  <= 1'b0;
          done_req <= 1'b1;
        end else begin
          remaining <= remaining - 1;
        end
      end
      if (done_ack) done_req <= 1'b0;
    end
  end
endmodule
