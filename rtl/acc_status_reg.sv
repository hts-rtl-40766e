// acc_status_reg: the Accelerator Status Register (ASR), the scheduler's
// directory of which accelerators are busy, and its power-management outputs.
//
// Accelerator a belongs to class a / ACC_PER_CLASS. When a reservation
// station issues a task to accelerator a (issue_valid[a]), the ASR marks it
// busy and records the scheduler tag of that task. When the Common Data Bus
// announces a completion from accelerator a, the busy bit clears. Reservation
// stations read `busy` before issuing. If a kill mask arrives (a squashed
// speculation), every busy accelerator whose current tag is in the mask gets
// a one-cycle abort.
//
// Power management is only named by the scheduler's description; this design
// keeps an accelerator powered (pwr_en) while it is busy or while its class
// has tasks waiting in the reservation station, and gates it otherwise.
//
// Timing: busy and cur_tag are registered; the issue and the clearing CDB
// take effect at the next edge. abort and pwr_en are combinational.
module acc_status_reg #(
  parameter int unsigned NUM_CLASSES   = 10,
  parameter int unsigned ACC_PER_CLASS = 2,
  parameter int unsigned NUM_TAGS      = 16,
  localparam int unsigned NUM_ACC = NUM_CLASSES * ACC_PER_CLASS,
  localparam int unsigned TAG_W   = $clog2(NUM_TAGS),
  localparam int unsigned ACC_W   = $clog2(NUM_ACC)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NUM_ACC-1:0]     issue_valid,
  input  logic [TAG_W-1:0]       issue_tag [NUM_ACC],
  input  logic                   cdb_valid,
  input  logic [ACC_W-1:0]       cdb_acc,
  input  logic [NUM_TAGS-1:0]    kill_mask,
  input  logic [NUM_CLASSES-1:0] rs_pending,
  output logic [NUM_ACC-1:0]     busy,
  output logic [TAG_W-1:0]       cur_tag [NUM_ACC],
  output logic [NUM_ACC-1:0]     abort,
  output logic [NUM_ACC-1:0]     pwr_en
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      for (int a = 0; a < NUM_ACC; a++) cur_tag[a] <= '0;
    end else begin
      for (int a = 0; a < NUM_ACC; a++) begin
        if (issue_valid[a]) begin
          busy[a]    <= 1'b1;
          cur_tag[a] <= issue_tag[a];
        end else if (cdb_valid && cdb_acc == ACC_W'(a)) begin
          busy[a] <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    for (int a = 0; a < NUM_ACC; a++) begin
      abort[a]  = busy[a] && kill_mask[cur_tag[a]];
      pwr_en[a] = busy[a] || rs_pending[a / ACC_PER_CLASS];
    end
  end

  // A task is only issued to an idle accelerator.
  a_issue_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 (issue_valid & busy) == '0);
endmodule
