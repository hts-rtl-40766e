// gpr_file: the scheduler's General Purpose Register (GPR) bank.
//
// NUM_GPR registers R0..R(NUM_GPR-1) of DATA_W bits, used by the add, mul,
// mov, loop and register-read branch instructions and for register-indirect
// task regions. Three combinational read ports and one write port; a write
// takes effect at the clock edge and all registers reset to zero.
//
// The number of registers is a design-time parameter in the scheduler's
// description; 16 (so that a register number fits a hex digit, as in the
// example programs), the width and the port count are this design's choices.
module gpr_file
  import hts_pkg::*;
#(
  parameter int unsigned NUM_GPR = 16,
  localparam int unsigned RA_W = $clog2(NUM_GPR)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [RA_W-1:0] raddr [3],
  output data_t           rdata [3],
  input  logic            we,
  input  logic [RA_W-1:0] waddr,
  input  data_t           wdata
);
  data_t regs [NUM_GPR];

  always_comb for (int p = 0; p < 3; p++) rdata[p] = regs[raddr[p]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_GPR; r++) regs[r] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end
endmodule
