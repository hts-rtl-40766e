// mem_tracker: the Memory Tracker, which finds read-after-write (RAW)
// dependencies between tasks through the memory regions they use.
//
// When the dispatch sends a task out, it records the task's (physical) output
// region against the task's scheduler tag. When a later task is dispatched,
// its input region is looked up; a hit returns the tag of the in-flight task
// that will write that region, and the new task waits in its reservation
// station until that tag is announced on the Common Data Bus (CDB).
//
// The table has one entry per scheduler tag, so it can never overflow. A
// region is treated like a register name: a lookup matches the region number
// exactly, and recording a new writer of a region drops the older writer's
// entry, so a reader always waits for the youngest writer. An entry is
// cleared when its tag completes on the CDB or is squashed (kill_mask).
// A lookup whose producer is being announced on the CDB in the same cycle
// reports no hit, so the CDB never has to be seen twice.
//
// Timing: lookups are combinational; insert and clear act at the clock edge.
module mem_tracker
  import hts_pkg::*;
#(
  parameter int unsigned NUM_TAGS = 16,
  parameter int unsigned NUM_LOOKUP = 2,
  localparam int unsigned TAG_W = $clog2(NUM_TAGS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                insert_valid,
  input  logic [TAG_W-1:0]    insert_tag,
  input  region_t             insert_region,
  input  region_t             lookup_region [NUM_LOOKUP],
  output logic [NUM_LOOKUP-1:0] lookup_hit,
  output logic [TAG_W-1:0]    lookup_tag [NUM_LOOKUP],
  input  logic                cdb_valid,
  input  logic [TAG_W-1:0]    cdb_tag,
  input  logic [NUM_TAGS-1:0] kill_mask
);
  logic [NUM_TAGS-1:0] valid;
  region_t             region [NUM_TAGS];

  always_comb begin
    for (int l = 0; l < NUM_LOOKUP; l++) begin
      lookup_hit[l] = 1'b0;
      lookup_tag[l] = '0;
      for (int t = 0; t < NUM_TAGS; t++) begin
        if (valid[t] && region[t] == lookup_region[l] &&
            !(cdb_valid && cdb_tag == TAG_W'(t))) begin
          lookup_hit[l] = 1'b1;
          lookup_tag[l] = TAG_W'(t);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int t = 0; t < NUM_TAGS; t++) region[t] <= '0;
    end else begin
      for (int t = 0; t < NUM_TAGS; t++) begin
        if (insert_valid && insert_tag == TAG_W'(t)) begin
          valid[t]  <= 1'b1;
          region[t] <= insert_region;
        end else if ((insert_valid && valid[t] && region[t] == insert_region) ||
                     (cdb_valid && cdb_tag == TAG_W'(t)) || kill_mask[t]) begin
          valid[t] <= 1'b0;
        end
      end
    end
  end

  // At most one in-flight writer is recorded per region.
  for (genvar l = 0; l < NUM_LOOKUP; l++) begin : g_chk
    logic [NUM_TAGS-1:0] m;
    always_comb for (int t = 0; t < NUM_TAGS; t++) m[t] = valid[t] && region[t] == lookup_region[l];
    a_unique: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m));
  end
endmodule
