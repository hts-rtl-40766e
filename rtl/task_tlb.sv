// task_tlb: the Task Lookup Buffer (TLB), which lets tasks run
// speculatively even though they write memory directly.
//
// While the scheduler speculates past an unresolved branch, every task's
// output region is redirected to a fresh slot of the Transactional Memory
// (TM), a part of memory reserved for speculative results. Entry i of the
// buffer owns TM slot i, whose region number is TM_BASE + i*TM_SLOT. An entry
// holds the architectural region it stands for, the output size, the
// speculation ID it was made under and whether it is still speculative.
//
//  - Input lookup: a task's input region is replaced by the TM slot of a
//    matching entry (a speculative entry wins over a committed one), or
//    passes unchanged. Two lookup ports: task input and branch condition.
//  - Output lookup: while speculating, a region already remapped by this
//    speculation reuses its slot, otherwise a free entry is allocated
//    (out_ok is low if none is free). Outside speculation, a region with a
//    committed entry keeps writing its TM slot; others pass unchanged.
//  - squash (mis-speculation): all speculative entries are dropped. Dropping
//    them is all it takes to discard the speculative data in the TM.
//  - commit (correct speculation): speculative entries become committed, and
//    older committed entries for the same regions are dropped.
//  - Copy-back: when the buffer is full, and drain_en says that nothing is
//    speculative and no task is in flight, the buffer copies every committed
//    slot back to its own region through the wb_* port, one at a time, and
//    frees the entries. `draining` tells the dispatch to stall meanwhile.
//
// The depth, slot layout, drain condition and the one-level speculation are
// this design's choices; the remapping, squash and commit rules follow the
// scheduler's description. Lookups are combinational; all updates act at the
// clock edge.
module task_tlb
  import hts_pkg::*;
#(
  parameter int unsigned DEPTH     = 8,
  parameter logic [REGION_W-1:0] TM_BASE = 16'hF800,
  parameter int unsigned TM_SLOT   = 256,
  parameter int unsigned SPEC_ID_W = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  region_t              in_region [2],
  output region_t              in_phys   [2],
  input  logic                 spec_mode,
  input  logic [SPEC_ID_W-1:0] spec_id,
  input  region_t              out_region,
  input  size_t                out_size,
  output region_t              out_phys,
  output logic                 out_ok,
  input  logic                 out_fire,
  input  logic                 commit,
  input  logic                 squash,
  input  logic                 drain_en,
  output logic                 draining,
  output logic                 wb_valid,
  output region_t              wb_src,
  output region_t              wb_dst,
  output size_t                wb_size,
  input  logic                 wb_done,
  output logic [DEPTH-1:0]     entry_valid
);
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef struct packed {
    logic                 valid;
    logic                 spec;
    logic [SPEC_ID_W-1:0] sid;
    region_t              region;
    size_t                size;
  } entry_t;

  entry_t ent [DEPTH];

  function automatic region_t slot_region(logic [IDX_W-1:0] i);
    return TM_BASE + REGION_W'(32'(i) * TM_SLOT);
  endfunction

  // Input lookups.
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      logic hit_s, hit_c;
      region_t rs, rc;
      hit_s = 1'b0; hit_c = 1'b0; rs = '0; rc = '0;
      for (int i = 0; i < DEPTH; i++) begin
        if (ent[i].valid && ent[i].region == in_region[l]) begin
          if (ent[i].spec) begin hit_s = 1'b1; rs = slot_region(IDX_W'(i)); end
          else             begin hit_c = 1'b1; rc = slot_region(IDX_W'(i)); end
        end
      end
      in_phys[l] = hit_s ? rs : (hit_c ? rc : in_region[l]);
    end
  end

  // Output lookup and allocation.
  logic             out_hit_s, out_hit_c, free_any;
  logic [IDX_W-1:0] idx_s, idx_c, idx_free;
  always_comb begin
    out_hit_s = 1'b0; out_hit_c = 1'b0; free_any = 1'b0;
    idx_s = '0; idx_c = '0; idx_free = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!ent[i].valid) begin free_any = 1'b1; idx_free = IDX_W'(i); end
      if (ent[i].valid && ent[i].region == out_region) begin
        if (ent[i].spec) begin out_hit_s = 1'b1; idx_s = IDX_W'(i); end
        else             begin out_hit_c = 1'b1; idx_c = IDX_W'(i); end
      end
    end
    if (spec_mode) begin
      out_ok   = out_hit_s || free_any;
      out_phys = out_hit_s ? slot_region(idx_s) : slot_region(idx_free);
    end else begin
      out_ok   = 1'b1;
      out_phys = out_hit_c ? slot_region(idx_c) : out_region;
    end
    out_ok = out_ok && !draining;
  end

  // Copy-back selection: lowest committed entry.
  logic             any_commit;
  logic [IDX_W-1:0] idx_wb;
  always_comb begin
    any_commit = 1'b0; idx_wb = '0;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (ent[i].valid && !ent[i].spec) begin any_commit = 1'b1; idx_wb = IDX_W'(i); end
  end
  assign wb_valid = draining && any_commit;
  assign wb_src   = slot_region(idx_wb);
  assign wb_dst   = ent[idx_wb].region;
  assign wb_size  = ent[idx_wb].size;

  always_comb for (int i = 0; i < DEPTH; i++) entry_valid[i] = ent[i].valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining <= 1'b0;
      for (int i = 0; i < DEPTH; i++) ent[i] <= '0;
    end else begin
      if (squash) begin
        for (int i = 0; i < DEPTH; i++)
          if (ent[i].spec && ent[i].sid == spec_id) ent[i].valid <= 1'b0;
      end else if (commit) begin
        for (int i = 0; i < DEPTH; i++) begin
          if (ent[i].valid && ent[i].spec) ent[i].spec <= 1'b0;
          if (ent[i].valid && !ent[i].spec)
            for (int j = 0; j < DEPTH; j++)
              if (ent[j].valid && ent[j].spec && ent[j].region == ent[i].region)
                ent[i].valid <= 1'b0;
        end
      end else if (out_fire && spec_mode) begin
        if (out_hit_s) begin
          if (out_size > ent[idx_s].size) ent[idx_s].size <= out_size;
        end else begin
          ent[idx_free] <= '{valid: 1'b1, spec: 1'b1, sid: spec_id,
                             region: out_region, size: out_size};
        end
      end
      // Copy-back of committed slots when the buffer is full.
      if (!draining) begin
        if (!free_any && drain_en && any_commit) draining <= 1'b1;
      end else if (wb_done) begin
        ent[idx_wb].valid <= 1'b0;
      end else if (!any_commit) begin
        draining <= 1'b0;
      end
    end
  end

  a_alloc_ok: assert property (@(posedge clk) disable iff (!rst_n) out_fire |-> out_ok);
  a_wb_done:  assert property (@(posedge clk) disable iff (!rst_n) wb_done |-> wb_valid);
endmodule
