// orq: ordering queue of in-flight load-acquires and full fences.
//
// In Louvre a fence leaves the reorder buffer as soon as it reaches the head,
// so the ROB no longer records which ordering constraints are still pending.
// The paper moves that record into a separate FIFO, the ORQ: a load-acquire
// or full fence is entered at issue together with its version and removed
// when it retires. The squash logic uses it for the one case versions alone
// cannot see: a load-acquire and the loads after it share one version, so a
// speculative load must be squashed on an invalidation while an older
// load-acquire is still in flight. ldar_active/ldar_min_ver give the version
// of the oldest in-flight load-acquire (versions grow along the FIFO, so it
// is also the smallest); a load whose version is >= it is treated as ordered
// by it. fence_active says a full fence is in flight (used for statistics; a
// fence's ordering shows up in v_min,sb and v_min,lsq).
//
// Entries: {kind, version}. For a load-acquire the version is its own; for a
// full fence it is the new vr the fence opens (see version_regs). Allocation:
// the accepted issue bundle (iss_fire) enters its LDAR/FENCE slots in slot
// order. Removal: one entry per cycle when the ROB retires a load-acquire or
// fence (pop). Branch slots record the tail pointer in checkpoint iss_ckpt; a
// flush restores it, dropping entries younger than the mispredicted branch.
// free_cnt lets the issue stage stall when the queue lacks room.
//
// The FIFO organisation, the depth, one pop per cycle and the tail
// checkpointing are this design's choices; the paper names the queue and its
// purpose only. DEPTH must be a power of two.
module orq
  import louvre_pkg::*;
#(
  parameter int unsigned VER_W    = 10,
  parameter int unsigned DEPTH    = 16,
  parameter int unsigned ISSUE_W  = 2,
  parameter int unsigned NUM_CKPT = 16,
  localparam int unsigned CK_W    = (NUM_CKPT > 1) ? $clog2(NUM_CKPT) : 1,
  localparam int unsigned PTR_W   = $clog2(DEPTH),
  localparam int unsigned CNT_W   = PTR_W + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          iss_fire,
  input  logic [ISSUE_W-1:0]            iss_valid,
  input  op_e  [ISSUE_W-1:0]            iss_op,
  input  logic [ISSUE_W-1:0][VER_W-1:0] iss_version,
  input  logic [ISSUE_W-1:0][CK_W-1:0]  iss_ckpt,
  input  logic                          pop,
  input  op_e                           pop_op,
  input  logic                          flush_valid,
  input  logic [CK_W-1:0]               flush_ckpt,
  output logic [CNT_W-1:0]              count,
  output logic [CNT_W-1:0]              free_cnt,
  output logic                          empty,
  output logic                          ldar_active,
  output logic [VER_W-1:0]              ldar_min_ver,
  output logic                          fence_active
);

  typedef struct packed {
    logic             is_ldar;
    logic [VER_W-1:0] ver;
  } orq_ent_t;

  orq_ent_t             mem [DEPTH];
  logic [CNT_W-1:0]     head_q, tail_q;     // pointers with a wrap bit
  logic [CNT_W-1:0]     ckpt_tail [NUM_CKPT];
  logic [ISSUE_W-1:0][CNT_W-1:0] slot_tail; // tail seen by each slot
  logic [CNT_W-1:0]     tail_after;

  assign count    = tail_q - head_q;
  assign free_cnt = CNT_W'(DEPTH) - count;
  assign empty    = (count == '0);

  always_comb begin
    logic [CNT_W-1:0] t;
    t = tail_q;
    slot_tail = '0;
    for (int i = 0; i < int'(ISSUE_W); i++) begin
      slot_tail[i] = t;
      if (iss_valid[i] && is_orq_op(iss_op[i])) t = t + 1'b1;
    end
    tail_after = t;
  end

  // Oldest in-flight load-acquire and any in-flight fence.
  always_comb begin
    ldar_active  = 1'b0;
    ldar_min_ver = '0;
    fence_active = 1'b0;
    for (int k = int'(DEPTH) - 1; k >= 0; k--) begin
      logic [PTR_W-1:0] p;
      p = PTR_W'(head_q + CNT_W'(k));
      if (CNT_W'(k) < count) begin
        if (mem[p].is_ldar) begin
          ldar_active  = 1'b1;
          ldar_min_ver = mem[p].ver;
        end else begin
          fence_active = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q <= '0;
      tail_q <= '0;
    end else begin
      if (pop && !empty) head_q <= head_q + 1'b1;
      if (flush_valid)   tail_q <= ckpt_tail[flush_ckpt];
      else if (iss_fire) tail_q <= tail_after;
    end
  end

  always_ff @(posedge clk) begin
    if (iss_fire && !flush_valid) begin
      for (int i = 0; i < int'(ISSUE_W); i++) begin
        if (iss_valid[i] && is_orq_op(iss_op[i])) begin
          mem[PTR_W'(slot_tail[i])] <= '{is_ldar: (iss_op[i] == OP_LDAR), ver: iss_version[i]};
        end
        if (iss_valid[i] && iss_op[i] == OP_BRANCH) ckpt_tail[iss_ckpt[i]] <= slot_tail[i];
      end
    end
  end

  // The retiring ordering instruction must be the one at the head.
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_pop_kind: assert property (@(posedge clk) disable iff (!rst_n)
    (pop && !empty) |-> (mem[PTR_W'(head_q)].is_ldar == (pop_op == OP_LDAR)));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (iss_fire && !flush_valid) |-> ((tail_after - head_q) <= CNT_W'(DEPTH)));

endmodule
