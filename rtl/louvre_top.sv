// louvre_top: the Louvre ordering unit, the versioning hardware that attaches
// to an out-of-order core with a load/store queue and an unordered store
// buffer (the paper's Fig. 7).
//
// What it contains:
//   * version_regs - vr and lfvr, version assignment at issue, overflow drain,
//     branch checkpoints;
//   * orq - in-flight load-acquires and full fences;
//   * lsq_version_tags - version per LSQ entry, v_min,lsq, and the
//     version-filtered squash on invalidation;
//   * versioned_store_buffer - the unordered post-commit store buffer with
//     version tags, v_min,sb, forwarding and version-ordered completion;
//   * retire_gate - the retirement conditions at the ROB head.
// The core itself (fetch/decode/rename, issue queue, functional units, ROB,
// LSQ data and address logic) and the L1 data cache are outside; this module
// exposes the signals where they connect.
//
// Operation, per cycle:
//   issue  - the core offers up to ISSUE_W instructions in program order with
//            their op class, LSQ entry and (for branches) a checkpoint id. If
//            iss_ready, all are accepted; iss_version returns their versions,
//            which the core keeps in its ROB. iss_ready is low while the ORQ
//            lacks room for the bundle's load-acquires and fences, while a
//            version overflow drains the pipeline, or during a flush.
//   execute- sat_* reports loads that have read their value (and the line).
//            fwd_addr/fwd_hit/fwd_data is the store-buffer forwarding lookup.
//   snoop  - inv_valid/inv_line: an invalidation from the coherence side;
//            squash_mask lists the LSQ entries that must re-execute
//            (base_squash_mask: what a conventional core would squash).
//   retire - the ROB head (op, version, done, store address/data) is judged
//            by retire_gate; `retire` tells the core to remove it. Stores go
//            into the store buffer, load-acquires and fences leave the ORQ.
//            The core frees the LSQ entries of retired accesses via
//            lsq_free_mask.
//   drain  - the store buffer requests line permission, receives grants, and
//            writes stores to the cache in version order.
//   flush  - flush_valid/flush_ckpt on a branch misprediction restores vr,
//            lfvr and the ORQ tail; the core frees the flushed LSQ entries.
// WRITE_COMBINE (default off) enables same-version write combining in the
// store buffer.
// The version-register overflow waits for rob_empty together with an empty
// LSQ, store buffer and ORQ before resetting the registers.
module louvre_top
  import louvre_pkg::*;
#(
  parameter int unsigned VER_W     = 10,
  parameter int unsigned ISSUE_W   = 2,
  parameter int unsigned LD_PORTS  = 2,
  parameter int unsigned LSQ_N     = 64,
  parameter int unsigned SB_N      = 16,
  parameter int unsigned ORQ_DEPTH = 16,
  parameter int unsigned NUM_CKPT  = 16,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 64,
  parameter int unsigned LINE_OFF  = 6,
  parameter bit          WRITE_COMBINE = 1'b0,
  localparam int unsigned LQ_W     = $clog2(LSQ_N),
  localparam int unsigned SB_W     = $clog2(SB_N),
  localparam int unsigned CK_W     = (NUM_CKPT > 1) ? $clog2(NUM_CKPT) : 1,
  localparam int unsigned LINE_W   = ADDR_W - LINE_OFF,
  localparam int unsigned OCNT_W   = $clog2(ORQ_DEPTH) + 1,
  localparam int unsigned SCNT_W   = $clog2(SB_N + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // issue
  input  logic [ISSUE_W-1:0]             iss_valid,
  input  op_e  [ISSUE_W-1:0]             iss_op,
  input  logic [ISSUE_W-1:0][LQ_W-1:0]   iss_lsq_idx,
  input  logic [ISSUE_W-1:0][CK_W-1:0]   iss_ckpt,
  output logic                           iss_ready,
  output logic [ISSUE_W-1:0][VER_W-1:0]  iss_version,
  // load execution
  input  logic [LD_PORTS-1:0]            sat_valid,
  input  logic [LD_PORTS-1:0][LQ_W-1:0]  sat_idx,
  input  logic [LD_PORTS-1:0][ADDR_W-1:0] sat_addr,
  input  logic [LSQ_N-1:0]               lsq_free_mask,
  // store-to-load forwarding
  input  logic [ADDR_W-1:0]              fwd_addr,
  output logic                           fwd_hit,
  output logic [DATA_W-1:0]              fwd_data,
  // invalidation snoop
  input  logic                           inv_valid,
  input  logic [LINE_W-1:0]              inv_line,
  output logic [LSQ_N-1:0]               squash_mask,
  output logic [LSQ_N-1:0]               base_squash_mask,
  // ROB head and retirement
  input  logic                           head_valid,
  input  op_e                            head_op,
  input  logic [VER_W-1:0]               head_version,
  input  logic                           head_done,
  input  logic [ADDR_W-1:0]              head_st_addr,
  input  logic [DATA_W-1:0]              head_st_data,
  input  logic                           rob_empty,
  output logic                           retire,
  output logic                           stall_version,
  output logic                           stall_sb_full,
  // L1D: write permission, grant, completion write
  output logic                           creq_valid,
  output logic [SB_W-1:0]                creq_idx,
  output logic [LINE_W-1:0]              creq_line,
  input  logic                           creq_ready,
  input  logic                           cgnt_valid,
  input  logic [SB_W-1:0]                cgnt_idx,
  output logic                           cwr_valid,
  output logic [SB_W-1:0]                cwr_idx,
  output logic [ADDR_W-1:0]              cwr_addr,
  output logic [DATA_W-1:0]              cwr_data,
  output logic [VER_W-1:0]               cwr_version,
  output logic                           cwr_by_age,
  input  logic                           cwr_ready,
  // misprediction recovery
  input  logic                           flush_valid,
  input  logic [CK_W-1:0]                flush_ckpt,
  // status
  output logic [VER_W-1:0]               vr,
  output logic [VER_W-1:0]               lfvr,
  output logic                           vsb_valid,
  output logic [VER_W-1:0]               vsb,
  output logic                           vlsq_valid,
  output logic [VER_W-1:0]               vlsq,
  output logic                           ovf_draining,
  output logic                           ovf_reset,
  output logic                           orq_stall,
  output logic [OCNT_W-1:0]              orq_count,
  output logic                           fence_active,
  output logic [SCNT_W-1:0]              sb_count
);

  logic              room_ok, iss_fire, drained;
  logic [OCNT_W-1:0] orq_free, orq_need;
  logic              orq_empty, lsq_empty, sb_empty, sb_ready;
  logic              ldar_active;
  logic [VER_W-1:0]  ldar_min_ver;
  logic              sb_push, orq_pop;
  logic [ISSUE_W-1:0] alloc_valid, alloc_is_load;
  logic [LD_PORTS-1:0][LINE_W-1:0] sat_line;

  always_comb begin
    orq_need = '0;
    for (int i = 0; i < int'(ISSUE_W); i++) begin
      if (iss_valid[i] && is_orq_op(iss_op[i])) orq_need = orq_need + 1'b1;
    end
  end
  assign room_ok   = (orq_free >= orq_need);
  assign orq_stall = (|iss_valid) && !room_ok;
  assign iss_fire  = (|iss_valid) && iss_ready;
  assign drained   = rob_empty && lsq_empty && sb_empty && orq_empty;

  version_regs #(.VER_W(VER_W), .ISSUE_W(ISSUE_W), .NUM_CKPT(NUM_CKPT)) u_vregs (
    .clk, .rst_n,
    .iss_valid, .iss_op, .iss_ckpt,
    .room_ok,
    .iss_ready, .iss_version,
    .drained, .ovf_draining, .ovf_reset,
    .flush_valid, .flush_ckpt,
    .vr, .lfvr
  );

  orq #(.VER_W(VER_W), .DEPTH(ORQ_DEPTH), .ISSUE_W(ISSUE_W), .NUM_CKPT(NUM_CKPT)) u_orq (
    .clk, .rst_n,
    .iss_fire, .iss_valid, .iss_op, .iss_version, .iss_ckpt,
    .pop(orq_pop), .pop_op(head_op),
    .flush_valid, .flush_ckpt,
    .count(orq_count), .free_cnt(orq_free), .empty(orq_empty),
    .ldar_active, .ldar_min_ver, .fence_active
  );

  always_comb begin
    for (int i = 0; i < int'(ISSUE_W); i++) begin
      alloc_valid[i]   = iss_fire && iss_valid[i] && is_mem_op(iss_op[i]);
      alloc_is_load[i] = is_load_op(iss_op[i]);
    end
    for (int p = 0; p < int'(LD_PORTS); p++) sat_line[p] = sat_addr[p][ADDR_W-1:LINE_OFF];
  end

  lsq_version_tags #(.LSQ_N(LSQ_N), .VER_W(VER_W), .ISSUE_W(ISSUE_W),
                     .LD_PORTS(LD_PORTS), .LINE_W(LINE_W)) u_lsq (
    .clk, .rst_n,
    .alloc_valid, .alloc_idx(iss_lsq_idx), .alloc_is_load, .alloc_version(iss_version),
    .sat_valid, .sat_idx, .sat_line,
    .free_mask(lsq_free_mask),
    .inv_valid, .inv_line,
    .vsb_valid, .vsb, .ldar_active, .ldar_min_ver,
    .squash_mask, .base_mask(base_squash_mask),
    .vlsq_valid, .vlsq, .empty(lsq_empty)
  );

  versioned_store_buffer #(.SB_N(SB_N), .VER_W(VER_W), .ADDR_W(ADDR_W),
                           .DATA_W(DATA_W), .LINE_OFF(LINE_OFF),
                           .WRITE_COMBINE(WRITE_COMBINE)) u_sb (
    .clk, .rst_n,
    .ins_valid(sb_push), .ins_addr(head_st_addr), .ins_data(head_st_data),
    .ins_version(head_version), .ins_ready(sb_ready),
    .creq_valid, .creq_idx, .creq_line, .creq_ready,
    .cgnt_valid, .cgnt_idx,
    .cwr_valid, .cwr_idx, .cwr_addr, .cwr_data, .cwr_version, .cwr_by_age, .cwr_ready,
    .fwd_addr, .fwd_hit, .fwd_data,
    .vsb_valid, .vsb, .count(sb_count), .empty(sb_empty)
  );

  retire_gate #(.VER_W(VER_W)) u_ret (
    .head_valid, .head_op, .head_version, .head_done,
    .sb_ready, .vsb_valid, .vsb,
    .retire, .sb_push, .orq_pop, .stall_version, .stall_sb_full
  );

endmodule
