// version_regs: the version registers vr and lfvr and the version assignment
// made when instructions issue.
//
// Every issued memory access gets an ordering version. Ordinary loads and
// stores and load-acquires take vr; a store-release takes vr + 1; a full fence
// takes no version itself but sets vr so that everything after it is ordered
// after everything before it. lfvr, the "last fence version", is incremented
// by every ordering instruction (load-acquire, store-release, full fence) and
// a full fence copies the incremented lfvr into vr. This is the paper's
// Table 2 and reproduces its worked example (Table 3): m1:0, ldar:0, m3:0,
// stlr:1, m5:0, fence -> vr = lfvr = 3, m6:3.
//
// Up to ISSUE_W instructions issue per cycle in program order; slot 0 is the
// oldest. The slots are processed as a chain in one cycle, so a fence in slot
// 0 already raises the version of a load in slot 1. A full fence reports on
// iss_version the new vr it opens; only the ordering queue uses that value.
//
// Overflow: the registers only grow. When an ordering instruction in the
// bundle finds lfvr at its largest value, the bundle is not accepted
// (iss_ready low), the unit enters the drain state, waits until `drained`
// says that no versioned instruction is left in the pipeline, then resets vr
// and lfvr to 0 and lets issue resume, as the paper prescribes. `ovf_reset`
// pulses in that cycle.
//
// Branch recovery: a slot with op OP_BRANCH stores the running (vr, lfvr), as
// seen after the older slots of its bundle, in checkpoint `iss_ckpt`. A
// misprediction (flush_valid with flush_ckpt) restores that pair and leaves
// the drain state. Checkpoint ids are managed by the core; NUM_CKPT is this
// design's choice, the paper says only that the registers are checkpointed.
//
// Timing: iss_version is combinational from the registers and the bundle;
// the registers update at the clock edge when the bundle is accepted
// (any iss_valid and iss_ready). iss_ready also requires the external
// `room_ok` (the ORQ has space) and no flush in the same cycle.
module version_regs
  import louvre_pkg::*;
#(
  parameter int unsigned VER_W    = 10,
  parameter int unsigned ISSUE_W  = 2,
  parameter int unsigned NUM_CKPT = 16,
  localparam int unsigned CK_W    = (NUM_CKPT > 1) ? $clog2(NUM_CKPT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // issue bundle, slot 0 oldest
  input  logic [ISSUE_W-1:0]        iss_valid,
  input  op_e  [ISSUE_W-1:0]        iss_op,
  input  logic [ISSUE_W-1:0][CK_W-1:0] iss_ckpt,
  input  logic                      room_ok,
  output logic                      iss_ready,
  output logic [ISSUE_W-1:0][VER_W-1:0] iss_version,
  // overflow handling
  input  logic                      drained,
  output logic                      ovf_draining,
  output logic                      ovf_reset,
  // misprediction recovery
  input  logic                      flush_valid,
  input  logic [CK_W-1:0]           flush_ckpt,
  // register contents
  output logic [VER_W-1:0]          vr,
  output logic [VER_W-1:0]          lfvr
);

  localparam logic [VER_W-1:0] VMAX = '1;

  typedef struct packed {
    logic [VER_W-1:0] vr;
    logic [VER_W-1:0] lfvr;
  } vregs_t;

  vregs_t cur_q, nxt_bundle;
  vregs_t ckpt_mem [NUM_CKPT];
  vregs_t [ISSUE_W-1:0] slot_state;   // state seen by each slot before it acts
  logic   drain_q;
  logic   need_ovf;
  logic   any_valid;
  logic   accept;

  // Version assignment chain over the bundle (Table 2).
  always_comb begin
    vregs_t s;
    s           = cur_q;
    need_ovf    = 1'b0;
    iss_version = '0;
    slot_state  = '0;
    for (int i = 0; i < int'(ISSUE_W); i++) begin
      slot_state[i] = s;
      if (iss_valid[i]) begin
        unique case (iss_op[i])
          OP_LOAD, OP_STORE: iss_version[i] = s.vr;
          OP_LDAR: begin
            iss_version[i] = s.vr;
            if (s.lfvr == VMAX) need_ovf = 1'b1;
            s.lfvr = s.lfvr + 1'b1;
          end
          OP_STLR: begin
            // vr <= lfvr < VMAX here, so vr + 1 does not wrap
            iss_version[i] = s.vr + 1'b1;
            if (s.lfvr == VMAX) need_ovf = 1'b1;
            s.lfvr = s.lfvr + 1'b1;
          end
          OP_FENCE: begin
            if (s.lfvr == VMAX) need_ovf = 1'b1;
            s.lfvr = s.lfvr + 1'b1;
            s.vr   = s.lfvr;
            // a fence's own "version" is the one it opens; the ORQ keeps it
            iss_version[i] = s.vr;
          end
          default: ;
        endcase
      end
    end
    nxt_bundle = s;
  end

  assign any_valid    = |iss_valid;
  assign iss_ready    = !drain_q && !need_ovf && room_ok && !flush_valid;
  assign accept       = any_valid && iss_ready;
  assign ovf_draining = drain_q;
  assign ovf_reset    = drain_q && drained && !flush_valid;
  assign vr           = cur_q.vr;
  assign lfvr         = cur_q.lfvr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_q   <= '0;
      drain_q <= 1'b0;
    end else if (flush_valid) begin
      cur_q   <= ckpt_mem[flush_ckpt];
      drain_q <= 1'b0;
    end else if (drain_q) begin
      if (drained) begin
        cur_q   <= '0;
        drain_q <= 1'b0;
      end
    end else if (accept) begin
      cur_q <= nxt_bundle;
    end else if (any_valid && need_ovf) begin
      drain_q <= 1'b1;
    end
  end

  // Checkpoint storage: written by accepted branches, read on a flush.
  always_ff @(posedge clk) begin
    if (accept) begin
      for (int i = 0; i < int'(ISSUE_W); i++) begin
        if (iss_valid[i] && iss_op[i] == OP_BRANCH) ckpt_mem[iss_ckpt[i]] <= slot_state[i];
      end
    end
  end

endmodule
