// retire_gate: Louvre's retirement conditions for the instruction at the
// head of the reorder buffer.
//
// With versions carrying the ordering, fences no longer wait for the store
// buffer to drain. The rules (Sec. "Retirement"):
//   * store, store-release: retire as soon as they reach the head (and are
//     executed); they move to the store buffer, so the buffer must have room;
//   * full fence: retires as soon as it reaches the head;
//   * load, load-acquire: retire when satisfied and their version is not
//     greater than v_min,sb, i.e. no store of a lower version is still in the
//     store buffer (with an empty buffer there is no such store);
//   * anything else retires when done.
// The ROB retires at most one instruction per cycle here (this design's
// choice; the paper gives no retire width).
//
// Outputs are combinational: retire, plus the side effects the top wires
// onward: sb_push (insert into the store buffer) and orq_pop (a load-acquire
// or fence leaves the ordering queue). stall_version flags a satisfied load
// held back by v_min,sb; stall_sb_full a store held back by a full buffer.
module retire_gate
  import louvre_pkg::*;
#(
  parameter int unsigned VER_W = 10
) (
  input  logic             head_valid,
  input  op_e              head_op,
  input  logic [VER_W-1:0] head_version,
  input  logic             head_done,
  input  logic             sb_ready,
  input  logic             vsb_valid,
  input  logic [VER_W-1:0] vsb,
  output logic             retire,
  output logic             sb_push,
  output logic             orq_pop,
  output logic             stall_version,
  output logic             stall_sb_full
);

  logic ready_head;
  logic lower_store_pending;

  assign ready_head          = head_valid && head_done;
  assign lower_store_pending = vsb_valid && (head_version > vsb);

  always_comb begin
    retire        = 1'b0;
    stall_version = 1'b0;
    stall_sb_full = 1'b0;
    if (ready_head) begin
      unique case (head_op)
        OP_LOAD, OP_LDAR: begin
          retire        = !lower_store_pending;
          stall_version = lower_store_pending;
        end
        OP_STORE, OP_STLR: begin
          retire        = sb_ready;
          stall_sb_full = !sb_ready;
        end
        default: retire = 1'b1;
      endcase
    end
    sb_push = retire && is_store_op(head_op);
    orq_pop = retire && is_orq_op(head_op);
  end

endmodule
