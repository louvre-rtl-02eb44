// tb_retire_gate: checks the ROB-head retirement rules.
//
// Directed cases from the design's description: a full fence retires at the
// head although stores are buffered; a store-release retires without waiting
// for the buffer to drain; in "store A (v1); fence; load B (v2)" the load is
// held while A (v1) is buffered and retires once it is gone. Then random
// heads (every op class, random versions and buffer state) against the rules
// written out independently.
module tb_retire_gate;
  import louvre_pkg::*;
  localparam int VW = 10;
  int checks = 0, failures = 0;

  logic head_valid, head_done, sb_ready, vsb_valid;
  op_e head_op;
  logic [VW-1:0] head_version, vsb;
  logic retire, sb_push, orq_pop, stall_version, stall_sb_full;

  retire_gate #(.VER_W(VW)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic put(op_e op, int ver, bit done, bit room, bit vv, int vs);
    head_valid = 1; head_op = op; head_version = VW'(ver); head_done = done;
    sb_ready = room; vsb_valid = vv; vsb = VW'(vs);
    #1;
  endtask

  initial begin : wd
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fence at head, store buffer holding a version-0 store: retires at once
    put(OP_FENCE, 3, 1, 1, 1, 0);  chk(retire && orq_pop && !sb_push, "fence retires without drain");
    // store-release at head: moves to the buffer at once
    put(OP_STLR, 1, 1, 1, 1, 0);   chk(retire && sb_push && !orq_pop, "stlr retires without drain");
    // store A v1; fence; load B v2: held while A buffered
    put(OP_LOAD, 2, 1, 1, 1, 1);   chk(!retire && stall_version, "load B held by store A");
    put(OP_LOAD, 2, 1, 1, 0, 0);   chk(retire && !stall_version, "load B retires after A completes");
    put(OP_LDAR, 0, 1, 1, 1, 1);   chk(retire && orq_pop, "ldar below v_min,sb retires");
    put(OP_STORE, 0, 1, 0, 1, 0);  chk(!retire && stall_sb_full, "store held by full buffer");
    put(OP_LOAD, 0, 0, 1, 0, 0);   chk(!retire, "unsatisfied load does not retire");
    for (int t = 0; t < 4000; t++) begin
      op_e op;
      bit done, room, vv, exp;
      int ver, vs;
      op = op_e'($urandom_range(6));
      ver = $urandom_range(7); vs = $urandom_range(7);
      done = $urandom_range(3) != 0; room = $urandom_range(3) != 0; vv = $urandom_range(1);
      put(op, ver, done, room, vv, vs);
      if (!done) exp = 0;
      else if (op == OP_LOAD || op == OP_LDAR) exp = !(vv && ver > vs);
      else if (op == OP_STORE || op == OP_STLR) exp = room;
      else exp = 1;
      chk(retire == exp, $sformatf("random op %s", op.name()));
      chk(sb_push == (exp && (op == OP_STORE || op == OP_STLR)), "sb_push");
      chk(orq_pop == (exp && (op == OP_LDAR || op == OP_FENCE)), "orq_pop");
    end
    head_valid = 0; #1;
    chk(!retire, "empty ROB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
