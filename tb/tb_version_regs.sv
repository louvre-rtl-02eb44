// tb_version_regs: checks version assignment, overflow handling and
// checkpoint recovery of the vr/lfvr registers.
//
// 1. The worked example of the ordering scheme, one instruction per cycle:
//    m1:0, ldar:0 (lfvr 1), m3:0, stlr:1 (lfvr 2), m5:0, fence (vr = lfvr
//    = 3), m6:3; then the same sequence two per cycle must give the same
//    versions.
// 2. The overflow point: 1023 ordering instructions from reset are accepted,
//    the next one starts the drain, and `drained` resets the registers.
// 3. A random run against a reference model: random two-wide bundles of
//    every op class, random room_ok, branches writing random checkpoints,
//    random mispredictions restoring one, and a random `drained` signal. The
//    run is long enough to overflow the 10-bit registers several times; the
//    TB checks that the stall, drain and reset happen and are counted.
// Inputs are driven after the falling edge, outputs compared before the
// rising edge, and the model is advanced at the rising edge.
module tb_version_regs;
  import louvre_pkg::*;
  localparam int VW = 10, IW = 2, NC = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [IW-1:0] iss_valid;
  op_e [IW-1:0] iss_op;
  logic [IW-1:0][3:0] iss_ckpt;
  logic room_ok, iss_ready, drained, ovf_draining, ovf_reset, flush_valid;
  logic [IW-1:0][VW-1:0] iss_version;
  logic [3:0] flush_ckpt;
  logic [VW-1:0] vr, lfvr;

  version_regs dut (.*);   // default parameters

  always #5 clk = ~clk;

  // reference model
  int m_vr = 0, m_lfvr = 0, m_drain = 0;
  int ck_vr [NC], ck_lf [NC];
  int n_ovf = 0, n_flush = 0, n_stall_room = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // Compute the bundle's expected versions and next state.
  task automatic model(output int ver [IW], output int nvr, output int nlf, output bit novf,
                       output int svr [IW], output int slf [IW]);
    int a, b;
    a = m_vr; b = m_lfvr; novf = 0;
    for (int i = 0; i < IW; i++) begin
      svr[i] = a; slf[i] = b; ver[i] = 0;
      if (iss_valid[i]) begin
        case (iss_op[i])
          OP_LOAD, OP_STORE: ver[i] = a;
          OP_LDAR: begin ver[i] = a; if (b == 1023) novf = 1; b = (b + 1) % 1024; end
          OP_STLR: begin ver[i] = (a + 1) % 1024; if (b == 1023) novf = 1; b = (b + 1) % 1024; end
          OP_FENCE: begin if (b == 1023) novf = 1; b = (b + 1) % 1024; a = b; ver[i] = a; end
          default: ;
        endcase
      end
    end
    nvr = a; nlf = b;
  endtask

  task automatic step(input bit check_ready_expected = 1);
    int ver [IW]; int nvr, nlf; bit novf; int svr [IW], slf [IW];
    bit exp_ready, acc;
    #1;
    model(ver, nvr, nlf, novf, svr, slf);
    exp_ready = !m_drain && !novf && room_ok && !flush_valid;
    chk(iss_ready == exp_ready, "iss_ready");
    chk(vr == VW'(m_vr) && lfvr == VW'(m_lfvr), "vr/lfvr");
    chk(ovf_draining == m_drain, "ovf_draining");
    chk(ovf_reset == (m_drain && drained && !flush_valid), "ovf_reset");
    for (int i = 0; i < IW; i++)
      if (iss_valid[i] && iss_op[i] inside {OP_LOAD, OP_STORE, OP_LDAR, OP_STLR, OP_FENCE})
        chk(iss_version[i] == VW'(ver[i]), $sformatf("version slot %0d op %s", i, iss_op[i].name()));
    if (!room_ok && !m_drain && !novf && (|iss_valid)) n_stall_room++;
    acc = (|iss_valid) && exp_ready;
    @(posedge clk);
    if (flush_valid) begin
      m_vr = ck_vr[flush_ckpt]; m_lfvr = ck_lf[flush_ckpt]; m_drain = 0; n_flush++;
    end else if (m_drain) begin
      if (drained) begin m_vr = 0; m_lfvr = 0; m_drain = 0; n_ovf++; end
    end else if (acc) begin
      for (int i = 0; i < IW; i++)
        if (iss_valid[i] && iss_op[i] == OP_BRANCH) begin ck_vr[iss_ckpt[i]] = svr[i]; ck_lf[iss_ckpt[i]] = slf[i]; end
      m_vr = nvr; m_lfvr = nlf;
    end else if ((|iss_valid) && novf) m_drain = 1;
    @(negedge clk);
  endtask

  task automatic idle();
    iss_valid = '0; iss_op = '{default: OP_OTHER}; iss_ckpt = '0; room_ok = 1;
    drained = 0; flush_valid = 0; flush_ckpt = 0;
  endtask

  task automatic one(op_e op, int exp_ver, int exp_vr_after, int exp_lf_after);
    idle(); iss_valid = 2'b01; iss_op[0] = op;
    #1;
    if (op != OP_FENCE) chk(iss_version[0] == VW'(exp_ver), $sformatf("example: %s version", op.name()));
    step();
    chk(vr == VW'(exp_vr_after) && lfvr == VW'(exp_lf_after), $sformatf("example: after %s", op.name()));
  endtask

  initial begin : wd
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NC; i++) begin ck_vr[i] = 0; ck_lf[i] = 0; end
    idle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // worked example, one per cycle
    one(OP_LOAD, 0, 0, 0);  // m1
    one(OP_LDAR, 0, 0, 1);
    one(OP_STORE, 0, 0, 1); // m3
    one(OP_STLR, 1, 0, 2);
    one(OP_LOAD, 0, 0, 2);  // m5
    one(OP_FENCE, 0, 3, 3);
    one(OP_STORE, 3, 3, 3); // m6
    // same example two per cycle, from a fresh reset
    rst_n = 0; step(); rst_n = 1; m_vr = 0; m_lfvr = 0; m_drain = 0;
    idle(); iss_valid = 2'b11; iss_op[0] = OP_LOAD; iss_op[1] = OP_LDAR; #1;
    chk(iss_version[0] == 0 && iss_version[1] == 0, "example x2: m1, ldar"); step();
    iss_op[0] = OP_STORE; iss_op[1] = OP_STLR; #1;
    chk(iss_version[0] == 0 && iss_version[1] == 1, "example x2: m3, stlr"); step();
    iss_op[0] = OP_LOAD; iss_op[1] = OP_FENCE; #1;
    chk(iss_version[0] == 0 && iss_version[1] == 3, "example x2: m5, fence"); step();
    iss_valid = 2'b01; iss_op[0] = OP_STORE; #1;
    chk(iss_version[0] == 3, "example x2: m6"); step();
    chk(vr == 3 && lfvr == 3, "example x2: final registers");
    // overflow point: from reset exactly 1023 ordering instructions are
    // accepted (one every 100 instructions in a real stream gives about
    // 102,000 instructions between drains); the 1024th starts the drain, and
    // the registers are 0 the cycle after `drained`
    rst_n = 0; idle(); step(); rst_n = 1; m_vr = 0; m_lfvr = 0; m_drain = 0;
    begin
      int acc_n;
      acc_n = 0;
      for (int k = 0; k < 1100 && !ovf_draining; k++) begin
        idle(); iss_valid = 2'b01; iss_op[0] = OP_LDAR; #1;
        if (iss_ready) acc_n++;
        step();
      end
      chk(acc_n == 1023 && ovf_draining, $sformatf("overflow after %0d ordering instructions", acc_n));
      idle(); iss_valid = 2'b01; iss_op[0] = OP_LOAD; step();
      chk(ovf_draining && lfvr == 10'd1023, "drain holds until drained");
      idle(); drained = 1; step();
      chk(!ovf_draining && vr == 0 && lfvr == 0, "registers reset after the drain");
    end
    // random run: overflow-heavy first half without mispredictions
    for (int t = 0; t < 40000; t++) begin
      idle();
      for (int i = 0; i < IW; i++) begin
        int r;
        r = $urandom_range(99);
        iss_valid[i] = $urandom_range(4) != 0;
        iss_op[i] = r < 30 ? OP_LOAD : r < 50 ? OP_STORE : r < 62 ? OP_LDAR : r < 74 ? OP_STLR :
                    r < 86 ? OP_FENCE : r < 94 ? OP_BRANCH : OP_OTHER;
        iss_ckpt[i] = 4'($urandom_range(15));
      end
      room_ok = $urandom_range(9) != 0;
      drained = $urandom_range(3) == 0;
      flush_valid = (t >= 20000) && ($urandom_range(49) == 0);
      flush_ckpt = 4'($urandom_range(15));
      step();
    end
    chk(n_ovf >= 2, $sformatf("overflow resets seen: %0d", n_ovf));
    chk(n_flush > 100, "flushes seen");
    chk(n_stall_room > 100, "room stalls seen");
    $display("overflows=%0d flushes=%0d room_stalls=%0d", n_ovf, n_flush, n_stall_room);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
