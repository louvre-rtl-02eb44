// tb_orq: checks the ordering queue against a reference FIFO.
//
// Random two-wide issue bundles of load-acquires, fences, branches and other
// ops enter the queue (issue is held back when free_cnt is too small, as the
// core does); the head is popped with its own kind at random; branches write
// random checkpoints and random mispredictions restore one whose tail lies
// between the current head and tail (a checkpoint of a branch still in
// flight). Each cycle the TB compares count, free_cnt, empty, fence_active
// and the oldest load-acquire's version with the model. It also requires
// that the queue was seen full, that a load-acquire hid behind a fence and
// that flushes dropped entries.
module tb_orq;
  import louvre_pkg::*;
  localparam int D = 16, IW = 2, NC = 16, VW = 10;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic iss_fire, pop, flush_valid;
  logic [IW-1:0] iss_valid;
  op_e [IW-1:0] iss_op;
  logic [IW-1:0][VW-1:0] iss_version;
  logic [IW-1:0][3:0] iss_ckpt;
  op_e pop_op;
  logic [3:0] flush_ckpt;
  logic [4:0] count, free_cnt;
  logic empty, ldar_active, fence_active;
  logic [VW-1:0] ldar_min_ver;

  orq dut (.*);   // default parameters

  always #5 clk = ~clk;

  // model: absolute head/tail counters over a circular store
  int m_head = 0, m_tail = 0;
  bit m_ldar [D]; int m_ver [D];
  int ck_tail [NC]; bit ck_ok [NC];
  int n_full = 0, n_hidden = 0, n_drop = 0, vcount = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin : wd
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iss_fire = 0; pop = 0; flush_valid = 0; iss_valid = '0; iss_op = '{default: OP_OTHER};
    iss_version = '0; iss_ckpt = '0; pop_op = OP_OTHER; flush_ckpt = 0;
    for (int i = 0; i < NC; i++) ck_ok[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30000; t++) begin
      int need, cnt, ptail, fl;
      bit exp_la, exp_fa; int exp_lv;
      // stimulus
      need = 0;
      for (int i = 0; i < IW; i++) begin
        int r;
        r = $urandom_range(99);
        iss_valid[i] = $urandom_range(3) != 0;
        iss_op[i] = r < 30 ? OP_LDAR : r < 60 ? OP_FENCE : r < 75 ? OP_BRANCH : OP_LOAD;
        vcount += $urandom_range(1);
        iss_version[i] = VW'(vcount);
        iss_ckpt[i] = 4'($urandom_range(NC - 1));
        if (iss_valid[i] && is_orq_op(iss_op[i])) need++;
      end
      cnt = m_tail - m_head;
      // phases: 0..9999 fill-heavy, later balanced
      iss_fire = (D - cnt >= need) && ($urandom_range(3) != 0);
      pop = (cnt > 0) && ($urandom_range(99) < ((t < 10000) ? 30 : 55));
      pop_op = (cnt > 0 && m_ldar[m_head % D]) ? OP_LDAR : OP_FENCE;
      flush_valid = 0;
      fl = $urandom_range(NC - 1);
      if ($urandom_range(39) == 0 && ck_ok[fl] && ck_tail[fl] >= m_head + (pop ? 1 : 0) && ck_tail[fl] <= m_tail) begin
        flush_valid = 1; flush_ckpt = 4'(fl);
      end
      #1;
      // outputs
      exp_la = 0; exp_fa = 0; exp_lv = 0;
      for (int k = m_tail - 1; k >= m_head; k--) begin
        if (m_ldar[k % D]) begin exp_la = 1; exp_lv = m_ver[k % D]; end else exp_fa = 1;
      end
      chk(count == 5'(cnt) && free_cnt == 5'(D - cnt) && empty == (cnt == 0), "count/free/empty");
      chk(ldar_active == exp_la && (!exp_la || ldar_min_ver == VW'(exp_lv)), "oldest ldar");
      chk(fence_active == exp_fa, "fence_active");
      if (cnt == D) n_full++;
      if (cnt > 0 && !m_ldar[m_head % D] && exp_la) n_hidden++;
      // advance model at the edge
      @(posedge clk);
      if (pop) m_head++;
      if (flush_valid) begin
        if (ck_tail[fl] < m_tail) n_drop++;
        m_tail = ck_tail[fl];
      end else if (iss_fire) begin
        ptail = m_tail;
        for (int i = 0; i < IW; i++) begin
          if (iss_valid[i] && iss_op[i] == OP_BRANCH) begin ck_tail[iss_ckpt[i]] = ptail; ck_ok[iss_ckpt[i]] = 1; end
          if (iss_valid[i] && is_orq_op(iss_op[i])) begin
            m_ldar[ptail % D] = (iss_op[i] == OP_LDAR); m_ver[ptail % D] = int'(iss_version[i]); ptail++;
          end
        end
        m_tail = ptail;
      end
      // checkpoints older than the head are dead
      for (int i = 0; i < NC; i++) if (ck_ok[i] && (ck_tail[i] < m_head || ck_tail[i] > m_tail)) ck_ok[i] = 0;
      @(negedge clk);
    end
    chk(n_full > 0 && n_hidden > 0 && n_drop > 0, $sformatf("coverage full=%0d hidden=%0d drop=%0d", n_full, n_hidden, n_drop));
    $display("full=%0d ldar_behind_fence=%0d flush_drops=%0d", n_full, n_hidden, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
