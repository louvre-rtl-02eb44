// tb_lsq_version_tags: checks the LSQ version tags, v_min,lsq and the
// version-filtered squash on invalidation.
//
// 1. Directed cases, each on a freshly emptied queue:
//    a. store A (v0) still in the store buffer, fence, load B (v1) satisfied:
//       an invalidation of B's line squashes B (v1 > v_min,sb).
//    b. same load once the store buffer is empty and nothing older is in the
//       LSQ: the invalidation is ignored (the baseline would squash).
//    c. an older access of version 0 still in the LSQ, load B v1: squash
//       through v_min,lsq.
//    d. load-acquire (v0) in flight, load B v0 after it: squash through the
//       ordering queue.
//    e. a load that has not been satisfied yet, or hit on a different line,
//       is never squashed.
// 2. Random run against a reference model: random allocation into free
//    entries (two per cycle), loads satisfied on two ports, random frees, and
//    invalidations of a small line set with random v_min,sb and load-acquire
//    state. Checks squash_mask, base_mask, v_min,lsq and empty every cycle
//    and that squashed loads lose their satisfied state.
module tb_lsq_version_tags;
  localparam int N = 64, VW = 10, LW = 26;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [1:0] alloc_valid, alloc_is_load, sat_valid;
  logic [1:0][5:0] alloc_idx, sat_idx;
  logic [1:0][VW-1:0] alloc_version;
  logic [1:0][LW-1:0] sat_line;
  logic [N-1:0] free_mask, squash_mask, base_mask;
  logic inv_valid, vsb_valid, ldar_active, vlsq_valid, empty;
  logic [LW-1:0] inv_line;
  logic [VW-1:0] vsb, ldar_min_ver, vlsq;

  lsq_version_tags dut (.*);   // default parameters

  always #5 clk = ~clk;

  bit m_v [N], m_ld [N], m_sat [N]; int m_ver [N], m_line [N];
  int n_sq = 0, n_filtered = 0, n_sq_sb = 0, n_sq_lsq = 0, n_sq_ldar = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic quiet();
    alloc_valid = '0; alloc_is_load = '0; alloc_idx = '0; alloc_version = '0;
    sat_valid = '0; sat_idx = '0; sat_line = '0; free_mask = '0;
    inv_valid = 0; inv_line = '0; vsb_valid = 0; vsb = '0; ldar_active = 0; ldar_min_ver = '0;
  endtask

  task automatic cycle();
    bit any; int mn; logic [N-1:0] es, eb;
    #1;
    any = 0; mn = 0;
    for (int i = 0; i < N; i++) if (m_v[i] && (!any || m_ver[i] < mn)) begin any = 1; mn = m_ver[i]; end
    chk(vlsq_valid == any && (!any || vlsq == VW'(mn)) && empty == !any, "v_min,lsq/empty");
    for (int i = 0; i < N; i++) begin
      bit hit, s1, s2, s3;
      hit = inv_valid && m_v[i] && m_ld[i] && m_sat[i] && m_line[i] == int'(inv_line);
      s1 = vsb_valid && m_ver[i] > int'(vsb);
      s2 = any && m_ver[i] > mn;
      s3 = ldar_active && m_ver[i] >= int'(ldar_min_ver);
      eb[i] = hit; es[i] = hit && (s1 || s2 || s3);
      if (hit && !(s1 || s2 || s3)) n_filtered++;
      if (es[i]) begin n_sq++; if (s1) n_sq_sb++; if (s2) n_sq_lsq++; if (s3 && !s1 && !s2) n_sq_ldar++; end
    end
    chk(base_mask == eb, "base squash mask");
    chk(squash_mask == es, "squash mask");
    @(posedge clk);
    for (int i = 0; i < N; i++) if (es[i]) m_sat[i] = 0;
    for (int i = 0; i < N; i++) if (free_mask[i]) m_v[i] = 0;
    for (int p = 0; p < 2; p++) if (sat_valid[p]) begin m_sat[sat_idx[p]] = 1; m_line[sat_idx[p]] = int'(sat_line[p]); end
    for (int s = 0; s < 2; s++) if (alloc_valid[s]) begin
      m_v[alloc_idx[s]] = 1; m_ld[alloc_idx[s]] = alloc_is_load[s]; m_sat[alloc_idx[s]] = 0; m_ver[alloc_idx[s]] = int'(alloc_version[s]);
    end
    @(negedge clk);
  endtask

  task automatic clear_all();
    quiet(); for (int i = 0; i < N; i++) free_mask[i] = m_v[i]; cycle();
  endtask

  task automatic alloc(int idx, bit ld, int ver);
    quiet(); alloc_valid[0] = 1; alloc_idx[0] = 6'(idx); alloc_is_load[0] = ld; alloc_version[0] = VW'(ver); cycle();
  endtask

  task automatic satisfy(int idx, int line);
    quiet(); sat_valid[0] = 1; sat_idx[0] = 6'(idx); sat_line[0] = LW'(line); cycle();
  endtask

  // invalidation with given store-buffer and load-acquire state; returns squash of entry idx
  task automatic inval(int line, bit sbv, int sbver, bit la, int lav, int idx, output bit sq, output bit base);
    quiet(); inv_valid = 1; inv_line = LW'(line); vsb_valid = sbv; vsb = VW'(sbver);
    ldar_active = la; ldar_min_ver = VW'(lav);
    #1; sq = squash_mask[idx]; base = base_mask[idx];
    @(negedge clk); #0;
    // model bookkeeping for the squash just applied
    if (sq) m_sat[idx] = 0;
  endtask

  initial begin : wd
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit sq, base;
    for (int i = 0; i < N; i++) begin m_v[i] = 0; m_ld[i] = 0; m_sat[i] = 0; m_ver[i] = 0; m_line[i] = 0; end
    quiet();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a. store A v0 in the buffer, load B v1 satisfied
    alloc(5, 1, 1); satisfy(5, 'h42);
    inval('h42, 1, 0, 0, 0, 5, sq, base); checks++; if (!(sq && base)) begin failures++; $display("FAIL: directed a"); end
    // b. buffer empty, nothing older: no squash, baseline would squash
    satisfy(5, 'h42);
    inval('h42, 0, 0, 0, 0, 5, sq, base); checks++; if (!(!sq && base)) begin failures++; $display("FAIL: directed b"); end
    // c. older version-0 access in the LSQ
    alloc(9, 0, 0);
    inval('h42, 0, 0, 0, 0, 5, sq, base); checks++; if (!(sq && base)) begin failures++; $display("FAIL: directed c"); end
    clear_all();
    // d. load-acquire v0 in flight, load B v0
    alloc(7, 1, 0); satisfy(7, 'h43);
    inval('h43, 0, 0, 1, 0, 7, sq, base); checks++; if (!(sq && base)) begin failures++; $display("FAIL: directed d"); end
    // e. unsatisfied load, and a different line
    alloc(8, 1, 3);
    inval('h44, 1, 0, 1, 0, 8, sq, base); checks++; if (sq || base) begin failures++; $display("FAIL: directed e1"); end
    satisfy(8, 'h45);
    inval('h46, 1, 0, 1, 0, 8, sq, base); checks++; if (sq || base) begin failures++; $display("FAIL: directed e2"); end
    clear_all();
    // random
    for (int t = 0; t < 30000; t++) begin
      int vbase;
      quiet();
      vbase = t / 300;
      for (int s = 0; s < 2; s++) begin
        int idx;
        idx = $urandom_range(N - 1);
        if (!m_v[idx] && !(s == 1 && alloc_valid[0] && alloc_idx[0] == 6'(idx)) && $urandom_range(1)) begin
          alloc_valid[s] = 1; alloc_idx[s] = 6'(idx); alloc_is_load[s] = $urandom_range(2) != 0;
          alloc_version[s] = VW'(vbase + $urandom_range(3));
        end
      end
      for (int p = 0; p < 2; p++) begin
        int idx;
        idx = $urandom_range(N - 1);
        if (m_v[idx] && m_ld[idx] && !(p == 1 && sat_valid[0] && sat_idx[0] == 6'(idx))) begin
          sat_valid[p] = 1; sat_idx[p] = 6'(idx); sat_line[p] = LW'($urandom_range(7));
        end
      end
      for (int i = 0; i < N; i++) begin
        bit being_sat;
        being_sat = (sat_valid[0] && sat_idx[0] == 6'(i)) || (sat_valid[1] && sat_idx[1] == 6'(i));
        if (m_v[i] && !being_sat && $urandom_range(15) == 0) free_mask[i] = 1;
      end
      inv_valid = $urandom_range(2) == 0; inv_line = LW'($urandom_range(7));
      vsb_valid = $urandom_range(1); vsb = VW'(vbase + $urandom_range(3));
      ldar_active = $urandom_range(2) == 0; ldar_min_ver = VW'(vbase + $urandom_range(4));
      cycle();
    end
    chk(n_sq_sb > 0 && n_sq_lsq > 0 && n_sq_ldar > 0 && n_filtered > 0,
        $sformatf("coverage sb=%0d lsq=%0d ldar=%0d filtered=%0d", n_sq_sb, n_sq_lsq, n_sq_ldar, n_filtered));
    $display("squashes=%0d (sb %0d, lsq %0d, ldar-only %0d) filtered=%0d", n_sq, n_sq_sb, n_sq_lsq, n_sq_ldar, n_filtered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
