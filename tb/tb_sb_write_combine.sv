// tb_sb_write_combine: checks same-version write combining in the store
// buffer (the buffer built with WRITE_COMBINE = 1).
//
// 1. Directed cases: a store to the address and version of a buffered store
//    is merged (no new entry, the entry's data replaced, forwarding returns
//    the new data, one cache write); a store to the same address with a
//    higher version takes a new entry; with the buffer full a mergeable
//    store is still accepted.
// 2. A random run against a reference model of the buffer that merges a
//    store into the youngest buffered store to its address when the versions
//    are equal and that entry is not being offered for completion. Checked
//    each cycle: ins_ready (free entry or merge), count, v_min,sb, requests,
//    the completion choice and data, forwarding. Whole run: every allocated
//    store completed, and merges, refused merges (different version) and
//    merges into a full buffer all happened.
module tb_sb_write_combine;
  localparam int N = 16, VW = 10, AW = 32, DW = 64;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic ins_valid, ins_ready, creq_valid, creq_ready, cgnt_valid, cwr_valid, cwr_by_age, cwr_ready;
  logic fwd_hit, vsb_valid, empty;
  logic [AW-1:0] ins_addr, cwr_addr, fwd_addr;
  logic [DW-1:0] ins_data, cwr_data, fwd_data;
  logic [VW-1:0] ins_version, cwr_version, vsb;
  logic [3:0] creq_idx, cgnt_idx, cwr_idx;
  logic [AW-7:0] creq_line;
  logic [4:0] count;

  versioned_store_buffer #(.WRITE_COMBINE(1'b1)) dut (.*);

  always #5 clk = ~clk;

  // model
  bit m_v [N], m_req [N], m_ok [N];
  int m_addr [N], m_ver [N], m_seq [N]; longint m_data [N];
  int seq = 0, vcount = 0, n_ins = 0, n_done = 0;
  int n_ooo = 0, n_age = 0, n_full = 0, n_fwd = 0, n_merge = 0, n_nomerge = 0, n_fullmerge = 0;
  int pend_idx [$]; int pend_time [$];
  int order [$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int m_vsb(output bit any);
    int m; any = 0; m = 0;
    for (int i = 0; i < N; i++) if (m_v[i] && (!any || m_ver[i] < m)) begin any = 1; m = m_ver[i]; end
    return m;
  endfunction

  function automatic bit m_oldest(int i);
    for (int j = 0; j < N; j++) if (m_v[j] && m_seq[j] < m_seq[i]) return 0;
    return m_v[i];
  endfunction

  function automatic bit m_elig(int i);
    bit any; int v;
    v = m_vsb(any);
    if (!m_v[i] || !m_ok[i]) return 0;
    for (int j = 0; j < N; j++) if (m_v[j] && m_seq[j] < m_seq[i] && m_addr[j] == m_addr[i]) return 0;
    return m_oldest(i) || m_ver[i] == v;
  endfunction

  // One cycle: outputs checked against the model, then the model advances.
  task automatic cycle();
    bit any, exp_cwr, exp_creq, fh; int v, ci, cr, fy, mg, my; longint fd; int cnt, free_i;
    #1;
    v = m_vsb(any);
    cnt = 0; free_i = -1;
    for (int i = N - 1; i >= 0; i--) begin if (m_v[i]) cnt++; else free_i = i; end
    chk(count == 5'(cnt) && empty == (cnt == 0), "count/empty");
    chk(vsb_valid == any && (!any || vsb == VW'(v)), "v_min,sb");
    exp_creq = 0; cr = 0;
    for (int i = N - 1; i >= 0; i--) if (m_v[i] && !m_req[i]) begin exp_creq = 1; cr = i; end
    chk(creq_valid == exp_creq && (!exp_creq || (creq_idx == 4'(cr) && creq_line == m_addr[cr][AW-1:6])), "permission request");
    exp_cwr = 0; ci = 0;
    for (int i = N - 1; i >= 0; i--) if (m_elig(i)) begin exp_cwr = 1; ci = i; end
    for (int i = 0; i < N; i++) if (m_elig(i) && m_oldest(i)) ci = i;
    chk(cwr_valid == exp_cwr, "completion offered iff a store is eligible");
    if (exp_cwr) begin
      chk(cwr_idx == 4'(ci) && cwr_addr == AW'(m_addr[ci]) && cwr_data == DW'(m_data[ci]) &&
          cwr_version == VW'(m_ver[ci]) && cwr_by_age == (m_ver[ci] != v), "completion choice");
    end
    mg = -1; my = -1;
    for (int i = 0; i < N; i++) if (m_v[i] && m_addr[i] == int'(ins_addr) && m_seq[i] > my) begin my = m_seq[i]; mg = i; end
    if (mg >= 0 && (m_ver[mg] != int'(ins_version) || (exp_cwr && ci == mg))) begin
      if (ins_valid && m_ver[mg] != int'(ins_version)) n_nomerge++;
      mg = -1;
    end
    chk(ins_ready == (cnt < N || mg >= 0), "ins_ready (free entry or merge)");
    fh = 0; fy = -1; fd = 0;
    for (int i = 0; i < N; i++) if (m_v[i] && m_addr[i] == int'(fwd_addr) && (fy < 0 || m_seq[i] > fy)) begin fh = 1; fy = m_seq[i]; fd = m_data[i]; end
    chk(fwd_hit == fh && (!fh || fwd_data == DW'(fd)), "forwarding");
    if (fh) n_fwd++;
    if (ins_valid && cnt == N && mg < 0) n_full++;
    @(posedge clk);
    if (creq_valid && creq_ready) begin
      m_req[cr] = 1; pend_idx.push_back(int'(creq_idx)); pend_time.push_back($urandom_range(12));
    end
    if (cgnt_valid) m_ok[cgnt_idx] = 1;
    if (exp_cwr && cwr_ready) begin
      if (!m_oldest(ci)) n_ooo++;
      if (m_ver[ci] != v) n_age++;
      m_v[ci] = 0; n_done++; order.push_back(m_seq[ci]);
    end
    if (ins_valid && mg >= 0) begin
      m_data[mg] = longint'(ins_data); n_merge++; if (cnt == N) n_fullmerge++;
    end else if (ins_valid && cnt < N) begin
      m_v[free_i] = 1; m_req[free_i] = 0; m_ok[free_i] = 0; m_addr[free_i] = int'(ins_addr);
      m_data[free_i] = longint'(ins_data); m_ver[free_i] = int'(ins_version); m_seq[free_i] = seq++;
      n_ins++;
    end
    @(negedge clk);
  endtask

  task automatic quiet();
    ins_valid = 0; ins_addr = '0; ins_data = '0; ins_version = '0;
    creq_ready = 0; cgnt_valid = 0; cgnt_idx = '0; cwr_ready = 1; fwd_addr = '0;
  endtask

  task automatic insert(int addr, int ver);
    quiet(); ins_valid = 1; ins_addr = AW'(addr); ins_data = DW'($urandom); ins_version = VW'(ver);
    cycle();
  endtask

  task automatic grant(int idx);
    quiet(); cgnt_valid = 1; cgnt_idx = 4'(idx); cycle();
  endtask

  initial begin : wd
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin m_v[i] = 0; m_req[i] = 0; m_ok[i] = 0; end
    quiet();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // directed: merge, no merge across versions, merge into a full buffer
    insert('h1000, 0);                       // entry 0
    insert('h1000, 0);                       // merged into entry 0
    chk(n_ins == 1 && n_merge == 1 && count == 1, "directed: same version merged");
    quiet(); fwd_addr = 'h1000; #1; chk(fwd_hit && fwd_data == DW'(m_data[0]), "directed: forwarding sees merged data"); @(negedge clk);
    insert('h1000, 1);                       // entry 1, higher version
    chk(n_ins == 2 && n_merge == 1, "directed: different version not merged");
    for (int k = 0; k < N - 2; k++) insert('h4000 + 8 * k, 1);
    chk(count == 5'(N), "directed: buffer full");
    insert('h1000, 1);                       // merged into entry 1 while full
    chk(n_fullmerge == 1 && n_ins == N, "directed: merge accepted while full");
    for (int t = 0; t < 200 && n_done < n_ins; t++) begin
      quiet(); creq_ready = 1;
      if (pend_idx.size() > 0) begin cgnt_valid = 1; cgnt_idx = 4'(pend_idx[0]); pend_idx.delete(0); pend_time.delete(0); end
      cycle();
    end
    chk(n_done == n_ins && order.size() == N, "directed: one write per entry");
    // random
    for (int t = 0; t < 40000; t++) begin
      quiet();
      ins_valid = $urandom_range(99) < ((t / 4000) % 2 ? 30 : 70);
      ins_addr = AW'(($urandom_range(5) << 3) + (($urandom_range(1)) << 8));
      ins_data = {$urandom, $urandom};
      if ($urandom_range(5) == 0) vcount++;
      ins_version = VW'(vcount);
      creq_ready = $urandom_range(1);
      cwr_ready = $urandom_range(3) != 0;
      fwd_addr = AW'(($urandom_range(11) << 3) + (($urandom_range(3)) << 8));
      for (int k = 0; k < pend_time.size(); k++) if (pend_time[k] > 0) pend_time[k]--;
      for (int k = 0; k < pend_time.size(); k++) if (pend_time[k] == 0 && $urandom_range(1)) begin
        cgnt_valid = 1; cgnt_idx = 4'(pend_idx[k]); pend_idx.delete(k); pend_time.delete(k); break;
      end
      cycle();
    end
    // drain
    for (int t = 0; t < 2000 && n_done < n_ins; t++) begin
      quiet(); creq_ready = 1;
      if (pend_idx.size() > 0) begin cgnt_valid = 1; cgnt_idx = 4'(pend_idx[0]); pend_idx.delete(0); pend_time.delete(0); end
      cycle();
    end
    chk(n_done == n_ins, $sformatf("all stores completed (%0d of %0d)", n_done, n_ins));
    chk(n_merge > 100 && n_nomerge > 0 && n_fullmerge > 1 && n_ooo > 0,
        $sformatf("coverage merge=%0d nomerge=%0d fullmerge=%0d ooo=%0d", n_merge, n_nomerge, n_fullmerge, n_ooo));
    $display("entries=%0d merges=%0d refused=%0d merges_when_full=%0d out_of_order=%0d", n_ins, n_merge, n_nomerge, n_fullmerge, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
