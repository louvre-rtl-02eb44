// tb_louvre_top: end-to-end test of the Louvre ordering unit at its default
// sizes (10-bit versions, 2-wide issue, 64-entry LSQ, 16-entry store buffer,
// 16-entry ORQ, 16 checkpoints).
//
// The testbench plays the core and the L1 data cache around the unit:
//   * a 64-entry reorder buffer whose slot number is also the LSQ entry;
//   * a random instruction stream (loads, stores, load-acquires,
//     store-releases, full fences, branches, other), with phases that change
//     the mix: normal, ordering-heavy and store-heavy;
//   * loads that hit (2-3 cycles) or miss (10-120 cycles), stores and ALU
//     work with short latencies, branches that mispredict 20% of the time
//     and flush everything younger;
//   * random cache-line invalidations aimed mostly at satisfied loads;
//   * a cache that grants write permission after 2-4 or 20-100 cycles and
//     accepts completion writes 7 cycles in 8.
// Alongside it keeps its own model of the versioning rules (Table 2 of the
// design: ld/st/ldar take vr, stlr takes vr+1, every ordering instruction
// increments lfvr, a fence sets vr = lfvr), of the ORQ, the LSQ tags and the
// store buffer, and checks every cycle: the versions given at issue, issue
// stalls (ORQ room, version overflow), v_min,sb and v_min,lsq, each
// retirement decision, each squash/no-squash decision on an invalidation,
// forwarding results, permission requests, and each store completion (it must
// follow the completion rule and never let a lower-version, po-older store
// complete after a higher-version one: VSR1).
// Each mechanism of the design is counted and must occur at least once.
// Inputs are driven at the falling edge and outputs sampled 1 time unit
// later; the unit updates at the rising edge.
module tb_louvre_top;
  import louvre_pkg::*;

  localparam int VER_W = 10, IW = 2, LP = 2, LSQ_N = 64, SB_N = 16, ORQ_D = 16, NCK = 16;
  localparam int ADDR_W = 32, DATA_W = 64, LINE_OFF = 6, LINE_W = ADDR_W - LINE_OFF;
  localparam int ROB_N = LSQ_N;
  localparam int TARGET = 9000;
  localparam int WATCHDOG = 2000000;
  localparam int VMAX = (1 << VER_W) - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT ports
  logic [IW-1:0]             iss_valid;
  op_e  [IW-1:0]             iss_op;
  logic [IW-1:0][5:0]        iss_lsq_idx;
  logic [IW-1:0][3:0]        iss_ckpt;
  logic                      iss_ready;
  logic [IW-1:0][VER_W-1:0]  iss_version;
  logic [LP-1:0]             sat_valid;
  logic [LP-1:0][5:0]        sat_idx;
  logic [LP-1:0][ADDR_W-1:0] sat_addr;
  logic [LSQ_N-1:0]          lsq_free_mask;
  logic [ADDR_W-1:0]         fwd_addr;
  logic                      fwd_hit;
  logic [DATA_W-1:0]         fwd_data;
  logic                      inv_valid;
  logic [LINE_W-1:0]         inv_line;
  logic [LSQ_N-1:0]          squash_mask, base_squash_mask;
  logic                      head_valid;
  op_e                       head_op;
  logic [VER_W-1:0]          head_version;
  logic                      head_done;
  logic [ADDR_W-1:0]         head_st_addr;
  logic [DATA_W-1:0]         head_st_data;
  logic                      rob_empty;
  logic                      retire, stall_version, stall_sb_full;
  logic                      creq_valid;
  logic [3:0]                creq_idx;
  logic [LINE_W-1:0]         creq_line;
  logic                      creq_ready;
  logic                      cgnt_valid;
  logic [3:0]                cgnt_idx;
  logic                      cwr_valid;
  logic [3:0]                cwr_idx;
  logic [ADDR_W-1:0]         cwr_addr;
  logic [DATA_W-1:0]         cwr_data;
  logic [VER_W-1:0]          cwr_version;
  logic                      cwr_by_age;
  logic                      cwr_ready;
  logic                      flush_valid;
  logic [3:0]                flush_ckpt;
  logic [VER_W-1:0]          vr, lfvr;
  logic                      vsb_valid;
  logic [VER_W-1:0]          vsb;
  logic                      vlsq_valid;
  logic [VER_W-1:0]          vlsq;
  logic                      ovf_draining, ovf_reset, orq_stall;
  logic [4:0]                orq_count;
  logic                      fence_active;
  logic [4:0]                sb_count;

  louvre_top dut (.*);

  // ---------------------------------------------------------------- scoreboard
  int checks = 0, failures = 0;
  int cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // reorder buffer model (slot number = LSQ entry)
  op_e    rob_op   [ROB_N];
  int     rob_ver  [ROB_N];
  int     rob_addr [ROB_N];
  longint rob_data [ROB_N];
  bit     rob_done [ROB_N];
  int     rob_t    [ROB_N];
  bit     rob_mis  [ROB_N];
  int     rob_ck   [ROB_N];
  int     rob_head = 0, rob_cnt = 0;

  // LSQ tag mirror
  bit lv [LSQ_N], ll [LSQ_N], ls [LSQ_N];
  int lver [LSQ_N], lline [LSQ_N];
  bit pend_free [LSQ_N];

  // store buffer mirror
  bit     sv [SB_N], sreq [SB_N], sgnt [SB_N];
  int     sver [SB_N], saddr [SB_N], sgtime [SB_N];
  longint sdata [SB_N], sseq [SB_N];
  longint st_seq = 0;

  // version-register reference
  int ref_vr = 0, ref_lfvr = 0;
  bit ref_drain = 0;
  int ck_vr [NCK], ck_lfvr [NCK];
  bit ck_busy [NCK];

  // pending issue bundle
  bit     pb_v   [IW];
  op_e    pb_op  [IW];
  int     pb_addr[IW];
  longint pb_data[IW];
  bit     pb_mis [IW];
  int     pb_ck  [IW];
  int     exp_ver[IW];
  bit     exp_need_ovf;
  bit     exp_ready;

  // per-cycle decisions made in the drive phase
  bit  flushing;
  int  flush_pos;
  bit  protect_head;
  bit  exp_retire;
  int  sat_slot [LP];
  bit  stopping = 0;
  bit  drain_pre = 0;

  // mechanism counters
  int n_fence_early = 0, n_stlr_early = 0, n_ld_stall = 0, n_squash = 0, n_nosquash = 0;
  int n_ldar_squash = 0, n_ooo_complete = 0, n_age_complete = 0, n_sb_full = 0, n_orq_full = 0;
  int n_ovf = 0, n_flush = 0, n_fwd = 0, n_retired = 0, n_min_complete = 0;

  function automatic int rob_slot(int pos);
    return (rob_head + pos) % ROB_N;
  endfunction

  function automatic int sb_min(output bit any);
    int m = VMAX + 1;
    any = 0;
    for (int i = 0; i < SB_N; i++) if (sv[i] && sver[i] < m) begin m = sver[i]; any = 1; end
    return any ? m : 0;
  endfunction

  function automatic int lsq_min(output bit any);
    int m = VMAX + 1;
    any = 0;
    for (int i = 0; i < LSQ_N; i++) if (lv[i] && lver[i] < m) begin m = lver[i]; any = 1; end
    return any ? m : 0;
  endfunction

  function automatic int sb_count_ref();
    int c = 0;
    for (int i = 0; i < SB_N; i++) c += int'(sv[i]);
    return c;
  endfunction

  function automatic bit sb_oldest(int i);
    for (int j = 0; j < SB_N; j++) if (sv[j] && sseq[j] < sseq[i]) return 0;
    return 1;
  endfunction

  function automatic bit sb_eligible(int i);
    bit any;
    int m;
    m = sb_min(any);
    if (!(sv[i] && sgnt[i])) return 0;
    for (int j = 0; j < SB_N; j++) if (sv[j] && sseq[j] < sseq[i] && saddr[j] == saddr[i]) return 0;
    return sb_oldest(i) || (sver[i] == m);
  endfunction

  function automatic int orq_entries();
    int c = 0;
    for (int p = 0; p < rob_cnt; p++) if (is_orq_op(rob_op[rob_slot(p)])) c++;
    return c;
  endfunction

  function automatic op_e gen_op(int phase);
    int r = $urandom_range(99);
    case (phase)
      0: return r < 30 ? OP_LOAD : r < 58 ? OP_STORE : r < 66 ? OP_LDAR : r < 74 ? OP_STLR :
                r < 80 ? OP_FENCE : r < 88 ? OP_BRANCH : OP_OTHER;
      1: return r < 20 ? OP_LOAD : r < 35 ? OP_STORE : r < 55 ? OP_LDAR : r < 65 ? OP_STLR :
                r < 85 ? OP_FENCE : r < 90 ? OP_BRANCH : OP_OTHER;
      default: return r < 15 ? OP_LOAD : r < 75 ? OP_STORE : r < 78 ? OP_LDAR : r < 85 ? OP_STLR :
                r < 90 ? OP_FENCE : r < 94 ? OP_BRANCH : OP_OTHER;
    endcase
  endfunction

  function automatic int gen_addr();
    return $urandom_range(15) * 64 + $urandom_range(3) * 8;
  endfunction

  function automatic int load_lat();
    return ($urandom_range(9) < 6) ? $urandom_range(3, 2) : $urandom_range(120, 10);
  endfunction

  function automatic int alloc_ck();
    for (int k = 0; k < NCK; k++) if (!ck_busy[k]) begin ck_busy[k] = 1; return k; end
    return -1;
  endfunction

  // ------------------------------------------------------------ drive phase
  task automatic drive();
    bit any;
    int m, s, v, l, need, bestpos, pend_cnt;
    int line_pick;

    iss_valid = '0; iss_op = '{default: OP_OTHER}; iss_lsq_idx = '0; iss_ckpt = '0;
    sat_valid = '0; sat_idx = '0; sat_addr = '0;
    inv_valid = 1'b0; inv_line = '0;
    flush_valid = 1'b0; flush_ckpt = '0;
    cgnt_valid = 1'b0; cgnt_idx = '0;
    fwd_addr = '0;
    flushing = 0;
    protect_head = 0;
    drain_pre = ref_drain;

    // LSQ frees of accesses retired last cycle
    for (int i = 0; i < LSQ_N; i++) lsq_free_mask[i] = pend_free[i];

    // completion of non-load work, branch resolution
    bestpos = -1;
    for (int p = 0; p < rob_cnt; p++) begin
      s = rob_slot(p);
      if (!rob_done[s] && !is_load_op(rob_op[s]) && rob_t[s] <= cycle) begin
        rob_done[s] = 1;
        if (rob_op[s] == OP_BRANCH) begin
          if (rob_mis[s] && bestpos < 0) bestpos = p;
          ck_busy[rob_ck[s]] = 0;
        end
      end
    end
    if (bestpos >= 0) begin
      flushing = 1;
      flush_pos = bestpos;
      s = rob_slot(bestpos);
      flush_valid = 1'b1;
      flush_ckpt = 4'(rob_ck[s]);
      n_flush++;
      for (int p = bestpos + 1; p < rob_cnt; p++) begin
        int t = rob_slot(p);
        if (is_mem_op(rob_op[t])) lsq_free_mask[t] = 1'b1;
        if (rob_op[t] == OP_BRANCH && !rob_done[t]) ck_busy[rob_ck[t]] = 0;
      end
      rob_cnt = bestpos + 1;
      for (int i = 0; i < IW; i++) if (pb_v[i] && pb_op[i] == OP_BRANCH) ck_busy[pb_ck[i]] = 0;
      for (int i = 0; i < IW; i++) pb_v[i] = 0;
      ref_vr = ck_vr[rob_ck[s]];
      ref_lfvr = ck_lfvr[rob_ck[s]];
      ref_drain = 0;
    end

    // issue bundle
    pend_cnt = 0;
    for (int i = 0; i < IW; i++) pend_cnt += int'(pb_v[i]);
    if (!flushing && pend_cnt == 0 && !stopping && rob_cnt <= ROB_N - IW) begin
      int phase = (n_retired / 700) % 3;
      for (int i = 0; i < IW; i++) begin
        pb_v[i] = 1;
        pb_op[i] = gen_op(phase);
        pb_addr[i] = gen_addr();
        pb_data[i] = {$urandom, $urandom};
        pb_mis[i] = ($urandom_range(9) < 2);
        pb_ck[i] = 0;
        if (pb_op[i] == OP_BRANCH) begin
          pb_ck[i] = alloc_ck();
          if (pb_ck[i] < 0) begin pb_op[i] = OP_OTHER; pb_ck[i] = 0; end
        end
      end
    end
    v = ref_vr; l = ref_lfvr; exp_need_ovf = 0; need = 0;
    for (int i = 0; i < IW; i++) begin
      exp_ver[i] = 0;
      if (!flushing && pb_v[i]) begin
        iss_valid[i] = 1'b1;
        iss_op[i] = pb_op[i];
        iss_lsq_idx[i] = 6'(rob_slot(rob_cnt + i));
        iss_ckpt[i] = 4'(pb_ck[i]);
        case (pb_op[i])
          OP_LOAD, OP_STORE: exp_ver[i] = v;
          OP_LDAR: begin exp_ver[i] = v; if (l == VMAX) exp_need_ovf = 1; l++; need++; end
          OP_STLR: begin exp_ver[i] = v + 1; if (l == VMAX) exp_need_ovf = 1; l++; end
          OP_FENCE: begin if (l == VMAX) exp_need_ovf = 1; l++; v = l; exp_ver[i] = v; need++; end
          default: ;
        endcase
      end
    end
    exp_ready = !ref_drain && !exp_need_ovf && (ORQ_D - orq_entries() >= need) && !flushing;

    // loads executing: up to LP per cycle
    for (int k = 0; k < LP; k++) sat_slot[k] = -1;
    begin
      int k = 0;
      for (int p = 0; p < rob_cnt && k < LP; p++) begin
        s = rob_slot(p);
        if (is_load_op(rob_op[s]) && !ls[s] && lv[s] && !pend_free[s] && !lsq_free_mask[s] &&
            rob_t[s] <= cycle) begin
          sat_slot[k] = s;
          sat_valid[k] = 1'b1;
          sat_idx[k] = 6'(s);
          sat_addr[k] = 32'(rob_addr[s]);
          k++;
        end
      end
    end
    if (sat_slot[0] >= 0) fwd_addr = 32'(rob_addr[sat_slot[0]]);

    // invalidation (not in a flush cycle)
    if (!flushing && $urandom_range(15) == 0) begin
      line_pick = $urandom_range(15);
      if ($urandom_range(9) < 7) begin
        for (int p = 0; p < rob_cnt; p++) begin
          s = rob_slot(p);
          if (is_load_op(rob_op[s]) && ls[s] && $urandom_range(3) == 0) line_pick = lline[s];
        end
      end
      inv_valid = 1'b1;
      inv_line = 26'(line_pick);
    end

    // ROB head
    head_valid = 1'b0; head_op = OP_OTHER; head_version = '0; head_done = 1'b0;
    head_st_addr = '0; head_st_data = '0;
    exp_retire = 0;
    if (rob_cnt > 0) begin
      s = rob_slot(0);
      if (inv_valid && is_load_op(rob_op[s]) && ls[s] && lline[s] == int'(inv_line)) protect_head = 1;
      if (!protect_head) begin
        head_valid = 1'b1;
        head_op = rob_op[s];
        head_version = VER_W'(rob_ver[s]);
        head_done = rob_done[s];
        head_st_addr = 32'(rob_addr[s]);
        head_st_data = rob_data[s];
        if (rob_done[s]) begin
          m = sb_min(any);
          if (is_load_op(rob_op[s])) exp_retire = !(any && rob_ver[s] > m);
          else if (is_store_op(rob_op[s])) exp_retire = (sb_count_ref() < SB_N);
          else exp_retire = 1;
        end
      end
    end
    rob_empty = (rob_cnt == 0);

    // cache: grant one due permission request
    for (int i = SB_N - 1; i >= 0; i--) begin
      if (sv[i] && sreq[i] && !sgnt[i] && sgtime[i] <= cycle) begin
        cgnt_valid = 1'b1;
        cgnt_idx = 4'(i);
      end
    end
    creq_ready = 1'b1;
    cwr_ready = ($urandom_range(7) != 0);
  endtask

  // ------------------------------------------------------------ sample phase
  task automatic sample();
    bit any, anyl, exp_any_elig, drained_pre;
    int m, ml, s, ins_idx, mldar;
    bit ldar_on;
    bit alloc_now [LSQ_N];

    for (int i = 0; i < LSQ_N; i++) alloc_now[i] = 0;
    drained_pre = (rob_cnt == 0) && (sb_count_ref() == 0);
    for (int i = 0; i < LSQ_N; i++) if (lv[i]) drained_pre = 0;

    // min-version registers
    m = sb_min(any);
    check(vsb_valid == any && (!any || int'(vsb) == m), "v_min,sb");
    ml = lsq_min(anyl);
    check(vlsq_valid == anyl && (!anyl || int'(vlsq) == ml), "v_min,lsq");
    check(int'(vr) == ref_vr || flushing, $sformatf("vr %0d exp %0d", vr, ref_vr));
    check(int'(lfvr) == ref_lfvr || flushing, "lfvr");

    // invalidation decisions
    if (inv_valid) begin
      ldar_on = 0; mldar = 0;
      for (int p = rob_cnt - 1; p >= 0; p--) begin
        s = rob_slot(p);
        if (rob_op[s] == OP_LDAR) begin ldar_on = 1; mldar = rob_ver[s]; end
      end
      for (int i = 0; i < LSQ_N; i++) begin
        bit hit, vpart, lpart, sq;
        hit = lv[i] && ll[i] && ls[i] && lline[i] == int'(inv_line);
        vpart = (any && lver[i] > m) || (anyl && lver[i] > ml);
        lpart = ldar_on && lver[i] >= mldar;
        sq = hit && (vpart || lpart);
        check(base_squash_mask[i] == hit, $sformatf("base squash entry %0d", i));
        check(squash_mask[i] == sq, $sformatf("squash entry %0d v=%0d vsb=%0d vlsq=%0d", i, lver[i], m, ml));
        if (hit && !sq) n_nosquash++;
        if (sq) begin
          n_squash++;
          if (!vpart) n_ldar_squash++;
          ls[i] = 0;
          rob_done[i] = 0;
          rob_t[i] = cycle + load_lat();
        end
      end
    end

    // forwarding
    if (sat_slot[0] >= 0) begin
      bit eh = 0;
      longint ed = 0, best = -1;
      for (int i = 0; i < SB_N; i++)
        if (sv[i] && saddr[i] == rob_addr[sat_slot[0]] && sseq[i] > best) begin
          best = sseq[i]; eh = 1; ed = sdata[i];
        end
      check(fwd_hit == eh && (!eh || fwd_data == ed), "store-to-load forwarding");
      if (eh) n_fwd++;
    end
    for (int k = 0; k < LP; k++) begin
      if (sat_slot[k] >= 0) begin
        s = sat_slot[k];
        ls[s] = 1;
        lline[s] = rob_addr[s] / 64;
        rob_done[s] = 1;
      end
    end

    // issue
    if (|iss_valid) begin
      check(iss_ready == exp_ready, $sformatf("iss_ready %0d exp %0d", iss_ready, exp_ready));
      if (!exp_ready && !ref_drain && !exp_need_ovf && !flushing) n_orq_full++;
      if (orq_stall) check(!exp_ready, "orq stall flag");
      if (iss_ready) begin
        int v = ref_vr, l = ref_lfvr;
        for (int i = 0; i < IW; i++) begin
          if (pb_v[i]) begin
            s = rob_slot(rob_cnt);
            if (pb_op[i] != OP_OTHER && pb_op[i] != OP_BRANCH)
              check(int'(iss_version[i]) == exp_ver[i],
                    $sformatf("version slot %0d op %s got %0d exp %0d", i, pb_op[i].name(), iss_version[i], exp_ver[i]));
            case (pb_op[i])
              OP_LDAR, OP_STLR: l++;
              OP_FENCE: begin l++; v = l; end
              OP_BRANCH: begin ck_vr[pb_ck[i]] = v; ck_lfvr[pb_ck[i]] = l; end
              default: ;
            endcase
            rob_op[s] = pb_op[i];
            rob_ver[s] = exp_ver[i];
            rob_addr[s] = pb_addr[i];
            rob_data[s] = pb_data[i];
            rob_done[s] = 0;
            rob_mis[s] = pb_mis[i];
            rob_ck[s] = pb_ck[i];
            rob_t[s] = cycle + (is_load_op(pb_op[i]) ? load_lat() :
                                pb_op[i] == OP_BRANCH ? $urandom_range(10, 2) :
                                is_store_op(pb_op[i]) ? $urandom_range(5, 1) : $urandom_range(3, 1));
            if (is_mem_op(pb_op[i])) begin
              alloc_now[s] = 1;
              lv[s] = 1; ll[s] = is_load_op(pb_op[i]); ls[s] = 0; lver[s] = exp_ver[i];
            end
            rob_cnt++;
            pb_v[i] = 0;
          end
        end
        ref_vr = v; ref_lfvr = l;
      end else if (exp_need_ovf && !ref_drain && !flushing) begin
        ref_drain = 1;
      end
    end

    // LSQ frees take effect; an allocation of the same entry wins
    for (int i = 0; i < LSQ_N; i++) if (lsq_free_mask[i] && !alloc_now[i]) begin
      lv[i] = 0; ls[i] = 0;
    end
    for (int i = 0; i < LSQ_N; i++) pend_free[i] = 0;

    // overflow drain and reset (judged on the state before this cycle)
    check(ovf_draining == drain_pre, "overflow drain state");
    check(ovf_reset == (drain_pre && drained_pre && !flushing), "overflow reset timing");
    if (ovf_reset) begin
      n_ovf++;
      ref_vr = 0; ref_lfvr = 0; ref_drain = 0;
    end

    // retirement
    if (head_valid) begin
      check(retire == exp_retire, $sformatf("retire op %s v=%0d done=%0d", head_op.name(), head_version, head_done));
      if (stall_version) n_ld_stall++;
      if (stall_sb_full) n_sb_full++;
    end
    // store buffer insertion index (lowest free entry before this cycle)
    ins_idx = -1;
    for (int i = SB_N - 1; i >= 0; i--) if (!sv[i]) ins_idx = i;

    // cache side
    if (creq_valid) begin
      int e = -1;
      for (int i = SB_N - 1; i >= 0; i--) if (sv[i] && !sreq[i]) e = i;
      check(e == int'(creq_idx) && int'(creq_line) == saddr[e] / 64, "permission request");
      sreq[creq_idx] = 1;
      sgtime[creq_idx] = cycle + (($urandom_range(9) < 6) ? $urandom_range(4, 2) : $urandom_range(100, 20));
    end
    exp_any_elig = 0;
    for (int i = 0; i < SB_N; i++) if (sb_eligible(i)) exp_any_elig = 1;
    check(cwr_valid == exp_any_elig, "completion offered iff a store is eligible");
    if (cwr_valid && cwr_ready) begin
      int c = cwr_idx;
      bit vsr1_ok = 1, was_oldest;
      check(sb_eligible(c), "completing store follows the completion rule");
      check(int'(cwr_addr) == saddr[c] && cwr_data == sdata[c] && int'(cwr_version) == sver[c], "completion data");
      for (int j = 0; j < SB_N; j++) if (sv[j] && sseq[j] < sseq[c] && sver[j] < sver[c]) vsr1_ok = 0;
      check(vsr1_ok, "VSR1: a po-earlier lower-version store is still pending");
      was_oldest = sb_oldest(c);
      check(cwr_by_age == (was_oldest && sver[c] != m), "by-age flag");
      if (!was_oldest) n_ooo_complete++;
      if (cwr_by_age) n_age_complete++;
      if (!was_oldest && sver[c] == m) n_min_complete++;
      sv[c] = 0;
    end
    if (cgnt_valid) sgnt[cgnt_idx] = 1;

    if (head_valid && retire) begin
      s = rob_slot(0);
      n_retired++;
      if (rob_op[s] == OP_FENCE && any) n_fence_early++;
      if (rob_op[s] == OP_STLR && any) n_stlr_early++;
      if (is_store_op(rob_op[s])) begin
        sv[ins_idx] = 1; sreq[ins_idx] = 0; sgnt[ins_idx] = 0;
        sver[ins_idx] = rob_ver[s]; saddr[ins_idx] = rob_addr[s]; sdata[ins_idx] = rob_data[s];
        sseq[ins_idx] = st_seq++;
      end
      if (is_mem_op(rob_op[s])) pend_free[s] = 1;
      rob_head = (rob_head + 1) % ROB_N;
      rob_cnt--;
    end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    for (int i = 0; i < LSQ_N; i++) begin lv[i] = 0; ls[i] = 0; ll[i] = 0; pend_free[i] = 0; lver[i] = 0; lline[i] = 0; end
    for (int i = 0; i < SB_N; i++) begin sv[i] = 0; sreq[i] = 0; sgnt[i] = 0; end
    for (int i = 0; i < NCK; i++) ck_busy[i] = 0;
    for (int i = 0; i < IW; i++) pb_v[i] = 0;
    for (int i = 0; i < LP; i++) sat_slot[i] = -1;
    iss_valid = '0; iss_op = '{default: OP_OTHER}; iss_lsq_idx = '0; iss_ckpt = '0;
    sat_valid = '0; sat_idx = '0; sat_addr = '0; lsq_free_mask = '0; fwd_addr = '0;
    inv_valid = 1'b0; inv_line = '0; head_valid = 1'b0; head_op = OP_OTHER; head_version = '0;
    head_done = 1'b0; head_st_addr = '0; head_st_data = '0; rob_empty = 1'b1;
    creq_ready = 1'b0; cgnt_valid = 1'b0; cgnt_idx = '0; cwr_ready = 1'b0;
    flush_valid = 1'b0; flush_ckpt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    forever begin
      cycle++;
      drive();
      #1;
      sample();
      @(negedge clk);
      if (n_retired >= TARGET && n_ovf >= 1) stopping = 1;
      if (stopping && rob_cnt == 0 && sb_count_ref() == 0) begin
        check(sb_count == '0, "store buffer drained at the end");
        finish_report();
      end
    end
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never exercised: %s", what); end
    else $display("  %-44s %0d", what, n);
  endtask

  task automatic finish_report();
    $display("cycles=%0d retired=%0d", cycle, n_retired);
    need(n_fence_early,  "fence retired with stores still buffered");
    need(n_stlr_early,   "store-release retired without draining");
    need(n_ld_stall,     "load held at ROB head by v_min,sb");
    need(n_squash,       "speculative load squashed");
    need(n_ldar_squash,  "squash due to in-flight load-acquire");
    need(n_nosquash,     "invalidation hit without squash");
    need(n_ooo_complete, "store completed ahead of an older store");
    need(n_min_complete, "completion by lowest version");
    need(n_age_complete, "completion of oldest above v_min,sb");
    need(n_sb_full,      "store held by full store buffer");
    need(n_orq_full,     "issue stalled by full ORQ");
    need(n_ovf,          "version overflow drain and reset");
    need(n_flush,        "misprediction restore");
    need(n_fwd,          "store-to-load forwarding hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired (retired=%0d)", n_retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
