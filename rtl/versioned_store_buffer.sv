// versioned_store_buffer: unordered post-commit store buffer whose entries
// carry ordering versions.
//
// A store (or store-release) enters when it retires from the ROB and leaves
// when it has written the L1 data cache ("completes"). The buffer is
// unordered: stores may complete in any order the versions allow. The rule is
// the paper's (Sec. "Store Completion"): among the stores whose cache line is
// available, one whose version equals the lowest version in the buffer
// (v_min,sb) may complete; the oldest store in the buffer may complete
// whatever its version, since nothing can be ordered before it. So stores of
// one version drain in any order, a store of a higher version waits for all
// lower ones, and a store-release (version vr+1) waits exactly for the stores
// issued before it.
//
// Added by this design: a store never completes ahead of an older store to
// the same address still in the buffer, so that per-address order is kept
// (the paper does not discuss same-address stores).
//
// Structure (SB_N entries, 16 in the paper's evaluation):
//  * per entry: valid, word address, data, version, "permission requested"
//    and "line available" flags;
//  * an age matrix, older[i][j] = entry j was inserted before entry i. It
//    gives the oldest entry and, with the address CAM, the youngest matching
//    store for store-to-load forwarding (the paper's CAM of "destination
//    address and relative age");
//  * a min_version_tree over the versions, producing v_min,sb.
//
// Cache side, this design's own protocol: the buffer asks for write
// permission of one entry's line per cycle (creq valid/ready, with the entry
// index); the cache answers later with cgnt_valid/cgnt_idx, after which the
// line counts as available; completion is a write (cwr valid/ready) of one
// store per cycle. It is assumed that a granted line stays writable until
// the write.
//
// Timing: insertion (ins_valid && ins_ready) and completion (cwr_valid &&
// cwr_ready) take effect at the clock edge; vsb, the oldest entry, the
// eligibility and forwarding results are combinational from the entries.
// ins_ready is low when all entries are in use ("store buffer full").
//
// Write combining (WRITE_COMBINE, off by default as in the evaluated
// configuration): a store whose address and version match the youngest
// buffered store to that address (found by sb_write_combine) overwrites that
// entry's data instead of taking a new entry, and is accepted even when the
// buffer is full. Stores of different versions are never merged. With write
// combining on, ins_ready also depends on ins_addr and ins_version.
module versioned_store_buffer #(
  parameter int unsigned SB_N   = 16,
  parameter int unsigned VER_W  = 10,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned LINE_OFF = 6,
  parameter bit          WRITE_COMBINE = 1'b0,
  localparam int unsigned IDX_W = $clog2(SB_N),
  localparam int unsigned CNT_W = $clog2(SB_N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // insertion from retirement
  input  logic                  ins_valid,
  input  logic [ADDR_W-1:0]     ins_addr,
  input  logic [DATA_W-1:0]     ins_data,
  input  logic [VER_W-1:0]      ins_version,
  output logic                  ins_ready,
  // write-permission request to the L1D
  output logic                  creq_valid,
  output logic [IDX_W-1:0]      creq_idx,
  output logic [ADDR_W-LINE_OFF-1:0] creq_line,
  input  logic                  creq_ready,
  // permission granted: the entry's line is available
  input  logic                  cgnt_valid,
  input  logic [IDX_W-1:0]      cgnt_idx,
  // completion write to the L1D
  output logic                  cwr_valid,
  output logic [IDX_W-1:0]      cwr_idx,
  output logic [ADDR_W-1:0]     cwr_addr,
  output logic [DATA_W-1:0]     cwr_data,
  output logic [VER_W-1:0]      cwr_version,
  output logic                  cwr_by_age,   // completes as oldest, above v_min,sb
  input  logic                  cwr_ready,
  // store-to-load forwarding lookup
  input  logic [ADDR_W-1:0]     fwd_addr,
  output logic                  fwd_hit,
  output logic [DATA_W-1:0]     fwd_data,
  // status
  output logic                  vsb_valid,
  output logic [VER_W-1:0]      vsb,
  output logic [CNT_W-1:0]      count,
  output logic                  empty
);

  logic [SB_N-1:0]             valid_q, req_q, lineok_q;
  logic [SB_N-1:0][ADDR_W-1:0] addr_q;
  logic [SB_N-1:0][DATA_W-1:0] data_q;
  logic [SB_N-1:0][VER_W-1:0]  ver_q;
  logic [SB_N-1:0][SB_N-1:0]   older_q;

  logic [IDX_W-1:0] min_idx_unused;
  logic [SB_N-1:0]  oldest, blocked, eligible, fmatch;
  logic [IDX_W-1:0] ins_idx;
  logic             ins_fire, cwr_fire, creq_fire;
  logic             alloc_fire, merge_fire, wc_hit, merge_hit;
  logic [IDX_W-1:0] merge_idx;

  // write combining: same address, same version, youngest such entry
  sb_write_combine #(.SB_N(SB_N), .VER_W(VER_W), .ADDR_W(ADDR_W)) u_wc (
    .valid      (valid_q),
    .addr       (addr_q),
    .ver        (ver_q),
    .older      (older_q),
    .busy_mask  (cwr_valid ? (SB_N'(1) << cwr_idx) : '0),
    .ins_addr,
    .ins_version,
    .merge_hit,
    .merge_idx
  );
  assign wc_hit = WRITE_COMBINE && merge_hit;

  min_version_tree #(.N(SB_N), .VER_W(VER_W)) u_min (
    .in_valid (valid_q),
    .in_ver   (ver_q),
    .any_valid(vsb_valid),
    .min_ver  (vsb),
    .min_idx  (min_idx_unused)
  );

  always_comb begin
    count = '0;
    for (int i = 0; i < int'(SB_N); i++) count = count + CNT_W'(valid_q[i]);
  end
  assign empty     = (valid_q == '0);
  assign ins_ready = !(&valid_q) || wc_hit;

  // free slot for insertion: lowest free index
  always_comb begin
    ins_idx = '0;
    for (int i = int'(SB_N) - 1; i >= 0; i--) if (!valid_q[i]) ins_idx = IDX_W'(i);
  end

  // oldest entry, same-address blocking, completion eligibility
  always_comb begin
    for (int i = 0; i < int'(SB_N); i++) begin
      oldest[i]  = valid_q[i] && ((older_q[i] & valid_q) == '0);
      blocked[i] = 1'b0;
      for (int j = 0; j < int'(SB_N); j++) begin
        if (valid_q[j] && older_q[i][j] && (addr_q[j] == addr_q[i])) blocked[i] = 1'b1;
      end
      eligible[i] = valid_q[i] && lineok_q[i] && !blocked[i] &&
                    (oldest[i] || (ver_q[i] == vsb));
    end
  end

  // completion select: the oldest entry if eligible, else the lowest index
  always_comb begin
    cwr_valid = |eligible;
    cwr_idx   = '0;
    for (int i = int'(SB_N) - 1; i >= 0; i--) if (eligible[i]) cwr_idx = IDX_W'(i);
    for (int i = 0; i < int'(SB_N); i++) if (eligible[i] && oldest[i]) cwr_idx = IDX_W'(i);
    cwr_addr    = addr_q[cwr_idx];
    cwr_data    = data_q[cwr_idx];
    cwr_version = ver_q[cwr_idx];
    cwr_by_age  = cwr_valid && (ver_q[cwr_idx] != vsb);
  end

  // permission request: lowest-index entry that has not asked yet
  always_comb begin
    creq_valid = 1'b0;
    creq_idx   = '0;
    for (int i = int'(SB_N) - 1; i >= 0; i--) begin
      if (valid_q[i] && !req_q[i]) begin
        creq_valid = 1'b1;
        creq_idx   = IDX_W'(i);
      end
    end
    creq_line = addr_q[creq_idx][ADDR_W-1:LINE_OFF];
  end

  // forwarding: youngest valid entry with the same address
  always_comb begin
    fwd_hit  = 1'b0;
    fwd_data = '0;
    for (int i = 0; i < int'(SB_N); i++) fmatch[i] = valid_q[i] && (addr_q[i] == fwd_addr);
    for (int i = 0; i < int'(SB_N); i++) begin
      logic younger_match;
      younger_match = 1'b0;
      for (int j = 0; j < int'(SB_N); j++) if (fmatch[j] && older_q[j][i]) younger_match = 1'b1;
      if (fmatch[i] && !younger_match) begin
        fwd_hit  = 1'b1;
        fwd_data = data_q[i];
      end
    end
  end

  assign ins_fire  = ins_valid && ins_ready;
  assign alloc_fire = ins_fire && !wc_hit;
  assign merge_fire = ins_fire && wc_hit;
  assign cwr_fire  = cwr_valid && cwr_ready;
  assign creq_fire = creq_valid && creq_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q  <= '0;
      req_q    <= '0;
      lineok_q <= '0;
      older_q  <= '0;
    end else begin
      if (creq_fire) req_q[creq_idx] <= 1'b1;
      if (cgnt_valid && valid_q[cgnt_idx]) lineok_q[cgnt_idx] <= 1'b1;
      if (cwr_fire) valid_q[cwr_idx] <= 1'b0;
      if (alloc_fire) begin
        valid_q[ins_idx]  <= 1'b1;
        req_q[ins_idx]    <= 1'b0;
        lineok_q[ins_idx] <= 1'b0;
        for (int i = 0; i < int'(SB_N); i++) older_q[i][ins_idx] <= 1'b0;
        older_q[ins_idx] <= valid_q & ~(cwr_fire ? (SB_N'(1) << cwr_idx) : '0);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (merge_fire) data_q[merge_idx] <= ins_data;
    if (alloc_fire) begin
      addr_q[ins_idx] <= ins_addr;
      data_q[ins_idx] <= ins_data;
      ver_q[ins_idx]  <= ins_version;
    end
  end

  a_no_ins_when_full: assert property (@(posedge clk) disable iff (!rst_n) alloc_fire |-> !valid_q[ins_idx]);
  a_grant_valid: assert property (@(posedge clk) disable iff (!rst_n) cgnt_valid |-> valid_q[cgnt_idx] && req_q[cgnt_idx]);

endmodule
