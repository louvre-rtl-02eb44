// lsq_version_tags: version tags of the load/store queue, v_min,lsq, and
// the version-filtered squash on cache-line invalidation.
//
// Louvre adds a version field to every LSQ entry. This block holds those
// fields beside the core's own LSQ, indexed by the same entry number, plus
// what the invalidation snoop needs: whether the entry is a load, whether it
// has been satisfied, and the cache line it read.
//
// A conventional core squashes every speculative satisfied load whose line is
// invalidated ("base" squash, reported on base_mask). Louvre squashes such a
// load only if an ordering constraint on it is still active, which the
// versions reveal (Sec. "Speculative Execution and Invalidation"):
//   * its version is greater than v_min,sb: a store ordered before it by a
//     fence is still in the store buffer; or
//   * its version is greater than v_min,lsq: an access ordered before it is
//     still in the LSQ; or
//   * an in-flight load-acquire (from the ORQ) has a version <= the load's.
//     A load-acquire and the loads after it share one version, so this test
//     cannot be made from v_min values; using ">=" also squashes loads of the
//     same version that precede the load-acquire, which is safe but more
//     than needed (this design's choice: the ORQ holds versions, not ages).
// Squashed loads (squash_mask) lose their "satisfied" state and are
// re-executed by the core, keeping their entry and version.
//
// Interface: alloc_* write the tag of newly issued accesses (entry index from
// the core); sat_* mark a load satisfied with the line it read; free_mask
// releases entries (retired, or flushed on a misprediction). inv_valid /
// inv_line is an incoming invalidation; squash_mask and base_mask are
// combinational in that cycle, and the squash takes effect at the edge.
// vlsq is the minimum version over valid entries (combinational).
module lsq_version_tags #(
  parameter int unsigned LSQ_N    = 64,
  parameter int unsigned VER_W    = 10,
  parameter int unsigned ISSUE_W  = 2,
  parameter int unsigned LD_PORTS = 2,
  parameter int unsigned LINE_W   = 26,
  localparam int unsigned IDX_W   = $clog2(LSQ_N)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [ISSUE_W-1:0]            alloc_valid,
  input  logic [ISSUE_W-1:0][IDX_W-1:0] alloc_idx,
  input  logic [ISSUE_W-1:0]            alloc_is_load,
  input  logic [ISSUE_W-1:0][VER_W-1:0] alloc_version,
  input  logic [LD_PORTS-1:0]           sat_valid,
  input  logic [LD_PORTS-1:0][IDX_W-1:0] sat_idx,
  input  logic [LD_PORTS-1:0][LINE_W-1:0] sat_line,
  input  logic [LSQ_N-1:0]              free_mask,
  input  logic                          inv_valid,
  input  logic [LINE_W-1:0]             inv_line,
  input  logic                          vsb_valid,
  input  logic [VER_W-1:0]              vsb,
  input  logic                          ldar_active,
  input  logic [VER_W-1:0]              ldar_min_ver,
  output logic [LSQ_N-1:0]              squash_mask,
  output logic [LSQ_N-1:0]              base_mask,
  output logic                          vlsq_valid,
  output logic [VER_W-1:0]              vlsq,
  output logic                          empty
);

  logic [LSQ_N-1:0]             valid_q, load_q, sat_q;
  logic [LSQ_N-1:0][VER_W-1:0]  ver_q;
  logic [LSQ_N-1:0][LINE_W-1:0] line_q;
  logic [IDX_W-1:0]             min_idx_unused;

  min_version_tree #(.N(LSQ_N), .VER_W(VER_W)) u_min (
    .in_valid (valid_q),
    .in_ver   (ver_q),
    .any_valid(vlsq_valid),
    .min_ver  (vlsq),
    .min_idx  (min_idx_unused)
  );

  assign empty = (valid_q == '0);

  always_comb begin
    for (int i = 0; i < int'(LSQ_N); i++) begin
      logic hit, ordered;
      hit     = inv_valid && valid_q[i] && load_q[i] && sat_q[i] && (line_q[i] == inv_line);
      ordered = (vsb_valid && (ver_q[i] > vsb)) ||
                (vlsq_valid && (ver_q[i] > vlsq)) ||
                (ldar_active && (ver_q[i] >= ldar_min_ver));
      base_mask[i]   = hit;
      squash_mask[i] = hit && ordered;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      load_q  <= '0;
      sat_q   <= '0;
    end else begin
      sat_q   <= sat_q & ~squash_mask;
      valid_q <= valid_q & ~free_mask;
      for (int p = 0; p < int'(LD_PORTS); p++) begin
        if (sat_valid[p]) sat_q[sat_idx[p]] <= 1'b1;
      end
      for (int s = 0; s < int'(ISSUE_W); s++) begin
        if (alloc_valid[s]) begin
          valid_q[alloc_idx[s]] <= 1'b1;
          load_q[alloc_idx[s]]  <= alloc_is_load[s];
          sat_q[alloc_idx[s]]   <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(LD_PORTS); p++) begin
      if (sat_valid[p]) line_q[sat_idx[p]] <= sat_line[p];
    end
    for (int s = 0; s < int'(ISSUE_W); s++) begin
      if (alloc_valid[s]) ver_q[alloc_idx[s]] <= alloc_version[s];
    end
  end

  // An entry is allocated only when free, and satisfied only while valid.
  for (genvar s = 0; s < int'(ISSUE_W); s++) begin : g_chk_alloc
    a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
      alloc_valid[s] |-> (!valid_q[alloc_idx[s]] || free_mask[alloc_idx[s]]));
  end
  for (genvar p = 0; p < int'(LD_PORTS); p++) begin : g_chk_sat
    a_sat_valid: assert property (@(posedge clk) disable iff (!rst_n)
      sat_valid[p] |-> valid_q[sat_idx[p]]);
  end

endmodule
