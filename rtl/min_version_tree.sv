// min_version_tree: minimum version over the valid entries of a structure.
//
// The paper keeps two "min version registers", v_min,sb for the store buffer
// and v_min,lsq for the load/store queue, and says that for a 16-entry store
// buffer they are produced by a hierarchical comparator network of 15
// comparators. This module is that network: a balanced binary tree whose
// leaves are the entries and whose every inner node keeps the smaller of its
// two children. N entries are padded up to the next power of two P with
// invalid leaves, so the tree has P-1 two-input comparators (15 for N = 16,
// 63 for the 64-entry LSQ).
//
// Interface: in_valid/in_ver give each entry's valid bit and version. The
// outputs are combinational: any_valid is low when no entry is valid (then
// min_ver and min_idx are 0), min_ver is the smallest version among valid
// entries and min_idx an entry holding it. On equal versions the lower index
// wins; that tie rule, and computing the tree combinationally from the
// entries' registers (so the minimum is exact in the cycle an entry changes),
// are this design's choices.
module min_version_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned VER_W = 10,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]            in_valid,
  input  logic [N-1:0][VER_W-1:0] in_ver,
  output logic                    any_valid,
  output logic [VER_W-1:0]        min_ver,
  output logic [IDX_W-1:0]        min_idx
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned P      = 1 << LEVELS;
  localparam int unsigned NODES  = 2 * P - 1;

  // Heap-ordered nodes: node k has children 2k+1 and 2k+2; leaves start at P-1.
  logic [NODES-1:0]            nd_valid;
  logic [NODES-1:0][VER_W-1:0] nd_ver;
  logic [NODES-1:0][IDX_W-1:0] nd_idx;

  always_comb begin
    nd_valid = '0;
    nd_ver   = '0;
    nd_idx   = '0;
    for (int unsigned i = 0; i < P; i++) begin
      if (i < N) begin
        nd_valid[P-1+i] = in_valid[i];
        nd_ver[P-1+i]   = in_ver[i];
        nd_idx[P-1+i]   = IDX_W'(i);
      end
    end
    for (int k = int'(P) - 2; k >= 0; k--) begin
      // Take the right child only if it is valid and strictly smaller, or the
      // left child is invalid.
      if (nd_valid[2*k+2] && (!nd_valid[2*k+1] || (nd_ver[2*k+2] < nd_ver[2*k+1]))) begin
        nd_valid[k] = 1'b1;
        nd_ver[k]   = nd_ver[2*k+2];
        nd_idx[k]   = nd_idx[2*k+2];
      end else begin
        nd_valid[k] = nd_valid[2*k+1];
        nd_ver[k]   = nd_ver[2*k+1];
        nd_idx[k]   = nd_idx[2*k+1];
      end
    end
    any_valid = nd_valid[0];
    min_ver   = nd_valid[0] ? nd_ver[0] : '0;
    min_idx   = nd_valid[0] ? nd_idx[0] : '0;
  end

endmodule
