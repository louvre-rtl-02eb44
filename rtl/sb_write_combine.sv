// sb_write_combine: finds the store-buffer entry an incoming store may be
// merged into when write combining is enabled.
//
// Write combining merges a new store into a pending store to the same
// address, saving an entry and a cache write. With versions it is only safe
// between stores of the same version: merging a store into one of a lower
// version would make it visible together with (and so possibly before)
// stores it is ordered after. This rule is from the design's description;
// the rest is this design's choice:
//   * the candidate is the youngest buffered store to the same word address
//     (merging into an older one would reorder it with the younger one);
//   * it must have the same version as the incoming store;
//   * it must not be completing in this cycle (busy_mask);
//   * stores are whole words, so a merge replaces the entry's data.
//
// Interface: the store buffer's valid bits, addresses, versions and age
// matrix (older[i][j]: entry j is older than entry i), and the incoming
// store's address and version. merge_hit/merge_idx are combinational.
module sb_write_combine #(
  parameter int unsigned SB_N   = 16,
  parameter int unsigned VER_W  = 10,
  parameter int unsigned ADDR_W = 32,
  localparam int unsigned IDX_W = $clog2(SB_N)
) (
  input  logic [SB_N-1:0]             valid,
  input  logic [SB_N-1:0][ADDR_W-1:0] addr,
  input  logic [SB_N-1:0][VER_W-1:0]  ver,
  input  logic [SB_N-1:0][SB_N-1:0]   older,
  input  logic [SB_N-1:0]             busy_mask,
  input  logic [ADDR_W-1:0]           ins_addr,
  input  logic [VER_W-1:0]            ins_version,
  output logic                        merge_hit,
  output logic [IDX_W-1:0]            merge_idx
);

  logic [SB_N-1:0] match, youngest;

  always_comb begin
    merge_hit = 1'b0;
    merge_idx = '0;
    for (int i = 0; i < int'(SB_N); i++) match[i] = valid[i] && (addr[i] == ins_addr);
    for (int i = 0; i < int'(SB_N); i++) begin
      youngest[i] = match[i];
      for (int j = 0; j < int'(SB_N); j++) if (match[j] && older[j][i]) youngest[i] = 1'b0;
      if (youngest[i] && (ver[i] == ins_version) && !busy_mask[i]) begin
        merge_hit = 1'b1;
        merge_idx = IDX_W'(i);
      end
    end
  end

endmodule
