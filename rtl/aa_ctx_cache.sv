// aa_ctx_cache: context cache of the extended IOMMU.
//
// Maps a PCIe requester ID (the device) to the physical address of the root
// of that device's IOMMU page table, so the remapping tables (root-entry and
// context-entry tables) need not be walked for every access. The paper names
// the cache and its content; organisation and size are this design's choice:
// ENTRIES entries, fully associative, filled round-robin.
//
// Timing: combinational lookup (lk_hit/lk_root in the cycle of lk_rid);
// fill_valid writes the next round-robin slot at the clock edge; inv_all
// empties the cache.
module aa_ctx_cache
  import aa_pkg::*;
#(
  parameter int ENTRIES = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  rid_t  lk_rid,
  output logic  lk_hit,
  output addr_t lk_root,
  input  logic  fill_valid,
  input  rid_t  fill_rid,
  input  addr_t fill_root,
  input  logic  inv_all
);
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] vld;
  rid_t               rid  [ENTRIES];
  addr_t              root [ENTRIES];
  logic [IW-1:0]      nxt;

  always_comb begin
    lk_hit  = 1'b0;
    lk_root = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && rid[i] == lk_rid && !lk_hit) begin
        lk_hit  = 1'b1;
        lk_root = root[i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      nxt <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        rid[i]  <= '0;
        root[i] <= '0;
      end
    end else if (inv_all) begin
      vld <= '0;
    end else if (fill_valid) begin
      vld[nxt]  <= 1'b1;
      rid[nxt]  <= fill_rid;
      root[nxt] <= fill_root;
      nxt       <= (nxt == IW'(ENTRIES - 1)) ? '0 : nxt + 1'b1;
    end
  end
endmodule
