// aa_iotlb: I/O translation lookaside buffer of the extended IOMMU.
//
// Caches complete translations: key = (requester ID, 4 KB device page
// number), value = the raw 64-bit leaf PTE, which carries the physical page
// and all Active Access control bits (W, R, WL, WLD, RL, RLD, E, IUID), so a
// hit gives everything the policy needs.
//
// Organisation: fully associative with true LRU replacement. The paper
// evaluates direct-mapped to fully associative IOTLBs with LRU and random
// eviction and finds fully associative LRU the fastest; its entry count is
// not given, ENTRIES = 64 is this design's choice.
//
// Timing: the lookup is combinational (lk_hit/lk_pte in the same cycle as
// lk_key); a lookup with lk_valid=1 that hits updates the LRU ages at the
// next clock edge. A fill (fill_valid) writes an invalid entry if there is
// one, otherwise the least recently used one, at the next edge, and makes it
// the most recently used. inv_all clears every entry.
module aa_iotlb
  import aa_pkg::*;
#(
  parameter int ENTRIES = 64,
  parameter int KEY_W   = RID_W + 36
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [KEY_W-1:0] lk_key,
  output logic             lk_hit,
  output logic [63:0]      lk_pte,
  input  logic             fill_valid,
  input  logic [KEY_W-1:0] fill_key,
  input  logic [63:0]      fill_pte,
  input  logic             inv_all
);
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]  vld;
  logic [KEY_W-1:0]    key [ENTRIES];
  logic [63:0]         val [ENTRIES];
  logic [IW-1:0]       age [ENTRIES];   // 0 = most recently used

  logic [IW-1:0] hit_idx, vic_idx;
  logic          have_free;

  always_comb begin
    lk_hit  = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && key[i] == lk_key && !lk_hit) begin
        lk_hit  = 1'b1;
        hit_idx = IW'(i);
      end
    lk_pte = val[hit_idx];
  end

  always_comb begin
    have_free = 1'b0;
    vic_idx   = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!vld[i] && !have_free) begin
        have_free = 1'b1;
        vic_idx   = IW'(i);
      end
    if (!have_free)
      for (int i = 0; i < ENTRIES; i++)
        if (age[i] == IW'(ENTRIES - 1)) vic_idx = IW'(i);
  end

  // Entry to promote to most recently used this cycle.
  logic          touch;
  logic [IW-1:0] touch_idx;
  always_comb begin
    touch     = (fill_valid) || (lk_valid && lk_hit);
    touch_idx = fill_valid ? vic_idx : hit_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        age[i] <= IW'(i);
        key[i] <= '0;
        val[i] <= '0;
      end
    end else begin
      if (inv_all) vld <= '0;
      else if (fill_valid) begin
        vld[vic_idx] <= 1'b1;
        key[vic_idx] <= fill_key;
        val[vic_idx] <= fill_pte;
      end
      if (touch) begin
        for (int i = 0; i < ENTRIES; i++)
          if (age[i] < age[touch_idx]) age[i] <= age[i] + 1'b1;
        age[touch_idx] <= '0;
      end
    end
  end
endmodule
