// aa_log_table: the access log table of the extended IOMMU.
//
// A small content-addressable memory of tuples (IUID, base, head, tail,
// size): each entry describes one access log, a ring buffer in the memory of
// the process that owns the IUID. base/head/tail are physical byte
// addresses, size is in bytes (a multiple of 8, one 64-bit word per slot).
//
// Producer/consumer: the IOMMU appends at the tail, the CPU consumes from
// the head and reports its progress through one of two head-update ports:
// by IUID (a register write) or by table index (a head pointer the CPU
// wrote into its scratchpad; this one wins if both hit one entry). The tail
// the CPU sees only moves over complete records, so it never reads a hole.
// To allow transactions that interleave, the table keeps a second, internal
// pointer `resv` (reservation): a new transaction reserves its whole record
// at `resv` when its first word arrives; the committed tail catches up when
// the record is complete (commit port). One slot stays empty so that
// head == tail means empty; a reservation that does not fit is refused and
// the caller must stall (PCIe backpressure).
//
// From the paper: the tuple, the CAM, the ring, the reserved space for a
// whole transaction, committing the tail only behind complete records, and
// backpressure on overflow. This design's choices: the extra reservation
// pointer, the one empty slot, the programming ports and the sizes.
//
// Timing: lookups are combinational; configuration, head updates,
// reservations and commits take effect at the next clock edge.
module aa_log_table
  import aa_pkg::*;
#(
  parameter int ENTRIES = 32,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // programming (OS / runtime)
  input  logic          cfg_we,
  input  logic [IW-1:0] cfg_idx,
  input  logic          cfg_valid,
  input  iuid_t         cfg_iuid,
  input  addr_t         cfg_base,
  input  addr_t         cfg_size,
  // consumer progress (CPU)
  input  logic          head_we,
  input  iuid_t         head_iuid,
  input  addr_t         head_val,
  input  logic          hdi_we,
  input  logic [IW-1:0] hdi_idx,
  input  addr_t         hdi_val,
  // lookup by IUID
  input  iuid_t         lk_iuid,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  output addr_t         lk_resv,
  output addr_t         lk_free,
  // reserve rsv_bytes at lk_resv of entry rsv_idx
  input  logic          rsv_valid,
  input  logic [IW-1:0] rsv_idx,
  input  addr_t         rsv_bytes,
  // commit: advance the tail of entry cm_idx by cm_bytes
  input  logic          cm_valid,
  input  logic [IW-1:0] cm_idx,
  input  addr_t         cm_bytes,
  // state of every entry
  output logic [ENTRIES-1:0] e_valid,
  output iuid_t         e_iuid [ENTRIES],
  output addr_t         e_base [ENTRIES],
  output addr_t         e_size [ENTRIES],
  output addr_t         e_tail [ENTRIES],
  output addr_t         e_free [ENTRIES],
  output logic [ENTRIES-1:0] e_empty
);
  addr_t head [ENTRIES];
  addr_t tail [ENTRIES];
  addr_t resv [ENTRIES];

  function automatic addr_t wrap_add(addr_t p, addr_t n, addr_t b, addr_t sz);
    addr_t s;
    s = p + n;
    return (s >= b + sz) ? s - sz : s;
  endfunction

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      addr_t used;
      used       = (resv[i] >= head[i]) ? resv[i] - head[i] : e_size[i] - (head[i] - resv[i]);
      e_free[i]  = e_size[i] - 64'd8 - used;
      e_tail[i]  = tail[i];
      e_empty[i] = (head[i] == tail[i]) && (tail[i] == resv[i]);
    end
  end

  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (e_valid[i] && e_iuid[i] == lk_iuid && !lk_hit) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
    lk_resv = resv[lk_idx];
    lk_free = e_free[lk_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        e_iuid[i] <= '0; e_base[i] <= '0; e_size[i] <= 64'd8;
        head[i] <= '0; tail[i] <= '0; resv[i] <= '0;
      end
    end else begin
      if (cfg_we) begin
        e_valid[cfg_idx] <= cfg_valid;
        e_iuid[cfg_idx]  <= cfg_iuid;
        e_base[cfg_idx]  <= cfg_base;
        e_size[cfg_idx]  <= cfg_size;
        head[cfg_idx]    <= cfg_base;
        tail[cfg_idx]    <= cfg_base;
        resv[cfg_idx]    <= cfg_base;
      end
      if (rsv_valid)
        resv[rsv_idx] <= wrap_add(resv[rsv_idx], rsv_bytes, e_base[rsv_idx], e_size[rsv_idx]);
      if (cm_valid)
        tail[cm_idx] <= wrap_add(tail[cm_idx], cm_bytes, e_base[cm_idx], e_size[cm_idx]);
      if (head_we)
        for (int i = 0; i < ENTRIES; i++)
          if (e_valid[i] && e_iuid[i] == head_iuid) head[i] <= head_val;
      if (hdi_we && e_valid[hdi_idx]) head[hdi_idx] <= hdi_val;
    end
  end

  // A reservation never exceeds the free space.
  assert property (@(posedge clk) disable iff (!rst_n) rsv_valid |-> rsv_bytes <= e_free[rsv_idx]);
endmodule
