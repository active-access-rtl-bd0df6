// aa_tag_buffer: the packet tag buffer of the extended IOMMU.
//
// A content-addressable memory keyed by the PCIe transaction identity
// (requester ID, tag). An entry lives from the first word of a logged
// transaction until its record is committed to the access log. It holds the
// access-log entry index, the start of the record reserved for the whole
// transaction, the current write pointer into that record and the record
// size. Two uses, both from the paper:
//   * gets whose page has RLD=1: the read request allocates an entry and the
//     read completions, which carry no full address, are matched by
//     (requester ID, tag) and their data is copied to the write pointer;
//   * transactions that interleave with others: each one writes into its
//     own reserved record, leaving holes that are filled as packets arrive.
// An entry marked complete is committed (the log's committed tail moves over
// it and the entry is freed) once its record is the oldest one of its log,
// i.e. its start equals the log's committed tail; one commit per cycle.
//
// Interface/timing: lookup is combinational; alloc, update and commit act
// at the clock edge. `full` tells the engine to stall new logged
// transactions. The number of entries is this design's choice (32, the
// number of outstanding tags of a PCIe device without extended tags).
module aa_tag_buffer
  import aa_pkg::*;
#(
  parameter int ENTRIES = 32,
  parameter int LOGS    = 32,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int LW = (LOGS > 1) ? $clog2(LOGS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  rid_t          lk_rid,
  input  tag_t          lk_tag,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  output addr_t         lk_wptr,
  output logic [LW-1:0] lk_log,
  output logic          full,
  input  logic          al_valid,
  input  rid_t          al_rid,
  input  tag_t          al_tag,
  input  logic [LW-1:0] al_log,
  input  addr_t         al_start,
  input  addr_t         al_wptr,
  input  addr_t         al_bytes,
  input  logic          al_complete,
  input  logic          up_valid,
  input  logic [IW-1:0] up_idx,
  input  addr_t         up_wptr,
  input  logic          up_complete,
  input  addr_t         log_tail [LOGS],
  output logic          cm_valid,
  output logic [LW-1:0] cm_log,
  output addr_t         cm_bytes,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  logic [ENTRIES-1:0] vld, cpl;
  rid_t               rid   [ENTRIES];
  tag_t               tg    [ENTRIES];
  logic [LW-1:0]      lg    [ENTRIES];
  addr_t              start [ENTRIES];
  addr_t              wptr  [ENTRIES];
  addr_t              bytes [ENTRIES];

  logic [IW-1:0] free_idx, cm_idx;
  always_comb begin
    lk_hit = 1'b0; lk_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && !cpl[i] && rid[i] == lk_rid && tg[i] == lk_tag && !lk_hit) begin
        lk_hit = 1'b1; lk_idx = IW'(i);
      end
    lk_wptr = wptr[lk_idx];
    lk_log  = lg[lk_idx];

    full = 1'b1; free_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!vld[i] && full) begin full = 1'b0; free_idx = IW'(i); end

    cm_valid = 1'b0; cm_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && cpl[i] && start[i] == log_tail[lg[i]] && !cm_valid) begin
        cm_valid = 1'b1; cm_idx = IW'(i);
      end
    cm_log   = lg[cm_idx];
    cm_bytes = bytes[cm_idx];

    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy += $bits(occupancy)'(vld[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; cpl <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        rid[i] <= '0; tg[i] <= '0; lg[i] <= '0; start[i] <= '0; wptr[i] <= '0; bytes[i] <= '0;
      end
    end else begin
      if (cm_valid) vld[cm_idx] <= 1'b0;
      if (up_valid) begin
        wptr[up_idx] <= up_wptr;
        cpl[up_idx]  <= up_complete;
      end
      if (al_valid && !full) begin
        vld[free_idx]   <= 1'b1;
        cpl[free_idx]   <= al_complete;
        rid[free_idx]   <= al_rid;
        tg[free_idx]    <= al_tag;
        lg[free_idx]    <= al_log;
        start[free_idx] <= al_start;
        wptr[free_idx]  <= al_wptr;
        bytes[free_idx] <= al_bytes;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) al_valid |-> !full);
endmodule
