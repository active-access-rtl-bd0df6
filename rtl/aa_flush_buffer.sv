// aa_flush_buffer: the flushing buffer that implements active flushes.
//
// A content-addressable memory of tuples (address, IUID, active,
// requester-ID, tag). The OS registers a flushing page (a reserved device
// page) together with the IUID of the access log it guards; active, the
// requester ID and the tag start at zero. An active flush from a remote
// process is a get to that page: the IOMMU looks it up here (lk_*), and on a
// hit captures it (cap_*): active becomes 1 and the get's requester ID and
// tag are stored; the get itself does not reach memory. The lookup also
// reports the guarded IUID, the access log that holds it and whether that
// log still has records (lk_busy), so that the IOMMU can start the CPU's
// processing of the log at once. When the access log
// of that IUID has been drained by the CPU (head == tail, nothing reserved)
// the buffer offers the flush completion (done_*); when it is taken
// (done_ready) active returns to 0. The completion tells the source that its
// active accesses have been processed.
//
// All of this follows the paper; the matching granularity (4 KB device page)
// and the handshake are this design's choices. Lookup is combinational, the
// rest acts at the clock edge; done_* is a registered-state, combinational
// output (lowest active index first).
module aa_flush_buffer
  import aa_pkg::*;
#(
  parameter int ENTRIES = 32,
  parameter int LOGS    = 32,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int LW = (LOGS > 1) ? $clog2(LOGS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [IW-1:0] cfg_idx,
  input  logic          cfg_valid,
  input  addr_t         cfg_addr,
  input  iuid_t         cfg_iuid,
  input  addr_t         lk_addr,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  output iuid_t         lk_iuid,
  output logic [LW-1:0] lk_log,
  output logic          lk_busy,
  input  logic          cap_valid,
  input  logic [IW-1:0] cap_idx,
  input  rid_t          cap_rid,
  input  tag_t          cap_tag,
  input  logic [LOGS-1:0] log_valid,
  input  iuid_t         log_iuid [LOGS],
  input  logic [LOGS-1:0] log_empty,
  output logic          done_valid,
  input  logic          done_ready,
  output rid_t          done_rid,
  output tag_t          done_tag,
  output iuid_t         done_iuid
);
  logic [ENTRIES-1:0] vld, active, drained;
  logic [51:0]        page [ENTRIES];
  iuid_t              iuid [ENTRIES];
  rid_t               rid  [ENTRIES];
  tag_t               tg   [ENTRIES];
  logic [IW-1:0]      done_idx;

  always_comb begin
    lk_hit = 1'b0; lk_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && page[i] == lk_addr[63:12] && !lk_hit) begin
        lk_hit = 1'b1; lk_idx = IW'(i);
      end
    for (int i = 0; i < ENTRIES; i++) begin
      // A log that is not configured counts as drained.
      drained[i] = 1'b1;
      for (int j = 0; j < LOGS; j++)
        if (log_valid[j] && log_iuid[j] == iuid[i] && !log_empty[j]) drained[i] = 1'b0;
    end
    lk_iuid = iuid[lk_idx];
    lk_log  = '0;
    lk_busy = 1'b0;
    for (int j = 0; j < LOGS; j++)
      if (log_valid[j] && log_iuid[j] == lk_iuid && !lk_busy) begin
        lk_log  = LW'(j);
        lk_busy = !log_empty[j];
      end
    done_valid = 1'b0; done_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (vld[i] && active[i] && drained[i] && !done_valid) begin
        done_valid = 1'b1; done_idx = IW'(i);
      end
    done_rid  = rid[done_idx];
    done_tag  = tg[done_idx];
    done_iuid = iuid[done_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0; active <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        page[i] <= '0; iuid[i] <= '0; rid[i] <= '0; tg[i] <= '0;
      end
    end else begin
      if (done_valid && done_ready) active[done_idx] <= 1'b0;
      if (cap_valid) begin
        active[cap_idx] <= 1'b1;
        rid[cap_idx]    <= cap_rid;
        tg[cap_idx]     <= cap_tag;
      end
      if (cfg_we) begin
        vld[cfg_idx]    <= cfg_valid;
        page[cfg_idx]   <= cfg_addr[63:12];
        iuid[cfg_idx]   <= cfg_iuid;
        active[cfg_idx] <= 1'b0;
        rid[cfg_idx]    <= '0;
        tg[cfg_idx]     <= '0;
      end
    end
  end
endmodule
