// aa_notifier: interrupt conditions for the access logs.
//
// For every access log it counts the records committed since its last
// interrupt. When a record is committed to log cm_idx it requests an MSI for
// that log (irq_valid with irq_idx/irq_iuid, one-cycle pulse) if either the
// count reaches `interval`, or the free space left in the log is below
// `threshold` bytes; the count then restarts. interval = 0 disables the
// count condition and threshold = 0 the free-space condition. Polling and
// direct scratchpad access need no interrupt and use neither.
//
// A kick (kick_valid/kick_idx/kick_iuid) requests an MSI for a log at once,
// whatever its count: the IOMMU sends one when it captures an active flush
// for a log that still holds records, so that the CPU starts processing
// it. A kick that meets a record interrupt in the same cycle is held in a
// one-entry pending slot and sent in the next cycle without a record
// interrupt. A kick is taken when kick_valid and kick_ready are both high;
// kick_ready is low only while the slot holds a kick for another log (a
// kick for the same log merges with it: one interrupt serves both).
//
// From the paper: the two conditions (free space below a threshold, or at
// pre-determined intervals) and the evaluation's interrupt every 10 inserts,
// the default of INTERVAL. Counting committed records as the interval is
// this design's reading of "intervals". The paper says that after an active
// flush is captured "processing of a targeted access log is then initiated
// with any scheme" of the CPU interaction; the kick is how this design
// initiates it when interrupts are used.
module aa_notifier
  import aa_pkg::*;
#(
  parameter int LOGS     = 32,
  parameter int INTERVAL = 10,
  localparam int LW = (LOGS > 1) ? $clog2(LOGS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  logic [15:0]   cfg_interval,
  input  addr_t         cfg_threshold,
  input  logic          cm_valid,
  input  logic [LW-1:0] cm_idx,
  input  iuid_t         cm_iuid,
  input  addr_t         cm_free,
  input  logic          kick_valid,
  output logic          kick_ready,
  input  logic [LW-1:0] kick_idx,
  input  iuid_t         kick_iuid,
  output logic          irq_valid,
  output logic [LW-1:0] irq_idx,
  output iuid_t         irq_iuid
);
  logic [15:0] interval;
  addr_t       threshold;
  logic [15:0] cnt [LOGS];
  logic        fire;
  logic [15:0] cnt_next;
  logic        cm_irq;
  logic          pend;
  logic [LW-1:0] pend_idx;
  iuid_t         pend_iuid;

  always_comb begin
    cnt_next = cnt[cm_idx] + 16'd1;
    fire = ((interval != 0) && (cnt_next >= interval)) ||
           ((threshold != 0) && (cm_free < threshold));
    cm_irq = cm_valid && !cfg_we && fire;
    kick_ready = !pend || (pend_idx == kick_idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      interval  <= 16'(INTERVAL);
      threshold <= '0;
      irq_valid <= 1'b0; irq_idx <= '0; irq_iuid <= '0;
      pend <= 1'b0; pend_idx <= '0; pend_iuid <= '0;
      for (int i = 0; i < LOGS; i++) cnt[i] <= '0;
    end else begin
      irq_valid <= 1'b0;
      if (cfg_we) begin
        interval  <= cfg_interval;
        threshold <= cfg_threshold;
        for (int i = 0; i < LOGS; i++) cnt[i] <= '0;
      end else if (cm_valid) begin
        cnt[cm_idx] <= fire ? 16'd0 : cnt_next;
        irq_valid   <= fire;
        irq_idx     <= cm_idx;
        irq_iuid    <= cm_iuid;
      end
      // kicks: sent in a cycle with no record interrupt, pending one first
      if (!cm_irq) begin
        if (pend) begin
          irq_valid <= 1'b1; irq_idx <= pend_idx; irq_iuid <= pend_iuid;
          pend      <= 1'b0;
        end else if (kick_valid) begin
          irq_valid <= 1'b1; irq_idx <= kick_idx; irq_iuid <= kick_iuid;
        end
      end else if (kick_valid && kick_ready) begin
        pend <= 1'b1; pend_idx <= kick_idx; pend_iuid <= kick_iuid;
      end
    end
  end
endmodule
