// aa_fault_log: the legacy, system-wide fault log of the IOMMU.
//
// Keeps the pointers of an in-memory ring buffer of fixed-size fault
// entries (two 64-bit words here: the record header of aa_pkg and the
// faulting device address). When a fault is to be recorded (rec_valid) and
// the ring has room, the entry is granted the address rec_addr (= tail), the
// tail advances by one entry and an MSI is requested (msi pulse). When the
// ring is full the entry is dropped, the sticky overflow flag is set and
// the drop counter increments: as the paper says, the data of the access is
// discarded and an entry that does not fit is not recorded. The OS consumes
// entries and reports its progress with head_we/head_val.
//
// The paper gives the function (ring buffer in memory, drop on overflow,
// MSI to the OS); the entry size, one empty slot as the full/empty rule and
// the ports are this design's choices. base and size must be multiples of
// 16 bytes so an entry never wraps.
//
// Timing: rec_ok/rec_addr are combinational from the pointers; pointer
// updates, msi, overflow and drop counts happen at the clock edge.
module aa_fault_log
  import aa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cfg_we,
  input  addr_t cfg_base,
  input  addr_t cfg_size,
  input  logic  head_we,
  input  addr_t head_val,
  input  logic  rec_valid,
  output logic  rec_ok,
  output addr_t rec_addr,
  output logic  msi,
  output logic  overflow,
  output logic [31:0] dropped
);
  localparam addr_t ENTRY_BYTES = 64'd16;
  addr_t base, size, head, tail, used, nxt;

  always_comb begin
    used     = (tail >= head) ? tail - head : size - (head - tail);
    rec_ok   = (used + ENTRY_BYTES) < size;
    rec_addr = tail;
    nxt      = (tail + ENTRY_BYTES >= base + size) ? tail + ENTRY_BYTES - size : tail + ENTRY_BYTES;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0; size <= 64'd16; head <= '0; tail <= '0;
      msi <= 1'b0; overflow <= 1'b0; dropped <= '0;
    end else begin
      msi <= 1'b0;
      if (cfg_we) begin
        base <= cfg_base; size <= cfg_size; head <= cfg_base; tail <= cfg_base;
        overflow <= 1'b0; dropped <= '0;
      end else begin
        if (head_we) head <= head_val;
        if (rec_valid) begin
          if (rec_ok) begin
            tail <= nxt;
            msi  <= 1'b1;
          end else begin
            overflow <= 1'b1;
            dropped  <= dropped + 1'b1;
          end
        end
      end
    end
  end
endmodule
