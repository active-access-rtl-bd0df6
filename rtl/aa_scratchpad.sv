// aa_scratchpad: CPU scratchpad shared by the IOMMU and the CPU, holding the
// head and tail pointers of the access logs.
//
// A small two-port memory placed next to the CPU. Word 2i holds the tail of
// access log i and word 2i+1 its head. Port A belongs to the IOMMU, which
// writes the committed tail of log i into word 2i whenever a record is
// committed, so that a dedicated polling hyperthread finds new records
// without touching main memory. Port B belongs to the CPU: it reads (one
// cycle latency) and writes. When the CPU writes an odd word (a head), the
// write is also passed to the IOMMU on hd_valid/hd_idx/hd_val in the next
// cycle, so that the log table learns how far the CPU has consumed. The
// CPU may use the remaining words as it likes. If both ports write one word
// in the same cycle, port A wins.
//
// The scratchpad, its direct connection to the IOMMU and the placement of
// the head/tail pointers in it follow the paper; the size, the two-words-
// per-log layout, the head forwarding and the write priority are this
// design's choices.
module aa_scratchpad
  import aa_pkg::*;
#(
  parameter int DEPTH = 64,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  data_t         a_wdata,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  data_t         b_wdata,
  output data_t         b_rdata,
  output logic          hd_valid,   // the CPU wrote a head word
  output logic [AW-2:0] hd_idx,     // log index (b_addr / 2)
  output data_t         hd_val
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_we && !(a_we && a_addr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_we) mem[a_addr] <= a_wdata;
    b_rdata <= mem[b_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hd_valid <= 1'b0; hd_idx <= '0; hd_val <= '0;
    end else begin
      hd_valid <= b_we && b_addr[0];
      hd_idx   <= b_addr[AW-1:1];
      hd_val   <= b_wdata;
    end
  end
endmodule
