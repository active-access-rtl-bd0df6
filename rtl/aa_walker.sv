// aa_walker: remapping-table walker of the extended IOMMU.
//
// On a context-cache miss it reads the root-entry table (indexed by the PCIe
// bus number) and the context-entry table (indexed by device/function) to
// find the root of the device's page table; on an IOTLB miss it then walks
// the 4-level page table (9 index bits per level, 4 KB pages, 48-bit device
// addresses) to the leaf PTE.
//
// The paper names the three kinds of remapping structures, says they live in
// main memory and that a 4-level table gives 4 KB pages; the entry formats
// here are this design's simplification: every entry is one 64-bit word,
// bit 0 of a root or context entry is "present" and bits 63:12 hold the next
// table's address; a page-table entry is present when R or W is set and
// bits 51:12 hold the next table (or, at the leaf, the page). The paper
// says superpages are supported by the IOMMU; an entry at level 2 (2 MB) or
// 3 (1 GB) with bit 7 (PS) set ends the walk as a superpage. The paper puts
// its Active Access bits in PTE bits 7-10, which are free only in 4 KB leaf
// entries, so it does not define them for superpages: this design clears
// them, and a superpage behaves as a plain (never logged) page. A missing
// entry ends the walk with pte = 0, which the policy treats as a fully
// protected page, so the access faults.
//
// Interface: start/need_ctx/rid/dev_addr/pt_root start a walk (pt_root is
// used when need_ctx = 0). The walker issues one-word reads on mem_rd_* and
// takes the data on rsp_valid/rsp_data, one read outstanding at a time.
// done pulses for one cycle with pte and, when the context was walked,
// ctx_fill/ctx_root for the context cache. Latency: 2 cycles per level plus
// memory latency per read.
module aa_walker
  import aa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t root_table,
  input  logic  start,
  input  logic  need_ctx,
  input  rid_t  rid,
  input  addr_t dev_addr,
  input  addr_t pt_root,
  output logic  busy,
  output logic  mem_rd_valid,
  input  logic  mem_rd_ready,
  output addr_t mem_rd_addr,
  input  logic  rsp_valid,
  input  data_t rsp_data,
  output logic  done,
  output logic [63:0] pte,
  output logic  ctx_fill,
  output addr_t ctx_root
);
  typedef enum logic [2:0] {W_IDLE, W_ROOT, W_CTX, W_PT, W_DONE} wstate_e;
  wstate_e st;
  logic       waiting;     // read issued, waiting for the data
  addr_t      tbl;         // table being read
  logic [1:0] lvl;         // page-table level - 1 (3 = top level)
  logic       ctx_walked;

  // A superpage leaf (PS set at level 2 or 3) is returned as the equivalent
  // 4 KB entry of the page being accessed: the page-number bits below the
  // superpage size come from the device address, and bits 7-10, which in a
  // superpage entry are PS and other VT-d fields rather than WL/WLD/RL/RLD,
  // are cleared, so a superpage is never logged. R, W, IUID and E are kept.
  function automatic logic [63:0] super_to_4k(input logic [63:0] e, input logic [1:0] l,
                                               input addr_t va);
    logic [63:0] r = e;
    r[PTE_RLD:PTE_WL] = 4'b0000;
    if (l == 2'd1) r[20:12] = va[20:12];      // 2 MB page
    else           r[29:12] = va[29:12];      // 1 GB page
    return r;
  endfunction

  addr_t idx_addr;
  always_comb begin
    unique case (st)
      W_ROOT:  idx_addr = tbl + {53'd0, rid[15:8], 3'b000};
      W_CTX:   idx_addr = tbl + {53'd0, rid[7:0], 3'b000};
      default: idx_addr = tbl + {52'd0, dev_addr[12 + 9*lvl +: 9], 3'b000};
    endcase
  end

  assign busy         = (st != W_IDLE);
  assign mem_rd_valid = (st == W_ROOT || st == W_CTX || st == W_PT) && !waiting;
  assign mem_rd_addr  = idx_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; waiting <= 1'b0; tbl <= '0; lvl <= '0;
      done <= 1'b0; pte <= '0; ctx_fill <= 1'b0; ctx_root <= '0; ctx_walked <= 1'b0;
    end else begin
      done     <= 1'b0;
      ctx_fill <= 1'b0;
      if (mem_rd_valid && mem_rd_ready) waiting <= 1'b1;
      unique case (st)
        W_IDLE: if (start) begin
          lvl        <= 2'd3;
          ctx_walked <= need_ctx;
          if (need_ctx) begin st <= W_ROOT; tbl <= root_table; end
          else          begin st <= W_PT;   tbl <= pt_root;    end
        end
        W_ROOT: if (waiting && rsp_valid) begin
          waiting <= 1'b0;
          if (rsp_data[0]) begin st <= W_CTX; tbl <= {rsp_data[63:12], 12'h000}; end
          else             begin st <= W_DONE; pte <= '0; ctx_walked <= 1'b0; end
        end
        W_CTX: if (waiting && rsp_valid) begin
          waiting <= 1'b0;
          if (rsp_data[0]) begin
            st <= W_PT; tbl <= {rsp_data[63:12], 12'h000};
            ctx_root <= {rsp_data[63:12], 12'h000};
          end else begin st <= W_DONE; pte <= '0; ctx_walked <= 1'b0; end
        end
        W_PT: if (waiting && rsp_valid) begin
          waiting <= 1'b0;
          if (!(rsp_data[PTE_R] || rsp_data[PTE_W]) && lvl != 2'd0) begin
            st <= W_DONE; pte <= '0;
          end else if (lvl == 2'd0) begin
            st <= W_DONE; pte <= rsp_data;
          end else if (lvl != 2'd3 && rsp_data[PTE_PS]) begin
            st <= W_DONE; pte <= super_to_4k(rsp_data, lvl, dev_addr);
          end else begin
            lvl <= lvl - 1'b1;
            tbl <= {12'h000, rsp_data[51:12], 12'h000};
          end
        end
        W_DONE: begin
          st       <= W_IDLE;
          done     <= 1'b1;
          ctx_fill <= ctx_walked;
        end
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
