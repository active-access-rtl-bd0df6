// aa_pkg: types and constants shared by the Active Access IOMMU.
//
// The extended IOMMU sits between a NIC and main memory. It sees the NIC's
// DMA traffic as a stream of 64-bit beats (one beat = one 8-byte word of a
// PCIe transaction) and the memory's read completions flowing back to the NIC.
// This package fixes the beat format, the memory-port format, the layout of
// the extended page-table entry (PTE) and the layout of a log record.
//
// From the paper: the PTE protection bits W and R, the four control bits
// WL, WLD, RL, RLD held in PTE bits 7-10, the 10-bit IOMMU User Domain ID
// (IUID) in PTE bits 52-61, the E bit, 4 KB pages under a 4-level table, and
// the 4 KB limit on one transaction. This design's own choices: R in bit 0
// and W in bit 1 (the usual second-level-table layout), the order of WL, WLD,
// RL, RLD inside bits 7-10 (the order the paper lists them), E in bit 63,
// the beat format and the two-word record header.
package aa_pkg;

  localparam int ADDR_W  = 64;
  localparam int DATA_W  = 64;
  localparam int IUID_W  = 10;   // PTE bits 52-61
  localparam int RID_W   = 16;   // PCIe requester ID (bus:8, device/function:8)
  localparam int TAG_W   = 8;    // PCIe transaction tag
  localparam int LEN_W   = 10;   // words per transaction, up to 512 (4 KB)
  localparam int MAX_TXN_WORDS = 512;
  localparam int HDR_WORDS = 2;  // metadata words in every log record

  // Extended PTE bit positions.
  localparam int PTE_R   = 0;
  localparam int PTE_W   = 1;
  localparam int PTE_WL  = 7;
  localparam int PTE_WLD = 8;
  localparam int PTE_RL  = 9;
  localparam int PTE_RLD = 10;
  localparam int PTE_IUID_LO = 52;
  localparam int PTE_E   = 63;
  localparam int PTE_PS  = 7;    // page size, in level-2/3 entries only

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [IUID_W-1:0] iuid_t;
  typedef logic [RID_W-1:0]  rid_t;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [LEN_W-1:0]  len_t;

  typedef enum logic [1:0] {
    TLP_MWR = 2'd0,   // memory write request (RDMA put)
    TLP_MRD = 2'd1,   // memory read request  (RDMA get)
    TLP_CPL = 2'd2    // completion with data (reply to a read)
  } tlp_kind_e;

  // One beat of a PCIe transaction. `first`/`last` mark the first and the
  // last word of the whole transaction; `len` is the transaction size in
  // words (for a read request: the number of words asked for).
  typedef struct packed {
    tlp_kind_e kind;
    rid_t      req_id;
    tag_t      tag;
    addr_t     addr;
    len_t      len;
    logic      first;
    logic      last;
    logic      ur;     // completion status: unsupported request (blocked get)
    data_t     data;
  } tlp_t;

  // Memory port request: one write word, or one read of `len` words.
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
    len_t  len;
    rid_t  req_id;
    tag_t  tag;
  } mem_req_t;

  // Memory port response: one word of read data.
  typedef struct packed {
    logic  last;
    rid_t  req_id;
    tag_t  tag;
    data_t data;
  } mem_rsp_t;

  // Decoded extended PTE.
  typedef struct packed {
    logic  r, w, wl, wld, rl, rld, e;
    iuid_t iuid;
    logic [39:0] ppn;    // PTE bits 51:12
  } pte_t;

  // What the policy decides for one access.
  typedef struct packed {
    logic  mem_ok;        // perform the default memory effect
    logic  fault;         // protection violated
    logic  to_access_log; // write a record into the IUID's access log
    logic  log_data;      // the record carries the data words
    logic  to_fault_log;  // write a legacy fault entry
    iuid_t iuid;
  } aa_action_t;

  function automatic pte_t decode_pte(input logic [63:0] raw);
    pte_t p;
    p.r    = raw[PTE_R];
    p.w    = raw[PTE_W];
    p.wl   = raw[PTE_WL];
    p.wld  = raw[PTE_WLD];
    p.rl   = raw[PTE_RL];
    p.rld  = raw[PTE_RLD];
    p.e    = raw[PTE_E];
    p.iuid = raw[PTE_IUID_LO +: IUID_W];
    p.ppn  = raw[51:12];
    return p;
  endfunction

  // Log record header, word 0:
  //   [63:62] kind (0 put, 1 get)  [61] data follows  [60] access faulted
  //   [57:48] IUID  [47:32] requester ID  [31:24] tag  [9:0] length in words
  // Word 1 is the device address of the access.
  function automatic data_t make_hdr(input logic is_read, input logic with_data,
                                     input logic fault, input iuid_t iuid,
                                     input rid_t rid, input tag_t tag, input len_t len);
    data_t h;
    h = '0;
    h[63:62] = {1'b0, is_read};
    h[61]    = with_data;
    h[60]    = fault;
    h[57:48] = iuid;
    h[47:32] = rid;
    h[31:24] = tag;
    h[9:0]   = len;
    return h;
  endfunction

endpackage
