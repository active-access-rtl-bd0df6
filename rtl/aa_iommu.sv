// aa_iommu: an IOMMU extended with Active Access.
//
// The unit sits between a NIC and main memory. Remote puts and gets arrive
// from the NIC as PCIe memory writes and reads; the IOMMU translates their
// device addresses, checks the extended page-table entry of the page they
// touch and, following its control bits, lets them reach memory, blocks
// them, and/or records their metadata and data in the access log of the
// user domain (IUID) the page belongs to. Handlers on the CPU consume these
// logs, so a plain remote put or get can trigger work at the target.
//
// Structure (all blocks are instantiated here):
//   aa_ctx_cache   requester ID -> page-table root
//   aa_iotlb       (requester ID, device page) -> leaf PTE
//   aa_walker      root/context/4-level table walk on a miss (own read port)
//   aa_policy      PTE bits x access direction -> actions
//   aa_log_table   access-log ring pointers per IUID (CAM)
//   aa_tag_buffer  records in flight, keyed by (requester ID, tag)
//   aa_flush_buffer active-flush pages and captured flush gets
//   aa_fault_log   legacy fault log pointers and its MSI
//   aa_notifier    per-log MSI on threshold or every N records
//   aa_scratchpad  CPU scratchpad: word 2i = committed tail of log i (IOMMU
//                  writes), word 2i+1 = its head (CPU writes, passed back here)
//
// One engine processes one 64-bit beat at a time. It takes, in priority
// order, (1) a finished active flush, whose completion it sends to the NIC,
// (2) a read completion from memory, which it copies into the access log
// when its (requester ID, tag) is in the tag buffer and then forwards to the
// NIC, (3) a request beat from the NIC. A request beat goes through:
// flush-page check (gets only), translation, policy, reservation of a whole
// record in the access log and a tag-buffer entry (first beat of a logged
// transaction), then up to six memory-port operations, each one cycle plus
// handshake: record header (2 words), legacy fault entry (2 words), the
// access itself, one logged data word. A beat that needs log space that is
// not free is parked: the engine keeps serving completions and flushes and
// retries it, and meanwhile holds up_ready low (PCIe backpressure). Records
// become visible to the CPU (committed tail) only when complete and in
// order, so interleaved transactions leave holes that are filled later.
// A get to a flushing page is captured there and goes no further; if the
// guarded log still holds records, the capture also requests the log's
// interrupt (through the notifier), waiting in the flush-page check step
// while the notifier cannot take it.
//
// Configuration is a 64-bit register-write port (cfg_*); the register map is
// this design's choice and listed below. Interrupt requests (MSI) are
// brought out as pulses for an interrupt controller outside this unit.
//   0x00 ROOT_TABLE      physical address of the root-entry table
//   0x08 FLOG_BASE       fault log base (staged)
//   0x10 FLOG_SIZE       fault log size in bytes; writing it (re)starts the log
//   0x18 FLOG_HEAD       fault log head, written by the OS
//   0x20 NOTIFY          [15:0] records per interrupt, [63:16] free-space threshold (bytes)
//   0x30 INVALIDATE      any write empties the context cache and the IOTLB
//   0x40 STAGE_BASE      access log base for LOG_CMD
//   0x48 STAGE_SIZE      access log size for LOG_CMD
//   0x50 STAGE_ADDR      flushing page address for FLUSH_CMD
//   0x58 LOG_CMD         [63] valid, [47:32] entry, [9:0] IUID
//   0x60 LOG_HEAD        [61:52] IUID, [51:0] new head address (CPU consumed up to it);
//                        a CPU write of word 2i+1 of the scratchpad does the same for log i
//   0x70 FLUSH_CMD       [63] valid, [47:32] entry, [9:0] IUID
module aa_iommu
  import aa_pkg::*;
#(
  parameter int LOGS          = 32,
  parameter int TAGS          = 32,
  parameter int FLUSH_ENTRIES = 32,
  parameter int TLB_ENTRIES   = 64,
  parameter int CTX_ENTRIES   = 8,
  parameter int INTERVAL      = 10,
  localparam int LW = (LOGS > 1) ? $clog2(LOGS) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  // from the NIC: request beats (puts and gets)
  input  logic     up_valid,
  output logic     up_ready,
  input  tlp_t     up_tlp,
  // to the NIC: completions
  output logic     dn_valid,
  input  logic     dn_ready,
  output tlp_t     dn_tlp,
  // to main memory: translated accesses and log writes
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  output logic     mem_rsp_ready,
  input  mem_rsp_t mem_rsp,
  // to main memory: table-walk reads (one word, in order)
  output logic     pt_rd_valid,
  input  logic     pt_rd_ready,
  output addr_t    pt_rd_addr,
  input  logic     pt_rsp_valid,
  input  data_t    pt_rsp_data,
  // configuration register writes
  input  logic     cfg_we,
  input  logic [7:0] cfg_addr,
  input  data_t    cfg_wdata,
  // interrupt requests
  output logic     msi_fault,
  output logic     msi_log,
  output iuid_t    msi_log_iuid,
  // CPU port of the scratchpad
  input  logic     sp_we,
  input  logic [LW:0] sp_addr,
  input  data_t    sp_wdata,
  output data_t    sp_rdata,
  // status
  output logic     fault_overflow,
  output logic [31:0] fault_dropped
);
  // ---------------------------------------------------------------- config
  addr_t root_table, flog_base, st_base, st_size, st_addr;
  logic  flog_cfg, flog_head_we, notify_we, inv_all, log_cfg, log_head_we, fb_cfg;

  always_comb begin
    flog_cfg     = cfg_we && cfg_addr == 8'h10;
    flog_head_we = cfg_we && cfg_addr == 8'h18;
    notify_we    = cfg_we && cfg_addr == 8'h20;
    inv_all      = cfg_we && cfg_addr == 8'h30;
    log_cfg      = cfg_we && cfg_addr == 8'h58;
    log_head_we  = cfg_we && cfg_addr == 8'h60;
    fb_cfg       = cfg_we && cfg_addr == 8'h70;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      root_table <= '0; flog_base <= '0; st_base <= '0; st_size <= '0; st_addr <= '0;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        8'h00: root_table <= cfg_wdata;
        8'h08: flog_base  <= cfg_wdata;
        8'h40: st_base    <= cfg_wdata;
        8'h48: st_size    <= cfg_wdata;
        8'h50: st_addr    <= cfg_wdata;
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- engine state
  typedef enum logic [4:0] {
    S_IDLE, S_REQ, S_XLATE, S_WALK, S_ACT, S_HDR0, S_HDR1, S_FLT0, S_FLT1,
    S_MEM, S_UR, S_LDATA, S_FIN, S_CLOOK, S_CLOG, S_CSEND, S_FSEND
  } state_e;
  state_e st;

  tlp_t       req_q;      // NIC request beat being processed (or parked)
  tlp_t       cpl_q;      // memory completion beat being processed
  logic       parked;
  logic [63:0] pte_q;
  aa_action_t act_q;
  logic       rec_q, flt_q;
  addr_t      rec_start_q, flt_addr_q;
  logic [LW-1:0] log_idx_q;

  function automatic addr_t wrap_add(addr_t p, addr_t n, addr_t b, addr_t sz);
    addr_t s;
    s = p + n;
    return (s >= b + sz) ? s - sz : s;
  endfunction

  // ---------------------------------------------------------------- blocks
  logic  ctx_hit;  addr_t ctx_root;
  logic  wk_start, wk_busy, wk_done, wk_ctx_fill;
  logic [63:0] wk_pte; addr_t wk_ctx_root;
  logic  tlb_lk, tlb_hit; logic [63:0] tlb_pte;
  logic [RID_W+35:0] tlb_key;

  assign tlb_key = {req_q.req_id, req_q.addr[47:12]};

  aa_ctx_cache #(.ENTRIES(CTX_ENTRIES)) u_ctx (
    .clk, .rst_n, .lk_rid(req_q.req_id), .lk_hit(ctx_hit), .lk_root(ctx_root),
    .fill_valid(st == S_WALK && wk_done && wk_ctx_fill), .fill_rid(req_q.req_id),
    .fill_root(wk_ctx_root), .inv_all);

  aa_iotlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n, .lk_valid(tlb_lk), .lk_key(tlb_key), .lk_hit(tlb_hit), .lk_pte(tlb_pte),
    .fill_valid(st == S_WALK && wk_done && wk_pte != '0), .fill_key(tlb_key),
    .fill_pte(wk_pte), .inv_all);

  aa_walker u_walk (
    .clk, .rst_n, .root_table, .start(wk_start), .need_ctx(!ctx_hit), .rid(req_q.req_id),
    .dev_addr(req_q.addr), .pt_root(ctx_root), .busy(wk_busy),
    .mem_rd_valid(pt_rd_valid), .mem_rd_ready(pt_rd_ready), .mem_rd_addr(pt_rd_addr),
    .rsp_valid(pt_rsp_valid), .rsp_data(pt_rsp_data),
    .done(wk_done), .pte(wk_pte), .ctx_fill(wk_ctx_fill), .ctx_root(wk_ctx_root));

  aa_action_t act;
  logic is_read;
  assign is_read = (req_q.kind == TLP_MRD);
  aa_policy u_pol (.pte_raw(pte_q), .is_read, .act);

  // access log table
  logic          lt_hit;
  logic [LW-1:0] lt_idx;
  addr_t         lt_resv, lt_free;
  logic          lt_rsv;
  addr_t         rec_bytes;
  logic [LOGS-1:0] e_valid, e_empty;
  iuid_t         e_iuid [LOGS];
  addr_t         e_base [LOGS], e_size [LOGS], e_tail [LOGS], e_free [LOGS];
  logic          cm_valid;
  logic          sp_hd_valid;
  logic [LW-1:0] sp_hd_idx;
  data_t         sp_hd_val;
  logic [LW-1:0] cm_log;
  addr_t         cm_bytes;

  aa_log_table #(.ENTRIES(LOGS)) u_lt (
    .clk, .rst_n,
    .cfg_we(log_cfg), .cfg_idx(LW'(cfg_wdata[47:32])), .cfg_valid(cfg_wdata[63]),
    .cfg_iuid(cfg_wdata[9:0]), .cfg_base(st_base), .cfg_size(st_size),
    .head_we(log_head_we), .head_iuid(cfg_wdata[61:52]), .head_val({12'h000, cfg_wdata[51:0]}),
    .hdi_we(sp_hd_valid), .hdi_idx(sp_hd_idx), .hdi_val(sp_hd_val),
    .lk_iuid(act.iuid), .lk_hit(lt_hit), .lk_idx(lt_idx), .lk_resv(lt_resv), .lk_free(lt_free),
    .rsv_valid(lt_rsv), .rsv_idx(lt_idx), .rsv_bytes(rec_bytes),
    .cm_valid, .cm_idx(cm_log), .cm_bytes,
    .e_valid, .e_iuid, .e_base, .e_size, .e_tail, .e_free, .e_empty);

  // packet tag buffer
  rid_t          tb_rid;  tag_t tb_tag;
  logic          tb_hit, tb_full;
  logic [$clog2(TAGS)-1:0] tb_idx;
  addr_t         tb_wptr;
  logic [LW-1:0] tb_log;
  logic          tb_up, tb_up_cpl;
  addr_t         tb_up_wptr;
  logic [$clog2(TAGS+1)-1:0] tb_occ;

  assign tb_rid = (st == S_CLOOK || st == S_CLOG) ? cpl_q.req_id : req_q.req_id;
  assign tb_tag = (st == S_CLOOK || st == S_CLOG) ? cpl_q.tag    : req_q.tag;

  aa_tag_buffer #(.ENTRIES(TAGS), .LOGS(LOGS)) u_tb (
    .clk, .rst_n, .lk_rid(tb_rid), .lk_tag(tb_tag), .lk_hit(tb_hit), .lk_idx(tb_idx),
    .lk_wptr(tb_wptr), .lk_log(tb_log), .full(tb_full),
    .al_valid(lt_rsv), .al_rid(req_q.req_id), .al_tag(req_q.tag), .al_log(lt_idx),
    .al_start(lt_resv), .al_wptr(wrap_add(lt_resv, 64'd16, e_base[lt_idx], e_size[lt_idx])),
    .al_bytes(rec_bytes), .al_complete(1'b0),
    .up_valid(tb_up), .up_idx(tb_idx), .up_wptr(tb_up_wptr), .up_complete(tb_up_cpl),
    .log_tail(e_tail), .cm_valid, .cm_log, .cm_bytes, .occupancy(tb_occ));

  // flushing buffer
  logic fb_hit, fb_cap, fb_done_valid, fb_done_ready;
  logic [$clog2(FLUSH_ENTRIES)-1:0] fb_idx;
  rid_t fb_done_rid; tag_t fb_done_tag; iuid_t fb_done_iuid;
  iuid_t fb_lk_iuid; logic [LW-1:0] fb_lk_log; logic fb_lk_busy;
  logic kick_valid, kick_ready;

  aa_flush_buffer #(.ENTRIES(FLUSH_ENTRIES), .LOGS(LOGS)) u_fb (
    .clk, .rst_n, .cfg_we(fb_cfg), .cfg_idx($bits(fb_idx)'(cfg_wdata[47:32])),
    .cfg_valid(cfg_wdata[63]), .cfg_addr(st_addr), .cfg_iuid(cfg_wdata[9:0]),
    .lk_addr(req_q.addr), .lk_hit(fb_hit), .lk_idx(fb_idx),
    .lk_iuid(fb_lk_iuid), .lk_log(fb_lk_log), .lk_busy(fb_lk_busy),
    .cap_valid(fb_cap), .cap_idx(fb_idx), .cap_rid(req_q.req_id), .cap_tag(req_q.tag),
    .log_valid(e_valid), .log_iuid(e_iuid), .log_empty(e_empty),
    .done_valid(fb_done_valid), .done_ready(fb_done_ready),
    .done_rid(fb_done_rid), .done_tag(fb_done_tag), .done_iuid(fb_done_iuid));

  // legacy fault log
  logic  fl_rec, fl_ok; addr_t fl_addr;
  aa_fault_log u_fl (
    .clk, .rst_n, .cfg_we(flog_cfg), .cfg_base(flog_base), .cfg_size(cfg_wdata),
    .head_we(flog_head_we), .head_val(cfg_wdata),
    .rec_valid(fl_rec), .rec_ok(fl_ok), .rec_addr(fl_addr),
    .msi(msi_fault), .overflow(fault_overflow), .dropped(fault_dropped));

  // notification of committed records
  logic [LW-1:0] irq_idx;
  aa_notifier #(.LOGS(LOGS), .INTERVAL(INTERVAL)) u_nt (
    .clk, .rst_n, .cfg_we(notify_we), .cfg_interval(cfg_wdata[15:0]),
    .cfg_threshold({16'h0, cfg_wdata[63:16]}),
    .cm_valid, .cm_idx(cm_log), .cm_iuid(e_iuid[cm_log]), .cm_free(e_free[cm_log]),
    .kick_valid, .kick_ready, .kick_idx(fb_lk_log), .kick_iuid(fb_lk_iuid),
    .irq_valid(msi_log), .irq_idx, .irq_iuid(msi_log_iuid));

  // scratchpad: committed tail of log i goes to word 2i; the CPU's head
  // pointer of log i in word 2i+1 comes back as a head update
  aa_scratchpad #(.DEPTH(2 * LOGS)) u_sp (
    .clk, .rst_n, .a_we(cm_valid), .a_addr({cm_log, 1'b0}),
    .a_wdata(wrap_add(e_tail[cm_log], cm_bytes, e_base[cm_log], e_size[cm_log])),
    .b_we(sp_we), .b_addr(sp_addr), .b_wdata(sp_wdata), .b_rdata(sp_rdata),
    .hd_valid(sp_hd_valid), .hd_idx(sp_hd_idx), .hd_val(sp_hd_val));

  // ---------------------------------------------------------------- engine
  logic need_rec, stall;
  data_t phys;

  always_comb begin
    rec_bytes = 64'(HDR_WORDS) * 8 + (act.log_data ? {51'd0, req_q.len, 3'b000} : 64'd0);
    need_rec  = req_q.first && act.to_access_log && lt_hit;
    stall     = need_rec && (lt_free < rec_bytes || tb_full);
    phys      = {12'h000, pte_q[51:12], req_q.addr[11:0]};
  end

  always_comb begin
    up_ready      = 1'b0;
    mem_rsp_ready = 1'b0;
    dn_valid      = 1'b0;
    dn_tlp        = cpl_q;
    mem_req_valid = 1'b0;
    mem_req       = '0;
    wk_start      = 1'b0;
    tlb_lk        = 1'b0;
    lt_rsv        = 1'b0;
    fl_rec        = 1'b0;
    fb_cap        = 1'b0;
    kick_valid    = 1'b0;
    fb_done_ready = 1'b0;
    tb_up         = 1'b0;
    tb_up_wptr    = tb_wptr;
    tb_up_cpl     = 1'b0;
    unique case (st)
      S_IDLE: begin
        if (!fb_done_valid) begin
          if (mem_rsp_valid) mem_rsp_ready = 1'b1;
          else if (!parked)  up_ready = 1'b1;
        end
      end
      // an active flush whose log still holds records also asks for the
      // log's interrupt, so that the CPU starts processing it
      S_REQ: begin
        kick_valid = is_read && fb_hit && fb_lk_busy;
        fb_cap     = is_read && fb_hit && (!fb_lk_busy || kick_ready);
      end
      S_XLATE: begin
        tlb_lk   = ctx_hit;
        wk_start = !(ctx_hit && tlb_hit);
      end
      S_ACT: if (!stall) begin
        lt_rsv = need_rec;
        fl_rec = req_q.first && act.to_fault_log;
      end
      S_HDR0: if (rec_q) begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = rec_start_q;
        mem_req.wdata = make_hdr(is_read, act_q.log_data, act_q.fault, act_q.iuid,
                                 req_q.req_id, req_q.tag, req_q.len);
      end
      S_HDR1: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = wrap_add(rec_start_q, 64'd8, e_base[log_idx_q], e_size[log_idx_q]);
        mem_req.wdata = req_q.addr;
      end
      S_FLT0: if (flt_q) begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = flt_addr_q;
        mem_req.wdata = make_hdr(is_read, 1'b0, 1'b1, act_q.iuid, req_q.req_id, req_q.tag, req_q.len);
      end
      S_FLT1: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = flt_addr_q + 64'd8;
        mem_req.wdata = req_q.addr;
      end
      S_MEM: if (act_q.mem_ok) begin
        mem_req_valid  = 1'b1;
        mem_req.we     = !is_read;
        mem_req.addr   = phys;
        mem_req.wdata  = req_q.data;
        mem_req.len    = req_q.len;
        mem_req.req_id = req_q.req_id;
        mem_req.tag    = req_q.tag;
      end
      S_UR: begin
        dn_valid        = 1'b1;
        dn_tlp          = '0;
        dn_tlp.kind     = TLP_CPL;
        dn_tlp.req_id   = req_q.req_id;
        dn_tlp.tag      = req_q.tag;
        dn_tlp.len      = req_q.len;
        dn_tlp.first    = 1'b1;
        dn_tlp.last     = 1'b1;
        dn_tlp.ur       = 1'b1;
      end
      S_LDATA: if (!is_read && act_q.log_data && tb_hit) begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = tb_wptr;
        mem_req.wdata = req_q.data;
        tb_up         = mem_req_ready;
        tb_up_wptr    = wrap_add(tb_wptr, 64'd8, e_base[tb_log], e_size[tb_log]);
        tb_up_cpl     = req_q.last;
      end
      S_FIN: if (tb_hit && ((!is_read && req_q.last) || (is_read && !act_q.log_data))) begin
        tb_up     = 1'b1;
        tb_up_cpl = 1'b1;
      end
      S_CLOG: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = tb_wptr;
        mem_req.wdata = cpl_q.data;
        tb_up         = mem_req_ready;
        tb_up_wptr    = wrap_add(tb_wptr, 64'd8, e_base[tb_log], e_size[tb_log]);
        tb_up_cpl     = cpl_q.last;
      end
      S_CSEND: dn_valid = 1'b1;
      S_FSEND: begin
        dn_valid      = 1'b1;
        dn_tlp        = '0;
        dn_tlp.kind   = TLP_CPL;
        dn_tlp.req_id = fb_done_rid;
        dn_tlp.tag    = fb_done_tag;
        dn_tlp.len    = 10'd1;
        dn_tlp.first  = 1'b1;
        dn_tlp.last   = 1'b1;
        fb_done_ready = dn_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; req_q <= '0; cpl_q <= '0; parked <= 1'b0; pte_q <= '0; act_q <= '0;
      rec_q <= 1'b0; flt_q <= 1'b0; rec_start_q <= '0; flt_addr_q <= '0; log_idx_q <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (fb_done_valid) st <= S_FSEND;
          else if (mem_rsp_valid) begin
            cpl_q        <= '0;
            cpl_q.kind   <= TLP_CPL;
            cpl_q.req_id <= mem_rsp.req_id;
            cpl_q.tag    <= mem_rsp.tag;
            cpl_q.last   <= mem_rsp.last;
            cpl_q.data   <= mem_rsp.data;
            st <= S_CLOOK;
          end else if (parked) st <= S_ACT;
          else if (up_valid) begin
            req_q <= up_tlp;
            st    <= S_REQ;
          end
        end
        S_REQ:   if (!(is_read && fb_hit)) st <= S_XLATE;
                 else if (fb_cap)          st <= S_IDLE;
        S_XLATE: if (ctx_hit && tlb_hit) begin
          pte_q <= tlb_pte;
          st    <= S_ACT;
        end else st <= S_WALK;
        S_WALK: if (wk_done) begin
          pte_q <= wk_pte;
          st    <= S_ACT;
        end
        S_ACT: begin
          if (stall) begin
            parked <= 1'b1;
            st     <= S_IDLE;
          end else begin
            parked      <= 1'b0;
            act_q       <= act;
            rec_q       <= need_rec;
            rec_start_q <= lt_resv;
            log_idx_q   <= lt_idx;
            flt_q       <= req_q.first && act.to_fault_log && fl_ok;
            flt_addr_q  <= fl_addr;
            st          <= S_HDR0;
          end
        end
        S_HDR0: if (!rec_q) st <= S_FLT0; else if (mem_req_ready) st <= S_HDR1;
        S_HDR1: if (mem_req_ready) st <= S_FLT0;
        S_FLT0: if (!flt_q) st <= S_MEM; else if (mem_req_ready) st <= S_FLT1;
        S_FLT1: if (mem_req_ready) st <= S_MEM;
        S_MEM: begin
          if (!act_q.mem_ok) st <= is_read ? S_UR : S_LDATA;
          else if (mem_req_ready) st <= S_LDATA;
        end
        S_UR:    if (dn_ready) st <= S_LDATA;
        S_LDATA: if (!mem_req_valid || mem_req_ready) st <= S_FIN;
        S_FIN:   st <= S_IDLE;
        S_CLOOK: st <= tb_hit ? S_CLOG : S_CSEND;
        S_CLOG:  if (mem_req_ready) st <= S_CSEND;
        S_CSEND: if (dn_ready) st <= S_IDLE;
        S_FSEND: if (dn_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // A logged write of data and its record never overrun the reserved record.
  assert property (@(posedge clk) disable iff (!rst_n) lt_rsv |-> !tb_full);
  // The walker is only started when idle.
  assert property (@(posedge clk) disable iff (!rst_n) wk_start |-> !wk_busy);
endmodule
