// tb_aa_iommu: end-to-end test of the Active Access IOMMU at its default
// parameters.
//
// A model memory holds the remapping tables, the data pages, three access
// logs and the legacy fault log. The testbench plays the NIC (request beats
// in, completions out) and the CPU (programming registers, consuming logs by
// moving their head). Pages of one device and their control bits:
//   A  W=1 R=1                       plain RMA page
//   B  W=0 WL=1 WLD=1 E=1, IUID 5    active puts (DHT inserts)
//   C  W=1 WL=1 R=1 RL=1,  IUID 5    access statistics / dirty tracking
//   D  R=1 RL=1 RLD=1,     IUID 6    logging of gets
//   E  W=0 WL=1 E=0                  legacy fault
//   F  W=0 R=0                       blocked get
//   G  W=0 WL=1 WLD=1 E=1, IUID 7    active puts into a 64-byte log
//   S  2 MB superpage, W=1 (bits 7-10 set but ignored there)
// plus a flushing page for IUID 5. Expected log contents are built by the
// testbench from the requests it sends, in the record format of aa_pkg, and
// compared word by word with the model memory; memory contents and every
// completion are compared too. The mechanisms counted (each must occur):
// table walk, IOTLB hit, context-cache hit, active-put record, active-get
// record, statistics record, interleaved transactions committed in order
// behind a hole, legacy fault entry, fault-log overflow drop, blocked get
// (UR completion), active flush held until the log drains and raising the
// log's interrupt, backpressure
// (parked beat), log wrap-around, log interrupt, scratchpad tail update,
// a head pointer reported through the scratchpad (log 7; the other
// logs report theirs through the LOG_HEAD register), and a superpage walk.
module tb_aa_iommu;
  import aa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic up_valid = 0, up_ready, dn_valid, dn_ready = 1;
  tlp_t up_tlp = '0, dn_tlp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic pt_rd_valid, pt_rd_ready, pt_rsp_valid;
  addr_t pt_rd_addr;
  data_t pt_rsp_data;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  data_t cfg_wdata = '0;
  logic msi_fault, msi_log;
  iuid_t msi_log_iuid;
  logic sp_we = 0;
  logic [5:0] sp_addr = '0;
  data_t sp_wdata = '0, sp_rdata;
  logic fault_overflow;
  logic [31:0] fault_dropped;

  aa_iommu dut (.*);
  aa_mem_model mm (.clk, .stall_en(1'b1), .mem_req_valid, .mem_req_ready, .mem_req,
                   .mem_rsp_valid, .mem_rsp_ready, .mem_rsp, .pt_rd_valid, .pt_rd_ready,
                   .pt_rd_addr, .pt_rsp_valid, .pt_rsp_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  // ------------------------------------------------------------ mechanisms
  int n_walk = 0, n_tlb_hit = 0, n_ctx_hit = 0, n_park = 0, n_hole = 0, n_msi_log = 0;
  int n_msi_fault = 0, n_commit = 0, n_sp_head = 0, n_kick = 0, n_super = 0;
  iuid_t kick_iuid_seen = '0;
  logic parked_d = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.wk_start) n_walk++;
    if (dut.u_walk.st == dut.u_walk.W_PT && dut.u_walk.waiting && dut.u_walk.rsp_valid &&
        dut.u_walk.lvl != 2'd0 && dut.u_walk.rsp_data[PTE_PS]) n_super++;
    if (dut.tlb_lk && dut.tlb_hit) n_tlb_hit++;
    if (dut.tlb_lk && dut.ctx_hit) n_ctx_hit++;
    parked_d <= dut.parked;
    if (dut.parked && !parked_d) n_park++;
    if ((dut.u_tb.vld & dut.u_tb.cpl) != '0 && !dut.cm_valid) n_hole++;
    if (msi_log) n_msi_log++;
    if (msi_fault) n_msi_fault++;
    if (dut.cm_valid) n_commit++;
    if (dut.sp_hd_valid) n_sp_head++;
    if (dut.kick_valid && dut.kick_ready) begin n_kick++; kick_iuid_seen = dut.fb_lk_iuid; end
  end

  tlp_t cpls [$];
  always @(posedge clk) if (rst_n && dn_valid && dn_ready) cpls.push_back(dn_tlp);

  // ------------------------------------------------------------ memory map
  localparam rid_t  DEV  = 16'h0100;
  localparam addr_t ROOT = 64'h10_0000;
  addr_t next_tbl = 64'h20_0000;

  function automatic addr_t alloc_tbl();
    addr_t a = next_tbl; next_tbl += 64'h1000; return a;
  endfunction

  function automatic void map(rid_t r, addr_t va, addr_t pa, logic [63:0] bits);
    addr_t re = ROOT + 8 * r[15:8], ce, t;
    if (!mm.mem.exists(re)) mm.mem[re] = alloc_tbl() | 1;
    ce = {mm.mem[re][63:12], 12'h0} + 8 * r[7:0];
    if (!mm.mem.exists(ce)) mm.mem[ce] = alloc_tbl() | 1;
    t = {mm.mem[ce][63:12], 12'h0};
    for (int l = 3; l >= 1; l--) begin
      addr_t e = t + 8 * ((va >> (12 + 9 * l)) & 9'h1ff);
      if (!mm.mem.exists(e)) mm.mem[e] = alloc_tbl() | 3;
      t = {12'h0, mm.mem[e][51:12], 12'h0};
    end
    mm.mem[t + 8 * ((va >> 12) & 9'h1ff)] = bits | {12'h0, pa[51:12], 12'h0};
  endfunction

  // 2 MB superpage: the entry one level above the leaf, with PS (bit 7) set,
  // maps the 2 MB region of va to pa (the device's context must exist)
  function automatic void map_2m(rid_t r, addr_t va, addr_t pa, logic [63:0] bits);
    addr_t t = {mm.mem[{mm.mem[ROOT + 8 * r[15:8]][63:12], 12'h0} + 8 * r[7:0]][63:12], 12'h0};
    for (int l = 3; l >= 2; l--) begin
      addr_t e = t + 8 * ((va >> (12 + 9 * l)) & 64'h1ff);
      if (!mm.mem.exists(e)) mm.mem[e] = alloc_tbl() | 3;
      t = {12'h0, mm.mem[e][51:12], 12'h0};
    end
    mm.mem[t + 8 * ((va >> 21) & 64'h1ff)] = bits | 64'h80 | {12'h0, pa[51:21], 21'h0};
  endfunction

  function automatic logic [63:0] pbits(bit w, bit r, bit wl, bit wld, bit rl, bit rld, bit e, int iuid);
    logic [63:0] v = '0;
    v[PTE_W] = w; v[PTE_R] = r; v[PTE_WL] = wl; v[PTE_WLD] = wld; v[PTE_RL] = rl; v[PTE_RLD] = rld;
    v[PTE_E] = e; v[PTE_IUID_LO +: 10] = iuid[9:0];
    return v;
  endfunction

  localparam addr_t VA_A = 64'h1_0000, VA_B = 64'h2_0000, VA_C = 64'h3_0000, VA_D = 64'h4_0000;
  localparam addr_t VA_E = 64'h5_0000, VA_F = 64'h6_0000, VA_G = 64'h7_0000;
  localparam addr_t VA_FLUSH = 64'hFFFF_0000, VA_S = 64'h0060_0000, PA_S = 64'h0100_0000;
  localparam addr_t PA_A = 64'h40_0000, PA_B = 64'h41_0000, PA_C = 64'h42_0000, PA_D = 64'h43_0000;
  localparam addr_t PA_E = 64'h44_0000, PA_F = 64'h45_0000, PA_G = 64'h46_0000;
  localparam addr_t LOG5 = 64'h80_0000, LOG6 = 64'h81_0000, LOG7 = 64'h82_0000, FLOG = 64'h90_0000;

  // Expected log words, in order, per log.
  data_t exp5 [$], exp6 [$], exp7 [$];
  addr_t rd5 = LOG5, rd6 = LOG6, rd7 = LOG7;   // consumer (head) pointers

  function automatic data_t hdr(bit rd, bit dat, bit flt, int iuid, int tag, int len);
    data_t h = '0;
    h[62] = rd; h[61] = dat; h[60] = flt; h[57:48] = iuid[9:0]; h[47:32] = DEV;
    h[31:24] = tag[7:0]; h[9:0] = len[9:0];
    return h;
  endfunction

  // ------------------------------------------------------------ drivers
  task automatic cfg(logic [7:0] a, data_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic beat(tlp_kind_e k, int tag, addr_t a, int len, bit first, bit last, data_t d);
    @(negedge clk);
    up_valid = 1;
    up_tlp = '0;
    up_tlp.kind = k; up_tlp.req_id = DEV; up_tlp.tag = tag_t'(tag); up_tlp.addr = a;
    up_tlp.len = len_t'(len); up_tlp.first = first; up_tlp.last = last; up_tlp.data = d;
    while (!up_ready) @(negedge clk);
    @(posedge clk);
    #1 up_valid = 0;
  endtask

  task automatic put(int tag, addr_t a, int len, data_t seed);
    for (int i = 0; i < len; i++)
      beat(TLP_MWR, tag, a + 8 * i, len, i == 0, i == len - 1, seed + data_t'(i));
  endtask

  task automatic get(int tag, addr_t a, int len);
    beat(TLP_MRD, tag, a, len, 1, 1, '0);
  endtask

  // read one scratchpad word through the CPU port (one cycle latency)
  task automatic sp_read(input int a, output data_t d);
    @(negedge clk); sp_addr = 6'(a);
    @(negedge clk); d = sp_rdata;
  endtask
  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  // wait until the completion queue holds n entries
  task automatic wait_cpls(int n);
    int t = 0;
    while (cpls.size() < n && t < 2000) begin @(negedge clk); t++; end
  endtask

  function automatic addr_t wrap(addr_t p, addr_t base, addr_t size);
    return (p >= base + size) ? p - size : p;
  endfunction

  // Consume every expected word of a log, like a handler: compare, move the
  // head, and tell the IOMMU, by register or, when sp_idx >= 0, by writing
  // the head into word 2*sp_idx+1 of the scratchpad.
  task automatic consume(int iuid, ref data_t exp [$], ref addr_t rp, input addr_t base, input addr_t size,
                         input int sp_idx = -1);
    string s;
    while (exp.size() > 0) begin
      s = $sformatf("log%0d word@%h", iuid, rp);
      chk(s, mm.rd(rp), exp.pop_front());
      rp = wrap(rp + 8, base, size);
    end
    if (sp_idx < 0) cfg(8'h60, {2'b00, 10'(iuid), rp[51:0]});
    else begin
      @(negedge clk); sp_we = 1; sp_addr = 6'(2 * sp_idx + 1); sp_wdata = rp;
      @(negedge clk); sp_we = 0;
    end
  endtask

  // ------------------------------------------------------------ test
  initial begin
    int c0;
    data_t spw;
    map(DEV, VA_A, PA_A, pbits(1, 1, 0, 0, 0, 0, 0, 0));
    map(DEV, VA_B, PA_B, pbits(0, 0, 1, 1, 0, 0, 1, 5));
    map(DEV, VA_C, PA_C, pbits(1, 1, 1, 0, 1, 0, 0, 5));
    map(DEV, VA_D, PA_D, pbits(0, 1, 0, 0, 1, 1, 0, 6));
    map(DEV, VA_E, PA_E, pbits(0, 0, 1, 0, 0, 0, 0, 0));
    map(DEV, VA_F, PA_F, pbits(0, 0, 0, 0, 0, 0, 0, 0));
    map(DEV, VA_G, PA_G, pbits(0, 0, 1, 1, 0, 0, 1, 7));
    for (int i = 0; i < 4; i++) mm.mem[PA_D + 8 * i] = 64'hD00D_0000 + data_t'(i);

    repeat (3) @(posedge clk); rst_n = 1;
    cfg(8'h00, ROOT);
    cfg(8'h08, FLOG); cfg(8'h10, 64'd48);                 // room for two fault entries
    cfg(8'h20, 64'd2);                                    // MSI every 2 records, no threshold
    cfg(8'h40, LOG5); cfg(8'h48, 64'd4096); cfg(8'h58, {1'b1, 15'd0, 16'd0, 22'd0, 10'd5});
    cfg(8'h40, LOG6); cfg(8'h48, 64'd4096); cfg(8'h58, {1'b1, 15'd0, 16'd1, 22'd0, 10'd6});
    cfg(8'h40, LOG7); cfg(8'h48, 64'd64);   cfg(8'h58, {1'b1, 15'd0, 16'd2, 22'd0, 10'd7});
    cfg(8'h50, VA_FLUSH);                   cfg(8'h70, {1'b1, 15'd0, 16'd3, 22'd0, 10'd5});

    // 1. plain puts: first one walks, second hits the IOTLB
    put(1, VA_A, 3, 64'hA000);
    put(2, VA_A + 64'h100, 1, 64'hA100);
    idle(20);
    for (int i = 0; i < 3; i++) chk("plain put data", mm.rd(PA_A + 8 * i), 64'hA000 + i);
    chk("plain put 2", mm.rd(PA_A + 64'h100), 64'hA100);

    // 2. active put: memory untouched, metadata + data in log 5
    put(3, VA_B + 64'h40, 2, 64'hB000);
    exp5.push_back(hdr(0, 1, 1, 5, 3, 2)); exp5.push_back(VA_B + 64'h40);
    exp5.push_back(64'hB000); exp5.push_back(64'hB001);
    idle(20);
    chk("active put leaves memory", mm.rd(PA_B + 64'h40), 0);

    // 3. two active puts interleaved beat by beat: X (3 words), Y (2 words)
    beat(TLP_MWR, 4, VA_B + 64'h80, 3, 1, 0, 64'hC000);   // X0
    beat(TLP_MWR, 5, VA_B + 64'hC0, 2, 1, 0, 64'hC100);   // Y0
    beat(TLP_MWR, 4, VA_B + 64'h88, 3, 0, 0, 64'hC001);   // X1
    beat(TLP_MWR, 5, VA_B + 64'hC8, 2, 0, 1, 64'hC101);   // Y1: Y complete, X not
    idle(20);
    chk("tail waits behind the hole", dut.e_tail[0], LOG5 + 32);
    beat(TLP_MWR, 4, VA_B + 64'h90, 3, 0, 1, 64'hC002);   // X2
    exp5.push_back(hdr(0, 1, 1, 5, 4, 3)); exp5.push_back(VA_B + 64'h80);
    exp5.push_back(64'hC000); exp5.push_back(64'hC001); exp5.push_back(64'hC002);
    exp5.push_back(hdr(0, 1, 1, 5, 5, 2)); exp5.push_back(VA_B + 64'hC0);
    exp5.push_back(64'hC100); exp5.push_back(64'hC101);
    idle(20);
    chk("tail after both", dut.e_tail[0], LOG5 + 32 + 40 + 32);

    // 4. statistics page: put reaches memory and is counted; get is counted
    put(6, VA_C + 64'h8, 1, 64'hCC00);
    exp5.push_back(hdr(0, 0, 0, 5, 6, 1)); exp5.push_back(VA_C + 64'h8);
    c0 = cpls.size();
    get(7, VA_C + 64'h8, 1);
    exp5.push_back(hdr(1, 0, 0, 5, 7, 1)); exp5.push_back(VA_C + 64'h8);
    wait_cpls(c0 + 1);
    chk("stats put data", mm.rd(PA_C + 8), 64'hCC00);
    chk("stats get returns data", cpls[c0].data, 64'hCC00);
    chk("stats get tag", cpls[c0].tag, 7);

    // 5. active get: data goes to the NIC and is copied into log 6
    c0 = cpls.size();
    get(8, VA_D + 64'h8, 3);
    wait_cpls(c0 + 3);
    for (int i = 0; i < 3; i++) begin
      chk("get data", cpls[c0 + i].data, 64'hD00D_0001 + i);
      chk("get last", cpls[c0 + i].last, i == 2);
      chk("get ur", cpls[c0 + i].ur, 0);
    end
    exp6.push_back(hdr(1, 1, 0, 6, 8, 3)); exp6.push_back(VA_D + 64'h8);
    for (int i = 0; i < 3; i++) exp6.push_back(64'hD00D_0001 + i);

    // 6. legacy faults: two recorded, the third dropped
    put(9, VA_E, 1, 64'hE000);
    put(10, VA_E + 8, 1, 64'hE001);
    put(11, VA_E + 16, 1, 64'hE002);
    idle(20);
    chk("fault blocks write", mm.rd(PA_E), 0);
    chk("fault entry 0", mm.rd(FLOG), hdr(0, 0, 1, 0, 9, 1));
    chk("fault addr 0", mm.rd(FLOG + 8), VA_E);
    chk("fault entry 1", mm.rd(FLOG + 16), hdr(0, 0, 1, 0, 10, 1));
    chk("fault addr 1", mm.rd(FLOG + 24), VA_E + 8);
    chk("fault overflow", fault_overflow, 1);
    chk("fault dropped", fault_dropped, 1);
    chk("fault msis", n_msi_fault, 2);

    // 7. blocked get: UR completion, no data
    c0 = cpls.size();
    get(12, VA_F, 2);
    wait_cpls(c0 + 1);
    chk("ur", cpls[c0].ur, 1); chk("ur tag", cpls[c0].tag, 12);

    // 8. active flush: held while log 5 holds records, completed once drained
    c0 = cpls.size();
    get(13, VA_FLUSH, 1);
    idle(100);
    chk("flush held", cpls.size(), c0);
    chk("flush kicks log 5 interrupt", n_kick, 1); chk("kick iuid", kick_iuid_seen, 5);
    consume(5, exp5, rd5, LOG5, 4096);
    wait_cpls(c0 + 1);
    chk("flush completed", cpls.size(), c0 + 1);
    chk("flush tag", cpls[c0].tag, 13);
    chk("flush rid", cpls[c0].req_id, DEV);
    consume(6, exp6, rd6, LOG6, 4096);

    // 9. backpressure and wrap in the 64-byte log 7 (7 usable words)
    put(14, VA_G, 3, 64'h6000);                           // 5 words
    exp7.push_back(hdr(0, 1, 1, 7, 14, 3)); exp7.push_back(VA_G);
    for (int i = 0; i < 3; i++) exp7.push_back(64'h6000 + i);
    fork
      put(15, VA_G + 64'h20, 2, 64'h6100);                // 4 words: does not fit yet
      begin
        idle(60);
        chk("parked while full", dut.parked, 1);
        consume(7, exp7, rd7, LOG7, 64, 2);
      end
    join
    exp7.push_back(hdr(0, 1, 1, 7, 15, 2)); exp7.push_back(VA_G + 64'h20);
    exp7.push_back(64'h6100); exp7.push_back(64'h6101);
    idle(30);
    chk("log7 wrapped tail", dut.e_tail[2], LOG7 + 8);
    consume(7, exp7, rd7, LOG7, 64, 2);

    idle(2); chk("log7 empty after scratchpad head", dut.e_empty[2], 1);
    sp_read(5, spw); chk("scratchpad head word", spw, rd7);
    // 10. scratchpad holds the committed tail of log 5 (entry 0) in word 0
    sp_read(0, spw);
    chk("scratchpad tail", spw, dut.e_tail[0]);
    chk("scratchpad = consumer", spw, rd5);

    // 11. 2 MB superpage marked W, WL, WLD, E: bits 7-10 mean nothing there,
    // so the put is a plain write at the right offset and leaves no record
    map_2m(DEV, VA_S, PA_S, pbits(1, 1, 1, 1, 0, 0, 1, 5));
    put(16, VA_S + 64'h1_2340, 2, 64'h7000);
    idle(30);
    chk("superpage word 0", mm.mem[PA_S + 64'h1_2340], 64'h7000);
    chk("superpage word 1", mm.mem[PA_S + 64'h1_2348], 64'h7001);
    chk("superpage put not logged", dut.e_tail[0], rd5);

    idle(10);
    $display("INFO walks=%0d tlb_hits=%0d ctx_hits=%0d parks=%0d hole_cycles=%0d msi_log=%0d commits=%0d sp_heads=%0d kicks=%0d superpages=%0d",
             n_walk, n_tlb_hit, n_ctx_hit, n_park, n_hole, n_msi_log, n_commit, n_sp_head, n_kick, n_super);
    chk("mechanism: table walk", n_walk > 0, 1);
    chk("mechanism: IOTLB hit", n_tlb_hit > 0, 1);
    chk("mechanism: context hit", n_ctx_hit > 0, 1);
    chk("mechanism: backpressure", n_park > 0, 1);
    chk("mechanism: hole", n_hole > 0, 1);
    chk("mechanism: log MSI", n_msi_log > 0, 1);
    chk("mechanism: scratchpad head", n_sp_head, 2);
    chk("mechanism: superpage walk", n_super, 1);
    chk("commits", n_commit, 8);
    chk("log MSIs: every 2nd record per log, plus the flush kick", n_msi_log, 2 + 0 + 1 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
