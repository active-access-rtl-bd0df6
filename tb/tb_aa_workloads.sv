// tb_aa_workloads: the Active Access IOMMU, at its default parameters, under
// the traffic of the applications it was designed for, with one access log
// per process for 32 processes (all 32 entries of the log table).
//
// Every process owns three pages:
//   volume   W=0 WL=1 WLD=1 E=1   distributed hash table: each insert is a
//                                 one-word active put of the element to
//                                 the slot hash(elem); memory is not written
//   counter  W=1 R=1 WL=1 RL=1    access counter: puts and gets proceed and
//                                 each leaves a metadata record
//   source   R=1 RL=1 RLD=1       logged gets (fault-tolerant sort): each get
//                                 returns its data and copies it into the log
// A random stream of such accesses, from two NICs (requester IDs), is sent
// through the IOMMU. The logs are small (512 bytes; 4.5 KB for process 0,
// which also serves 4 KB gets, the largest PCIe read) so they wrap many
// times, and the handlers are slow (HANDLER_CYCLES per record) so the logs
// fill up, which parks the NIC until a handler catches up; every 300
// operations a burst of 25 inserts to one process makes sure of that.
//
// A CPU model runs the handlers concurrently: it polls the tail pointers
// in the scratchpad, checks every log word against the record the
// testbench expects (built in the record format of aa_pkg), applies each
// insert to a per-process hash-table model and counts accesses per page,
// then writes its head pointer back into the scratchpad. At the end it
// checks:
//   * each process's hash table holds exactly the elements inserted into it;
//   * the access counts match the counts issued;
//   * the volume pages in memory are untouched;
//   * every get completion carries the right data;
//   * each log raised one interrupt per 10 records (the published evaluation's
//     setting and the default);
//   * the NIC was parked at least once and every log wrapped.
module tb_aa_workloads;
  import aa_pkg::*;

  localparam int NP = 32;          // processes = access logs
  localparam int NOPS = 1500;
  localparam int HANDLER_CYCLES = 30;   // CPU time to process one record

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
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h exp %h", w, got, exp);
    end
  endtask

  // ------------------------------------------------------------ address map
  localparam rid_t  DEV0 = 16'h0100, DEV1 = 16'h0208;
  localparam addr_t ROOT = 64'h10_0000;
  addr_t next_tbl = 64'h20_0000;

  function automatic addr_t va_vol(int p); return 64'h1000_0000 + (addr_t'(p) << 12); endfunction
  function automatic addr_t va_cnt(int p); return 64'h1100_0000 + (addr_t'(p) << 12); endfunction
  function automatic addr_t va_src(int p); return 64'h1200_0000 + (addr_t'(p) << 12); endfunction
  function automatic addr_t pa_of(addr_t va); return va + 64'h1000_0000; endfunction
  function automatic addr_t log_base(int p); return 64'h4000_0000 + (addr_t'(p) << 16); endfunction
  function automatic addr_t log_size(int p); return (p == 0) ? 64'd4608 : 64'd512; endfunction
  function automatic data_t pattern(addr_t pa); return {pa[31:0], ~pa[31:0]}; endfunction

  function automatic addr_t alloc_tbl();
    addr_t a = next_tbl; next_tbl += 64'h1000; return a;
  endfunction

  function automatic void map(rid_t r, addr_t va, logic [63:0] bits);
    addr_t re = ROOT + 8 * r[15:8], ce, t, pa = pa_of(va);
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

  function automatic logic [63:0] pbits(bit w, bit r, bit wl, bit wld, bit rl, bit rld, bit e, int iuid);
    logic [63:0] v = '0;
    v[PTE_W] = w; v[PTE_R] = r; v[PTE_WL] = wl; v[PTE_WLD] = wld; v[PTE_RL] = rl; v[PTE_RLD] = rld;
    v[PTE_E] = e; v[PTE_IUID_LO +: 10] = iuid[9:0];
    return v;
  endfunction

  function automatic data_t hdr(bit rd, bit dat, bit flt, int iuid, rid_t rid, int tag, int len);
    data_t h = '0;
    h[62] = rd; h[61] = dat; h[60] = flt; h[57:48] = iuid[9:0]; h[47:32] = rid;
    h[31:24] = tag[7:0]; h[9:0] = len[9:0];
    return h;
  endfunction

  // ------------------------------------------------------------ reference state
  data_t expq [NP][$];             // expected log words, per process
  data_t gt [addr_t];              // memory contents as the testbench knows them
  int    inserted [NP][data_t];    // elements inserted, per process
  int    table_model [NP][data_t]; // what the handlers built
  int    cnt_put_sent [NP], cnt_get_sent [NP], cnt_put_seen [NP], cnt_get_seen [NP];
  int    recs [NP], msis [NP];
  bit    wrapped [NP];
  addr_t head [NP];
  tlp_t  cplq [$];                 // expected completions, in order
  int    n_park = 0, n_sent = 0;
  bit    traffic_done = 0;
  logic  parked_d = 0;

  always @(posedge clk) if (rst_n) begin
    if (msi_log) msis[int'(msi_log_iuid) - 1]++;
    parked_d <= dut.parked;
    if (dut.parked && !parked_d) n_park++;
    if (dn_valid && dn_ready) begin
      tlp_t e;
      if (cplq.size() == 0) begin
        failures++; $display("FAIL unexpected completion tag %0d", dn_tlp.tag);
      end else begin
        e = cplq.pop_front();
        checks++;
        if (dn_tlp.tag !== e.tag || dn_tlp.req_id !== e.req_id || dn_tlp.data !== e.data ||
            dn_tlp.last !== e.last || dn_tlp.ur !== 1'b0) begin
          failures++;
          if (failures < 20)
            $display("FAIL completion tag %0d data %h exp tag %0d data %h", dn_tlp.tag, dn_tlp.data, e.tag, e.data);
        end
      end
    end
  end

  // ------------------------------------------------------------ NIC side
  task automatic cfg(logic [7:0] a, data_t d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic beat(tlp_kind_e k, rid_t rid, int tag, addr_t a, int len, bit first, bit last, data_t d);
    @(negedge clk);
    up_valid = 1;
    up_tlp = '0;
    up_tlp.kind = k; up_tlp.req_id = rid; up_tlp.tag = tag_t'(tag); up_tlp.addr = a;
    up_tlp.len = len_t'(len); up_tlp.first = first; up_tlp.last = last; up_tlp.data = d;
    while (!up_ready) @(negedge clk);
    @(posedge clk);
    #1 up_valid = 0;
  endtask

  task automatic get_exp(int p, rid_t rid, int tag, addr_t va, int len, bit logdata);
    tlp_t c;
    expq[p].push_back(hdr(1, logdata, 0, p + 1, rid, tag, len));
    expq[p].push_back(va);
    for (int i = 0; i < len; i++) begin
      addr_t pa = pa_of(va) + addr_t'(8 * i);
      if (logdata) expq[p].push_back(gt[pa]);
      c = '0; c.kind = TLP_CPL; c.req_id = rid; c.tag = tag_t'(tag);
      c.data = gt[pa]; c.last = (i == len - 1);
      cplq.push_back(c);
    end
    recs[p]++;
  endtask

  task automatic traffic();
    for (int n = 0; n < NOPS; n++) begin
      // every 300 operations, 25 inserts in a row to one process: more than
      // its 512-byte log holds (21 records), a hot spot of the hash table
      // the first two operations are 4 KB logged gets to process 0, whose
      // two records do not fit in its log side by side
      int p = (n < 2) ? 0 : (n % 300 < 25) ? (n / 300) % NP + 1 : $urandom_range(0, NP - 1);
      int kind = (n < 2) ? 9 : (n % 300 < 25) ? 0 : $urandom_range(0, 9);
      rid_t rid = (n % 2 == 0) ? DEV0 : DEV1;
      int tag = n % 256;
      if (kind < 5) begin
        // hash-table insert: one-word active put to slot hash(elem)
        data_t elem = {$urandom, $urandom};
        addr_t va = va_vol(p) + {52'd0, elem[8:0], 3'b000};
        expq[p].push_back(hdr(0, 1, 1, p + 1, rid, tag, 1));
        expq[p].push_back(va);
        expq[p].push_back(elem);
        recs[p]++;
        if (inserted[p].exists(elem)) inserted[p][elem]++; else inserted[p][elem] = 1;
        beat(TLP_MWR, rid, tag, va, 1, 1, 1, elem);
      end else if (kind < 7) begin
        // counted put of 1..4 words
        int len = $urandom_range(1, 4);
        addr_t va = va_cnt(p) + addr_t'(8 * $urandom_range(0, 508));
        expq[p].push_back(hdr(0, 0, 0, p + 1, rid, tag, len));
        expq[p].push_back(va);
        recs[p]++;
        cnt_put_sent[p]++;
        for (int i = 0; i < len; i++) begin
          data_t d = {$urandom, $urandom};
          gt[pa_of(va) + addr_t'(8 * i)] = d;
          beat(TLP_MWR, rid, tag, va + addr_t'(8 * i), len, i == 0, i == len - 1, d);
        end
      end else if (kind < 8) begin
        // counted get of one word
        addr_t va = va_cnt(p) + addr_t'(8 * $urandom_range(0, 511));
        cnt_get_sent[p]++;
        get_exp(p, rid, tag, va, 1, 0);
        beat(TLP_MRD, rid, tag, va, 1, 1, 1, '0);
      end else begin
        // logged get: 1..16 words, or a whole 4 KB page for process 0
        int len = (p == 0 && (n < 2 || $urandom_range(0, 3) == 0)) ? 512 : $urandom_range(1, 16);
        addr_t va = va_src(p) + ((len == 512) ? 64'd0 : addr_t'(8 * $urandom_range(0, 512 - len)));
        get_exp(p, rid, tag, va, len, 1);
        beat(TLP_MRD, rid, tag, va, len, 1, 1, '0);
      end
      n_sent++;
    end
    traffic_done = 1;
  endtask

  // ------------------------------------------------------------ CPU side
  task automatic sp_read(input int a, output data_t d);
    @(negedge clk); sp_we = 0; sp_addr = 6'(a);
    @(negedge clk); d = sp_rdata;
  endtask

  task automatic sp_write(int a, data_t d);
    @(negedge clk); sp_we = 1; sp_addr = 6'(a); sp_wdata = d;
    @(negedge clk); sp_we = 0;
  endtask

  // The handler of process p: consume every complete record up to the tail.
  task automatic handle(int p, addr_t tail);
    while (head[p] != tail) begin
      data_t h, a, w;
      int len, words;
      repeat (HANDLER_CYCLES) @(negedge clk);
      h = mm.rd(head[p]);
      len = int'(h[9:0]);
      words = 2 + (h[61] ? len : 0);
      for (int i = 0; i < words; i++) begin
        w = mm.rd(head[p]);
        if (expq[p].size() == 0) begin
          failures++; $display("FAIL log %0d: unexpected word %h", p, w);
        end else chk($sformatf("log %0d word", p), w, expq[p].pop_front());
        if (i == 1) a = w;
        if (i == 2 && !h[62] && h[61]) begin
          if (table_model[p].exists(w)) table_model[p][w]++; else table_model[p][w] = 1;
        end
        head[p] += 8;
        if (head[p] >= log_base(p) + log_size(p)) begin head[p] = log_base(p); wrapped[p] = 1; end
      end
      if ((a >> 12) == (va_cnt(p) >> 12)) begin
        if (h[62]) cnt_get_seen[p]++; else cnt_put_seen[p]++;
      end
    end
    sp_write(2 * p + 1, head[p]);
  endtask

  task automatic cpu();
    data_t t;
    forever begin
      for (int p = 0; p < NP; p++) begin
        sp_read(2 * p, t);
        if (t != head[p]) handle(p, t);
      end
    end
  endtask

  // ------------------------------------------------------------ test
  initial begin
    foreach (msis[i]) begin
      msis[i] = 0; recs[i] = 0; wrapped[i] = 0;
      cnt_put_sent[i] = 0; cnt_get_sent[i] = 0; cnt_put_seen[i] = 0; cnt_get_seen[i] = 0;
    end
    for (int p = 0; p < NP; p++)
      for (int d = 0; d < 2; d++) begin
        rid_t r;
        r = (d == 0) ? DEV0 : DEV1;
        map(r, va_vol(p), pbits(0, 0, 1, 1, 0, 0, 1, p + 1));
        map(r, va_cnt(p), pbits(1, 1, 1, 0, 1, 0, 0, p + 1));
        map(r, va_src(p), pbits(0, 1, 0, 0, 1, 1, 0, p + 1));
      end
    for (int p = 0; p < NP; p++)
      for (int i = 0; i < 512; i++) begin
        addr_t c, s;
        c = pa_of(va_cnt(p)) + addr_t'(8 * i); s = pa_of(va_src(p)) + addr_t'(8 * i);
        mm.mem[c] = pattern(c); gt[c] = pattern(c);
        mm.mem[s] = pattern(s); gt[s] = pattern(s);
      end
    repeat (3) @(posedge clk); rst_n = 1;
    cfg(8'h00, ROOT);
    for (int p = 0; p < NP; p++) begin
      cfg(8'h40, log_base(p)); cfg(8'h48, log_size(p));
      cfg(8'h58, {1'b1, 15'd0, 16'(p), 22'd0, 10'(p + 1)});
      head[p] = log_base(p);
      sp_write(2 * p, log_base(p));
      sp_write(2 * p + 1, log_base(p));
    end
    fork
      traffic();
      cpu();
    join_none
    wait (traffic_done);
    begin
      int t;
      bit busy;
      t = 0; busy = 1;
      while (busy && t < 20000) begin
        @(negedge clk); t++;
        busy = cplq.size() != 0;
        for (int p = 0; p < NP; p++) if (expq[p].size() != 0) busy = 1;
      end
    end
    repeat (20) @(negedge clk);
    disable fork;

    for (int p = 0; p < NP; p++) begin
      int missing;
      missing = 0;
      chk($sformatf("log %0d fully consumed", p), expq[p].size(), 0);
      foreach (inserted[p][e])
        if (!table_model[p].exists(e) || table_model[p][e] != inserted[p][e]) missing++;
      chk($sformatf("hash table %0d holds all inserts", p), missing, 0);
      chk($sformatf("hash table %0d size", p), table_model[p].num(), inserted[p].num());
      chk($sformatf("put count %0d", p), cnt_put_seen[p], cnt_put_sent[p]);
      chk($sformatf("get count %0d", p), cnt_get_seen[p], cnt_get_sent[p]);
      chk($sformatf("interrupts %0d", p), msis[p], recs[p] / 10);
      chk($sformatf("log %0d wrapped", p), wrapped[p], 1);
      for (int i = 0; i < 512; i++)
        chk("volume untouched", mm.rd(pa_of(va_vol(p)) + addr_t'(8 * i)), 0);
      for (int i = 0; i < 512; i++) begin
        addr_t c;
        c = pa_of(va_cnt(p)) + addr_t'(8 * i);
        chk("counter page memory", mm.rd(c), gt[c]);
      end
    end
    chk("all completions received", cplq.size(), 0);
    chk("backpressure happened", n_park > 0, 1);
    begin
      int total;
      total = 0;
      foreach (recs[p]) total += recs[p];
      $display("INFO ops=%0d records=%0d parks=%0d table_reads=%0d", n_sent, total, n_park, mm.pt_reads);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
