// tb_aa_walker: builds remapping tables in a model memory and checks walks.
// Cases: full walk (root entry, context entry, four page-table levels) of
// two devices, a walk that starts from a cached page-table root (4 reads),
// a missing root entry, a missing context entry and a missing level-2 entry
// (all must return pte = 0 and no context fill), and a 2 MB and a 1 GB
// superpage, which must come back as the 4 KB entry of the accessed page
// with bits 7-10 cleared. The number of table reads of each walk is checked
// (6 with the context, 4 without, one fewer per superpage level).
module tb_aa_walker;
  import aa_pkg::*;
  logic clk = 0, rst_n = 0;
  addr_t root_table = 64'h10_0000;
  logic start = 0, need_ctx = 0, busy, mem_rd_valid, done, ctx_fill;
  logic mem_rd_ready = 1, rsp_valid = 0;
  rid_t rid = '0;
  addr_t dev_addr = '0, pt_root = '0, mem_rd_addr, ctx_root;
  data_t rsp_data = '0;
  logic [63:0] pte;
  int checks = 0, failures = 0, reads = 0;
  data_t mem [addr_t];

  aa_walker dut (.*);
  always #5 clk = ~clk;

  // one read at a time, answered the cycle after the handshake
  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (mem_rd_valid && mem_rd_ready) begin
      reads++;
      rsp_valid <= 1'b1;
      rsp_data  <= mem.exists(mem_rd_addr) ? mem[mem_rd_addr] : '0;
    end
  end

  addr_t next_tbl = 64'h20_0000;
  function automatic addr_t alloc();
    addr_t a = next_tbl; next_tbl += 64'h1000; return a;
  endfunction

  // map device page (rid, va) -> leaf pte, creating tables as needed
  function automatic void map(rid_t r, addr_t va, logic [63:0] leaf);
    addr_t re = root_table + 8 * r[15:8], ctx, ce, t;
    if (!mem.exists(re)) mem[re] = alloc() | 1;
    ctx = {mem[re][63:12], 12'h0};
    ce = ctx + 8 * r[7:0];
    if (!mem.exists(ce)) mem[ce] = alloc() | 1;
    t = {mem[ce][63:12], 12'h0};
    for (int l = 3; l >= 1; l--) begin
      addr_t e = t + 8 * ((va >> (12 + 9 * l)) & 64'h1ff);
      if (!mem.exists(e)) mem[e] = alloc() | 3;
      t = {12'h0, mem[e][51:12], 12'h0};
    end
    mem[t + 8 * ((va >> 12) & 64'h1ff)] = leaf;
  endfunction

  // map a superpage at level lv (1 = 2 MB, 2 = 1 GB) with entry sp
  function automatic void map_super(rid_t r, addr_t va, int lv, logic [63:0] sp);
    addr_t re = root_table + 8 * r[15:8], ctx, ce, t;
    if (!mem.exists(re)) mem[re] = alloc() | 1;
    ctx = {mem[re][63:12], 12'h0};
    ce = ctx + 8 * r[7:0];
    if (!mem.exists(ce)) mem[ce] = alloc() | 1;
    t = {mem[ce][63:12], 12'h0};
    for (int l = 3; l > lv; l--) begin
      addr_t e = t + 8 * ((va >> (12 + 9 * l)) & 64'h1ff);
      if (!mem.exists(e)) mem[e] = alloc() | 3;
      t = {12'h0, mem[e][51:12], 12'h0};
    end
    mem[t + 8 * ((va >> (12 + 9 * lv)) & 64'h1ff)] = sp;
  endfunction

  task automatic walk(rid_t r, addr_t va, bit nc, addr_t root, logic [63:0] exp, int exp_reads, bit exp_fill);
    int r0 = reads;
    @(negedge clk); start = 1; need_ctx = nc; rid = r; dev_addr = va; pt_root = root;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 3;
    if (pte !== exp) begin failures++; $display("FAIL pte %h exp %h", pte, exp); end
    if (reads - r0 != exp_reads) begin failures++; $display("FAIL reads %0d exp %0d", reads - r0, exp_reads); end
    if (ctx_fill !== exp_fill) begin failures++; $display("FAIL ctx_fill %0b", ctx_fill); end
  endtask

  initial begin
    logic [63:0] l1, l2;
    addr_t croot;
    l1 = 64'h8000_0000_0AB0_0783 | (64'd5 << 52);
    l2 = 64'h0000_0000_0CD0_0001;
    map(16'h0108, 64'h0000_7F12_3456_7000, l1);
    map(16'h0200, 64'h0000_0000_0000_3000, l2);
    // 2 MB superpage at physical 0x0560_0000 with WL/WLD set (must be dropped)
    // and IUID 9, E = 1; 1 GB superpage at physical 0x80_0000_0000, read-only
    map_super(16'h0108, 64'h0000_0012_3460_0000, 1, 64'h8000_0000_0560_0183 | (64'd9 << 52));
    map_super(16'h0108, 64'h0000_0040_0000_0000, 2, 64'h0000_0080_0000_0081);
    repeat (2) @(posedge clk); rst_n = 1;
    walk(16'h0108, 64'h0000_7F12_3456_7ABC, 1, 0, l1, 6, 1);
    croot = ctx_root;
    checks++;
    if (croot !== {mem[{mem[root_table + 8] [63:12], 12'h0} + 8 * 8][63:12], 12'h0}) begin
      failures++; $display("FAIL ctx_root %h", croot);
    end
    walk(16'h0108, 64'h0000_7F12_3456_7000, 0, croot, l1, 4, 0);
    walk(16'h0200, 64'h0000_0000_0000_3008, 1, 0, l2, 6, 1);
    // 4 KB page 0x1D7 of the 2 MB page; WL/WLD cleared, rest kept; 5 reads
    walk(16'h0108, 64'h0000_0012_347D_7ABC, 1, 0, 64'h8000_0000_057D_7003 | (64'd9 << 52), 5, 1);
    // 4 KB page 0x2_3456 of the 1 GB page; PS cleared; 2 reads from the cached root
    walk(16'h0108, 64'h0000_0040_2345_6FF8, 0, croot, 64'h0000_0080_2345_6001, 2, 0);
    walk(16'h0300, 64'h0000_0000_0000_3008, 1, 0, 64'h0, 1, 0);     // no root entry
    walk(16'h0201, 64'h0000_0000_0000_3008, 1, 0, 64'h0, 2, 0);     // no context entry
    walk(16'h0200, 64'h0000_0000_4000_3008, 1, 0, 64'h0, 4, 1);     // no level-2 table (context is fine)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
