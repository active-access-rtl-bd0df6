// tb_aa_iotlb: checks the fully associative LRU IOTLB against a reference
// list kept in recency order. Random lookups and fills over a key space
// larger than the TLB; every lookup's hit/miss and PTE is compared, and
// every fill must evict exactly the reference's least recently used key.
module tb_aa_iotlb;
  import aa_pkg::*;
  localparam int N = 4;
  localparam int KW = RID_W + 36;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, fill_valid = 0, inv_all = 0, lk_hit;
  logic [KW-1:0] lk_key = '0, fill_key = '0;
  logic [63:0] lk_pte, fill_pte = '0;
  int checks = 0, failures = 0;
  logic [KW-1:0] lru [$];    // index 0 = most recent
  logic [63:0]   ref_val [logic [KW-1:0]];

  aa_iotlb #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic int find(logic [KW-1:0] k);
    foreach (lru[i]) if (lru[i] == k) return i;
    return -1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      logic [KW-1:0] k;
      int p;
      k = KW'($urandom_range(0, 7)) << 3;
      @(negedge clk);
      lk_key = k; lk_valid = 1; fill_valid = 0;
      #1;
      p = find(k);
      checks++;
      if (lk_hit !== (p >= 0) || (p >= 0 && lk_pte !== ref_val[k])) begin
        failures++; $display("FAIL lookup key=%h hit=%0b exp=%0d", k, lk_hit, p);
      end
      if (p >= 0) begin lru.delete(p); lru.push_front(k); end
      @(posedge clk);
      if (p < 0) begin
        @(negedge clk);
        lk_valid = 0; fill_valid = 1; fill_key = k; fill_pte = {$urandom, $urandom};
        ref_val[k] = fill_pte;
        if (lru.size() == N) void'(lru.pop_back());
        lru.push_front(k);
        @(posedge clk);
        @(negedge clk) fill_valid = 0;
      end
    end
    // invalidation
    @(negedge clk); inv_all = 1; lk_valid = 0; @(negedge clk); inv_all = 0;
    lk_key = lru[0]; #1; checks++;
    if (lk_hit) begin failures++; $display("FAIL hit after invalidate"); end
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
