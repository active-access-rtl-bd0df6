// tb_aa_ctx_cache: fills more requester IDs than the cache holds and checks
// hits, the stored page-table roots, round-robin replacement (the oldest
// fill is the one evicted) and invalidation.
module tb_aa_ctx_cache;
  import aa_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, lk_hit, fill_valid = 0, inv_all = 0;
  rid_t lk_rid = '0, fill_rid = '0;
  addr_t lk_root, fill_root = '0;
  int checks = 0, failures = 0;

  aa_ctx_cache #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic fill(int r);
    @(negedge clk); fill_valid = 1; fill_rid = rid_t'(r); fill_root = addr_t'(r) << 12;
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic look(int r, bit exp);
    lk_rid = rid_t'(r); #1; checks++;
    if (lk_hit !== exp || (exp && lk_root !== (addr_t'(r) << 12))) begin
      failures++; $display("FAIL rid %0d hit=%0b exp=%0b", r, lk_hit, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    look(1, 0);
    for (int r = 1; r <= N; r++) fill(r * 17);
    for (int r = 1; r <= N; r++) look(r * 17, 1);
    fill(999);                 // evicts the first fill
    look(17, 0); look(999, 1); look(34, 1);
    fill(1000);                // evicts the second
    look(34, 0); look(51, 1);
    @(negedge clk); inv_all = 1; @(negedge clk); inv_all = 0;
    look(999, 0); look(51, 0);
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
