// tb_aa_tag_buffer: allocates records of two transactions of one log (A
// first, then B), completes B before A and checks that nothing commits
// until A (the record at the log's tail) is complete, then that A and B
// commit in order with their sizes. Also checks lookup by (requester ID,
// tag), write-pointer updates, a second log committing independently and
// the full flag. The testbench plays the log table: it moves the tail on
// each commit.
module tb_aa_tag_buffer;
  import aa_pkg::*;
  localparam int N = 4, L = 2;
  logic clk = 0, rst_n = 0;
  rid_t lk_rid = '0, al_rid = '0;
  tag_t lk_tag = '0, al_tag = '0;
  logic lk_hit, full, cm_valid;
  logic [1:0] lk_idx, up_idx = '0;
  addr_t lk_wptr, al_start = '0, al_wptr = '0, al_bytes = '0, up_wptr = '0, cm_bytes;
  logic [0:0] lk_log, al_log = '0, cm_log;
  logic al_valid = 0, al_complete = 0, up_valid = 0, up_complete = 0;
  addr_t log_tail [L];
  logic [2:0] occupancy;
  int checks = 0, failures = 0, commits = 0;
  addr_t commit_bytes [$];

  aa_tag_buffer #(.ENTRIES(N), .LOGS(L)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && cm_valid) begin
    commits++;
    commit_bytes.push_back(cm_bytes);
    log_tail[cm_log] <= log_tail[cm_log] + cm_bytes;
  end

  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask
  task automatic alloc(int rid, int tag, int lg, addr_t start, addr_t bytes);
    @(negedge clk); al_valid = 1; al_rid = rid_t'(rid); al_tag = tag_t'(tag); al_log = 1'(lg);
    al_start = start; al_wptr = start + 16; al_bytes = bytes;
    @(negedge clk); al_valid = 0;
  endtask
  task automatic look(int rid, int tag);
    lk_rid = rid_t'(rid); lk_tag = tag_t'(tag); #1;
  endtask
  task automatic update(int rid, int tag, bit cpl);
    look(rid, tag);
    @(negedge clk); up_valid = 1; up_idx = lk_idx; up_wptr = lk_wptr + 8; up_complete = cpl;
    @(negedge clk); up_valid = 0;
  endtask

  initial begin
    log_tail[0] = 64'h1000; log_tail[1] = 64'h8000;
    repeat (2) @(posedge clk); rst_n = 1;
    alloc(1, 3, 0, 64'h1000, 40);        // A: header + 3 words
    alloc(2, 3, 0, 64'h1028, 32);        // B: header + 2 words (reserved after A)
    look(1, 3); chk("A hit", lk_hit, 1); chk("A wptr", lk_wptr, 64'h1010);
    look(2, 3); chk("B hit", lk_hit, 1); chk("B wptr", lk_wptr, 64'h1038);
    look(2, 4); chk("miss", lk_hit, 0);
    update(2, 3, 0); update(2, 3, 1);    // B complete first
    repeat (3) @(negedge clk);
    chk("no commit past a hole", commits, 0);
    update(1, 3, 0); look(1, 3); chk("A wptr moved", lk_wptr, 64'h1018);
    update(1, 3, 0); update(1, 3, 1);
    repeat (4) @(negedge clk);
    chk("two commits", commits, 2);
    chk("A first", commit_bytes[0], 40); chk("then B", commit_bytes[1], 32);
    chk("tail", log_tail[0], 64'h1048);
    alloc(5, 1, 1, 64'h8000, 16);        // metadata-only record of log 1
    update(5, 1, 1);
    repeat (2) @(negedge clk);
    chk("log1 commit", log_tail[1], 64'h8010);
    for (int i = 0; i < N; i++) alloc(9, i, 0, 64'h2000 + 64'(i) * 16, 16);
    #1 chk("full", full, 1); chk("occupancy", occupancy, N);
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
