// tb_aa_log_table: programs two access logs and checks lookup by IUID,
// reservations and free space, commits of the tail with wrap-around at the
// end of the ring, head updates from the consumer (by IUID and by table
// index, the latter winning a same-cycle clash), the empty flag, and that
// a full ring reports no room for one more word. Free space is worked out
// in the testbench from its own copies of head, tail and reservation.
module tb_aa_log_table;
  import aa_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_valid = 0, head_we = 0, hdi_we = 0, rsv_valid = 0, cm_valid = 0;
  logic [1:0] hdi_idx = '0, cfg_idx = '0, rsv_idx = '0, cm_idx = '0, lk_idx;
  iuid_t cfg_iuid = '0, head_iuid = '0, lk_iuid = '0;
  addr_t cfg_base = '0, cfg_size = '0, head_val = '0, hdi_val = '0, rsv_bytes = '0, cm_bytes = '0;
  logic lk_hit;
  addr_t lk_resv, lk_free;
  logic [N-1:0] e_valid, e_empty;
  iuid_t e_iuid [N];
  addr_t e_base [N], e_size [N], e_tail [N], e_free [N];
  int checks = 0, failures = 0;

  aa_log_table #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  task automatic prog(int idx, int iuid, addr_t base, addr_t size);
    @(negedge clk); cfg_we = 1; cfg_valid = 1; cfg_idx = 2'(idx); cfg_iuid = iuid_t'(iuid);
    cfg_base = base; cfg_size = size;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic reserve(int idx, addr_t n);
    @(negedge clk); rsv_valid = 1; rsv_idx = 2'(idx); rsv_bytes = n;
    @(negedge clk); rsv_valid = 0;
  endtask
  task automatic commit(int idx, addr_t n);
    @(negedge clk); cm_valid = 1; cm_idx = 2'(idx); cm_bytes = n;
    @(negedge clk); cm_valid = 0;
  endtask
  task automatic head(int iuid, addr_t h);
    @(negedge clk); head_we = 1; head_iuid = iuid_t'(iuid); head_val = h;
    @(negedge clk); head_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    prog(1, 7, 64'h1000, 64'd128);
    prog(2, 9, 64'h2000, 64'd64);
    lk_iuid = 7; #1;
    chk("hit7", lk_hit, 1); chk("idx7", lk_idx, 1); chk("resv7", lk_resv, 64'h1000);
    chk("free7", lk_free, 120); chk("empty", e_empty[1], 1);
    lk_iuid = 8; #1; chk("miss8", lk_hit, 0);
    lk_iuid = 9; #1; chk("idx9", lk_idx, 2); chk("free9", lk_free, 56);
    reserve(1, 32); reserve(1, 48);
    lk_iuid = 7; #1;
    chk("resv after 2", lk_resv, 64'h1050); chk("free", lk_free, 40);
    chk("tail unchanged", e_tail[1], 64'h1000); chk("not empty", e_empty[1], 0);
    commit(1, 32); chk("tail", e_tail[1], 64'h1020);
    commit(1, 48); chk("tail2", e_tail[1], 64'h1050);
    head(7, 64'h1050); chk("empty again", e_empty[1], 1);
    lk_iuid = 7; #1; chk("free all", lk_free, 120);
    reserve(1, 40);                     // wraps: 0x1050 + 40 = 0x1078 -> 0x1078 - 128 + ... no wrap yet
    lk_iuid = 7; #1; chk("resv", lk_resv, 64'h1078);
    reserve(1, 24);                     // 0x1078 + 24 = 0x1090 >= 0x1080 -> 0x1010
    lk_iuid = 7; #1; chk("wrap resv", lk_resv, 64'h1010); chk("free wrap", lk_free, 120 - 64);
    commit(1, 40); commit(1, 24); chk("wrap tail", e_tail[1], 64'h1010);
    // fill log 9 to the last usable slot
    reserve(2, 56);
    lk_iuid = 9; #1; chk("full", lk_free, 0);
    head(9, 64'h2010);
    lk_iuid = 9; #1; chk("after head", lk_free, 16);
    // head by table index, and both ports at once on one entry
    @(negedge clk); hdi_we = 1; hdi_idx = 2; hdi_val = 64'h2020;
    @(negedge clk); hdi_we = 0;
    lk_iuid = 9; #1; chk("index head", lk_free, 32);
    @(negedge clk); hdi_we = 1; hdi_idx = 2; hdi_val = 64'h2030;
    head_we = 1; head_iuid = 9; head_val = 64'h2028;
    @(negedge clk); hdi_we = 0; head_we = 0;
    lk_iuid = 9; #1; chk("index wins", lk_free, 48);
    // other log untouched
    chk("log7 tail", e_tail[1], 64'h1010);
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
