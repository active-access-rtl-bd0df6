// tb_aa_flush_buffer: registers two flushing pages, checks page-granular
// lookup, captures a flush get while its log still holds records (no
// completion may be offered), drains the log (completion with the captured
// requester ID and tag), takes it and checks it is not offered again; also
// checks a flush whose log is already empty completes at once, and that a
// lookup names the guarded IUID, its log and whether the log holds records.
module tb_aa_flush_buffer;
  import aa_pkg::*;
  localparam int N = 4, L = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_valid = 0, lk_hit, cap_valid = 0, done_valid, done_ready = 0;
  logic [1:0] cfg_idx = '0, lk_idx, cap_idx = '0;
  logic lk_log, lk_busy;
  iuid_t lk_iuid;
  addr_t cfg_addr = '0, lk_addr = '0;
  iuid_t cfg_iuid = '0, done_iuid;
  rid_t cap_rid = '0, done_rid;
  tag_t cap_tag = '0, done_tag;
  logic [L-1:0] log_valid = 2'b11, log_empty = 2'b11;
  iuid_t log_iuid [L];
  int checks = 0, failures = 0;

  aa_flush_buffer #(.ENTRIES(N), .LOGS(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  initial begin
    log_iuid[0] = 10'd5; log_iuid[1] = 10'd6;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_valid = 1; cfg_idx = 2; cfg_addr = 64'hFFFF_F000; cfg_iuid = 5;
    @(negedge clk); cfg_idx = 0; cfg_addr = 64'hFFFF_E000; cfg_iuid = 6;
    @(negedge clk); cfg_we = 0;
    lk_addr = 64'hFFFF_F008; #1; chk("hit", lk_hit, 1); chk("idx", lk_idx, 2);
    lk_addr = 64'hFFFF_D000; #1; chk("miss", lk_hit, 0);
    chk("idle", done_valid, 0);
    log_empty = 2'b10;                   // log of IUID 5 holds records
    lk_addr = 64'hFFFF_F010; #1;
    chk("lk iuid", lk_iuid, 5); chk("lk log", lk_log, 0); chk("lk busy", lk_busy, 1);
    lk_addr = 64'hFFFF_E010; #1;
    chk("lk iuid 6", lk_iuid, 6); chk("lk log 1", lk_log, 1); chk("lk idle", lk_busy, 0);
    @(negedge clk); cap_valid = 1; cap_idx = 2; cap_rid = 16'h0102; cap_tag = 8'h33;
    @(negedge clk); cap_valid = 0;
    repeat (3) @(negedge clk);
    chk("wait for drain", done_valid, 0);
    log_empty = 2'b11; #1;
    chk("done", done_valid, 1); chk("rid", done_rid, 16'h0102); chk("tag", done_tag, 8'h33);
    chk("iuid", done_iuid, 5);
    @(negedge clk); done_ready = 1; @(negedge clk); done_ready = 0; #1;
    chk("taken", done_valid, 0);
    @(negedge clk); cap_valid = 1; cap_idx = 0; cap_rid = 16'h0300; cap_tag = 8'h01;
    @(negedge clk); cap_valid = 0; #1;
    chk("empty log: done at once", done_valid, 1); chk("rid2", done_rid, 16'h0300);
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
