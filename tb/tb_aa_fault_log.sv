// tb_aa_fault_log: a 64-byte fault log holds three 16-byte entries (one
// slot stays empty). Checks the granted addresses, one MSI per recorded
// entry, that a fourth fault is dropped (overflow flag, drop count, no MSI,
// tail unchanged), that an OS head update makes room again, and the wrap
// to the base of the ring.
module tb_aa_fault_log;
  import aa_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, head_we = 0, rec_valid = 0, rec_ok, msi, overflow;
  addr_t cfg_base = '0, cfg_size = '0, head_val = '0, rec_addr;
  logic [31:0] dropped;
  int checks = 0, failures = 0, msis = 0;

  aa_fault_log dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && msi) msis++;

  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask
  task automatic rec(bit exp_ok, addr_t exp_addr);
    @(negedge clk); rec_valid = 1; #1;
    chk("ok", rec_ok, exp_ok);
    if (exp_ok) chk("addr", rec_addr, exp_addr);
    @(negedge clk); rec_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_base = 64'h9000; cfg_size = 64;
    @(negedge clk); cfg_we = 0;
    rec(1, 64'h9000); rec(1, 64'h9010); rec(1, 64'h9020);
    rec(0, 0);
    @(negedge clk);
    chk("msis", msis, 3); chk("overflow", overflow, 1); chk("dropped", dropped, 1);
    @(negedge clk); head_we = 1; head_val = 64'h9020; @(negedge clk); head_we = 0;
    rec(1, 64'h9030); rec(1, 64'h9000);
    rec(0, 0);
    @(negedge clk);
    chk("msis2", msis, 5); chk("dropped2", dropped, 2);
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
