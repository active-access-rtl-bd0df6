// tb_aa_scratchpad: IOMMU-port writes read back on the CPU port one cycle
// later, CPU writes and reads, and the IOMMU port winning a same-word
// collision. Random traffic against a reference array. Every CPU write to
// an odd (head) word must also appear on the head-forwarding outputs in the
// next cycle, with the log index and value, and no other write may.
module tb_aa_scratchpad;
  import aa_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, a_we = 0, b_we = 0;
  logic [2:0] a_addr = '0, b_addr = '0;
  data_t a_wdata = '0, b_wdata = '0, b_rdata, hd_val;
  logic hd_valid;
  logic [1:0] hd_idx;
  data_t refm [D];
  logic [2:0] last_col = '0;
  int checks = 0, failures = 0;

  aa_scratchpad #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise through the CPU port
    for (int i = 0; i < D; i++) begin
      @(negedge clk); b_we = 1; b_addr = 3'(i); b_wdata = 64'(i); refm[i] = 64'(i);
    end
    @(negedge clk); b_we = 0;
    for (int it = 0; it < 300; it++) begin
      data_t exp;
      @(negedge clk);
      a_we = $urandom_range(0, 1) == 1; a_addr = 3'($urandom); a_wdata = {$urandom, $urandom};
      b_we = $urandom_range(0, 3) == 0; b_addr = 3'($urandom); b_wdata = {$urandom, $urandom};
      if (it % 10 == 0) begin a_we = 1; b_we = 1; b_addr = a_addr; end
      if (it % 10 == 1) begin a_we = 0; b_we = 0; b_addr = last_col; end   // read the collided word
      if (it % 10 == 0) last_col = a_addr;
      exp = refm[b_addr];
      @(posedge clk); #1;
      checks++;
      if (b_rdata !== exp) begin failures++; $display("FAIL rd %0d %h exp %h", b_addr, b_rdata, exp); end
      checks++;
      if (hd_valid !== (b_we && b_addr[0]) ||
          (hd_valid && (hd_idx !== b_addr[2:1] || hd_val !== b_wdata))) begin
        failures++; $display("FAIL head fwd %0d %0d %h", hd_valid, hd_idx, hd_val);
      end
      if (b_we && !(a_we && a_addr == b_addr)) refm[b_addr] = b_wdata;
      if (a_we) refm[a_addr] = a_wdata;
    end
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
