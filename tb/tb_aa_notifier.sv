// tb_aa_notifier: checks the default interval (an MSI on every 10th record
// committed to a log, counted per log), then a reprogrammed interval of 3
// and a free-space threshold that fires on every record once the log is
// nearly full. Then kicks (interrupt requests from a captured active
// flush): one alone, one that meets a record interrupt and must follow it
// one cycle later, and one for another log that must be refused
// (kick_ready low) while the pending slot is taken, and sent afterwards.
module tb_aa_notifier;
  import aa_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, cfg_we = 0, cm_valid = 0, irq_valid;
  logic kick_valid = 0, kick_ready;
  logic [1:0] kick_idx = '0;
  iuid_t kick_iuid = '0;
  logic [15:0] cfg_interval = '0;
  addr_t cfg_threshold = '0, cm_free = 64'd1000;
  logic [1:0] cm_idx = '0, irq_idx;
  iuid_t cm_iuid = '0, irq_iuid;
  int checks = 0, failures = 0, irqs [L];

  aa_notifier #(.LOGS(L)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && irq_valid) irqs[irq_idx]++;

  task automatic chk(string w, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask
  task automatic commit(int idx, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); cm_valid = 1; cm_idx = 2'(idx); cm_iuid = iuid_t'(idx + 100);
      @(negedge clk); cm_valid = 0;
    end
  endtask

  initial begin
    foreach (irqs[i]) irqs[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    commit(1, 9); chk("9 records", irqs[1], 0);
    commit(2, 5); commit(1, 1); @(negedge clk);
    chk("10th record", irqs[1], 1); chk("other log", irqs[2], 0);
    commit(1, 20); @(negedge clk); chk("30 records", irqs[1], 3);
    @(negedge clk); cfg_we = 1; cfg_interval = 3; cfg_threshold = 64'd64;
    @(negedge clk); cfg_we = 0;
    commit(2, 7); @(negedge clk); chk("interval 3", irqs[2], 2);
    cm_free = 64'd40;
    commit(3, 4); @(negedge clk); chk("threshold", irqs[3], 4);
    chk("irq iuid", irq_iuid, 103);
    // kick alone
    @(negedge clk); kick_valid = 1; kick_idx = 0; kick_iuid = 200; #1;
    chk("kick ready", kick_ready, 1);
    @(negedge clk); kick_valid = 0;
    chk("kick irq", irq_valid, 1); chk("kick idx", irq_idx, 0); chk("kick iuid", irq_iuid, 200);
    @(negedge clk); chk("one pulse", irq_valid, 0);
    // kick meets a record interrupt (the threshold makes every commit fire)
    cm_valid = 1; cm_idx = 3; cm_iuid = 103; kick_valid = 1; kick_idx = 1; kick_iuid = 201;
    @(negedge clk); chk("record first", irq_idx, 3); chk("record first v", irq_valid, 1);
    kick_idx = 2; kick_iuid = 202; #1; chk("other log refused", kick_ready, 0);
    @(negedge clk); cm_valid = 0; chk("record again", irq_idx, 3);
    @(negedge clk); chk("pending kick", irq_idx, 1); chk("pending iuid", irq_iuid, 201);
    @(negedge clk); kick_valid = 0; chk("waiting kick", irq_idx, 2); chk("waiting iuid", irq_iuid, 202);
    chk("waiting kick v", irq_valid, 1);
    @(negedge clk); chk("quiet", irq_valid, 0);
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
