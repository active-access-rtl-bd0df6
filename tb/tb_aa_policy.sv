// tb_aa_policy: exhaustive check of the Active Access PTE policy.
// Every combination of W, R, WL, WLD, RL, RLD, E for puts and gets is
// applied and the action compared with a reference written as the rules:
// memory effect iff permitted; log if a log bit is set and the access is
// permitted or E=1; data only with the data bit (never for a blocked get);
// a blocked access with E=0 goes to the legacy fault log. Also checks the
// named page types: active put, legacy fault, statistics, active get.
module tb_aa_policy;
  import aa_pkg::*;
  logic [63:0] pte;
  logic        is_read;
  aa_action_t  act;
  int checks = 0, failures = 0;

  aa_policy dut (.pte_raw(pte), .is_read, .act);

  function automatic logic [63:0] mk(bit w, bit r, bit wl, bit wld, bit rl, bit rld, bit e, int iuid);
    logic [63:0] v = '0;
    v[1] = w; v[0] = r; v[7] = wl; v[8] = wld; v[9] = rl; v[10] = rld; v[63] = e;
    v[61:52] = iuid[9:0];
    v[51:12] = 40'h12345;
    return v;
  endfunction

  task automatic expect_act(string what, bit mem_ok, bit fault, bit alog, bit ldata, bit flog);
    checks++;
    if (act.mem_ok !== mem_ok || act.fault !== fault || act.to_access_log !== alog ||
        act.log_data !== ldata || act.to_fault_log !== flog) begin
      failures++;
      $display("FAIL %s pte=%h rd=%0b got %b%b%b%b%b exp %b%b%b%b%b", what, pte, is_read,
               act.mem_ok, act.fault, act.to_access_log, act.log_data, act.to_fault_log,
               mem_ok, fault, alog, ldata, flog);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      bit w, r, wl, wld, rl, rld, e, rd, perm, lb, db;
      {rd, e, rld, rl, wld, wl, r, w} = v[7:0];
      pte = mk(w, r, wl, wld, rl, rld, e, v * 3);
      is_read = rd;
      #1;
      perm = rd ? r : w;
      lb   = rd ? (rl | rld) : (wl | wld);
      db   = rd ? rld : wld;
      expect_act("exhaustive", perm, !perm, lb && (perm || e), lb && (perm || e) && db && (perm || !rd),
                 !perm && !e);
      checks++;
      if (act.iuid !== 10'(v * 3)) begin failures++; $display("FAIL iuid"); end
    end
    // Named page types.
    pte = mk(0, 0, 1, 1, 0, 0, 1, 5); is_read = 0; #1;
    expect_act("active put", 0, 1, 1, 1, 0);
    pte = mk(0, 0, 1, 0, 0, 0, 0, 5); is_read = 0; #1;
    expect_act("legacy fault", 0, 1, 0, 0, 1);
    pte = mk(1, 1, 1, 0, 1, 0, 0, 5); is_read = 0; #1;
    expect_act("put statistics", 1, 0, 1, 0, 0);
    is_read = 1; #1;
    expect_act("get statistics", 1, 0, 1, 0, 0);
    pte = mk(0, 1, 0, 0, 1, 1, 0, 5); is_read = 1; #1;
    expect_act("active get", 1, 0, 1, 1, 0);
    pte = mk(1, 1, 0, 0, 0, 0, 0, 5); is_read = 1; #1;
    expect_act("DHT lookup", 1, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
