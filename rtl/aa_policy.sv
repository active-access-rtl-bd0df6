// aa_policy: decides what the extended IOMMU does with one put or get.
//
// Combinational. Inputs are the raw 64-bit PTE that maps the accessed page
// and the direction of the access; the output is an aa_action_t.
//
// From the paper: a put needs W=1 and a get R=1 to take effect in memory,
// otherwise the access faults and leaves memory alone; WL (RL) logs the
// metadata of a put (get), WLD (RLD) logs metadata and data; W/WL/WLD are
// independent; E=0 sends a fault to the legacy system fault log, E=1 to an
// access log. Choices of this design where the paper is silent: an access
// that does not fault but has a log bit set is always recorded in the access
// log of the PTE's IUID (the statistics and checkpointing uses W=1,WL=1 and
// R=1,RL=1); a faulting access with E=1 is recorded only if a log bit is
// set; a faulting get never logs data because no data is read.
module aa_policy
  import aa_pkg::*;
(
  input  logic [63:0] pte_raw,
  input  logic        is_read,
  output aa_action_t  act
);
  pte_t p;
  logic perm, log_bit, dat_bit;

  always_comb begin
    p       = decode_pte(pte_raw);
    perm    = is_read ? p.r  : p.w;
    log_bit = is_read ? (p.rl | p.rld) : (p.wl | p.wld);
    dat_bit = is_read ? p.rld : p.wld;

    act.mem_ok        = perm;
    act.fault         = !perm;
    act.to_access_log = log_bit && (perm || p.e);
    act.log_data      = act.to_access_log && dat_bit && (perm || !is_read);
    act.to_fault_log  = !perm && !p.e;
    act.iuid          = p.iuid;
  end
endmodule
