// aa_mem_model: behavioural model of main memory for the testbenches.
//
// Not synthesizable. A sparse array of 64-bit words addressed by byte
// address (bits 2:0 ignored). Port 1 takes mem_req_t writes and reads; a
// read of `len` words is answered, in order, by `len` mem_rsp_t beats after
// a few cycles. Port 2 serves the IOMMU's table-walk reads, one word each.
// Request ready is pseudo-random when `stall_en` is set, to exercise the
// handshakes. Testbenches poke and peek words directly through `mem`.
module aa_mem_model
  import aa_pkg::*;
(
  input  logic     clk,
  input  logic     stall_en,
  input  logic     mem_req_valid,
  output logic     mem_req_ready,
  input  mem_req_t mem_req,
  output logic     mem_rsp_valid,
  input  logic     mem_rsp_ready,
  output mem_rsp_t mem_rsp,
  input  logic     pt_rd_valid,
  output logic     pt_rd_ready,
  input  addr_t    pt_rd_addr,
  output logic     pt_rsp_valid,
  output data_t    pt_rsp_data
);
  data_t    mem [addr_t];
  mem_rsp_t q [$];
  int       writes = 0, reads = 0, pt_reads = 0;

  function automatic data_t rd(addr_t a);
    addr_t k = {a[63:3], 3'b000};
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  initial begin
    mem_req_ready = 1'b0; mem_rsp_valid = 1'b0; mem_rsp = '0;
    pt_rd_ready = 1'b0; pt_rsp_valid = 1'b0; pt_rsp_data = '0;
  end

  always @(posedge clk) begin
    mem_req_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) begin
        mem[{mem_req.addr[63:3], 3'b000}] = mem_req.wdata;
        writes++;
      end else begin
        reads++;
        for (int i = 0; i < int'(mem_req.len); i++) begin
          mem_rsp_t r;
          r.data   = rd(mem_req.addr + addr_t'(8 * i));
          r.req_id = mem_req.req_id;
          r.tag    = mem_req.tag;
          r.last   = (i == int'(mem_req.len) - 1);
          q.push_back(r);
        end
      end
    end
    if (mem_rsp_valid && mem_rsp_ready) void'(q.pop_front());
    mem_rsp_valid <= 1'b0;
    if (q.size() > 0 && !(mem_rsp_valid && mem_rsp_ready && q.size() == 0)) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp       <= q[0];
    end
    // table-walk port: one read at a time, answered two cycles later
    pt_rsp_valid <= 1'b0;
    pt_rd_ready  <= 1'b1;
    if (pt_rd_valid && pt_rd_ready) begin
      pt_reads++;
      pt_rd_ready  <= 1'b0;
      pt_rsp_data  <= rd(pt_rd_addr);
      pt_rsp_valid <= 1'b1;
    end
  end
endmodule
