// host_mem_model -- behavioural model of host memory behind the CCI-P port.
// Not synthesizable; used by the testbenches only.
//
// Stands in for the vendor's CCI-P interface unit, the CPU's last-level cache
// and DRAM. Memory is the sparse array of 64-byte lines in host_sw_pkg. A read (c0) returns the
// line as it is when the response is sent, LAT to LAT+JITTER-1 cycles after
// the request, so responses may come back out of order (as CCI-P allows). A
// write (c1) updates memory at once and is acknowledged LAT cycles later.
// With RAND_READY set, request ready is withheld on random cycles. Testbench
// "software" reads and writes lines through rd_line / wr_line, and the
// counters tell how many reads were issued with cached = 1 and cached = 0.
module host_mem_model
  import dagger_pkg::*;
  import host_sw_pkg::*;
#(
  parameter int LAT        = 16,
  parameter int JITTER     = 1,
  parameter bit RAND_READY = 1'b0
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    c0_req_valid,
  input  c0_req_t c0_req,
  output logic    c0_req_ready,
  output logic    c0_rsp_valid,
  output c0_rsp_t c0_rsp,
  input  logic    c1_req_valid,
  input  c1_req_t c1_req,
  output logic    c1_req_ready,
  output logic    c1_ack_valid,
  output mdata_t  c1_ack_mdata
);
  typedef struct {
    longint   due;
    cl_addr_t addr;
    mdata_t   mdata;
  } pend_t;

  pend_t  rq[$];
  pend_t  wq[$];
  longint cyc;
  int     n_reads, n_cached_reads, n_direct_reads, n_writes;

  function automatic cl_data_t rd_line(cl_addr_t a);
    return host_sw_pkg::rd_line(a);
  endfunction

  function automatic void wr_line(cl_addr_t a, cl_data_t d);
    host_sw_pkg::wr_line(a, d);
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      cyc            <= 0;
      c0_rsp_valid   <= 1'b0;
      c1_ack_valid   <= 1'b0;
      c0_req_ready   <= 1'b1;
      c1_req_ready   <= 1'b1;
      c0_rsp         <= '0;
      c1_ack_mdata   <= '0;
      rq.delete();
      wq.delete();
      n_reads = 0; n_cached_reads = 0; n_direct_reads = 0; n_writes = 0;
    end else begin
      cyc <= cyc + 1;
      if (c0_req_valid && c0_req_ready) begin
        rq.push_back('{due: cyc + LAT + longint'($urandom_range(JITTER - 1, 0)), addr: c0_req.addr, mdata: c0_req.mdata});
        n_reads++;
        if (c0_req.cached) n_cached_reads++; else n_direct_reads++;
      end
      if (c1_req_valid && c1_req_ready) begin
        host_sw_pkg::wr_line(c1_req.addr, c1_req.data);
        wq.push_back('{due: cyc + LAT, addr: c1_req.addr, mdata: c1_req.mdata});
        n_writes++;
      end
      // one read response per cycle: the earliest due one
      c0_rsp_valid <= 1'b0;
      begin
        int best;
        best = -1;
        foreach (rq[i]) if (rq[i].due <= cyc && (best < 0 || rq[i].due < rq[best].due)) best = i;
        if (best >= 0) begin
          c0_rsp_valid <= 1'b1;
          c0_rsp.data  <= rd_line(rq[best].addr);
          c0_rsp.mdata <= rq[best].mdata;
          rq.delete(best);
        end
      end
      c1_ack_valid <= 1'b0;
      if (wq.size() > 0 && wq[0].due <= cyc) begin
        c1_ack_valid <= 1'b1;
        c1_ack_mdata <= wq[0].mdata;
        void'(wq.pop_front());
      end
      c0_req_ready <= RAND_READY ? ($urandom_range(3, 0) != 0) : 1'b1;
      c1_req_ready <= RAND_READY ? ($urandom_range(3, 0) != 0) : 1'b1;
    end
  end
endmodule
