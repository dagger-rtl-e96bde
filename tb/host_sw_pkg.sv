// host_sw_pkg -- host memory and a model of the host-side RPC software, for
// the testbenches only.
//
// mem holds host memory as sparse 64-byte lines; host_mem_model serves the
// NIC's CCI-P reads and writes from it. The ring helpers play the userspace
// RPC library of one connection:
//   sw_send  puts an RPC into the next TX ring entry if the NIC has released
//            it (consumed count in the TX completion line), with the dirty
//            flag set to the inverse of the entry's lap bit;
//   sw_recv  takes the next RX ring entry if its dirty flag marks it new and
//            publishes the new consumed count in the RX bookkeeping line.
package host_sw_pkg;
  import dagger_pkg::*;

  cl_data_t mem [cl_addr_t];

  function automatic cl_data_t rd_line(cl_addr_t a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  function automatic void wr_line(cl_addr_t a, cl_data_t d);
    mem[a] = d;
  endfunction

  typedef struct {
    cl_addr_t tx_ring;
    cl_addr_t tx_cmpl;
    cl_addr_t rx_ring;
    cl_addr_t rx_bk;
    int       ring_log2;
  } layout_t;

  localparam int MAXN = 2;
  localparam int MAXC = 64;
  int tx_prod [MAXN][MAXC];
  int rx_cons [MAXN][MAXC];

  function automatic void sw_reset();
    for (int n = 0; n < MAXN; n++)
      for (int c = 0; c < MAXC; c++) begin
        tx_prod[n][c] = 0;
        rx_cons[n][c] = 0;
      end
  endfunction

  function automatic bit sw_send(int nic, int c, layout_t L, rpc_obj_t o);
    int done, p;
    done = int'(rd_line(L.tx_cmpl + cl_addr_t'(c)) & 'hFFFF);
    p = tx_prod[nic][c];
    if (((p - done) & 'hFFFF) >= (1 << L.ring_log2)) return 0;
    o.dirty = !((p >> L.ring_log2) & 1);
    wr_line(L.tx_ring + (cl_addr_t'(c) << L.ring_log2) + cl_addr_t'(p % (1 << L.ring_log2)), cl_data_t'(o));
    tx_prod[nic][c] = p + 1;
    return 1;
  endfunction

  function automatic bit sw_recv(int nic, int c, layout_t L, output rpc_obj_t o);
    int q;
    q = rx_cons[nic][c];
    o = rpc_obj_t'(rd_line(L.rx_ring + (cl_addr_t'(c) << L.ring_log2) + cl_addr_t'(q % (1 << L.ring_log2))));
    if (o.dirty == 1'((q >> L.ring_log2) & 1)) return 0;
    rx_cons[nic][c] = q + 1;
    wr_line(L.rx_bk + cl_addr_t'(c), cl_data_t'((q + 1) & 'hFFFF));
    return 1;
  endfunction
endpackage
