// dagger_pkg -- types and constants shared by the Dagger NIC RTL.
//
// Dagger offloads the whole RPC stack of a host to an FPGA NIC that talks to
// the CPU over a coherent memory interconnect (CCI-P over UPI) instead of PCIe
// doorbells. This package holds what the blocks share:
//   * simplified CCI-P-like channels: c0 = cache-line reads, c1 = cache-line
//     writes, each a request struct with a valid/ready handshake and a response
//     struct tagged by a 16-bit mdata field; MMIO for the soft register file.
//   * the 64-byte RPC object that software places in the TX/RX rings.
//   * the Ethernet/IPv4/UDP frame used by the transport.
//   * the MMIO register map of the soft reconfiguration unit.
// The 64-byte line, the 400 MHz NIC clock and the batch sizes come from the
// paper; the field layouts, register map and handshake are this design's own
// choices, since the paper does not give them.
package dagger_pkg;

  localparam int CL_BITS   = 512;   // one 64-byte cache line / RPC object
  localparam int ADDR_W    = 42;    // cache-line address width
  localparam int MDATA_W   = 16;    // request tag carried back with responses
  localparam int CNT_W     = 16;    // free-running ring counters
  localparam int MAX_BATCH = 4;     // largest CCI-P polling batch (B = 1, 2, 4)
  localparam int MAX_RING_LOG2 = 10;

  typedef logic [ADDR_W-1:0]  cl_addr_t;
  typedef logic [CL_BITS-1:0] cl_data_t;
  typedef logic [MDATA_W-1:0] mdata_t;

  // c0: read request and read response
  typedef struct packed {
    cl_addr_t addr;
    logic     cached;   // 1: poll through the FPGA-side coherent cache, 0: read the CPU LLC directly
    mdata_t   mdata;
  } c0_req_t;

  typedef struct packed {
    cl_data_t data;
    mdata_t   mdata;
  } c0_rsp_t;

  // c1: write request and write acknowledge
  typedef struct packed {
    cl_addr_t addr;
    cl_data_t data;
    mdata_t   mdata;
  } c1_req_t;

  // MMIO (64-bit registers, register-index addressing)
  typedef struct packed {
    logic        wr;
    logic        rd;
    logic [11:0] addr;
    logic [63:0] data;
  } mmio_req_t;

  // The RPC object, one cache line. The dirty flag is bit 0. A ring entry is
  // new when its dirty flag differs from the lap bit of the reader's counter,
  // so software never has to clear it.
  // dst_conn: connection at the receiving end. For a request the NIC fills it
  // in from the connection table; for a response software sets it to the
  // src_conn of the request it answers. src_conn: the sending connection,
  // filled in by the NIC.
  localparam int PAYLOAD_BITS = 432;   // 54 bytes of arguments
  typedef struct packed {
    logic [PAYLOAD_BITS-1:0] payload;
    logic [15:0] dst_conn;
    logic [15:0] src_conn;
    logic [31:0] rpc_id;
    logic [7:0]  fn_id;
    logic [6:0]  flags;     // flags[0]: 1 = response, 0 = request
    logic        dirty;
  } rpc_obj_t;

  localparam int FLAG_RESP = 0;

  // Ethernet + IPv4 + UDP header (42 bytes) in front of the 64-byte serialized RPC.
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [15:0] ethertype;
    logic [3:0]  ip_ver;
    logic [3:0]  ip_ihl;
    logic [7:0]  ip_tos;
    logic [15:0] ip_len;
    logic [15:0] ip_id;
    logic [15:0] ip_frag;
    logic [7:0]  ip_ttl;
    logic [7:0]  ip_proto;
    logic [15:0] ip_csum;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] udp_len;
    logic [15:0] udp_csum;
  } pkt_hdr_t;

  typedef struct packed {
    pkt_hdr_t hdr;
    cl_data_t payload;    // serialized RPC, byte 0 in bits [511:504]
  } pkt_t;

  localparam logic [15:0] ETH_IPV4  = 16'h0800;
  localparam logic [7:0]  IP_UDP    = 8'd17;
  localparam logic [15:0] UDP_LEN   = 16'd72;   // 8 + 64
  localparam logic [15:0] IP_LEN    = 16'd92;   // 20 + 8 + 64

  // Connection table entry
  typedef struct packed {
    logic [47:0] dst_mac;
    logic [31:0] dst_ip;
    logic [15:0] dst_port;
    logic [15:0] remote_conn;
  } conn_entry_t;

  // Soft register map (MMIO register index)
  localparam logic [11:0] REG_CTRL         = 12'h000; // [0] NIC enable
  localparam logic [11:0] REG_BATCH        = 12'h001; // CCI-P polling batch, 1..MAX_BATCH
  localparam logic [11:0] REG_RING_LOG2    = 12'h002; // log2 of entries per ring
  localparam logic [11:0] REG_TX_RING_BASE = 12'h003; // line address of connection 0's TX ring
  localparam logic [11:0] REG_TX_CMPL_BASE = 12'h004; // line address of connection 0's TX completion line
  localparam logic [11:0] REG_RX_RING_BASE = 12'h005;
  localparam logic [11:0] REG_RX_BK_BASE   = 12'h006; // line address of connection 0's RX bookkeeping line
  localparam logic [11:0] REG_POLL_THRESH  = 12'h007; // requests per window that switch to direct LLC polling
  localparam logic [11:0] REG_LB_CTRL      = 12'h008; // [0] enable, [16 +: NUM_CONN] connection mask
  localparam logic [11:0] REG_LOCAL_MAC    = 12'h009;
  localparam logic [11:0] REG_LOCAL_IP     = 12'h00A;
  localparam logic [11:0] REG_LOCAL_PORT   = 12'h00B;
  localparam logic [11:0] REG_CONN_MAC     = 12'h010; // staging: destination MAC
  localparam logic [11:0] REG_CONN_ADDR    = 12'h011; // staging: {remote_conn[63:48], dst_port[47:32], dst_ip[31:0]}
  localparam logic [11:0] REG_CONN_CMD     = 12'h012; // [17:16] op (1 set up, 2 open, 3 close), [15:0] connection
  localparam logic [11:0] REG_CONN_STATUS  = 12'h013; // read: open mask
  localparam logic [11:0] REG_MON_BASE     = 12'h020; // read: monitor counters 0x020..
  localparam logic [11:0] REG_POLL_MODE    = 12'h030; // read: [0] 1 = direct LLC polling

  typedef enum logic [1:0] {CONN_NOP = 2'd0, CONN_SETUP = 2'd1, CONN_OPEN = 2'd2, CONN_CLOSE = 2'd3} conn_op_e;

  // Monitor counter indices
  localparam int MON_TX_RPC     = 0;
  localparam int MON_RX_RPC     = 1;
  localparam int MON_RX_DROP    = 2;
  localparam int MON_RX_STALL   = 3;
  localparam int MON_MODE_SWTCH = 4;
  localparam int MON_TX_POLL    = 5;
  localparam int MON_UNMATCHED  = 6;
  localparam int MON_LB_DROP    = 7;
  localparam int MON_NUM        = 8;

  // Serialization: RPC object -> 64-byte big-endian wire image and back.
  // Wire bytes 0-1 dst_conn, 2-3 src_conn, 4-7 rpc_id, 8 fn_id, 9 flags,
  // 10-63 payload (payload byte k, bits 8k+7:8k, goes to wire byte 10+k).
  function automatic cl_data_t serialize(rpc_obj_t o);
    cl_data_t w;
    w[511:496] = o.dst_conn;
    w[495:480] = o.src_conn;
    w[479:448] = o.rpc_id;
    w[447:440] = o.fn_id;
    w[439:432] = {1'b0, o.flags};
    for (int k = 0; k < PAYLOAD_BITS/8; k++)
      w[431 - 8*k -: 8] = o.payload[8*k +: 8];
    return w;
  endfunction

  function automatic rpc_obj_t deserialize(cl_data_t w);
    rpc_obj_t o;
    o.dst_conn = w[511:496];
    o.src_conn = w[495:480];
    o.rpc_id   = w[479:448];
    o.fn_id    = w[447:440];
    o.flags    = w[438:432];
    o.dirty    = 1'b0;
    for (int k = 0; k < PAYLOAD_BITS/8; k++)
      o.payload[8*k +: 8] = w[431 - 8*k -: 8];
    return o;
  endfunction

  // One's-complement sum of the ten 16-bit words of an IPv4 header (with the
  // checksum field taken as given); 16'hFFFF means a correct header.
  function automatic logic [15:0] ip_sum(pkt_hdr_t h);
    logic [19:0] s;
    s = {4'd0, h.ip_ver, h.ip_ihl, h.ip_tos} + {4'd0, h.ip_len} + {4'd0, h.ip_id} + {4'd0, h.ip_frag}
      + {4'd0, h.ip_ttl, h.ip_proto} + {4'd0, h.ip_csum}
      + {4'd0, h.src_ip[31:16]} + {4'd0, h.src_ip[15:0]} + {4'd0, h.dst_ip[31:16]} + {4'd0, h.dst_ip[15:0]};
    s = {4'd0, s[15:0]} + {16'd0, s[19:16]};
    s = {4'd0, s[15:0]} + {16'd0, s[19:16]};
    return s[15:0];
  endfunction

endpackage
