// dagger_nic -- one Dagger NIC: the RPC pipeline and its auxiliary units.
//
// The NIC offloads the whole RPC stack. Its RPC pipeline has three layers:
//   CPU-NIC interface  tx_fsm polls the per-connection TX rings in host memory
//                      over CCI-P (UPI), rx_fsm writes received RPCs into the
//                      RX rings by DMA; the load balancer picks the RX ring.
//   RPC unit           rpc_unit (de)serializes RPCs and keeps request metadata.
//   transport          udp_transport frames RPCs as UDP/IPv4/Ethernet.
// Beside it sit the connection manager (conn_manager), the packet monitor
// (packet_monitor) and the soft reconfiguration unit (soft_reg_file), all
// reached by MMIO. tx_fsm and rx_fsm share the NIC's CCI-P port through a
// round-robin ccip_mux that tags mdata bit 14.
//
// Data flow, one RPC per cycle per stage:
//   TX: host TX ring -> tx_fsm -> rpc_unit (serialize, record metadata)
//       -> udp_transport (add headers) -> net_tx_*
//   RX: net_rx_* -> udp_transport (check, strip) -> rpc_unit (deserialize,
//       match responses) -> load_balancer -> rx_fsm -> host RX ring
//
// Interface: MMIO request in, read response out (one cycle later); one CCI-P
// port (c0 reads, c1 writes, both valid/ready, responses tagged by mdata; the
// NIC uses mdata bits [14:0] and leaves bit 15 to the level above); the network
// port is a whole-frame valid/ready stream each way.
// The layering and the unit list follow the paper; the way the units are
// joined (handshakes, tags, one-beat frames) is this design's.
module dagger_nic
  import dagger_pkg::*;
#(
  parameter int NUM_CONN    = 16,
  parameter int OUTSTANDING = 32,
  parameter int WINDOW      = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  mmio_req_t   mmio_req,
  output logic        mmio_rsp_valid,
  output logic [63:0] mmio_rsp_data,
  output logic        c0_req_valid,
  output c0_req_t     c0_req,
  input  logic        c0_req_ready,
  input  logic        c0_rsp_valid,
  input  c0_rsp_t     c0_rsp,
  output logic        c1_req_valid,
  output c1_req_t     c1_req,
  input  logic        c1_req_ready,
  input  logic        c1_ack_valid,
  input  mdata_t      c1_ack_mdata,
  output logic        net_tx_valid,
  output pkt_t        net_tx_pkt,
  input  logic        net_tx_ready,
  input  logic        net_rx_valid,
  input  pkt_t        net_rx_pkt,
  output logic        net_rx_ready
);
  localparam int CW = $clog2(NUM_CONN);

  // ---- soft registers
  logic        nic_enable, lb_enable, poll_direct;
  logic [2:0]  batch;
  logic [3:0]  ring_log2;
  cl_addr_t    tx_ring_base, tx_cmpl_base, rx_ring_base, rx_bk_base;
  logic [31:0] poll_thresh, local_ip;
  logic [47:0] local_mac;
  logic [15:0] local_port;
  logic [NUM_CONN-1:0] lb_mask, open_mask;
  logic [MON_NUM-1:0]  mon_ev;
  logic [MON_NUM-1:0][31:0] mon_cnt;

  soft_reg_file #(.NUM_CONN(NUM_CONN)) u_regs (
    .clk, .rst, .mmio_req, .mmio_rsp_valid, .mmio_rsp_data,
    .open_mask, .poll_direct, .mon_cnt,
    .nic_enable, .batch, .ring_log2, .tx_ring_base, .tx_cmpl_base, .rx_ring_base, .rx_bk_base,
    .poll_thresh, .lb_enable, .lb_mask, .local_mac, .local_ip, .local_port);

  // ---- connection manager
  logic [CW-1:0] rpc_lookup_conn, tp_lookup_conn;
  conn_entry_t   rpc_lookup_entry, tp_lookup_entry;

  conn_manager #(.NUM_CONN(NUM_CONN)) u_conn (
    .clk, .rst, .mmio_req, .open_mask,
    .rd_conn_a(rpc_lookup_conn), .rd_entry_a(rpc_lookup_entry),
    .rd_conn_b(tp_lookup_conn),  .rd_entry_b(tp_lookup_entry));

  // ---- CCI-P sharing between TX and RX FSMs
  logic [1:0]    m_c0_valid, m_c0_ready, m_c0_rsp_valid, m_c1_valid, m_c1_ready, m_c1_ack_valid;
  c0_req_t [1:0] m_c0_req;
  c1_req_t [1:0] m_c1_req;
  c0_rsp_t       m_c0_rsp;
  mdata_t        m_c1_ack_mdata;

  ccip_mux #(.N(2), .TAG_LSB(14)) u_mux (
    .clk, .rst,
    .c0_req_valid(m_c0_valid), .c0_req(m_c0_req), .c0_req_ready(m_c0_ready),
    .c0_rsp_valid(m_c0_rsp_valid), .c0_rsp(m_c0_rsp),
    .c1_req_valid(m_c1_valid), .c1_req(m_c1_req), .c1_req_ready(m_c1_ready),
    .c1_ack_valid(m_c1_ack_valid), .c1_ack_mdata(m_c1_ack_mdata),
    .up_c0_req_valid(c0_req_valid), .up_c0_req(c0_req), .up_c0_req_ready(c0_req_ready),
    .up_c0_rsp_valid(c0_rsp_valid), .up_c0_rsp(c0_rsp),
    .up_c1_req_valid(c1_req_valid), .up_c1_req(c1_req), .up_c1_req_ready(c1_req_ready),
    .up_c1_ack_valid(c1_ack_valid), .up_c1_ack_mdata(c1_ack_mdata));

  // ---- TX path
  logic          txf_valid, txf_ready, ev_mode_switch, ev_poll;
  rpc_obj_t      txf_obj;
  logic [CW-1:0] txf_conn;

  tx_fsm #(.NUM_CONN(NUM_CONN), .WINDOW(WINDOW)) u_tx (
    .clk, .rst, .enable(nic_enable), .batch, .ring_log2, .tx_ring_base, .tx_cmpl_base,
    .poll_thresh, .open_mask,
    .c0_req_valid(m_c0_valid[0]), .c0_req(m_c0_req[0]), .c0_req_ready(m_c0_ready[0]),
    .c0_rsp_valid(m_c0_rsp_valid[0]), .c0_rsp(m_c0_rsp),
    .c1_req_valid(m_c1_valid[0]), .c1_req(m_c1_req[0]), .c1_req_ready(m_c1_ready[0]),
    .out_valid(txf_valid), .out_obj(txf_obj), .out_conn(txf_conn), .out_ready(txf_ready),
    .poll_direct, .ev_mode_switch, .ev_poll);

  logic          ser_valid, ser_ready, ev_unmatched;
  cl_data_t      ser_wire;
  logic [CW-1:0] ser_conn;
  logic          dtp_valid, dtp_ready, des_valid, des_ready, tp_drop;
  cl_data_t      dtp_wire;
  rpc_obj_t      des_obj;

  rpc_unit #(.NUM_CONN(NUM_CONN), .OUTSTANDING(OUTSTANDING)) u_rpc (
    .clk, .rst,
    .tx_in_valid(txf_valid), .tx_in_obj(txf_obj), .tx_in_conn(txf_conn), .tx_in_ready(txf_ready),
    .lookup_conn(rpc_lookup_conn), .lookup_remote_conn(rpc_lookup_entry.remote_conn),
    .tx_out_valid(ser_valid), .tx_out_wire(ser_wire), .tx_out_conn(ser_conn), .tx_out_ready(ser_ready),
    .rx_in_valid(dtp_valid), .rx_in_wire(dtp_wire), .rx_in_ready(dtp_ready),
    .rx_out_valid(des_valid), .rx_out_obj(des_obj), .rx_out_ready(des_ready),
    .ev_unmatched);

  udp_transport #(.NUM_CONN(NUM_CONN)) u_udp (
    .clk, .rst, .local_mac, .local_ip, .local_port,
    .tx_in_valid(ser_valid), .tx_in_wire(ser_wire), .tx_in_conn(ser_conn), .tx_in_ready(ser_ready),
    .lookup_conn(tp_lookup_conn), .lookup_entry(tp_lookup_entry),
    .tx_out_valid(net_tx_valid), .tx_out_pkt(net_tx_pkt), .tx_out_ready(net_tx_ready),
    .rx_in_valid(net_rx_valid), .rx_in_pkt(net_rx_pkt), .rx_in_ready(net_rx_ready),
    .rx_out_valid(dtp_valid), .rx_out_wire(dtp_wire), .rx_out_ready(dtp_ready),
    .ev_drop(tp_drop));

  // ---- RX path: load balancer + RX FSM
  logic [CW-1:0] lb_target;
  logic          lb_drop, lb_balanced, ev_rx, ev_stall, rx_drop;

  load_balancer #(.NUM_CONN(NUM_CONN)) u_lb (
    .clk, .rst, .lb_enable, .lb_mask, .open_mask,
    .in_valid(des_valid), .in_ready(des_ready), .in_is_resp(des_obj.flags[FLAG_RESP]),
    .in_conn(des_obj.dst_conn), .target(lb_target), .drop(lb_drop), .balanced(lb_balanced));

  rx_fsm #(.NUM_CONN(NUM_CONN)) u_rx (
    .clk, .rst, .enable(nic_enable), .ring_log2, .rx_ring_base, .rx_bk_base,
    .in_valid(des_valid), .in_obj(des_obj), .in_conn(lb_target), .in_drop(lb_drop), .in_ready(des_ready),
    .c1_req_valid(m_c1_valid[1]), .c1_req(m_c1_req[1]), .c1_req_ready(m_c1_ready[1]),
    .c0_req_valid(m_c0_valid[1]), .c0_req(m_c0_req[1]), .c0_req_ready(m_c0_ready[1]),
    .c0_rsp_valid(m_c0_rsp_valid[1]), .c0_rsp(m_c0_rsp),
    .ev_rx, .ev_stall, .ev_drop(rx_drop));

  // ---- packet monitor
  always_comb begin
    mon_ev = '0;
    mon_ev[MON_TX_RPC]     = txf_valid && txf_ready;
    mon_ev[MON_RX_RPC]     = ev_rx;
    mon_ev[MON_RX_DROP]    = tp_drop;
    mon_ev[MON_RX_STALL]   = ev_stall;
    mon_ev[MON_MODE_SWTCH] = ev_mode_switch;
    mon_ev[MON_TX_POLL]    = ev_poll;
    mon_ev[MON_UNMATCHED]  = ev_unmatched;
    mon_ev[MON_LB_DROP]    = rx_drop;
  end

  packet_monitor u_mon (.clk, .rst, .clear(1'b0), .event_i(mon_ev), .cnt(mon_cnt));

endmodule
