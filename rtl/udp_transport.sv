// udp_transport -- the transport layer of the Dagger pipeline (UDP over IPv4
// over Ethernet).
//
// TX: wraps each 64-byte serialized RPC in a 42-byte Ethernet/IPv4/UDP header
// built from the connection table entry (destination MAC, IP, UDP port) and
// the NIC's own MAC, IP and port from the soft registers. The IPv4 header gets
// a running identification number, TTL 64, "don't fragment" and its one's
// complement header checksum; the UDP checksum is left 0 (optional in IPv4).
// RX: accepts a frame only if it is IPv4, protocol UDP, has a correct header
// checksum and is addressed to this NIC's MAC, IP and port; otherwise the frame
// is dropped and ev_drop pulses. The payload of a good frame goes on to the RPC
// unit.
//
// A frame is carried whole in one beat (pkt_t); each direction is one
// registered stage with a valid/ready handshake, one frame per cycle. That the
// transport is a version of UDP is the paper's; header field values and the
// acceptance rule are this design's choices.
module udp_transport
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [47:0]   local_mac,
  input  logic [31:0]   local_ip,
  input  logic [15:0]   local_port,
  // TX
  input  logic          tx_in_valid,
  input  cl_data_t      tx_in_wire,
  input  logic [$clog2(NUM_CONN)-1:0] tx_in_conn,
  output logic          tx_in_ready,
  output logic [$clog2(NUM_CONN)-1:0] lookup_conn,
  input  conn_entry_t   lookup_entry,
  output logic          tx_out_valid,
  output pkt_t          tx_out_pkt,
  input  logic          tx_out_ready,
  // RX
  input  logic          rx_in_valid,
  input  pkt_t          rx_in_pkt,
  output logic          rx_in_ready,
  output logic          rx_out_valid,
  output cl_data_t      rx_out_wire,
  input  logic          rx_out_ready,
  output logic          ev_drop
);
  logic [15:0] ip_ident;
  pkt_hdr_t    h;
  logic        tx_fire, rx_fire, rx_ok;

  assign lookup_conn = tx_in_conn;
  assign tx_in_ready = !tx_out_valid || tx_out_ready;
  assign tx_fire     = tx_in_valid && tx_in_ready;
  assign rx_in_ready = !rx_out_valid || rx_out_ready;
  assign rx_fire     = rx_in_valid && rx_in_ready;

  always_comb begin
    h.dst_mac   = lookup_entry.dst_mac;
    h.src_mac   = local_mac;
    h.ethertype = ETH_IPV4;
    h.ip_ver    = 4'd4;
    h.ip_ihl    = 4'd5;
    h.ip_tos    = 8'd0;
    h.ip_len    = IP_LEN;
    h.ip_id     = ip_ident;
    h.ip_frag   = 16'h4000;
    h.ip_ttl    = 8'd64;
    h.ip_proto  = IP_UDP;
    h.ip_csum   = 16'd0;
    h.src_ip    = local_ip;
    h.dst_ip    = lookup_entry.dst_ip;
    h.src_port  = local_port;
    h.dst_port  = lookup_entry.dst_port;
    h.udp_len   = UDP_LEN;
    h.udp_csum  = 16'd0;
    h.ip_csum   = ~ip_sum(h);
  end

  assign rx_ok = rx_in_pkt.hdr.ethertype == ETH_IPV4
              && rx_in_pkt.hdr.ip_ver == 4'd4 && rx_in_pkt.hdr.ip_ihl == 4'd5
              && rx_in_pkt.hdr.ip_proto == IP_UDP
              && ip_sum(rx_in_pkt.hdr) == 16'hFFFF
              && rx_in_pkt.hdr.dst_mac == local_mac
              && rx_in_pkt.hdr.dst_ip == local_ip
              && rx_in_pkt.hdr.dst_port == local_port
              && rx_in_pkt.hdr.udp_len == UDP_LEN;

  always_ff @(posedge clk) begin
    if (rst) begin
      ip_ident     <= '0;
      tx_out_valid <= 1'b0;
      tx_out_pkt   <= '0;
      rx_out_valid <= 1'b0;
      rx_out_wire  <= '0;
      ev_drop      <= 1'b0;
    end else begin
      if (tx_in_ready) tx_out_valid <= 1'b0;
      if (tx_fire) begin
        tx_out_valid <= 1'b1;
        tx_out_pkt   <= '{hdr: h, payload: tx_in_wire};
        ip_ident     <= ip_ident + 1'b1;
      end
      ev_drop <= 1'b0;
      if (rx_in_ready) rx_out_valid <= 1'b0;
      if (rx_fire) begin
        if (rx_ok) begin
          rx_out_valid <= 1'b1;
          rx_out_wire  <= rx_in_pkt.payload;
        end else begin
          ev_drop <= 1'b1;
        end
      end
    end
  end

endmodule
