// rpc_unit -- RPC layer of the Dagger pipeline: (de)serialization and
// request metadata.
//
// TX: an RPC object fetched from a TX ring is serialized into the 64-byte
// wire image (big-endian header: destination connection, source connection,
// RPC id, function id, flags; then the 54 argument bytes in order). The
// source connection is the TX connection. For a request the destination is
// the peer's connection id from the connection table, and the request's
// metadata (a valid bit and the function id) is stored in a table with
// OUTSTANDING slots per connection, indexed by {connection, low bits of the
// RPC id}; software must keep fewer than OUTSTANDING requests of one
// connection in flight. A response keeps the destination software gave it
// (the requester's connection).
// RX: a received wire image is deserialized back into an RPC object. A
// response is looked up in the metadata table at {destination connection,
// RPC id}: if an outstanding request of the same function is found, the entry
// is retired and
// the response passed on; otherwise the response is dropped and
// ev_unmatched pulses. Requests pass straight through.
//
// Timing: each direction is one registered stage with valid/ready handshakes,
// accepting one RPC per cycle (400 Mrps at 400 MHz, above the 200 Mrps the
// paper quotes for its NIC). That the RPC unit keeps request metadata and
// does (de)serialization is the paper's; the wire format, table size and the
// drop rule are this design's choices.
module rpc_unit
  import dagger_pkg::*;
#(
  parameter int NUM_CONN    = 16,
  parameter int OUTSTANDING = 32
) (
  input  logic          clk,
  input  logic          rst,
  // TX: from the TX FSM
  input  logic          tx_in_valid,
  input  rpc_obj_t      tx_in_obj,
  input  logic [$clog2(NUM_CONN)-1:0] tx_in_conn,
  output logic          tx_in_ready,
  output logic [$clog2(NUM_CONN)-1:0] lookup_conn,
  input  logic [15:0]   lookup_remote_conn,
  // TX: to the transport
  output logic          tx_out_valid,
  output cl_data_t      tx_out_wire,
  output logic [$clog2(NUM_CONN)-1:0] tx_out_conn,
  input  logic          tx_out_ready,
  // RX: from the transport
  input  logic          rx_in_valid,
  input  cl_data_t      rx_in_wire,
  output logic          rx_in_ready,
  // RX: to the load balancer / RX FSM
  output logic          rx_out_valid,
  output rpc_obj_t      rx_out_obj,
  input  logic          rx_out_ready,
  output logic          ev_unmatched
);
  localparam int CW = $clog2(NUM_CONN);
  localparam int OW = $clog2(OUTSTANDING);

  typedef struct packed {
    logic       valid;
    logic [7:0] fn;
  } meta_t;

  meta_t meta [NUM_CONN * OUTSTANDING];

  logic [CW+OW-1:0] tx_slot, rx_slot;

  rpc_obj_t tx_obj_w, rx_obj_w;
  logic     tx_fire, rx_fire, rx_match, rx_is_resp;
  meta_t    rx_meta;

  assign lookup_conn = tx_in_conn;
  always_comb begin
    tx_obj_w          = tx_in_obj;
    tx_obj_w.src_conn = 16'(tx_in_conn);
    if (!tx_in_obj.flags[FLAG_RESP]) tx_obj_w.dst_conn = lookup_remote_conn;
  end

  assign tx_in_ready = !tx_out_valid || tx_out_ready;
  assign tx_fire     = tx_in_valid && tx_in_ready;
  assign rx_in_ready = !rx_out_valid || rx_out_ready;
  assign rx_fire     = rx_in_valid && rx_in_ready;

  assign rx_obj_w   = deserialize(rx_in_wire);
  assign rx_is_resp = rx_obj_w.flags[FLAG_RESP];
  assign rx_slot    = {rx_obj_w.dst_conn[CW-1:0], rx_obj_w.rpc_id[OW-1:0]};
  assign tx_slot    = {tx_in_conn, tx_in_obj.rpc_id[OW-1:0]};
  assign rx_meta    = meta[rx_slot];
  assign rx_match   = rx_meta.valid && rx_obj_w.dst_conn < 16'(NUM_CONN) && rx_meta.fn == rx_obj_w.fn_id;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_out_valid <= 1'b0;
      tx_out_wire  <= '0;
      tx_out_conn  <= '0;
      rx_out_valid <= 1'b0;
      rx_out_obj   <= '0;
      ev_unmatched <= 1'b0;
      for (int i = 0; i < NUM_CONN * OUTSTANDING; i++) meta[i] <= '0;
    end else begin
      ev_unmatched <= 1'b0;
      // RX
      if (rx_in_ready) rx_out_valid <= 1'b0;
      if (rx_fire) begin
        if (rx_is_resp) begin
          if (rx_match) begin
            meta[rx_slot].valid <= 1'b0;
            rx_out_valid <= 1'b1;
            rx_out_obj   <= rx_obj_w;
          end else begin
            ev_unmatched <= 1'b1;
          end
        end else begin
          rx_out_valid <= 1'b1;
          rx_out_obj   <= rx_obj_w;
        end
      end
      // TX (a new request wins over a retirement of the same slot)
      if (tx_in_ready) tx_out_valid <= 1'b0;
      if (tx_fire) begin
        tx_out_valid <= 1'b1;
        tx_out_wire  <= serialize(tx_obj_w);
        tx_out_conn  <= tx_in_conn;
        if (!tx_in_obj.flags[FLAG_RESP])
          meta[tx_slot] <= '{valid: 1'b1, fn: tx_in_obj.fn_id};
      end
    end
  end

endmodule
