// rx_fsm -- NIC-to-host (RX) path of the Dagger CPU-NIC interface.
//
// Received RPC objects are written straight into the RX ring of their
// connection in host memory with one CCI-P DMA write each (Fig. 4, step 5);
// the device-to-host direction always uses DMA writes, whichever mode the
// TX side uses. Software consumes the ring and publishes how many entries it
// has consumed in the connection's RX bookkeeping line; the FSM fetches that
// line asynchronously with a CCI-P read (step 6) to learn which entries are
// free again.
//
// How it works
//   * Per connection the FSM keeps a free-running write count (tail) and the
//     last consumed count read from software (sw). free = 2^ring_log2 -
//     (tail - sw). An RPC is written only if free > 0; otherwise it waits at
//     the input (back-pressure) and ev_stall pulses every such cycle.
//   * The written object's dirty flag is the inverse of the lap bit of its
//     position (bit ring_log2 of tail), so software recognises new entries
//     exactly as the TX FSM does.
//   * Whenever the connection at the input has used more than half of its ring
//     and no bookkeeping read is queued or in flight, a read of its
//     bookkeeping line is queued (registered, issued from the next cycle,
//     mdata = connection); the response updates sw.
//   * An RPC flagged in_drop (no open target) is consumed and discarded.
//
// Interface: valid/ready input stream (object + target connection from the
// load balancer), CCI-P c1 write and c0 read channels. The DMA-write RX path
// and asynchronous bookkeeping are the paper's; the half-ring refetch rule,
// the bookkeeping-line format (consumed count in bits [15:0]) and the ring
// addressing are this design's choices.
module rx_fsm
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          enable,
  input  logic [3:0]    ring_log2,
  input  cl_addr_t      rx_ring_base,
  input  cl_addr_t      rx_bk_base,
  input  logic          in_valid,
  input  rpc_obj_t      in_obj,
  input  logic [$clog2(NUM_CONN)-1:0] in_conn,
  input  logic          in_drop,
  output logic          in_ready,
  output logic          c1_req_valid,
  output c1_req_t       c1_req,
  input  logic          c1_req_ready,
  output logic          c0_req_valid,
  output c0_req_t       c0_req,
  input  logic          c0_req_ready,
  input  logic          c0_rsp_valid,
  input  c0_rsp_t       c0_rsp,
  output logic          ev_rx,
  output logic          ev_stall,
  output logic          ev_drop
);
  localparam int CW = $clog2(NUM_CONN);

  logic [CNT_W-1:0] tail [NUM_CONN];
  logic [CNT_W-1:0] sw   [NUM_CONN];
  logic             bk_pending, bk_req;
  logic [CW-1:0]    bk_conn;

  logic [CNT_W-1:0] ring_n, ring_mask, used, t;
  logic             has_room, bk_want;
  rpc_obj_t         wobj;

  assign ring_n    = CNT_W'(1) << ring_log2;
  assign ring_mask = ring_n - 1'b1;
  assign t         = tail[in_conn];
  assign used      = t - sw[in_conn];
  assign has_room  = used < ring_n;
  assign bk_want   = in_valid && !in_drop && (used > (ring_n >> 1));

  always_comb begin
    wobj       = in_obj;
    wobj.dirty = !t[ring_log2];
    c1_req_valid = enable && in_valid && !in_drop && has_room;
    c1_req.addr  = rx_ring_base + (cl_addr_t'(in_conn) << ring_log2) + cl_addr_t'(CNT_W'(t & ring_mask));
    c1_req.data  = cl_data_t'(wobj);
    c1_req.mdata = '0;
    c0_req_valid = bk_req;
    c0_req.addr  = rx_bk_base + cl_addr_t'(bk_conn);
    c0_req.cached = 1'b0;
    c0_req.mdata = mdata_t'(bk_conn);
    in_ready = enable && (in_drop || (has_room && c1_req_ready));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bk_pending <= 1'b0;
      bk_req     <= 1'b0;
      bk_conn    <= '0;
      ev_rx      <= 1'b0;
      ev_stall   <= 1'b0;
      ev_drop    <= 1'b0;
      for (int i = 0; i < NUM_CONN; i++) begin
        tail[i] <= '0;
        sw[i]   <= '0;
      end
    end else begin
      ev_rx    <= c1_req_valid && c1_req_ready;
      ev_stall <= enable && in_valid && !in_drop && !has_room;
      ev_drop  <= enable && in_valid && in_drop;
      if (c1_req_valid && c1_req_ready) tail[in_conn] <= t + 1'b1;
      if (enable && bk_want && !bk_req && !bk_pending) begin
        bk_req  <= 1'b1;
        bk_conn <= in_conn;
      end
      if (c0_req_valid && c0_req_ready) begin
        bk_req     <= 1'b0;
        bk_pending <= 1'b1;
      end
      if (c0_rsp_valid) begin
        sw[c0_rsp.mdata[CW-1:0]] <= c0_rsp.data[CNT_W-1:0];
        bk_pending <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    c1_req_valid |-> (tail[in_conn] - sw[in_conn]) < ring_n);

endmodule
