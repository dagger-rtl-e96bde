// dagger_top -- the Dagger evaluation FPGA: two NICs in network loop-back.
//
// The prototype runs client and server on one host: two identical Dagger NICs
// sit on one FPGA, their network ports wired to each other (NIC 0's TX frames
// are NIC 1's RX frames and vice versa), and they share the FPGA's single
// CCI-P port to the host through fair round-robin arbitration (ccip_mux, tag
// in mdata bit 15). MMIO register index bit 11 selects the NIC (0x000-0x7FF
// NIC 0, 0x800-0xFFF NIC 1); both NICs' read responses are merged, as only
// one read is outstanding at a time.
//
// Ports: the CCI-P port (c0 reads, c1 writes; valid/ready requests, responses
// tagged by mdata) that the vendor's interface unit provides, and the MMIO
// port. The two-NIC loop-back with round-robin CCI-P sharing is the paper's
// set-up; the MMIO split is this design's.
module dagger_top
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
  input  mdata_t      c1_ack_mdata
);
  localparam int NUM_NICS = 2;

  mmio_req_t   [NUM_NICS-1:0] n_mmio;
  logic        [NUM_NICS-1:0] n_rsp_valid;
  logic        [NUM_NICS-1:0][63:0] n_rsp_data;
  logic        [NUM_NICS-1:0] n_c0_valid, n_c0_ready, n_c0_rsp_valid, n_c1_valid, n_c1_ready, n_ack_valid;
  c0_req_t     [NUM_NICS-1:0] n_c0_req;
  c1_req_t     [NUM_NICS-1:0] n_c1_req;
  c0_rsp_t                    n_c0_rsp;
  mdata_t                     n_ack_mdata;
  logic        [NUM_NICS-1:0] tx_valid, tx_ready;
  pkt_t        [NUM_NICS-1:0] tx_pkt;

  always_comb begin
    for (int i = 0; i < NUM_NICS; i++) begin
      n_mmio[i]      = mmio_req;
      n_mmio[i].addr = {1'b0, mmio_req.addr[10:0]};
      n_mmio[i].wr   = mmio_req.wr && (mmio_req.addr[11] == 1'(i));
      n_mmio[i].rd   = mmio_req.rd && (mmio_req.addr[11] == 1'(i));
    end
    mmio_rsp_valid = |n_rsp_valid;
    mmio_rsp_data  = n_rsp_valid[1] ? n_rsp_data[1] : n_rsp_data[0];
  end

  for (genvar i = 0; i < NUM_NICS; i++) begin : g_nic
    dagger_nic #(.NUM_CONN(NUM_CONN), .OUTSTANDING(OUTSTANDING), .WINDOW(WINDOW)) u_nic (
      .clk, .rst, .mmio_req(n_mmio[i]), .mmio_rsp_valid(n_rsp_valid[i]), .mmio_rsp_data(n_rsp_data[i]),
      .c0_req_valid(n_c0_valid[i]), .c0_req(n_c0_req[i]), .c0_req_ready(n_c0_ready[i]),
      .c0_rsp_valid(n_c0_rsp_valid[i]), .c0_rsp(n_c0_rsp),
      .c1_req_valid(n_c1_valid[i]), .c1_req(n_c1_req[i]), .c1_req_ready(n_c1_ready[i]),
      .c1_ack_valid(n_ack_valid[i]), .c1_ack_mdata(n_ack_mdata),
      // loop-back: each NIC receives what the other sends
      .net_tx_valid(tx_valid[i]), .net_tx_pkt(tx_pkt[i]), .net_tx_ready(tx_ready[i]),
      .net_rx_valid(tx_valid[1-i]), .net_rx_pkt(tx_pkt[1-i]), .net_rx_ready(tx_ready[1-i]));
  end

  ccip_mux #(.N(NUM_NICS), .TAG_LSB(15)) u_arb (
    .clk, .rst,
    .c0_req_valid(n_c0_valid), .c0_req(n_c0_req), .c0_req_ready(n_c0_ready),
    .c0_rsp_valid(n_c0_rsp_valid), .c0_rsp(n_c0_rsp),
    .c1_req_valid(n_c1_valid), .c1_req(n_c1_req), .c1_req_ready(n_c1_ready),
    .c1_ack_valid(n_ack_valid), .c1_ack_mdata(n_ack_mdata),
    .up_c0_req_valid(c0_req_valid), .up_c0_req(c0_req), .up_c0_req_ready(c0_req_ready),
    .up_c0_rsp_valid(c0_rsp_valid), .up_c0_rsp(c0_rsp),
    .up_c1_req_valid(c1_req_valid), .up_c1_req(c1_req), .up_c1_req_ready(c1_req_ready),
    .up_c1_ack_valid(c1_ack_valid), .up_c1_ack_mdata(c1_ack_mdata));

endmodule
