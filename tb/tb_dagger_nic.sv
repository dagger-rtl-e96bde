// tb_dagger_nic -- end-to-end test of one NIC with its network port looped
// back to itself. Connection 0 (client) and connection 1 (server) of the same
// NIC point at each other. Software models send 300 echo requests on
// connection 0; the server model answers each from connection 1's RX ring
// through its TX ring; the client checks every response (id, function,
// payload, order). A forged response with no matching request must be
// dropped by the RPC unit. Finally the packet monitor counters are read over
// MMIO and checked against the traffic.
module tb_dagger_nic;
  import dagger_pkg::*;
  import host_sw_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  mmio_req_t mmio;
  logic rsp_v;
  logic [63:0] rsp_d;
  logic c0v, c0r, c0rv, c1v, c1r, c1av, tv, tr;
  c0_req_t c0q; c0_rsp_t c0rsp; c1_req_t c1q; mdata_t c1am;
  pkt_t tp;

  dagger_nic dut (.clk, .rst, .mmio_req(mmio), .mmio_rsp_valid(rsp_v), .mmio_rsp_data(rsp_d),
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am),
    .net_tx_valid(tv), .net_tx_pkt(tp), .net_tx_ready(tr),
    .net_rx_valid(tv), .net_rx_pkt(tp), .net_rx_ready(tr));

  host_mem_model #(.LAT(12), .JITTER(4), .RAND_READY(1'b1)) mem (.clk, .rst,
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b1, rd: 1'b0, addr: a, data: d};
    @(negedge clk); mmio = '0;
  endtask
  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b0, rd: 1'b1, addr: a, data: '0};
    @(negedge clk); mmio = '0; d = rsp_d;
    chk(rsp_v, "mmio read response");
  endtask

  localparam int NREQ = 300;
  layout_t L;
  logic [PAYLOAD_BITS-1:0] pay [NREQ];

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    int sent, answered, got;
    rpc_obj_t o, r;
    mmio = '0;
    sw_reset();
    L = '{tx_ring: 42'h10000, tx_cmpl: 42'h20000, rx_ring: 42'h30000, rx_bk: 42'h40000, ring_log2: 3};
    repeat (4) @(posedge clk); @(negedge clk); rst = 0;
    wr(REG_LOCAL_MAC, 64'h0200_0000_0001); wr(REG_LOCAL_IP, 64'h0A00_0001); wr(REG_LOCAL_PORT, 64'd5000);
    wr(REG_TX_RING_BASE, 64'(L.tx_ring)); wr(REG_TX_CMPL_BASE, 64'(L.tx_cmpl));
    wr(REG_RX_RING_BASE, 64'(L.rx_ring)); wr(REG_RX_BK_BASE, 64'(L.rx_bk));
    wr(REG_RING_LOG2, 64'(L.ring_log2)); wr(REG_BATCH, 2);
    for (int c = 0; c < 2; c++) begin
      wr(REG_CONN_MAC, 64'h0200_0000_0001);
      wr(REG_CONN_ADDR, {16'(1 - c), 16'd5000, 32'h0A00_0001});
      wr(REG_CONN_CMD, {46'd0, CONN_SETUP, 16'(c)});
      wr(REG_CONN_CMD, {46'd0, CONN_OPEN, 16'(c)});
    end
    rd(REG_CONN_STATUS, d); chk(d == 3, "both connections open");
    wr(REG_CTRL, 1);
    sent = 0; answered = 0; got = 0;
    for (int t = 0; t < 200000 && got < NREQ; t++) begin
      @(negedge clk);
      if (sent < NREQ && $urandom_range(1, 0) == 0) begin
        o = '0; o.rpc_id = 32'(sent); o.fn_id = 8'h42; o.payload = PAYLOAD_BITS'({14{$urandom}});
        if (sw_send(0, 0, L, o)) begin pay[sent] = o.payload; sent++; end
      end
      if (sw_recv(0, 1, L, r)) begin
        chk(r.flags[FLAG_RESP] == 0 && r.dst_conn == 1 && r.src_conn == 0, "server sees request from connection 0");
        chk(r.rpc_id == 32'(answered) && r.payload == pay[answered], "request content");
        r.flags[FLAG_RESP] = 1'b1;
        r.dst_conn = r.src_conn;
        while (!sw_send(0, 1, L, r)) @(negedge clk);
        answered++;
      end
      if (sw_recv(0, 0, L, r)) begin
        chk(r.flags[FLAG_RESP] == 1 && r.rpc_id == 32'(got) && r.fn_id == 8'h42 && r.payload == pay[got]
            && r.dst_conn == 0 && r.src_conn == 1, "echo response");
        got++;
      end
    end
    chk(got == NREQ, "all responses received");
    // forged response: no outstanding request with this id
    o = '0; o.rpc_id = 32'd7; o.fn_id = 8'h42; o.flags = 7'd1; o.dst_conn = 0;
    chk(sw_send(0, 1, L, o), "forged response queued");
    repeat (300) @(negedge clk);
    chk(!sw_recv(0, 0, L, r), "forged response not delivered");
    rd(REG_MON_BASE + MON_TX_RPC, d);    chk(d == 2 * NREQ + 1, "monitor: RPCs sent");
    rd(REG_MON_BASE + MON_RX_RPC, d);    chk(d == 2 * NREQ, "monitor: RPCs received");
    rd(REG_MON_BASE + MON_UNMATCHED, d); chk(d == 1, "monitor: unmatched response");
    rd(REG_MON_BASE + MON_RX_DROP, d);   chk(d == 0, "monitor: no frame dropped");
    rd(REG_MON_BASE + MON_TX_POLL, d);   chk(d > 2 * NREQ / 2, "monitor: polling reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
