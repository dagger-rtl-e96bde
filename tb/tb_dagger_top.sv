// tb_dagger_top -- end-to-end test of the two-NIC loop-back FPGA at its
// default parameters (16 connections per NIC, 32 outstanding requests per
// connection, 1024-cycle rate window). The client keeps at most 30 requests
// of a connection in flight.
//
// NIC 0 is the client: connections 0-3 send 64-byte echo RPCs to NIC 1.
// NIC 1 is the server: load balancing spreads the requests round-robin over
// its connections 0-3 (one per server core); the server software model echoes
// each request, and the response goes back to the client connection that
// sent it. Responses of one connection may come back out of order (they are
// answered from different server rings), so each is matched by its RPC id. The test runs three load phases and checks every response, then
// counts how often each mechanism of the design occurred and fails any that
// never did:
//   batched polling (B = 4 batches that fetched more than one request),
//   switch of the TX polling mode (cached -> direct -> cached, per threshold),
//   round-robin load balancing (even spread over server connections),
//   RX back-pressure (server ring full, RX FSM stalls),
//   TX bookkeeping writes and RX bookkeeping reads,
//   CCI-P arbitration between the two NICs (both request in the same cycle),
//   transport drop (a connection set up with a wrong destination IP),
//   RPC-unit drop of a response that matches no outstanding request.
module tb_dagger_top;
  import dagger_pkg::*;
  import host_sw_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  mmio_req_t mmio;
  logic rsp_v;
  logic [63:0] rsp_d;
  logic c0v, c0r, c0rv, c1v, c1r, c1av;
  c0_req_t c0q; c0_rsp_t c0rsp; c1_req_t c1q; mdata_t c1am;

  dagger_top dut (.clk, .rst, .mmio_req(mmio), .mmio_rsp_valid(rsp_v), .mmio_rsp_data(rsp_d),
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am));

  host_mem_model #(.LAT(16), .JITTER(4), .RAND_READY(1'b0)) mem (.clk, .rst,
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  task automatic wr(int nic, logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b1, rd: 1'b0, addr: {1'(nic), a[10:0]}, data: d};
    @(negedge clk); mmio = '0;
  endtask
  task automatic rd(int nic, logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b0, rd: 1'b1, addr: {1'(nic), a[10:0]}, data: '0};
    @(negedge clk); mmio = '0; d = rsp_d;
    chk(rsp_v, "mmio read response");
  endtask

  localparam int NCLI = 4;
  localparam int NREQ = 1200;     // per phase-total
  layout_t L [2];
  logic [PAYLOAD_BITS-1:0] pay [NCLI][4096];
  bit seen [NCLI][4096];
  int sent [NCLI], got [NCLI], srv_hits [NCLI];
  int ev_batch = 0, ev_arb = 0, ev_txbk = 0, ev_rxbk = 0;
  int total_got = 0;

  // mechanism probes
  always @(posedge clk) if (!rst) begin
    if (dut.g_nic[0].u_nic.u_tx.out_valid && dut.g_nic[0].u_nic.u_tx.out_ready
        && dut.g_nic[0].u_nic.u_tx.out_pos != 0) ev_batch++;
    if (dut.n_c0_valid == 2'b11 || dut.n_c1_valid == 2'b11) ev_arb++;
    if (c1v && c1r && ((c1q.addr >= L[0].tx_cmpl && c1q.addr < L[0].tx_cmpl + 16)
                    || (c1q.addr >= L[1].tx_cmpl && c1q.addr < L[1].tx_cmpl + 16))) ev_txbk++;
    if (c0v && c0r && ((c0q.addr >= L[0].rx_bk && c0q.addr < L[0].rx_bk + 16)
                    || (c0q.addr >= L[1].rx_bk && c0q.addr < L[1].rx_bk + 16))) ev_rxbk++;
  end

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one simulated software step: client sends with probability p_send/8,
  // server answers at most one request per call when srv_go
  task automatic step(int p_send, bit srv_go, int limit);
    rpc_obj_t o, r;
    for (int c = 0; c < NCLI; c++) begin
      if (sent[c] < limit && sent[c] - got[c] < 30 && $urandom_range(7, 0) < p_send) begin
        o = '0; o.rpc_id = 32'(c << 16 | sent[c]); o.fn_id = 8'(c + 1);
        o.payload = PAYLOAD_BITS'({14{$urandom}});
        if (sw_send(0, c, L[0], o)) begin pay[c][sent[c] % 4096] = o.payload; sent[c]++; end
      end
    end
    if (srv_go)
      for (int s = 0; s < NCLI; s++)
        if (sw_recv(1, s, L[1], r)) begin
          chk(r.flags[FLAG_RESP] == 0 && r.dst_conn < NCLI, "server gets a request");
          srv_hits[s]++;
          r.flags[FLAG_RESP] = 1'b1;
          r.dst_conn = r.src_conn;
          while (!sw_send(1, s, L[1], r)) @(negedge clk);
        end
    for (int c = 0; c < NCLI; c++)
      if (sw_recv(0, c, L[0], r)) begin
        int q;
        q = int'(r.rpc_id[15:0]);
        chk(r.flags[FLAG_RESP] && r.dst_conn == 16'(c) && r.rpc_id[31:16] == 16'(c) && q < sent[c]
            && !seen[c][q] && r.fn_id == 8'(c + 1) && r.payload == pay[c][q], "echo response");
        if (q < 4096) seen[c][q] = 1'b1;
        got[c]++;
        total_got++;
      end
  endtask

  task automatic setup_nic(int n, logic [31:0] ip, logic [31:0] peer_ip, int remote);
    wr(n, REG_LOCAL_MAC, 64'h0200_0000_0000 | 64'(n)); wr(n, REG_LOCAL_IP, 64'(ip)); wr(n, REG_LOCAL_PORT, 64'd7000);
    wr(n, REG_TX_RING_BASE, 64'(L[n].tx_ring)); wr(n, REG_TX_CMPL_BASE, 64'(L[n].tx_cmpl));
    wr(n, REG_RX_RING_BASE, 64'(L[n].rx_ring)); wr(n, REG_RX_BK_BASE, 64'(L[n].rx_bk));
    wr(n, REG_RING_LOG2, 64'(L[n].ring_log2));
    for (int c = 0; c < NCLI; c++) begin
      wr(n, REG_CONN_MAC, 64'h0200_0000_0000 | 64'(1 - n));
      wr(n, REG_CONN_ADDR, {16'(remote), 16'd7000, peer_ip});
      wr(n, REG_CONN_CMD, {46'd0, CONN_SETUP, 16'(c)});
      wr(n, REG_CONN_CMD, {46'd0, CONN_OPEN, 16'(c)});
    end
  endtask

  initial begin
    logic [63:0] d;
    int lim;
    rpc_obj_t o;
    mmio = '0;
    sw_reset();
    foreach (sent[i]) begin sent[i] = 0; got[i] = 0; srv_hits[i] = 0; end
    foreach (seen[i, j]) seen[i][j] = 1'b0;
    L[0] = '{tx_ring: 42'h10000, tx_cmpl: 42'h20000, rx_ring: 42'h30000, rx_bk: 42'h40000, ring_log2: 4};
    L[1] = '{tx_ring: 42'h50000, tx_cmpl: 42'h60000, rx_ring: 42'h70000, rx_bk: 42'h80000, ring_log2: 3};
    repeat (4) @(posedge clk); @(negedge clk); rst = 0;
    setup_nic(0, 32'h0A00_0001, 32'h0A00_0002, 0);
    setup_nic(1, 32'h0A00_0002, 32'h0A00_0001, 0);
    wr(1, REG_LB_CTRL, 64'h000F_0001);               // balance over server connections 0-3
    wr(0, REG_POLL_THRESH, 64'd40); wr(1, REG_POLL_THRESH, 64'd40);
    // connection 5 on NIC 0 with a wrong destination IP
    wr(0, REG_CONN_MAC, 64'h0200_0000_0001);
    wr(0, REG_CONN_ADDR, {16'd0, 16'd7000, 32'h0A00_0099});
    wr(0, REG_CONN_CMD, {46'd0, CONN_SETUP, 16'd5});
    wr(0, REG_CONN_CMD, {46'd0, CONN_OPEN, 16'd5});
    wr(0, REG_CTRL, 1); wr(1, REG_CTRL, 1);
    rd(0, REG_CONN_STATUS, d); chk(d == 64'h2F, "client connections open");

    // phase 1: light load, batch 1
    wr(0, REG_BATCH, 1); wr(1, REG_BATCH, 1);
    lim = 100;
    for (int t = 0; t < 30000 && total_got < NCLI * lim; t++) begin @(negedge clk); step(1, 1, lim); end
    rd(0, REG_POLL_MODE, d); chk(d == 0, "light load polls through the cache");
    // phase 2: heavy load, batch 4, slow server (back-pressure)
    wr(0, REG_BATCH, 4); wr(1, REG_BATCH, 4);
    lim = 600;
    for (int t = 0; t < 200000 && total_got < NCLI * lim; t++) begin
      @(negedge clk);
      step(8, (t % 2000) >= 1000, lim);
      if (t == 20000) begin
        rd(0, REG_POLL_MODE, d); chk(d == 1, "heavy load polls the LLC directly");
      end
    end
    // phase 3: idle
    for (int t = 0; t < 5000; t++) begin @(negedge clk); step(0, 1, lim); end
    rd(0, REG_POLL_MODE, d); chk(d == 0, "idle returns to cached polling");
    for (int c = 0; c < NCLI; c++) chk(got[c] == lim && sent[c] == lim, "every request answered");

    // transport drop: two requests on the misaddressed connection
    o = '0; o.rpc_id = 32'hF000; o.fn_id = 8'h9;
    chk(sw_send(0, 5, L[0], o), "misaddressed request queued");
    o.rpc_id = 32'hF001;
    chk(sw_send(0, 5, L[0], o), "misaddressed request queued");
    // RPC-unit drop: forged response from the server to client connection 2
    o = '0; o.rpc_id = 32'h00AB_CDEF; o.fn_id = 8'h3; o.flags = 7'd1; o.dst_conn = 16'd2;
    chk(sw_send(1, 0, L[1], o), "forged response queued");
    repeat (2000) @(negedge clk);

    begin
      logic [63:0] sw0, sw1, st1, dr1, um0, tx0, rx0;
      int mn, mx;
      rd(0, REG_MON_BASE + MON_MODE_SWTCH, sw0);
      rd(1, REG_MON_BASE + MON_MODE_SWTCH, sw1);
      rd(1, REG_MON_BASE + MON_RX_STALL, st1);
      rd(1, REG_MON_BASE + MON_RX_DROP, dr1);
      rd(0, REG_MON_BASE + MON_UNMATCHED, um0);
      rd(0, REG_MON_BASE + MON_TX_RPC, tx0);
      rd(0, REG_MON_BASE + MON_RX_RPC, rx0);
      mn = 1 << 30; mx = 0;
      for (int s = 0; s < NCLI; s++) begin
        mn = srv_hits[s] < mn ? srv_hits[s] : mn; mx = srv_hits[s] > mx ? srv_hits[s] : mx;
      end
      $display("mechanisms: batches>1=%0d mode_switches=%0d/%0d lb_spread=%0d..%0d rx_stalls=%0d txbk=%0d rxbk=%0d arb=%0d tp_drop=%0d unmatched=%0d",
               ev_batch, sw0, sw1, mn, mx, st1, ev_txbk, ev_rxbk, ev_arb, dr1, um0);
      chk(ev_batch > 0, "batched polling happened");
      chk(sw0 >= 2, "polling mode switched both ways");
      chk(mn > 0 && mx - mn <= 1, "load balancer spread requests evenly");
      chk(st1 > 0, "RX back-pressure happened");
      chk(ev_txbk > 0 && ev_rxbk > 0, "bookkeeping happened");
      chk(ev_arb > 0, "NICs contended for CCI-P");
      chk(dr1 == 2, "transport dropped misaddressed frames");
      chk(um0 == 1, "RPC unit dropped unmatched response");
      chk(tx0 == NCLI * lim + 2 && rx0 == NCLI * lim, "client monitor counts");
      for (int c = 0; c < NCLI; c++) begin
        rpc_obj_t r;
        chk(!sw_recv(0, c, L[0], r), "nothing extra delivered");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
