// tb_echo_workload -- the 64-byte echo RPC benchmark on the two-NIC loop-back
// FPGA, at the top's default parameters.
//
// NIC 0 runs T client threads, one connection each; NIC 1 runs T server
// threads on the matching connections and echoes every request at once. Each
// client keeps up to W requests in flight (asynchronous RPCs). One run sends
// NPER requests per thread and measures, in NIC clock cycles:
//   throughput  responses per 1000 cycles over the run, and
//   latency     mean round trip from the client's ring write to its reading
//               the response, in cycles.
// The runs sweep the CCI-P polling batch B (1, 2, 4) and the thread count
// (1, 4, 8), and add a light-load run (W = 1) at B = 1 and B = 4, and an
// "auto" run in which the software model starts at light load with B = 1 and,
// halfway through, raises the load and switches B to 4 while RPCs are in
// the rings (batch size tuned at run time through the register file). Every
// response is checked against the request it answers. The trends the
// batching and threading trade-off predicts are checked as well: on one
// thread under full load B = 4 gives at least the throughput of B = 1,
// at light load B = 1 gives the lower latency, and 8 threads give more
// throughput than one. Absolute numbers depend on the host-memory model's
// latency (16-19 cycles here) and on the software model, which does at most
// one ring operation per thread per cycle, so only these relations are
// checked.
module tb_echo_workload;
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

  host_mem_model #(.LAT(16), .JITTER(4), .RAND_READY(1'b0)) u_mem (.clk, .rst,
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

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int MAXT = 8;
  localparam int NPER = 150;
  layout_t L [2];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [PAYLOAD_BITS-1:0] pay [MAXT][NPER];
  longint t_sent [MAXT][NPER];
  bit seen [MAXT][NPER];
  int sent [MAXT], got [MAXT];

  // one run; returns throughput (responses per 1000 cycles) and mean latency
  task automatic run(int T, int B, int W, bit auto_b, output int tput, output int lat);
    longint t0, lat_sum;
    int total;
    rpc_obj_t o, r;
    rst = 1;
    host_sw_pkg::mem.delete();
    sw_reset();
    for (int c = 0; c < MAXT; c++) begin
      sent[c] = 0; got[c] = 0;
      for (int i = 0; i < NPER; i++) seen[c][i] = 1'b0;
    end
    repeat (4) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 2; n++) begin
      wr(n, REG_LOCAL_MAC, 64'h0200_0000_0000 | 64'(n));
      wr(n, REG_LOCAL_IP, 64'h0A00_0001 + 64'(n)); wr(n, REG_LOCAL_PORT, 64'd7000);
      wr(n, REG_TX_RING_BASE, 64'(L[n].tx_ring)); wr(n, REG_TX_CMPL_BASE, 64'(L[n].tx_cmpl));
      wr(n, REG_RX_RING_BASE, 64'(L[n].rx_ring)); wr(n, REG_RX_BK_BASE, 64'(L[n].rx_bk));
      wr(n, REG_RING_LOG2, 64'(L[n].ring_log2));
      wr(n, REG_BATCH, 64'(B));
      wr(n, REG_POLL_THRESH, 64'd1000000);
      for (int c = 0; c < T; c++) begin
        wr(n, REG_CONN_MAC, 64'h0200_0000_0000 | 64'(1 - n));
        wr(n, REG_CONN_ADDR, {16'(c), 16'd7000, 32'h0A00_0002 - 32'(n)});
        wr(n, REG_CONN_CMD, {46'd0, CONN_SETUP, 16'(c)});
        wr(n, REG_CONN_CMD, {46'd0, CONN_OPEN, 16'(c)});
      end
      wr(n, REG_CTRL, 1);
    end
    t0 = cyc; lat_sum = 0; total = 0;
    for (int t = 0; t < 400000 && total < T * NPER; t++) begin
      @(negedge clk);
      // auto batching: software raises B from 1 to 4 when the load rises
      if (auto_b && W == 1 && sent[0] == NPER / 2 && got[0] == sent[0]) begin
        W = 16;
        wr(0, REG_BATCH, 64'd4); wr(1, REG_BATCH, 64'd4);
      end
      for (int c = 0; c < T; c++)
        if (sent[c] < NPER && sent[c] - got[c] < W && !(auto_b && W == 1 && sent[c] >= NPER / 2)) begin
          o = '0; o.rpc_id = 32'(c << 16 | sent[c]); o.fn_id = 8'(c + 1);
          o.payload = PAYLOAD_BITS'({14{$urandom}});
          if (sw_send(0, c, L[0], o)) begin
            pay[c][sent[c]] = o.payload; t_sent[c][sent[c]] = cyc; sent[c]++;
          end
        end
      for (int s = 0; s < T; s++)
        if (sw_recv(1, s, L[1], r)) begin
          chk(r.flags[FLAG_RESP] == 0 && r.dst_conn == 16'(s) && r.src_conn == 16'(s), "server gets its thread's request");
          r.flags[FLAG_RESP] = 1'b1;
          r.dst_conn = r.src_conn;
          while (!sw_send(1, s, L[1], r)) @(negedge clk);
        end
      for (int c = 0; c < T; c++)
        if (sw_recv(0, c, L[0], r)) begin
          int q;
          q = int'(r.rpc_id[15:0]);
          chk(r.flags[FLAG_RESP] && r.dst_conn == 16'(c) && r.rpc_id[31:16] == 16'(c) && q < sent[c]
              && !seen[c][q] && r.fn_id == 8'(c + 1) && r.payload == pay[c][q], "echo response");
          if (q < NPER) begin
            seen[c][q] = 1'b1;
            lat_sum += cyc - t_sent[c][q];
          end
          got[c]++;
          total++;
        end
    end
    chk(total == T * NPER, "every request of the run answered");
    tput = int'(longint'(total) * 1000 / (cyc - t0));
    lat = total > 0 ? int'(lat_sum / total) : 0;
    $display("run: threads=%0d B=%0d%s in-flight=%0d  throughput=%0d RPC/kcycle  mean RTT=%0d cycles",
             T, B, auto_b ? " (auto, then 4)" : "", W, tput, lat);
  endtask

  initial begin
    int tp [3][3], lt [3][3];
    int lat_b1, lat_b4, dummy;
    int thr [3];
    mmio = '0;
    thr = '{1, 4, 8};
    L[0] = '{tx_ring: 42'h10000, tx_cmpl: 42'h20000, rx_ring: 42'h30000, rx_bk: 42'h40000, ring_log2: 5};
    L[1] = '{tx_ring: 42'h50000, tx_cmpl: 42'h60000, rx_ring: 42'h70000, rx_bk: 42'h80000, ring_log2: 5};
    for (int ti = 0; ti < 3; ti++)
      for (int bi = 0; bi < 3; bi++)
        run(thr[ti], 1 << bi, 16, 1'b0, tp[ti][bi], lt[ti][bi]);
    run(1, 1, 1, 1'b0, dummy, lat_b1);
    run(1, 4, 1, 1'b0, dummy, lat_b4);
    run(1, 1, 1, 1'b1, dummy, dummy);   // light then heavy load, B changed on the fly
    chk(tp[0][2] >= tp[0][0], "one thread: B = 4 gives at least the throughput of B = 1");
    chk(lat_b1 <= lat_b4, "light load: B = 1 gives a round trip no longer than B = 4");
    chk(tp[2][2] > tp[0][2], "8 threads give more throughput than one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
