// tb_udp_transport -- self-checking test of UDP/IPv4/Ethernet framing.
// TX: frames for random connections are compared field by field with the
// connection entry and local addresses; the IPv4 checksum is recomputed here
// over the 20 header bytes laid out in wire order; the IP identification must
// count up. Frames go out one per cycle. RX: frames built by the transmitter
// are fed back with the local addresses swapped in; good ones must come out
// with their payload, and frames with a bad checksum, wrong IP, wrong port,
// wrong MAC or non-UDP protocol must be dropped with ev_drop.
module tb_udp_transport;
  import dagger_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic [47:0] lmac = 48'h02_00_00_00_00_01;
  logic [31:0] lip  = 32'h0A00_0001;
  logic [15:0] lport = 16'd7000;
  logic tiv, tir, tov, tor, riv, rir, rov, ror, drop;
  cl_data_t tiw, row;
  logic [3:0] tic, lk;
  conn_entry_t ent;
  pkt_t top, rip;

  udp_transport #(.NUM_CONN(NC)) dut (.clk, .rst, .local_mac(lmac), .local_ip(lip), .local_port(lport),
    .tx_in_valid(tiv), .tx_in_wire(tiw), .tx_in_conn(tic), .tx_in_ready(tir),
    .lookup_conn(lk), .lookup_entry(ent),
    .tx_out_valid(tov), .tx_out_pkt(top), .tx_out_ready(tor),
    .rx_in_valid(riv), .rx_in_pkt(rip), .rx_in_ready(rir),
    .rx_out_valid(rov), .rx_out_wire(row), .rx_out_ready(ror), .ev_drop(drop));

  // connection table stand-in
  always_comb begin
    ent.dst_mac = {40'h02_00_00_00_10, 4'h0, lk};
    ent.dst_ip = 32'hC0A8_0000 | 32'(lk);
    ent.dst_port = 16'd8000 + 16'(lk);
    ent.remote_conn = 16'(lk);
  end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // RFC 791 checksum over the header bytes in wire order
  function automatic logic [15:0] csum_bytes(pkt_hdr_t h);
    logic [159:0] ip;
    int unsigned s;
    ip = {h.ip_ver, h.ip_ihl, h.ip_tos, h.ip_len, h.ip_id, h.ip_frag, h.ip_ttl, h.ip_proto, 16'h0000, h.src_ip, h.dst_ip};
    s = 0;
    for (int i = 0; i < 10; i++) s += ip[159 - 16*i -: 16];
    while (s >> 16 != 0) s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  pkt_t sent[$];
  cl_data_t pay[$];
  logic [3:0] conns[$];
  int outs = 0;
  logic [15:0] last_id;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst && tov && tor) begin
    pkt_hdr_t h;
    logic [3:0] c;
    h = top.hdr;
    c = conns.pop_front();
    chk(top.payload == pay.pop_front(), "payload carried");
    chk(h.dst_mac == {40'h02_00_00_00_10, 4'h0, c} && h.src_mac == lmac && h.ethertype == 16'h0800, "ethernet header");
    chk(h.ip_ver == 4 && h.ip_ihl == 5 && h.ip_len == 16'd92 && h.ip_ttl == 64 && h.ip_proto == 17, "ip fields");
    chk(h.src_ip == lip && h.dst_ip == (32'hC0A8_0000 | 32'(c)), "ip addresses");
    chk(h.ip_csum == csum_bytes(h), "ip checksum");
    chk(h.src_port == lport && h.dst_port == 16'd8000 + 16'(c) && h.udp_len == 16'd72, "udp header");
    if (outs > 0) chk(h.ip_id == last_id + 1'b1, "ip id increments");
    last_id = h.ip_id;
    sent.push_back(top);
    outs++;
  end

  initial begin
    int t0, got, drops;
    tiv = 0; riv = 0; tor = 1; ror = 1; tiw = '0; tic = 0; rip = '0;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    t0 = $time;
    for (int n = 0; n < 64; n++) begin
      tiw = {16{$urandom}}; tic = 4'($urandom); tiv = 1; #0.1;
      chk(tir, "tx ready every cycle");
      pay.push_back(tiw); conns.push_back(tic);
      @(negedge clk);
    end
    tiv = 0; @(negedge clk);
    chk(outs == 64, "64 frames in 65 cycles: one per cycle");
    // RX
    got = 0; drops = 0;
    for (int n = 0; n < 64; n++) begin
      pkt_t p;
      int kind;
      p = sent[n];
      p.hdr.dst_mac = lmac; p.hdr.dst_ip = lip; p.hdr.dst_port = lport;
      p.hdr.ip_csum = csum_bytes(p.hdr);
      kind = n % 6;
      case (kind)
        1: p.hdr.ip_csum = p.hdr.ip_csum ^ 16'h0100;
        2: begin p.hdr.dst_ip = lip + 1; p.hdr.ip_csum = csum_bytes(p.hdr); end
        3: p.hdr.dst_port = lport + 1;
        4: p.hdr.dst_mac = lmac ^ 48'h1;
        5: begin p.hdr.ip_proto = 8'd6; p.hdr.ip_csum = csum_bytes(p.hdr); end
        default: ;
      endcase
      rip = p; riv = 1; #0.1;
      chk(rir, "rx ready");
      @(negedge clk); riv = 0; #0.1;
      if (kind == 0) begin
        chk(rov && !drop && row == p.payload, "good frame accepted");
        got++;
      end else begin
        chk(!rov && drop, "bad frame dropped");
        drops++;
      end
    end
    chk(got == 11 && drops == 53, "rx totals");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
