// tb_rpc_unit -- self-checking test of RPC (de)serialization and metadata.
// TX: random RPC objects (requests and responses) are pushed with random
// output back-pressure; each wire image is compared with one assembled byte by
// byte in the testbench (big-endian header: destination connection, source
// connection, RPC id, function, flags; then the 54 payload bytes). Requests
// take the peer connection from the table, responses keep theirs. RX: requests must come out deserialized;
// responses must pass only if a matching request (same connection, RPC id
// slot and function) is outstanding, and then only once. Also checks one
// RPC per cycle throughput in each direction.
module tb_rpc_unit;
  import dagger_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic tx_iv, tx_ir, tx_ov, tx_or, rx_iv, rx_ir, rx_ov, rx_or, unm;
  rpc_obj_t tx_io, rx_oo;
  logic [3:0] tx_ic, tx_oc, lk;
  logic [15:0] remote;
  cl_data_t tx_ow, rx_iw;

  rpc_unit #(.NUM_CONN(NC), .OUTSTANDING(32)) dut (.clk, .rst,
    .tx_in_valid(tx_iv), .tx_in_obj(tx_io), .tx_in_conn(tx_ic), .tx_in_ready(tx_ir),
    .lookup_conn(lk), .lookup_remote_conn(remote),
    .tx_out_valid(tx_ov), .tx_out_wire(tx_ow), .tx_out_conn(tx_oc), .tx_out_ready(tx_or),
    .rx_in_valid(rx_iv), .rx_in_wire(rx_iw), .rx_in_ready(rx_ir),
    .rx_out_valid(rx_ov), .rx_out_obj(rx_oo), .rx_out_ready(rx_or), .ev_unmatched(unm));

  // peer connection of local connection c
  assign remote = 16'(lk) ^ 16'h0005;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic cl_data_t ref_wire(logic [15:0] d, logic [15:0] c, logic [31:0] id, logic [7:0] fn,
                                        logic [6:0] fl, logic [PAYLOAD_BITS-1:0] pl);
    logic [7:0] b [64];
    cl_data_t w;
    b[0] = d[15:8]; b[1] = d[7:0]; b[2] = c[15:8]; b[3] = c[7:0];
    b[4] = id[31:24]; b[5] = id[23:16]; b[6] = id[15:8]; b[7] = id[7:0];
    b[8] = fn; b[9] = {1'b0, fl};
    for (int k = 0; k < 54; k++) b[10 + k] = pl[8*k +: 8];
    for (int i = 0; i < 64; i++) w[511 - 8*i -: 8] = b[i];
    return w;
  endfunction

  function automatic rpc_obj_t rand_obj();
    rpc_obj_t o;
    o.payload = PAYLOAD_BITS'({14{$urandom}});
    o.dst_conn = 16'($urandom);
    o.src_conn = 16'($urandom);
    o.rpc_id  = $urandom;
    o.fn_id   = 8'($urandom);
    o.flags   = 7'($urandom_range(1, 0));
    o.dirty   = 1'($urandom);
    return o;
  endfunction

  typedef struct { cl_data_t w; logic [3:0] c; } txe_t;
  txe_t txq[$];
  rpc_obj_t rxq[$];
  int tx_out_n = 0, rx_out_n = 0;
  logic [31:0] sent_ids [$];
  logic [3:0]  sent_conn [$];
  logic [7:0]  sent_fn [$];

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output monitors
  always @(posedge clk) if (!rst) begin
    if (tx_ov && tx_or) begin
      chk(txq.size() > 0, "unexpected tx output");
      if (txq.size() > 0) begin
        txe_t e;
        e = txq.pop_front();
        chk(tx_ow == e.w, "wire image");
        chk(tx_oc == e.c, "tx connection");
      end
      tx_out_n++;
    end
    if (rx_ov && rx_or) begin
      chk(rxq.size() > 0, "unexpected rx output");
      if (rxq.size() > 0) begin
        rpc_obj_t e;
        e = rxq.pop_front();
        chk(rx_oo.payload == e.payload && rx_oo.rpc_id == e.rpc_id && rx_oo.fn_id == e.fn_id
            && rx_oo.flags == e.flags && rx_oo.dst_conn == e.dst_conn && rx_oo.src_conn == e.src_conn, "deserialized object");
      end
      rx_out_n++;
    end
  end

  initial begin
    int n_unm;
    tx_iv = 0; rx_iv = 0; tx_or = 1; rx_or = 1; tx_io = '0; tx_ic = 0; rx_iw = '0;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    // ---- TX with back-pressure; remember requests for the RX phase
    for (int n = 0; n < 300; ) begin
      tx_or = ($urandom_range(3, 0) != 0);
      if (!tx_iv) begin
        tx_io = rand_obj(); tx_io.rpc_id[31:5] = 27'(n); tx_io.rpc_id[4:0] = 5'(n);
        tx_ic = 4'($urandom); tx_iv = 1;
      end
      #0.1;
      if (tx_iv && tx_ir) begin
        txq.push_back('{w: ref_wire(tx_io.flags[0] ? tx_io.dst_conn : 16'(tx_ic) ^ 16'h5, 16'(tx_ic), tx_io.rpc_id, tx_io.fn_id, tx_io.flags, tx_io.payload), c: tx_ic});
        if (!tx_io.flags[0] && n >= 268) begin
          sent_ids.push_back(tx_io.rpc_id); sent_conn.push_back(tx_ic); sent_fn.push_back(tx_io.fn_id);
        end
        n++;
        @(negedge clk); tx_iv = 0;
      end else @(negedge clk);
    end
    tx_iv = 0; tx_or = 1;
    repeat (4) @(negedge clk);
    chk(tx_out_n == 300 && txq.size() == 0, "all tx objects out");
    // ---- TX throughput: 32 back-to-back objects in 33 cycles
    begin
      int t0;
      t0 = tx_out_n;
      for (int n = 0; n < 32; n++) begin
        tx_io = rand_obj(); tx_io.flags = 7'd1; tx_ic = 4'(n); tx_iv = 1; #0.1;
        chk(tx_ir, "tx accepts every cycle");
        txq.push_back('{w: ref_wire(tx_io.flags[0] ? tx_io.dst_conn : 16'(tx_ic) ^ 16'h5, 16'(tx_ic), tx_io.rpc_id, tx_io.fn_id, tx_io.flags, tx_io.payload), c: tx_ic});
        @(negedge clk);
      end
      tx_iv = 0; @(negedge clk);
      chk(tx_out_n - t0 == 32, "one RPC per cycle on TX");
    end
    // ---- RX: requests pass, matching responses pass once, others dropped
    n_unm = 0;
    for (int n = 0; n < 200; n++) begin
      rpc_obj_t o;
      bit expect_pass, is_match;
      is_match = 0;
      o = rand_obj();
      if (n % 3 == 0) o.flags = 0;                      // request
      else if (n % 3 == 1 && sent_ids.size() > 0) begin // response to an outstanding request
        o.flags = 1; o.rpc_id = sent_ids[0]; o.dst_conn = 16'(sent_conn[0]); o.fn_id = sent_fn[0];
        if (n % 2 == 0) begin
          is_match = 1;
          void'(sent_ids.pop_front()); void'(sent_conn.pop_front()); void'(sent_fn.pop_front());
        end else begin
          o.fn_id = o.fn_id + 1'b1;                     // wrong function: unmatched
        end
      end else o.flags = 1;                             // random response: unmatched
      expect_pass = !o.flags[0] || is_match;
      rx_iw = ref_wire(o.dst_conn, o.src_conn, o.rpc_id, o.fn_id, o.flags, o.payload);
      rx_iv = 1; rx_or = 1; #0.1;
      chk(rx_ir, "rx ready");
      if (expect_pass) rxq.push_back(o); else n_unm++;
      @(negedge clk); rx_iv = 0;
      @(negedge clk);
      #0.1;
    end
    repeat (3) @(negedge clk);
    chk(rxq.size() == 0, "all expected rx objects out");
    chk(rx_out_n + n_unm == 200, "drop count");
    chk(n_unm > 60 && rx_out_n > 70, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
