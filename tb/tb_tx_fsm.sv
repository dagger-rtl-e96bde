// tb_tx_fsm -- self-checking test of TX ring polling with the host memory
// model (random latency, out-of-order read responses, random ready).
// A software model writes numbered requests into the TX rings of three open
// connections (8-entry rings), only into entries the NIC has released through
// the completion lines, setting the dirty flag by lap. Checks: every request
// comes out exactly once, in order per connection, with its payload; no
// request of a closed connection is fetched; completion lines end equal to the
// produced counts; batches of 1 and 4 both work; with a threshold of 6
// requests per 64-cycle window the polling switches from cached to direct
// under load and back when idle, and the read hints follow the mode.
module tb_tx_fsm;
  import dagger_pkg::*;
  localparam int NC = 4;
  localparam int RL = 3;
  localparam cl_addr_t TXB = 42'h1000, CMB = 42'h2000;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [2:0] batch;
  logic [NC-1:0] open_mask = 4'b1011;
  logic c0v, c0r, c0rv, c1v, c1r, c1av, ov, orr, pd, ms, ev_poll;
  c0_req_t c0q; c0_rsp_t c0rsp; c1_req_t c1q; mdata_t c1am;
  rpc_obj_t oo;
  logic [1:0] oc;

  tx_fsm #(.NUM_CONN(NC), .WINDOW(64)) dut (.clk, .rst, .enable(1'b1), .batch, .ring_log2(4'(RL)),
    .tx_ring_base(TXB), .tx_cmpl_base(CMB), .poll_thresh(32'd6), .open_mask,
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r),
    .out_valid(ov), .out_obj(oo), .out_conn(oc), .out_ready(orr),
    .poll_direct(pd), .ev_mode_switch(ms), .ev_poll);

  host_mem_model #(.LAT(8), .JITTER(6), .RAND_READY(1'b1)) mem (.clk, .rst,
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  int prod [NC], cons [NC];
  int switches = 0, direct_cycles = 0, hint_errs = 0;

  function automatic logic [PAYLOAD_BITS-1:0] pay_of(int c, int n);
    return PAYLOAD_BITS'({14{32'(c * 100003 + n * 7919)}});
  endfunction

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (ov && orr) begin
      chk(open_mask[oc], "only open connections fetched");
      chk(oo.rpc_id == 32'(cons[oc]) && oo.dst_conn == 16'(oc) && oo.payload == pay_of(oc, cons[oc]), "request in order with payload");
      cons[oc]++;
    end
    if (ms) switches++;
    if (pd) direct_cycles++;
    if (c0v && c0q.cached == pd) hint_errs++;
  end

  task automatic produce(int c);
    int done;
    rpc_obj_t o;
    done = int'(mem.rd_line(CMB + cl_addr_t'(c))) & 16'hFFFF;
    if (prod[c] - done < (1 << RL)) begin
      o = '0;
      o.rpc_id = 32'(prod[c]); o.dst_conn = 16'(c); o.fn_id = 8'h11;
      o.payload = pay_of(c, prod[c]);
      o.dirty = !((prod[c] >> RL) & 1);
      mem.wr_line(TXB + cl_addr_t'(c << RL) + cl_addr_t'(prod[c] % (1 << RL)), cl_data_t'(o));
      prod[c]++;
    end
  endtask

  initial begin
    orr = 1; batch = 1;
    foreach (prod[i]) begin prod[i] = 0; cons[i] = 0; end
    repeat (4) @(posedge clk); @(negedge clk); rst = 0;
    // phase 1: batch 1, light load
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      orr = ($urandom_range(3, 0) != 0);
      if ($urandom_range(63, 0) == 0) produce($urandom_range(1, 0) == 0 ? 0 : 3);
    end
    chk(switches == 0 && !pd, "light load stays cached");
    // phase 2: batch 4, heavy load
    batch = 4;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      orr = ($urandom_range(7, 0) != 0);
      for (int c = 0; c < NC; c++) if (open_mask[c]) produce(c);
    end
    chk(pd, "heavy load switches to direct polling");
    // phase 3: idle, drain
    for (int t = 0; t < 1000; t++) begin @(negedge clk); orr = 1; end
    chk(!pd, "idle returns to cached polling");
    chk(switches >= 2, "mode switched both ways");
    chk(direct_cycles > 100, "direct mode used");
    chk(hint_errs == 0, "read hint follows mode");
    chk(mem.n_cached_reads > 0 && mem.n_direct_reads > 0, "both read kinds issued");
    for (int c = 0; c < NC; c++) begin
      chk(cons[c] == prod[c], "all requests consumed");
      chk((int'(mem.rd_line(CMB + cl_addr_t'(c))) & 16'hFFFF) == (prod[c] & 16'hFFFF), "completion line = consumed count");
    end
    chk(prod[0] > 100 && prod[3] > 100 && prod[1] > 100, "rings wrapped many times");
    $display("produced %0d %0d %0d, switches %0d", prod[0], prod[1], prod[3], switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
