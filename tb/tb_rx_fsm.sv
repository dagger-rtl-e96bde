// tb_rx_fsm -- self-checking test of RX ring delivery with the host memory
// model. Numbered RPCs for four connections (4-entry rings) enter the FSM;
// some are flagged drop. A slow software model polls each RX ring for entries
// whose dirty flag marks them new, checks that they arrive in order with the
// right contents, and now and then publishes its consumed count in the
// connection's bookkeeping line. Checks: in-order, lossless delivery of every
// non-dropped RPC; dropped ones never written; the FSM stalls when a ring is
// full (and never overwrites an unconsumed entry, which would show up as a
// sequence gap) and resumes after a bookkeeping read; every ring write goes to
// the next slot of its ring with the dirty flag set to the inverse of the
// write's lap bit.
module tb_rx_fsm;
  import dagger_pkg::*;
  localparam int NC = 4;
  localparam int RL = 2;
  localparam cl_addr_t RXB = 42'h3000, BKB = 42'h4000;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic iv, ir, idrop, c0v, c0r, c0rv, c1v, c1r, c1av, ev_rx, ev_stall, ev_drop;
  rpc_obj_t io;
  logic [1:0] ic;
  c0_req_t c0q; c0_rsp_t c0rsp; c1_req_t c1q; mdata_t c1am;

  rx_fsm #(.NUM_CONN(NC)) dut (.clk, .rst, .enable(1'b1), .ring_log2(4'(RL)), .rx_ring_base(RXB), .rx_bk_base(BKB),
    .in_valid(iv), .in_obj(io), .in_conn(ic), .in_drop(idrop), .in_ready(ir),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r),
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .ev_rx, .ev_stall, .ev_drop);

  host_mem_model #(.LAT(6), .JITTER(4), .RAND_READY(1'b1)) mem (.clk, .rst,
    .c0_req_valid(c0v), .c0_req(c0q), .c0_req_ready(c0r), .c0_rsp_valid(c0rv), .c0_rsp(c0rsp),
    .c1_req_valid(c1v), .c1_req(c1q), .c1_req_ready(c1r), .c1_ack_valid(c1av), .c1_ack_mdata(c1am));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  int sent [NC], got [NC];
  int wcnt [NC] = '{default: 0};
  int stalls = 0, drops = 0, bk_reads = 0, total_in = 0;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (ev_stall) stalls++;
    if (ev_drop) drops++;
    if (c0v && c0r) begin
      bk_reads++;
      chk(c0q.addr >= BKB && c0q.addr < BKB + NC, "bookkeeping read address");
    end
    if (c1v && c1r) begin
      int wc;
      chk(c1q.addr >= RXB && c1q.addr < RXB + (NC << RL), "ring write address in range");
      // expected slot and dirty flag from the count of writes seen per ring
      wc = int'((c1q.addr - RXB) >> RL) % NC;
      chk(int'(c1q.addr - RXB) % (1 << RL) == wcnt[wc] % (1 << RL), "ring write goes to the next slot");
      chk(c1q.data[0] == !((wcnt[wc] >> RL) & 1), "dirty flag is the inverse of the write's lap bit");
      wcnt[wc]++;
    end
  end

  // slow software consumer
  initial begin
    wait (!rst);
    forever begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        rpc_obj_t o;
        o = rpc_obj_t'(mem.rd_line(RXB + cl_addr_t'(c << RL) + cl_addr_t'(got[c] % (1 << RL))));
        if (o.dirty != 1'((got[c] >> RL) & 1) && $urandom_range(5, 0) == 0) begin
          chk(o.rpc_id == 32'(got[c]) && o.dst_conn == 16'(c) && o.payload == PAYLOAD_BITS'({14{32'(c * 31 + got[c])}}), "in-order delivery");
          got[c]++;
        end
        if ($urandom_range(9, 0) == 0) mem.wr_line(BKB + cl_addr_t'(c), cl_data_t'(got[c]));
      end
    end
  end

  initial begin
    int ndrop;
    iv = 0; idrop = 0; io = '0; ic = 0; ndrop = 0;
    foreach (sent[i]) begin sent[i] = 0; got[i] = 0; end
    repeat (4) @(posedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 600; ) begin
      if (!iv) begin
        ic = 2'($urandom);
        idrop = ($urandom_range(9, 0) == 0);
        io = '0; io.rpc_id = idrop ? 32'hDEAD : 32'(sent[ic]); io.dst_conn = 16'(ic);
        io.payload = PAYLOAD_BITS'({14{32'(ic * 31 + sent[ic])}});
        iv = 1;
      end
      #0.1;
      if (ir) begin
        if (idrop) ndrop++; else sent[ic]++;
        n++;
        @(negedge clk); iv = 1'b0;
      end else @(negedge clk);
    end
    iv = 0;
    repeat (3000) @(negedge clk);
    for (int c = 0; c < NC; c++) chk(got[c] == sent[c], "all delivered");
    chk(drops == ndrop && ndrop > 20, "drops discarded");
    chk(stalls > 50, "full ring stalls the FSM");
    chk(bk_reads > 20, "bookkeeping reads issued");
    $display("stalls %0d bk_reads %0d drops %0d", stalls, bk_reads, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
