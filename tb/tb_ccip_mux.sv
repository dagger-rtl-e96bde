// tb_ccip_mux -- self-checking test of the round-robin CCI-P multiplexer.
// Two clients issue random reads and writes, holding each request until it is
// accepted; an independent reference pointer predicts every grant. Checks:
// winner and forwarded request (with the client index in mdata bit 15), ready
// only to the winner, strict alternation when both request, response and
// acknowledge routing with the tag cleared.
module tb_ccip_mux;
  import dagger_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [N-1:0] c0_v, c0_r, c0_rv, c1_v, c1_r, c1_av;
  c0_req_t [N-1:0] c0_q;
  c1_req_t [N-1:0] c1_q;
  c0_rsp_t c0_rsp;
  mdata_t  c1_am;
  logic up_c0_v, up_c0_r, up_rsp_v, up_c1_v, up_c1_r, up_ack_v;
  c0_req_t up_c0_q;
  c1_req_t up_c1_q;
  c0_rsp_t up_rsp;
  mdata_t  up_ack_m;

  ccip_mux #(.N(N), .TAG_LSB(15)) dut (
    .clk, .rst, .c0_req_valid(c0_v), .c0_req(c0_q), .c0_req_ready(c0_r),
    .c0_rsp_valid(c0_rv), .c0_rsp, .c1_req_valid(c1_v), .c1_req(c1_q), .c1_req_ready(c1_r),
    .c1_ack_valid(c1_av), .c1_ack_mdata(c1_am),
    .up_c0_req_valid(up_c0_v), .up_c0_req(up_c0_q), .up_c0_req_ready(up_c0_r),
    .up_c0_rsp_valid(up_rsp_v), .up_c0_rsp(up_rsp),
    .up_c1_req_valid(up_c1_v), .up_c1_req(up_c1_q), .up_c1_req_ready(up_c1_r),
    .up_c1_ack_valid(up_ack_v), .up_c1_ack_mdata(up_ack_m));

  int checks = 0, failures = 0;
  int rp0 = 0, rp1 = 0, last0 = -1, both0 = 0, acc0 = -1, acc1 = -1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic int pick(logic [N-1:0] v, int p);
    for (int k = 0; k < N; k++) if (v[(p + k) % N]) return (p + k) % N;
    return -1;
  endfunction

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c0_v = '0; c1_v = '0; c0_q = '0; c1_q = '0;
    up_c0_r = 1; up_c1_r = 1; up_rsp_v = 0; up_rsp = '0; up_ack_v = 0; up_ack_m = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // retire what was accepted at the last clock edge
      if (acc0 >= 0) begin rp0 = (acc0 + 1) % N; last0 = acc0; c0_v[acc0] = 0; end
      if (acc1 >= 0) begin rp1 = (acc1 + 1) % N; c1_v[acc1] = 0; end
      // new requests from idle clients
      for (int i = 0; i < N; i++) begin
        if (!c0_v[i] && $urandom_range(2, 0) != 0) begin
          c0_v[i] = 1; c0_q[i].addr = cl_addr_t'({$urandom, $urandom}); c0_q[i].cached = 1'($urandom);
          c0_q[i].mdata = mdata_t'($urandom_range(16'h7FFF, 0));
        end
        if (!c1_v[i] && $urandom_range(2, 0) != 0) begin
          c1_v[i] = 1; c1_q[i].addr = cl_addr_t'({$urandom, $urandom}); c1_q[i].data = {16{$urandom}};
          c1_q[i].mdata = mdata_t'($urandom_range(16'h7FFF, 0));
        end
      end
      up_c0_r = ($urandom_range(3, 0) != 0);
      up_c1_r = ($urandom_range(3, 0) != 0);
      up_rsp_v = 1'($urandom); up_rsp.data = {16{$urandom}}; up_rsp.mdata = mdata_t'($urandom);
      up_ack_v = 1'($urandom); up_ack_m = mdata_t'($urandom);
      #0.5;
      begin
        int w0, w1;
        w0 = pick(c0_v, rp0); w1 = pick(c1_v, rp1);
        chk(up_c0_v == (w0 >= 0), "c0 valid");
        if (w0 >= 0) begin
          chk(up_c0_q.addr == c0_q[w0].addr && up_c0_q.cached == c0_q[w0].cached, "c0 request forwarded");
          chk(up_c0_q.mdata == {1'(w0), c0_q[w0].mdata[14:0]}, "c0 tag");
          chk(c0_r == (up_c0_r ? (N'(1) << w0) : '0), "c0 ready to winner only");
        end
        if (w1 >= 0) begin
          chk(up_c1_q.data == c1_q[w1].data && up_c1_q.mdata == {1'(w1), c1_q[w1].mdata[14:0]}, "c1 request forwarded");
          chk(c1_r == (up_c1_r ? (N'(1) << w1) : '0), "c1 ready to winner only");
        end
        chk(c0_rv == (up_rsp_v ? (N'(1) << up_rsp.mdata[15]) : '0), "c0 response routed");
        chk(c0_rsp.mdata == {1'b0, up_rsp.mdata[14:0]} && c0_rsp.data == up_rsp.data, "c0 response tag cleared");
        chk(c1_av == (up_ack_v ? (N'(1) << up_ack_m[15]) : '0) && c1_am == {1'b0, up_ack_m[14:0]}, "c1 ack routed");
        if (c0_v == 2'b11 && up_c0_r) begin
          if (last0 >= 0) begin chk(w0 != last0, "alternation when both request"); both0++; end
        end
        acc0 = (w0 >= 0 && up_c0_r) ? w0 : -1;
        acc1 = (w1 >= 0 && up_c1_r) ? w1 : -1;
      end
    end
    chk(both0 > 50, "contention exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
