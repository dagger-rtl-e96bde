// ccip_mux -- fair round-robin sharing of one CCI-P port by N clients.
//
// The paper places two identical Dagger NICs on one FPGA and gives them fair
// round-robin access to the CCI-P bus; inside each NIC the TX and RX state
// machines share the NIC's port the same way. This module does both jobs.
//
// Read (c0) and write (c1) requests are arbitrated independently. Each channel
// has a round-robin pointer: the first requesting client at or after the
// pointer wins, and the pointer moves past the winner when the request is
// accepted (valid && ready upstream). The winner's index is written into
// mdata[TAG_LSB +: SEL_W]; clients must leave those bits zero. Read responses
// and write acknowledges are steered back by those bits, which are cleared on
// the way back, so a client sees exactly the mdata it sent.
//
// Timing: combinational in both directions (no added latency); a client's
// ready depends on the upstream ready. The round-robin rule is the paper's;
// the tag-in-mdata routing is this design's choice.
module ccip_mux
  import dagger_pkg::*;
#(
  parameter int N       = 2,
  parameter int TAG_LSB = 15
) (
  input  logic            clk,
  input  logic            rst,
  // client side
  input  logic [N-1:0]    c0_req_valid,
  input  c0_req_t [N-1:0] c0_req,
  output logic [N-1:0]    c0_req_ready,
  output logic [N-1:0]    c0_rsp_valid,
  output c0_rsp_t         c0_rsp,
  input  logic [N-1:0]    c1_req_valid,
  input  c1_req_t [N-1:0] c1_req,
  output logic [N-1:0]    c1_req_ready,
  output logic [N-1:0]    c1_ack_valid,
  output mdata_t          c1_ack_mdata,
  // shared (upstream) side
  output logic            up_c0_req_valid,
  output c0_req_t         up_c0_req,
  input  logic            up_c0_req_ready,
  input  logic            up_c0_rsp_valid,
  input  c0_rsp_t         up_c0_rsp,
  output logic            up_c1_req_valid,
  output c1_req_t         up_c1_req,
  input  logic            up_c1_req_ready,
  input  logic            up_c1_ack_valid,
  input  mdata_t          up_c1_ack_mdata
);
  localparam int SEL_W = (N > 1) ? $clog2(N) : 1;

  logic [SEL_W-1:0] ptr0, ptr1, win0, win1;
  logic             any0, any1;

  // round-robin pick: first valid index at or after ptr
  function automatic logic [SEL_W:0] rr_pick(logic [N-1:0] v, logic [SEL_W-1:0] p);
    logic [SEL_W:0] r;
    r = '0;
    for (int k = N - 1; k >= 0; k--) begin
      if (v[((int'(p) + k) % N)]) r = {1'b1, SEL_W'(((int'(p) + k) % N))};
    end
    return r;
  endfunction

  always_comb begin
    {any0, win0} = rr_pick(c0_req_valid, ptr0);
    {any1, win1} = rr_pick(c1_req_valid, ptr1);

    up_c0_req_valid = any0;
    up_c0_req       = c0_req[win0];
    up_c0_req.mdata[TAG_LSB +: SEL_W] = win0;
    up_c1_req_valid = any1;
    up_c1_req       = c1_req[win1];
    up_c1_req.mdata[TAG_LSB +: SEL_W] = win1;
  end

  // grants kept in their own block so that ready never feeds back into valid
  always_comb begin
    c0_req_ready = '0;
    c1_req_ready = '0;
    c0_req_ready[win0] = any0 && up_c0_req_ready;
    c1_req_ready[win1] = any1 && up_c1_req_ready;
  end

  always_comb begin
    c0_rsp = up_c0_rsp;
    c0_rsp.mdata[TAG_LSB +: SEL_W] = '0;
    c1_ack_mdata = up_c1_ack_mdata;
    c1_ack_mdata[TAG_LSB +: SEL_W] = '0;
    c0_rsp_valid = '0;
    c1_ack_valid = '0;
    for (int i = 0; i < N; i++) begin
      c0_rsp_valid[i] = up_c0_rsp_valid && (up_c0_rsp.mdata[TAG_LSB +: SEL_W] == SEL_W'(i));
      c1_ack_valid[i] = up_c1_ack_valid && (up_c1_ack_mdata[TAG_LSB +: SEL_W] == SEL_W'(i));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr0 <= '0;
      ptr1 <= '0;
    end else begin
      if (any0 && up_c0_req_ready) ptr0 <= (win0 == SEL_W'(N - 1)) ? '0 : win0 + 1'b1;
      if (any1 && up_c1_req_ready) ptr1 <= (win1 == SEL_W'(N - 1)) ? '0 : win1 + 1'b1;
    end
  end

  // a client's request must stay put until it is accepted
  for (genvar i = 0; i < N; i++) begin : g_chk
    a_c0_hold: assert property (@(posedge clk) disable iff (rst)
      c0_req_valid[i] && !c0_req_ready[i] |=> c0_req_valid[i]);
    a_c1_hold: assert property (@(posedge clk) disable iff (rst)
      c1_req_valid[i] && !c1_req_ready[i] |=> c1_req_valid[i]);
  end

endmodule
