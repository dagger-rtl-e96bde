// tx_fsm -- host-to-NIC (TX) path of the Dagger CPU-NIC interface, UPI mode.
//
// Software writes each new RPC into a free entry of its connection's TX ring,
// a buffer in host memory shared with the NIC (Fig. 4, step 2). CCI-P only
// allows the NIC to read such buffers by polling, so this FSM polls the rings
// of all open connections in turn and recognises a new request by the dirty
// flag of the entry (step 3). It then releases the fetched entries by writing
// its consumed-request count to the connection's TX completion line, from
// which software learns which entries are free again (step 4, bookkeeping).
//
// How it works
//   * NUM_ENG poll engines work side by side; engine e owns the connections
//     c with c mod NUM_ENG == e, so polls of different connections overlap
//     their memory round trips while each connection is still served by one
//     engine, in order. This parallelism is this design's choice; without it
//     throughput would not grow with the number of connections.
//   * Each engine takes its own open connections round-robin and issues B
//     line reads, B = the soft-configured batch size (1..MAX_BATCH), for the
//     entries at head .. head+B-1. Responses may come back in any order; they
//     are parked by the mdata tag {engine, slot}. Once all B are back, the
//     entries are handed on in ring order up to the first one that is not
//     new; head advances by that many and, if any were taken, one
//     bookkeeping write follows. B is sampled when a poll starts, so
//     software may change it at any time.
//   * The engines share the read channel, the write channel and the output
//     stream through round-robin grants; a grant stays with its engine while
//     its request waits, so each channel holds valid and data until accepted.
//   * An entry is new when its dirty flag differs from the lap bit of the
//     entry's position in the free-running head counter (bit ring_log2), so
//     neither side ever has to clear the flag.
//   * Polling policy: while the request rate is low the reads are issued with
//     cached=1, i.e. they hit the NIC's local cache, which is kept coherent
//     with the CPU's LLC and refreshed by invalidations. The FSM counts new
//     requests over a window of WINDOW cycles; when a window's count reaches
//     the programmable threshold it switches to direct polling of the LLC
//     (cached=0) and back again when a window falls below it.
//
// Interface: c0 (reads), c1 (bookkeeping writes) with valid/ready; out_* is a
// valid/ready stream of RPC objects with the TX connection id. The batch
// polling, dirty-bit detection, threshold switch of the caching policy and the
// bookkeeping are the paper's; window length, ring addressing
// (base + (conn << ring_log2) + index) and the completion-line format (the
// consumed count in bits [15:0]) are this design's choices.
module tx_fsm
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16,
  parameter int WINDOW   = 1024,
  parameter int NUM_ENG  = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                enable,
  input  logic [2:0]          batch,
  input  logic [3:0]          ring_log2,
  input  cl_addr_t            tx_ring_base,
  input  cl_addr_t            tx_cmpl_base,
  input  logic [31:0]         poll_thresh,
  input  logic [NUM_CONN-1:0] open_mask,
  // CCI-P read channel
  output logic                c0_req_valid,
  output c0_req_t             c0_req,
  input  logic                c0_req_ready,
  input  logic                c0_rsp_valid,
  input  c0_rsp_t             c0_rsp,
  // CCI-P write channel (bookkeeping)
  output logic                c1_req_valid,
  output c1_req_t             c1_req,
  input  logic                c1_req_ready,
  // fetched RPC objects
  output logic                out_valid,
  output rpc_obj_t            out_obj,
  output logic [$clog2(NUM_CONN)-1:0] out_conn,
  input  logic                out_ready,
  // status
  output logic                poll_direct,
  output logic                ev_mode_switch,
  output logic                ev_poll
);
  localparam int CW = $clog2(NUM_CONN);
  localparam int KW = $clog2(MAX_BATCH);
  localparam int EW = (NUM_ENG > 1) ? $clog2(NUM_ENG) : 1;

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_DRAIN, S_BOOK} state_e;
  state_e state [NUM_ENG];

  logic [CNT_W-1:0] head [NUM_CONN];
  logic [CW-1:0]    conn [NUM_ENG];
  logic [CW-1:0]    last_conn [NUM_ENG];
  logic [KW:0]      issued [NUM_ENG];
  logic [KW:0]      got [NUM_ENG];
  logic [KW:0]      taken [NUM_ENG];
  logic [2:0]       bq [NUM_ENG];  // batch size latched for the poll in progress
  rpc_obj_t         buf_q [NUM_ENG][MAX_BATCH];
  logic [MAX_BATCH-1:0] buf_fresh [NUM_ENG];

  // polling-rate monitor
  logic [$clog2(WINDOW)-1:0] win_cnt;
  logic [31:0]               req_cnt;

  logic [CNT_W-1:0]    ring_mask;
  logic [NUM_ENG-1:0]  any_open, want_c0, want_c1, want_out;
  logic [CW-1:0]       next_conn [NUM_ENG];

  // engine grants for the shared read, write and output channels; a grant is
  // held while its request waits, so each channel keeps valid/data stable
  logic [EW-1:0] c0_sel, c1_sel, out_sel;
  logic [EW-1:0] c0_hold_e, c1_hold_e, out_hold_e;
  logic          c0_hold, c1_hold, out_hold;
  logic [EW-1:0] c0_rr, c1_rr, out_rr;

  logic [KW:0]   out_pos;        // position of out_obj in its poll batch

  // response routing
  logic [EW-1:0]    rsp_e;
  logic [KW-1:0]    rsp_k;
  logic [CNT_W-1:0] cnt_k, cnt_r;

  assign ring_mask = (CNT_W'(1) << ring_log2) - 1'b1;

  // per engine: any open connection of its own, and the next one after
  // last_conn (engine e owns connections c with c mod NUM_ENG == e)
  always_comb begin
    for (int e = 0; e < NUM_ENG; e++) begin
      any_open[e]  = 1'b0;
      next_conn[e] = last_conn[e];
      for (int k = NUM_CONN; k >= 1; k--) begin
        if (open_mask[((int'(last_conn[e]) + k) % NUM_CONN)]
            && (((int'(last_conn[e]) + k) % NUM_CONN) % NUM_ENG) == e) begin
          next_conn[e] = CW'(((int'(last_conn[e]) + k) % NUM_CONN));
          any_open[e]  = 1'b1;
        end
      end
      want_c0[e]  = (state[e] == S_ISSUE);
      want_c1[e]  = (state[e] == S_BOOK);
      want_out[e] = (state[e] == S_DRAIN) && (taken[e] < bq[e])
                    && buf_fresh[e][taken[e][KW-1:0]];
    end
  end

  // round-robin pick per channel, unless a waiting request holds the grant
  always_comb begin
    c0_sel = c0_hold ? c0_hold_e : c0_rr;
    if (!c0_hold)
      for (int k = NUM_ENG; k >= 1; k--)
        if (want_c0[(int'(c0_rr) + k) % NUM_ENG]) c0_sel = EW'((int'(c0_rr) + k) % NUM_ENG);
  end
  always_comb begin
    c1_sel = c1_hold ? c1_hold_e : c1_rr;
    if (!c1_hold)
      for (int k = NUM_ENG; k >= 1; k--)
        if (want_c1[(int'(c1_rr) + k) % NUM_ENG]) c1_sel = EW'((int'(c1_rr) + k) % NUM_ENG);
  end
  always_comb begin
    out_sel = out_hold ? out_hold_e : out_rr;
    if (!out_hold)
      for (int k = NUM_ENG; k >= 1; k--)
        if (want_out[(int'(out_rr) + k) % NUM_ENG]) out_sel = EW'((int'(out_rr) + k) % NUM_ENG);
  end

  // read request for entry head+issued of the granted engine's connection
  assign cnt_k = head[conn[c0_sel]] + CNT_W'(issued[c0_sel]);
  always_comb begin
    c0_req_valid  = want_c0[c0_sel];
    c0_req.addr   = tx_ring_base + (cl_addr_t'(conn[c0_sel]) << ring_log2)
                    + cl_addr_t'(CNT_W'(cnt_k & ring_mask));
    c0_req.cached = !poll_direct;
    c0_req.mdata  = mdata_t'({c0_sel, issued[c0_sel][KW-1:0]});
  end

  // freshness of a returned entry: dirty flag differs from its lap bit
  assign rsp_k = c0_rsp.mdata[KW-1:0];
  assign rsp_e = c0_rsp.mdata[KW +: EW];
  assign cnt_r = head[conn[rsp_e]] + CNT_W'(rsp_k);

  // drain each engine in ring order; the output grant picks the engine
  assign out_valid = want_out[out_sel];
  assign out_obj   = buf_q[out_sel][taken[out_sel][KW-1:0]];
  assign out_conn  = conn[out_sel];
  assign out_pos   = taken[out_sel];

  // bookkeeping write: consumed count of the connection
  always_comb begin
    c1_req_valid = want_c1[c1_sel];
    c1_req.addr  = tx_cmpl_base + cl_addr_t'(conn[c1_sel]);
    c1_req.data  = cl_data_t'(head[conn[c1_sel]]);
    c1_req.mdata = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      c0_hold <= 1'b0; c1_hold <= 1'b0; out_hold <= 1'b0;
      c0_hold_e <= '0; c1_hold_e <= '0; out_hold_e <= '0;
      c0_rr <= '0; c1_rr <= '0; out_rr <= '0;
    end else begin
      c0_hold   <= c0_req_valid && !c0_req_ready;
      c0_hold_e <= c0_sel;
      c1_hold   <= c1_req_valid && !c1_req_ready;
      c1_hold_e <= c1_sel;
      out_hold   <= out_valid && !out_ready;
      out_hold_e <= out_sel;
      if (c0_req_valid && c0_req_ready) c0_rr <= c0_sel;
      if (c1_req_valid && c1_req_ready) c1_rr <= c1_sel;
      if (out_valid && out_ready) out_rr <= out_sel;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int e = 0; e < NUM_ENG; e++) begin
        state[e]     <= S_IDLE;
        conn[e]      <= CW'(e % NUM_CONN);
        last_conn[e] <= CW'(NUM_CONN - 1);
        issued[e]    <= '0;
        got[e]       <= '0;
        taken[e]     <= '0;
        bq[e]        <= 3'd1;
        buf_fresh[e] <= '0;
        for (int i = 0; i < MAX_BATCH; i++) buf_q[e][i] <= '0;
      end
      for (int i = 0; i < NUM_CONN; i++) head[i] <= '0;
    end else begin
      if (c0_rsp_valid) begin
        buf_q[rsp_e][rsp_k]     <= rpc_obj_t'(c0_rsp.data);
        buf_fresh[rsp_e][rsp_k] <= (c0_rsp.data[0] != cnt_r[ring_log2]);
        got[rsp_e]              <= got[rsp_e] + 1'b1;
      end
      for (int e = 0; e < NUM_ENG; e++) begin
        unique case (state[e])
          S_IDLE: if (enable && any_open[e]) begin
            conn[e]      <= next_conn[e];
            last_conn[e] <= next_conn[e];
            bq[e]        <= batch;
            issued[e]    <= '0;
            got[e]       <= '0;
            taken[e]     <= '0;
            buf_fresh[e] <= '0;
            state[e]     <= S_ISSUE;
          end
          S_ISSUE: if (c0_req_ready && c0_sel == EW'(e)) begin
            issued[e] <= issued[e] + 1'b1;
            if (issued[e] + 1'b1 == bq[e]) state[e] <= S_WAIT;
          end
          S_WAIT: if (got[e] == bq[e]) state[e] <= S_DRAIN;
          S_DRAIN: begin
            if (out_valid && out_ready && out_sel == EW'(e)) taken[e] <= taken[e] + 1'b1;
            else if (!want_out[e]) begin
              head[conn[e]] <= head[conn[e]] + CNT_W'(taken[e]);
              state[e]      <= (taken[e] != 0) ? S_BOOK : S_IDLE;
            end
          end
          S_BOOK: if (c1_req_ready && c1_sel == EW'(e)) state[e] <= S_IDLE;
          default: state[e] <= S_IDLE;
        endcase
      end
    end
  end

  // request-rate monitor and caching-policy switch
  always_ff @(posedge clk) begin
    if (rst) begin
      win_cnt        <= '0;
      req_cnt        <= '0;
      poll_direct    <= 1'b0;
      ev_mode_switch <= 1'b0;
    end else begin
      ev_mode_switch <= 1'b0;
      win_cnt <= win_cnt + 1'b1;
      if (win_cnt == $clog2(WINDOW)'(WINDOW - 1)) begin
        win_cnt <= '0;
        req_cnt <= '0;
        if ((req_cnt >= poll_thresh) != poll_direct) begin
          poll_direct    <= (req_cnt >= poll_thresh);
          ev_mode_switch <= 1'b1;
        end
      end else if (out_valid && out_ready) begin
        req_cnt <= req_cnt + 1'b1;
      end
    end
  end

  assign ev_poll = c0_req_valid && c0_req_ready;

  a_out_hold: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out_obj));

endmodule
