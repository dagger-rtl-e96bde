// soft_reg_file -- the soft reconfiguration unit of a Dagger NIC.
//
// Software programs the RPC pipeline at run time through MMIO writes to this
// register file ("soft reconfiguration"): the CCI-P polling batch size, the
// number and size of the software ring buffers (here: log2 ring size and the
// base line addresses of the per-connection TX rings, TX completion lines, RX
// rings and RX bookkeeping lines), the request-rate threshold at which TX
// polling switches from the FPGA cache to direct LLC reads, load balancer
// control and the NIC's own MAC/IP/UDP port. MMIO reads return these
// registers, the connection open mask, the polling mode and the packet
// monitor counters; the read response comes one cycle after the request.
//
// Which parameters are soft-configurable follows the paper (batch size,
// number/size of buffers, messaging details); the register map, the reset
// values and the clamping of BATCH to 1..MAX_BATCH are this design's choices.
module soft_reg_file
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  mmio_req_t     mmio_req,
  output logic          mmio_rsp_valid,
  output logic [63:0]   mmio_rsp_data,
  // read-back sources
  input  logic [NUM_CONN-1:0]     open_mask,
  input  logic                    poll_direct,
  input  logic [MON_NUM-1:0][31:0] mon_cnt,
  // configuration outputs
  output logic          nic_enable,
  output logic [2:0]    batch,
  output logic [3:0]    ring_log2,
  output cl_addr_t      tx_ring_base,
  output cl_addr_t      tx_cmpl_base,
  output cl_addr_t      rx_ring_base,
  output cl_addr_t      rx_bk_base,
  output logic [31:0]   poll_thresh,
  output logic          lb_enable,
  output logic [NUM_CONN-1:0] lb_mask,
  output logic [47:0]   local_mac,
  output logic [31:0]   local_ip,
  output logic [15:0]   local_port
);

  always_ff @(posedge clk) begin
    if (rst) begin
      nic_enable   <= 1'b0;
      batch        <= 3'd1;
      ring_log2    <= 4'd4;
      tx_ring_base <= '0;
      tx_cmpl_base <= '0;
      rx_ring_base <= '0;
      rx_bk_base   <= '0;
      poll_thresh  <= 32'hFFFF_FFFF;
      lb_enable    <= 1'b0;
      lb_mask      <= '0;
      local_mac    <= '0;
      local_ip     <= '0;
      local_port   <= '0;
    end else if (mmio_req.wr) begin
      unique case (mmio_req.addr)
        REG_CTRL:         nic_enable   <= mmio_req.data[0];
        REG_BATCH:        batch        <= (mmio_req.data == 0) ? 3'd1 :
                                          (mmio_req.data > 64'(MAX_BATCH)) ? 3'(MAX_BATCH) : mmio_req.data[2:0];
        REG_RING_LOG2:    ring_log2    <= (32'(mmio_req.data[3:0]) > MAX_RING_LOG2) ? 4'(MAX_RING_LOG2) : mmio_req.data[3:0];
        REG_TX_RING_BASE: tx_ring_base <= mmio_req.data[ADDR_W-1:0];
        REG_TX_CMPL_BASE: tx_cmpl_base <= mmio_req.data[ADDR_W-1:0];
        REG_RX_RING_BASE: rx_ring_base <= mmio_req.data[ADDR_W-1:0];
        REG_RX_BK_BASE:   rx_bk_base   <= mmio_req.data[ADDR_W-1:0];
        REG_POLL_THRESH:  poll_thresh  <= mmio_req.data[31:0];
        REG_LB_CTRL: begin
          lb_enable <= mmio_req.data[0];
          lb_mask   <= mmio_req.data[16 +: NUM_CONN];
        end
        REG_LOCAL_MAC:    local_mac    <= mmio_req.data[47:0];
        REG_LOCAL_IP:     local_ip     <= mmio_req.data[31:0];
        REG_LOCAL_PORT:   local_port   <= mmio_req.data[15:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mmio_rsp_valid <= 1'b0;
      mmio_rsp_data  <= '0;
    end else begin
      mmio_rsp_valid <= mmio_req.rd;
      if (mmio_req.rd) begin
        mmio_rsp_data <= '0;
        if (mmio_req.addr >= REG_MON_BASE && mmio_req.addr < REG_MON_BASE + 12'(MON_NUM))
          mmio_rsp_data <= 64'(mon_cnt[mmio_req.addr - REG_MON_BASE]);
        else
          unique case (mmio_req.addr)
            REG_CTRL:         mmio_rsp_data <= 64'(nic_enable);
            REG_BATCH:        mmio_rsp_data <= 64'(batch);
            REG_RING_LOG2:    mmio_rsp_data <= 64'(ring_log2);
            REG_TX_RING_BASE: mmio_rsp_data <= 64'(tx_ring_base);
            REG_TX_CMPL_BASE: mmio_rsp_data <= 64'(tx_cmpl_base);
            REG_RX_RING_BASE: mmio_rsp_data <= 64'(rx_ring_base);
            REG_RX_BK_BASE:   mmio_rsp_data <= 64'(rx_bk_base);
            REG_POLL_THRESH:  mmio_rsp_data <= 64'(poll_thresh);
            REG_LB_CTRL:      mmio_rsp_data <= 64'({lb_mask, 15'd0, lb_enable});
            REG_LOCAL_MAC:    mmio_rsp_data <= 64'(local_mac);
            REG_LOCAL_IP:     mmio_rsp_data <= 64'(local_ip);
            REG_LOCAL_PORT:   mmio_rsp_data <= 64'(local_port);
            REG_CONN_STATUS:  mmio_rsp_data <= 64'(open_mask);
            REG_POLL_MODE:    mmio_rsp_data <= 64'(poll_direct);
            default:          mmio_rsp_data <= '0;
          endcase
      end
    end
  end

  a_no_rw: assert property (@(posedge clk) disable iff (rst) !(mmio_req.wr && mmio_req.rd));

endmodule
