// tb_soft_reg_file -- self-checking test of the soft reconfiguration registers.
// Writes every register over MMIO, checks the configuration outputs and the
// read-back (one cycle after the read request), the clamping of the batch
// size and ring size, and read-back of the open mask, polling mode and
// monitor counters.
module tb_soft_reg_file;
  import dagger_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  mmio_req_t mmio;
  logic rsp_v;
  logic [63:0] rsp_d;
  logic [NC-1:0] open_mask;
  logic poll_direct;
  logic [MON_NUM-1:0][31:0] mon;
  logic nic_enable, lb_enable;
  logic [2:0] batch;
  logic [3:0] ring_log2;
  cl_addr_t trb, tcb, rrb, rbb;
  logic [31:0] thr, lip;
  logic [NC-1:0] lb_mask;
  logic [47:0] lmac;
  logic [15:0] lport;

  soft_reg_file #(.NUM_CONN(NC)) dut (.clk, .rst, .mmio_req(mmio), .mmio_rsp_valid(rsp_v), .mmio_rsp_data(rsp_d),
    .open_mask, .poll_direct, .mon_cnt(mon), .nic_enable, .batch, .ring_log2, .tx_ring_base(trb), .tx_cmpl_base(tcb),
    .rx_ring_base(rrb), .rx_bk_base(rbb), .poll_thresh(thr), .lb_enable, .lb_mask, .local_mac(lmac), .local_ip(lip), .local_port(lport));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b1, rd: 1'b0, addr: a, data: d};
    @(negedge clk); mmio = '0;
  endtask
  task automatic rd(logic [11:0] a, output logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b0, rd: 1'b1, addr: a, data: '0};
    @(negedge clk); mmio = '0;
    chk(rsp_v == 1'b1, "read response one cycle later");
    d = rsp_d;
    @(negedge clk);
    chk(rsp_v == 1'b0, "single response");
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] d;
    mmio = '0; open_mask = 16'hA5C3; poll_direct = 1; 
    for (int i = 0; i < MON_NUM; i++) mon[i] = 32'h1000 + i * 7;
    repeat (3) @(posedge clk); rst = 0;
    chk(batch == 1 && nic_enable == 0 && thr == 32'hFFFF_FFFF, "reset values");
    wr(REG_CTRL, 1);                 chk(nic_enable == 1, "enable");
    wr(REG_BATCH, 3);                chk(batch == 3, "batch 3");
    wr(REG_BATCH, 9);                chk(batch == 4, "batch clamped to 4");
    wr(REG_BATCH, 0);                chk(batch == 1, "batch 0 -> 1");
    wr(REG_BATCH, 2);
    wr(REG_RING_LOG2, 6);            chk(ring_log2 == 6, "ring log2");
    wr(REG_RING_LOG2, 15);           chk(ring_log2 == 10, "ring log2 clamped");
    wr(REG_TX_RING_BASE, 64'h1000);  chk(trb == 42'h1000, "tx ring base");
    wr(REG_TX_CMPL_BASE, 64'h2000);  chk(tcb == 42'h2000, "tx cmpl base");
    wr(REG_RX_RING_BASE, 64'h3000);  chk(rrb == 42'h3000, "rx ring base");
    wr(REG_RX_BK_BASE, 64'h4000);    chk(rbb == 42'h4000, "rx bk base");
    wr(REG_POLL_THRESH, 77);         chk(thr == 77, "threshold");
    wr(REG_LB_CTRL, 64'h00F0_0001);  chk(lb_enable && lb_mask == 16'h00F0, "lb control");
    wr(REG_LOCAL_MAC, 64'h0A0B0C0D0E0F); chk(lmac == 48'h0A0B0C0D0E0F, "mac");
    wr(REG_LOCAL_IP, 64'hC0A80001);  chk(lip == 32'hC0A80001, "ip");
    wr(REG_LOCAL_PORT, 64'd9000);    chk(lport == 16'd9000, "port");
    rd(REG_BATCH, d);        chk(d == 2, "read batch");
    rd(REG_RING_LOG2, d);    chk(d == 10, "read ring");
    rd(REG_TX_RING_BASE, d); chk(d == 64'h1000, "read tx base");
    rd(REG_RX_BK_BASE, d);   chk(d == 64'h4000, "read bk base");
    rd(REG_POLL_THRESH, d);  chk(d == 77, "read thresh");
    rd(REG_LB_CTRL, d);      chk(d == 64'h00F0_0001, "read lb");
    rd(REG_LOCAL_IP, d);     chk(d == 64'hC0A80001, "read ip");
    rd(REG_CONN_STATUS, d);  chk(d == 64'hA5C3, "read open mask");
    rd(REG_POLL_MODE, d);    chk(d == 1, "read poll mode");
    for (int i = 0; i < MON_NUM; i++) begin
      rd(REG_MON_BASE + 12'(i), d); chk(d == 64'(32'h1000 + i * 7), "read monitor");
    end
    rd(12'h7FF, d);          chk(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
