// tb_conn_manager -- self-checking test of the connection table.
// Sets up every connection with distinct addresses through the staging
// registers and SETUP command, opens and closes some, and checks the open
// mask and both lookup ports against a testbench copy of the table. Also
// checks that SETUP of an open connection closes it and that commands for an
// out-of-range connection are ignored.
module tb_conn_manager;
  import dagger_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  mmio_req_t mmio;
  logic [NC-1:0] open_mask, ref_open;
  logic [3:0] ca, cb;
  conn_entry_t ea, eb, ref_t [NC];

  conn_manager #(.NUM_CONN(NC)) dut (.clk, .rst, .mmio_req(mmio), .open_mask,
    .rd_conn_a(ca), .rd_entry_a(ea), .rd_conn_b(cb), .rd_entry_b(eb));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); mmio = '{wr: 1'b1, rd: 1'b0, addr: a, data: d};
    @(negedge clk); mmio = '0;
  endtask
  task automatic cmd(conn_op_e op, int c);
    wr(REG_CONN_CMD, {46'd0, op, 16'(c)});
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mmio = '0; ca = 0; cb = 0; ref_open = '0;
    repeat (3) @(posedge clk); rst = 0;
    chk(open_mask == 0, "all closed after reset");
    for (int c = 0; c < NC; c++) begin
      ref_t[c].dst_mac = {16'hAA00, 32'($urandom)};
      ref_t[c].dst_ip = $urandom;
      ref_t[c].dst_port = 16'($urandom);
      ref_t[c].remote_conn = 16'($urandom_range(NC - 1, 0));
      wr(REG_CONN_MAC, 64'(ref_t[c].dst_mac));
      wr(REG_CONN_ADDR, {ref_t[c].remote_conn, ref_t[c].dst_port, ref_t[c].dst_ip});
      cmd(CONN_SETUP, c);
    end
    chk(open_mask == 0, "setup does not open");
    for (int r = 0; r < 40; r++) begin
      int c;
      c = $urandom_range(NC - 1, 0);
      if ($urandom_range(1, 0) == 1) begin cmd(CONN_OPEN, c); ref_open[c] = 1; end
      else begin cmd(CONN_CLOSE, c); ref_open[c] = 0; end
      chk(open_mask == ref_open, "open mask");
    end
    cmd(CONN_OPEN, 3); ref_open[3] = 1;
    wr(REG_CONN_MAC, 64'h1234); wr(REG_CONN_ADDR, 64'h0001_0050_0A000001);
    cmd(CONN_SETUP, 3); ref_open[3] = 0;
    ref_t[3] = '{dst_mac: 48'h1234, dst_ip: 32'h0A000001, dst_port: 16'h0050, remote_conn: 16'h0001};
    chk(open_mask == ref_open, "setup closes");
    cmd(CONN_OPEN, 20);
    chk(open_mask == ref_open, "out of range ignored");
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); ca = 4'(c); cb = 4'(NC - 1 - c); #0.1;
      chk(ea == ref_t[c], "lookup port a");
      chk(eb == ref_t[NC - 1 - c], "lookup port b");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
