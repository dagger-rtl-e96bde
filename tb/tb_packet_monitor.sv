// tb_packet_monitor -- self-checking test of the statistics counters.
// Drives random event strobes for 3000 cycles, keeps its own counts and
// compares every counter each cycle; then checks clear and saturation (with a
// 4-bit counter instance).
module tb_packet_monitor;
  import dagger_pkg::*;
  logic clk = 0, rst = 1, clear = 0, clear4 = 0;
  always #1 clk = ~clk;
  logic [MON_NUM-1:0] ev;
  logic [MON_NUM-1:0][31:0] cnt;
  logic [MON_NUM-1:0][3:0]  cnt4;
  int unsigned ref_c [MON_NUM];

  packet_monitor dut (.clk, .rst, .clear, .event_i(ev), .cnt);
  packet_monitor #(.CNT_BITS(4)) dut4 (.clk, .rst, .clear(clear4), .event_i(ev), .cnt(cnt4));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ev = '0;
    foreach (ref_c[i]) ref_c[i] = 0;
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    for (int c = 0; c < 3000; c++) begin
      ev = MON_NUM'($urandom);
      @(negedge clk);
      for (int i = 0; i < MON_NUM; i++) begin
        if (ev[i]) ref_c[i]++;
        chk(cnt[i] == ref_c[i], "counter value");
        chk(cnt4[i] == 4'(ref_c[i] > 15 ? 15 : ref_c[i]), "4-bit counter saturates");
      end
    end
    ev = '0; clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < MON_NUM; i++) chk(cnt[i] == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
