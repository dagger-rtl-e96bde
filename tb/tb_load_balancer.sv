// tb_load_balancer -- self-checking test of round-robin request steering.
// With balancing on, random requests must visit the enabled, open
// connections in strict round-robin order (checked against a reference
// pointer) and spread evenly; responses and all traffic with balancing off go
// to the header's connection; closed or out-of-range targets are dropped.
module tb_load_balancer;
  import dagger_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic lb_en, in_v, in_r, is_resp, drop, bal;
  logic [NC-1:0] mask, open_m;
  logic [15:0] conn;
  logic [3:0] target;
  int hits [NC];

  load_balancer #(.NUM_CONN(NC)) dut (.clk, .rst, .lb_enable(lb_en), .lb_mask(mask), .open_mask(open_m),
    .in_valid(in_v), .in_ready(in_r), .in_is_resp(is_resp), .in_conn(conn), .target, .drop, .balanced(bal));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask
  initial begin
    #40000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int rp;
    lb_en = 1; in_v = 0; in_r = 0; is_resp = 0; conn = 0;
    mask = 16'b0110_1001_0000_1110; open_m = 16'hFFFF;
    foreach (hits[i]) hits[i] = 0;
    rp = 0;
    repeat (3) @(posedge clk); rst = 0;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      if (c == 2000) begin open_m[2] = 0; open_m[14] = 0; end
      in_v = 1'($urandom); in_r = 1'($urandom); is_resp = ($urandom_range(3, 0) == 0);
      conn = 16'($urandom_range(NC + 3, 0));
      #0.1;
      if (is_resp) begin
        chk(!bal && target == conn[3:0] && drop == (conn >= NC || !open_m[conn[3:0]]), "response follows header");
      end else begin
        int exp;
        exp = -1;
        for (int k = NC - 1; k >= 0; k--) if ((mask & open_m) >> ((rp + k) % NC) & 1) exp = (rp + k) % NC;
        chk(bal && !drop && int'(target) == exp, "round-robin target");
        if (in_v && in_r) begin rp = (exp + 1) % NC; if (c >= 2000) hits[exp]++; end
      end
    end
    begin
      int mn, mx;
      mn = 1 << 30; mx = 0;
      for (int i = 0; i < NC; i++) if (mask[i] && open_m[i]) begin
        mn = hits[i] < mn ? hits[i] : mn; mx = hits[i] > mx ? hits[i] : mx;
      end
      chk(mx - mn <= 1 && mn > 50, "even distribution");
      for (int i = 0; i < NC; i++) if (!(mask[i] && open_m[i])) chk(hits[i] == 0, "no traffic to disabled connection");
    end
    @(negedge clk); lb_en = 0; is_resp = 0; conn = 5; #0.1;
    chk(!bal && target == 5 && !drop, "balancing off uses header");
    @(negedge clk); mask = 0; lb_en = 1; #0.1;
    chk(drop, "no eligible connection drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
