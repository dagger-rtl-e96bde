// packet_monitor -- networking statistics of a Dagger NIC.
//
// The paper names a packet monitor that gathers networking statistics and
// exposes them to software. Here it is a bank of MON_NUM saturating 32-bit
// event counters (RPCs sent and received, frames dropped, RX stalls on a full
// ring, polling-mode switches, TX polling reads, responses with no matching
// request, requests with no open target connection). Each input bit is a one-cycle event strobe; several may fire in
// the same cycle. Software reads the counters through the soft register file
// (REG_MON_BASE + index) and clears them all by pulsing clear.
// The counter set and widths are this design's choice.
module packet_monitor
  import dagger_pkg::*;
#(
  parameter int CNT_BITS = 32
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         clear,
  input  logic [MON_NUM-1:0]           event_i,
  output logic [MON_NUM-1:0][CNT_BITS-1:0] cnt
);
  always_ff @(posedge clk) begin
    if (rst || clear) cnt <= '0;
    else
      for (int i = 0; i < MON_NUM; i++)
        if (event_i[i] && cnt[i] != '1) cnt[i] <= cnt[i] + 1'b1;
  end
endmodule
