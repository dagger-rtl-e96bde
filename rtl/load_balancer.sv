// load_balancer -- fair round-robin distribution of incoming RPC requests.
//
// Sits beside the RX FSM (Fig. 4 of the paper). With balancing enabled, every
// incoming request is steered to the next connection, in round-robin order,
// among those enabled in lb_mask and open (one connection per server core, so
// requests are spread evenly across cores). Responses, and all traffic when
// balancing is off, go to the destination connection named in the RPC
// header. An RPC
// whose target is not open is flagged drop.
//
// Timing: target/drop are combinational from the inputs; the round-robin
// pointer advances on the cycle a balanced request is accepted (valid &&
// ready). Round-robin is the paper's; the mask and the header fallback are
// this design's choices.
module load_balancer
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                lb_enable,
  input  logic [NUM_CONN-1:0] lb_mask,
  input  logic [NUM_CONN-1:0] open_mask,
  input  logic                in_valid,
  input  logic                in_ready,     // downstream accepted the RPC this cycle
  input  logic                in_is_resp,
  input  logic [15:0]         in_conn,
  output logic [$clog2(NUM_CONN)-1:0] target,
  output logic                drop,
  output logic                balanced
);
  localparam int CW = $clog2(NUM_CONN);
  logic [CW-1:0]       ptr;
  logic [NUM_CONN-1:0] elig;
  logic                found;
  logic [CW-1:0]       pick;

  always_comb begin
    elig  = lb_mask & open_mask;
    found = 1'b0;
    pick  = '0;
    for (int k = NUM_CONN - 1; k >= 0; k--) begin
      if (elig[((int'(ptr) + k) % NUM_CONN)]) begin
        found = 1'b1;
        pick  = CW'(((int'(ptr) + k) % NUM_CONN));
      end
    end
    balanced = lb_enable && !in_is_resp;
    if (balanced) begin
      target = pick;
      drop   = !found;
    end else begin
      target = in_conn[CW-1:0];
      drop   = (in_conn >= 16'(NUM_CONN)) || !open_mask[in_conn[CW-1:0]];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else if (in_valid && in_ready && balanced && found)
      ptr <= (pick == CW'(NUM_CONN - 1)) ? '0 : pick + 1'b1;
  end
endmodule
