// conn_manager -- connection table of a Dagger NIC.
//
// The connection manager sets up, opens and closes RPC connections. Software
// stages an entry with two MMIO writes (destination MAC; destination IP, UDP
// port and the peer's connection id) and then issues a command on
// REG_CONN_CMD: SETUP copies the staged entry into the table slot, OPEN marks
// it usable, CLOSE removes it. With connection-based buffer provisioning (the
// only scheme the paper's design supports) the connection id also selects the
// connection's TX and RX rings.
//
// Two combinational read ports serve the RPC unit (peer connection id) and the
// transport (destination addresses); open_mask tells the TX FSM which rings to
// poll and the receive side which connections may accept traffic. Commands
// take effect on the clock edge after the MMIO write.
// The staging/command protocol and the table layout are this design's own.
module conn_manager
  import dagger_pkg::*;
#(
  parameter int NUM_CONN = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  mmio_req_t           mmio_req,
  output logic [NUM_CONN-1:0] open_mask,
  input  logic [$clog2(NUM_CONN)-1:0] rd_conn_a,
  output conn_entry_t         rd_entry_a,
  input  logic [$clog2(NUM_CONN)-1:0] rd_conn_b,
  output conn_entry_t         rd_entry_b
);
  localparam int CW = $clog2(NUM_CONN);

  conn_entry_t table_q [NUM_CONN];
  conn_entry_t stage;
  conn_op_e    op;
  logic [15:0] cmd_conn;

  assign op       = conn_op_e'(mmio_req.data[17:16]);
  assign cmd_conn = mmio_req.data[15:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      open_mask <= '0;
      stage     <= '0;
      for (int i = 0; i < NUM_CONN; i++) table_q[i] <= '0;
    end else if (mmio_req.wr) begin
      if (mmio_req.addr == REG_CONN_MAC)
        stage.dst_mac <= mmio_req.data[47:0];
      else if (mmio_req.addr == REG_CONN_ADDR) begin
        stage.dst_ip      <= mmio_req.data[31:0];
        stage.dst_port    <= mmio_req.data[47:32];
        stage.remote_conn <= mmio_req.data[63:48];
      end else if (mmio_req.addr == REG_CONN_CMD && cmd_conn < 16'(NUM_CONN)) begin
        unique case (op)
          CONN_SETUP: begin
            table_q[cmd_conn[CW-1:0]]   <= stage;
            open_mask[cmd_conn[CW-1:0]] <= 1'b0;
          end
          CONN_OPEN:  open_mask[cmd_conn[CW-1:0]] <= 1'b1;
          CONN_CLOSE: open_mask[cmd_conn[CW-1:0]] <= 1'b0;
          default: ;
        endcase
      end
    end
  end

  assign rd_entry_a = table_q[rd_conn_a];
  assign rd_entry_b = table_q[rd_conn_b];

endmodule
