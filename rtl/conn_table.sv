// conn_table - per-QP connection information written at QP set-up.
//
// Stores for every local QP the remote node's IPv4 address, the remote QP number and the UDP
// port used for the flow. The TX header generators read it to address outgoing packets.
// Combinational read, write on the clock edge.
module conn_table
  import balboa_pkg::*;
#(
  parameter int unsigned NQP = 500,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          setup_we,
  input  qp_setup_t     setup,
  input  logic [QW-1:0] rd_q,
  output logic [31:0]   rd_ip,
  output logic [23:0]   rd_rqpn,
  output logic [15:0]   rd_port
);

  logic [31:0] ip_m   [NQP];
  logic [23:0] rqpn_m [NQP];
  logic [15:0] port_m [NQP];

  assign rd_ip   = ip_m[rd_q];
  assign rd_rqpn = rqpn_m[rd_q];
  assign rd_port = port_m[rd_q];

  always_ff @(posedge clk) begin
    if (setup_we) begin
      ip_m[setup.qpn[QW-1:0]]   <= setup.rip;
      rqpn_m[setup.qpn[QW-1:0]] <= setup.rqpn;
      port_m[setup.qpn[QW-1:0]] <= setup.rport;
    end
  end

endmodule
