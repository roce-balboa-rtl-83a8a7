// rd_req_table - per-QP target of the outstanding RDMA READ.
//
// When the TX path sends a READ request it records the local buffer address into which the
// responses are to be written. Each accepted READ RESPONSE packet is placed at the stored
// address, which then advances by the packet's payload length. One READ may be outstanding per
// QP at a time. Combinational read, writes on the clock edge; the TX write has priority.
module rd_req_table
  import balboa_pkg::*;
#(
  parameter int unsigned NQP = 500,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          tx_we,
  input  logic [QW-1:0] tx_q,
  input  logic [63:0]   tx_laddr,
  input  logic [QW-1:0] rx_q,
  output logic [63:0]   rx_laddr,
  input  logic          rx_we,
  input  logic [63:0]   rx_wladdr
);

  logic [63:0] laddr_m [NQP];

  assign rx_laddr = laddr_m[rx_q];

  always_ff @(posedge clk) begin
    if (tx_we) laddr_m[tx_q] <= tx_laddr;
    else if (rx_we) laddr_m[rx_q] <= rx_wladdr;
  end

endmodule
