// msn_table - per-QP message state for multi-packet transfers.
//
// Holds, for every QP, the message sequence number (MSN: count of completed incoming request
// messages, reported back in the AETH of ACKs) and the address at which the next packet of an
// incoming multi-packet RDMA WRITE is placed (a WRITE MIDDLE/LAST packet carries no RETH, so its
// address continues from the previous packet). The RX port reads and writes both fields; a
// second read port gives the MSN to the ACK generator. QP set-up clears the entry.
// Combinational reads, writes on the clock edge.
module msn_table
  import balboa_pkg::*;
#(
  parameter int unsigned NQP = 500,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          setup_we,
  input  logic [QW-1:0] setup_q,
  input  logic [QW-1:0] rx_q,
  output logic [23:0]   rx_msn,
  output logic [63:0]   rx_vaddr,
  input  logic          rx_we,
  input  logic [23:0]   rx_wmsn,
  input  logic [63:0]   rx_wvaddr,
  input  logic [QW-1:0] tx_q,
  output logic [23:0]   tx_msn
);

  logic [23:0] msn_m   [NQP];
  logic [63:0] vaddr_m [NQP];

  assign rx_msn   = msn_m[rx_q];
  assign rx_vaddr = vaddr_m[rx_q];
  assign tx_msn   = msn_m[tx_q];

  always_ff @(posedge clk) begin
    if (setup_we) begin
      msn_m[setup_q]   <= '0;
      vaddr_m[setup_q] <= '0;
    end else if (rx_we) begin
      msn_m[rx_q]   <= rx_wmsn;
      vaddr_m[rx_q] <= rx_wvaddr;
    end
  end

endmodule
