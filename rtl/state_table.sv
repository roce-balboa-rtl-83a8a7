// state_table - per-QP packet sequence number (PSN) state of the RDMA flows.
//
// For every QP it holds the PSN expected next from the remote node (rx_epsn), whether a
// sequence-error NAK has already been sent for the current gap (nak_sent), the next PSN this
// node sends (tx_npsn) and the oldest PSN it sent that is not yet acknowledged (tx_una). The
// RX port (used by the BTH check) reads all fields and writes rx_epsn, nak_sent and tx_una;
// the TX port (used by the request merger) reads and writes tx_npsn. QP set-up initialises
// an entry and has priority. Reads are combinational (distributed RAM); writes take effect on
// the next clock edge. The default size of 500 QPs follows the stack's default configuration.
module state_table
  import balboa_pkg::*;
#(
  parameter int unsigned NQP = 500,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          setup_we,
  input  qp_setup_t     setup,
  // RX port
  input  logic [QW-1:0] rx_q,
  output logic [23:0]   rx_epsn,
  output logic          rx_nak_sent,
  output logic [23:0]   rx_una,
  output logic [23:0]   rx_npsn,
  input  logic          rx_we_epsn,
  input  logic [23:0]   rx_wepsn,
  input  logic          rx_we_nak,
  input  logic          rx_wnak,
  input  logic          rx_we_una,
  input  logic [23:0]   rx_wuna,
  // TX port
  input  logic [QW-1:0] tx_q,
  output logic [23:0]   tx_npsn,
  output logic [23:0]   tx_una,
  input  logic          tx_we,
  input  logic [23:0]   tx_wnpsn
);

  logic [23:0] epsn_m [NQP];
  logic        nak_m  [NQP];
  logic [23:0] npsn_m [NQP];
  logic [23:0] una_m  [NQP];

  assign rx_epsn     = epsn_m[rx_q];
  assign rx_nak_sent = nak_m[rx_q];
  assign rx_una      = una_m[rx_q];
  assign rx_npsn     = npsn_m[rx_q];
  assign tx_npsn     = npsn_m[tx_q];
  assign tx_una      = una_m[tx_q];

  logic [QW-1:0] sq;
  assign sq = setup.qpn[QW-1:0];

  always_ff @(posedge clk) begin
    if (setup_we) begin
      epsn_m[sq] <= setup.rx_psn;
      nak_m[sq]  <= 1'b0;
      npsn_m[sq] <= setup.tx_psn;
      una_m[sq]  <= setup.tx_psn;
    end else begin
      if (rx_we_epsn) epsn_m[rx_q] <= rx_wepsn;
      if (rx_we_nak)  nak_m[rx_q]  <= rx_wnak;
      if (rx_we_una)  una_m[rx_q]  <= rx_wuna;
      if (tx_we)      npsn_m[tx_q] <= tx_wnpsn;
    end
  end

endmodule
