// ibh_rx - "Process IBH" and "Drop Out-Of-Order Packets" stages of the RX pipeline.
//
// Extracts opcode, destination QPN, AckReq bit and PSN from the base transport header (BTH)
// and compares the PSN with the per-QP state table:
//  * Requests (RDMA WRITE, READ request) are accepted when the PSN equals the expected PSN,
//    which then advances (by the number of response packets for a READ request). A duplicate
//    WRITE is dropped and answered with an ACK of the last good PSN; a duplicate READ request is
//    executed again. A PSN ahead of the expected one is dropped and answered once with a
//    sequence-error NAK.
//  * READ RESPONSE packets are accepted only in order (PSN = oldest unacknowledged PSN), which
//    acknowledges that PSN implicitly. ACK/NAK packets are accepted when their PSN lies in the
//    window of outstanding PSNs; they advance the oldest unacknowledged PSN.
// Each acceptance of a response emits an ack event (for flow control, the transport timer and
// retransmission); ACK/NAK generation requests go to the TX path. The 12-byte BTH is stripped;
// the extended headers stay for the next stage. The state is read and written when the first
// beat of a packet is taken; a new packet waits while an earlier event is still undelivered.
module ibh_rx
  import balboa_pkg::*;
#(
  parameter int unsigned NQP  = 500,
  parameter int unsigned PMTU = 4096,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axis_t         in_beat,
  input  roce_meta_t    in_meta,
  input  logic          in_valid,
  output logic          in_ready,
  output axis_t         out_beat,
  output roce_meta_t    out_meta,
  output logic          out_valid,
  input  logic          out_ready,
  // state table RX port
  output logic [QW-1:0] st_q,
  input  logic [23:0]   st_epsn,
  input  logic          st_nak_sent,
  input  logic [23:0]   st_una,
  input  logic [23:0]   st_npsn,
  output logic          st_we_epsn,
  output logic [23:0]   st_wepsn,
  output logic          st_we_nak,
  output logic          st_wnak,
  output logic          st_we_una,
  output logic [23:0]   st_wuna,
  // ACK / NAK requests to the TX path
  output ack_req_t      ack_req,
  output logic          ack_req_valid,
  input  logic          ack_req_ready,
  // acknowledgement events
  output ack_evt_t      ack_evt,
  output logic          ack_evt_valid,
  input  logic          ack_evt_ready,
  output logic          drop_pulse      // one cycle per packet dropped by the PSN check
);

  localparam int unsigned PSHIFT = $clog2(PMTU);

  logic [7:0]  op, syn;
  logic [23:0] qpn, psn, d, w, rd_len24;
  logic [31:0] rd_len;
  logic        ackreq, first, accept, drop, busy, fire;
  logic        req_ack, req_nak, evt;
  logic [23:0] req_psn, du;
  logic        we_epsn_c, we_nak_c, we_una_c;
  ack_evt_t    evt_c;
  roce_meta_t  m;
  logic        s_in_valid, s_in_ready;

  always_comb begin
    op      = in_beat.data[7:0];
    qpn     = be24(in_beat.data[40 +: 24]);
    ackreq  = in_beat.data[71];
    psn     = be24(in_beat.data[72 +: 24]);
    syn     = in_beat.data[96 +: 8];                // AETH syndrome (ACK packets)
    rd_len  = be32(in_beat.data[192 +: 32]);         // RETH DMA length (READ requests)
    rd_len24 = (rd_len == 0) ? 24'd1 : 24'((rd_len + 32'(PMTU) - 1) >> PSHIFT);
    st_q    = qpn[QW-1:0];
    d       = psn - st_epsn;
    w       = st_npsn - st_una;

    accept = 1'b0; req_ack = 1'b0; req_nak = 1'b0; req_psn = psn; evt = 1'b0;
    we_epsn_c = 1'b0; st_wepsn = st_epsn;
    we_nak_c  = 1'b0; st_wnak  = 1'b0;
    we_una_c  = 1'b0; st_wuna  = st_una;
    du        = psn - st_una;
    evt_c = '0;
    evt_c.qpn = 16'(st_q);

    if (qpn >= 24'(NQP)) begin
      accept = 1'b0;
    end else if (is_write(op) || op == OP_READ_REQ) begin
      if (d == 0) begin
        accept     = 1'b1;
        we_epsn_c  = 1'b1;
        st_wepsn   = psn + ((op == OP_READ_REQ) ? rd_len24 : 24'd1);
        we_nak_c   = 1'b1;
        st_wnak    = 1'b0;
        req_ack    = (op == OP_WRITE_LAST || op == OP_WRITE_ONLY || (is_write(op) && ackreq));
      end else if (d[23]) begin                       // duplicate
        accept  = (op == OP_READ_REQ);
        req_ack = is_write(op);
        req_psn = st_epsn - 24'd1;
      end else begin                                  // gap: sequence error
        if (!st_nak_sent) begin
          req_nak   = 1'b1;
          req_psn   = st_epsn;
          we_nak_c  = 1'b1;
          st_wnak   = 1'b1;
        end
      end
    end else if (is_rresp(op)) begin
      if (psn == st_una && w != 0) begin
        accept        = 1'b1;
        we_una_c      = 1'b1;
        st_wuna       = psn + 24'd1;
        evt           = 1'b1;
        evt_c.npkts   = 24'd1;
        evt_c.all_acked = (psn + 24'd1 == st_npsn);
      end
    end else if (op == OP_ACK) begin
      if (syn[7:5] == 3'b011) begin                   // NAK: PSN is the first missing one
        if (du <= w) begin
          accept      = 1'b1;
          we_una_c    = 1'b1;
          st_wuna     = psn;
          evt         = 1'b1;
          evt_c.npkts = du;
          evt_c.nak   = 1'b1;
        end
      end else if (du < w) begin
        accept          = 1'b1;
        we_una_c        = 1'b1;
        st_wuna         = psn + 24'd1;
        evt             = 1'b1;
        evt_c.npkts     = du + 24'd1;
        evt_c.all_acked = (psn + 24'd1 == st_npsn);
      end
    end

    m         = in_meta;
    m.opcode  = op;
    m.qpn     = 16'(st_q);
    m.psn     = psn;
    m.ackreq  = ackreq;
    m.syndrome = syn;
    m.pay_len = in_meta.pay_len - 16'd12;
  end

  // A new packet waits until the events of the previous one are delivered.
  assign busy       = ack_req_valid || ack_evt_valid;
  assign s_in_valid = in_valid && !(first && busy);
  assign in_ready   = s_in_ready && !(first && busy);
  assign fire       = in_valid && in_ready && first;
  assign drop       = !accept;
  assign drop_pulse = fire && drop;

  // State writes only when the first beat is taken.
  assign st_we_epsn = fire && we_epsn_c;
  assign st_we_nak  = fire && we_nak_c;
  assign st_we_una  = fire && we_una_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_req_valid <= 1'b0;
      ack_evt_valid <= 1'b0;
      ack_req       <= '0;
      ack_evt       <= '0;
    end else begin
      if (ack_req_valid && ack_req_ready) ack_req_valid <= 1'b0;
      if (ack_evt_valid && ack_evt_ready) ack_evt_valid <= 1'b0;
      if (fire) begin
        if (req_ack || req_nak) begin
          ack_req_valid <= 1'b1;
          ack_req       <= '{qpn: 16'(st_q), psn: req_psn, nak: req_nak};
        end
        if (evt) begin
          ack_evt_valid <= 1'b1;
          ack_evt       <= evt_c;
        end
      end
    end
  end

  axis_strip #(.META_T(roce_meta_t)) u_strip (
    .clk, .rst_n,
    .in_beat, .in_valid(s_in_valid), .in_ready(s_in_ready),
    .in_hdr(7'd12), .in_len(in_meta.pay_len - 16'd12), .in_drop(drop), .in_meta(m),
    .in_first(first),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
