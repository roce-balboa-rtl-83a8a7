// roce_stack - the RoCE v2 packet processing pipeline with its per-QP tables.
//
// RX path (network -> host): ipv4_rx -> udp_rx -> payload_dropper -> ibh_rx -> exh_rx. Each
// stage checks and strips its header, puts what it learned into the packet's metadata and hands
// the realigned rest on. ibh_rx decides with the state table whether a packet is in sequence;
// exh_rx turns the extended headers into memory-write commands, READ RESPONSE requests and
// completions.
// TX path (host -> network): req_merger -> [retransmission mux, outside] -> exh_tx -> ibh_tx ->
// udp_tx -> ipv4_tx -> [ICRC, outside]. The request merger merges host commands, ACKs, READ
// RESPONSEs and retransmissions and assigns PSNs; the generators put the headers in front.
// Shared tables: connection table, state table, MSN table, read request table and transport
// timer, all sized for NQP queue pairs. ACK events from ibh_rx restart or stop the transport
// timer and, for a NAK, request a retransmission (a NAK takes precedence over a timeout).
module roce_stack
  import balboa_pkg::*;
#(
  parameter int unsigned NQP     = 500,
  parameter int unsigned PMTU    = 4096,
  parameter int unsigned BUF_AW  = 12,
  parameter int unsigned CREDITS = 1024,
  parameter int unsigned TIMEOUT = 65536,
  localparam int unsigned QW = $clog2(NQP),
  localparam int unsigned CW = $clog2(CREDITS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       local_ip,
  input  qp_setup_t         setup,
  input  logic              setup_valid,
  // network RX (IP packets, ICRC not checked)
  input  axis_t             rx_beat,
  input  logic              rx_valid,
  output logic              rx_ready,
  // payload and commands towards host memory
  output axis_t             mem_beat,
  output logic              mem_valid,
  input  logic              mem_ready,
  output mem_cmd_t          mem_cmd,
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output cpl_t              cpl,
  output logic              cpl_valid,
  input  logic              cpl_ready,
  input  logic              credit_ret,
  // host commands (after flow control)
  input  rdma_cmd_t         cmd,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  output host_rd_t          host_rd,
  output logic              host_rd_valid,
  input  logic              host_rd_ready,
  // packet descriptors to the retransmission mux and its payload stream back
  output pay_src_e          f_src,
  output logic [BUF_AW-1:0] f_addr,
  output logic [15:0]       f_bytes,
  output roce_meta_t        f_meta,
  output logic              f_valid,
  input  logic              f_ready,
  input  axis_t             pay_beat,
  input  roce_meta_t        pay_meta,
  input  logic              pay_valid,
  output logic              pay_ready,
  // network TX (IP packets without ICRC)
  output axis_t             tx_beat,
  output logic              tx_valid,
  input  logic              tx_ready,
  // acknowledgement events for flow control
  output ack_evt_t          ack_evt,
  output logic              ack_evt_fire,
  // event pulses
  output logic              ev_psn_drop,
  output logic              ev_credit_drop,
  output logic              ev_hdr_drop,
  output logic              ev_timeout,
  output logic              ev_nak_rx,
  output logic              ev_retx,
  output logic [CW-1:0]     credits
);

  // ---------------- RX ----------------
  axis_t      b1, b2, b3, b4;
  roce_meta_t m1, m2, m3, m4, m5;
  logic       v1, v2, v3, v4, r1, r2, r3, r4;
  logic       ipd, udpd;

  ipv4_rx u_ipv4_rx (.clk, .rst_n, .local_ip,
    .in_beat(rx_beat), .in_valid(rx_valid), .in_ready(rx_ready),
    .out_beat(b1), .out_meta(m1), .out_valid(v1), .out_ready(r1), .drop_pulse(ipd));

  udp_rx u_udp_rx (.clk, .rst_n,
    .in_beat(b1), .in_meta(m1), .in_valid(v1), .in_ready(r1),
    .out_beat(b2), .out_meta(m2), .out_valid(v2), .out_ready(r2), .drop_pulse(udpd));

  assign ev_hdr_drop = ipd || udpd;

  payload_dropper #(.CREDITS(CREDITS)) u_dropper (.clk, .rst_n,
    .in_beat(b2), .in_meta(m2), .in_valid(v2), .in_ready(r2),
    .out_beat(b3), .out_meta(m3), .out_valid(v3), .out_ready(r3),
    .credit_ret, .refund(ev_psn_drop), .refund_beats(pay_beats(b3.data[7:0], m3.pay_len)),
    .credits, .drop_pulse(ev_credit_drop));

  // state table
  logic [QW-1:0] st_q, tq;
  logic [23:0]   st_epsn, st_una, st_npsn, st_wepsn, st_wuna, tx_npsn, tx_una, tx_wnpsn;
  logic          st_nak_sent, st_we_epsn, st_we_nak, st_wnak, st_we_una, tx_we;

  state_table #(.NQP(NQP)) u_state (.clk, .setup_we(setup_valid), .setup,
    .rx_q(st_q), .rx_epsn(st_epsn), .rx_nak_sent(st_nak_sent), .rx_una(st_una), .rx_npsn(st_npsn),
    .rx_we_epsn(st_we_epsn), .rx_wepsn(st_wepsn), .rx_we_nak(st_we_nak), .rx_wnak(st_wnak),
    .rx_we_una(st_we_una), .rx_wuna(st_wuna),
    .tx_q(tq), .tx_npsn, .tx_una, .tx_we, .tx_wnpsn);

  ack_req_t ack_req;
  logic     ack_req_valid, ack_req_ready;
  logic     ack_evt_valid, ack_evt_ready;

  ibh_rx #(.NQP(NQP), .PMTU(PMTU)) u_ibh_rx (.clk, .rst_n,
    .in_beat(b3), .in_meta(m3), .in_valid(v3), .in_ready(r3),
    .out_beat(b4), .out_meta(m4), .out_valid(v4), .out_ready(r4),
    .st_q, .st_epsn, .st_nak_sent, .st_una, .st_npsn,
    .st_we_epsn, .st_wepsn, .st_we_nak, .st_wnak, .st_we_una, .st_wuna,
    .ack_req, .ack_req_valid, .ack_req_ready,
    .ack_evt, .ack_evt_valid, .ack_evt_ready, .drop_pulse(ev_psn_drop));

  // MSN table and read request table
  logic [QW-1:0] msn_q;
  logic [23:0]   msn_msn, msn_wmsn, tx_msn;
  logic [63:0]   msn_vaddr, msn_wvaddr, rrt_laddr, rrt_wladdr, rrt_tladdr;
  logic          msn_we, rrt_we, rrt_twe;

  msn_table #(.NQP(NQP)) u_msn (.clk, .setup_we(setup_valid), .setup_q(setup.qpn[QW-1:0]),
    .rx_q(msn_q), .rx_msn(msn_msn), .rx_vaddr(msn_vaddr), .rx_we(msn_we), .rx_wmsn(msn_wmsn),
    .rx_wvaddr(msn_wvaddr), .tx_q(tq), .tx_msn);

  rd_req_table #(.NQP(NQP)) u_rrt (.clk, .tx_we(rrt_twe), .tx_q(tq), .tx_laddr(rrt_tladdr),
    .rx_q(msn_q), .rx_laddr(rrt_laddr), .rx_we(rrt_we), .rx_wladdr(rrt_wladdr));

  rresp_req_t rresp;
  logic       rresp_valid, rresp_ready;

  exh_rx #(.NQP(NQP)) u_exh_rx (.clk, .rst_n,
    .in_beat(b4), .in_meta(m4), .in_valid(v4), .in_ready(r4),
    .out_beat(mem_beat), .out_meta(m5), .out_valid(mem_valid), .out_ready(mem_ready),
    .mem_cmd, .mem_cmd_valid, .mem_cmd_ready,
    .rresp, .rresp_valid, .rresp_ready,
    .cpl, .cpl_valid, .cpl_ready,
    .msn_q, .msn_msn, .msn_vaddr, .msn_we, .msn_wmsn, .msn_wvaddr,
    .rrt_laddr, .rrt_we, .rrt_wladdr);

  // ---------------- retransmission triggers ----------------
  logic [QW-1:0] to_q, retx_q, tmr_q;
  logic          to_valid, to_ready, retx_valid, retx_ready, nak_pend, tmr_arm;

  assign nak_pend      = ack_evt_valid && ack_evt.nak;
  assign retx_valid    = nak_pend || to_valid;
  assign retx_q        = nak_pend ? ack_evt.qpn[QW-1:0] : to_q;
  assign to_ready      = retx_ready && !nak_pend;
  assign ack_evt_ready = !ack_evt.nak || retx_ready;
  assign ack_evt_fire  = ack_evt_valid && ack_evt_ready;
  assign ev_timeout    = to_valid && to_ready;
  assign ev_nak_rx     = ack_evt_fire && ack_evt.nak;

  transport_timer #(.NQP(NQP), .TIMEOUT(TIMEOUT)) u_timer (.clk, .rst_n,
    .arm(tmr_arm), .arm_q(tmr_q),
    .restart(ack_evt_fire), .stop(ack_evt.all_acked), .restart_q(ack_evt.qpn[QW-1:0]),
    .to_q, .to_valid, .to_ready);

  // ---------------- TX ----------------
  logic [31:0] ct_ip;
  logic [23:0] ct_rqpn;
  logic [15:0] ct_port;

  conn_table #(.NQP(NQP)) u_conn (.clk, .setup_we(setup_valid), .setup,
    .rd_q(tq), .rd_ip(ct_ip), .rd_rqpn(ct_rqpn), .rd_port(ct_port));

  req_merger #(.NQP(NQP), .PMTU(PMTU), .BUF_AW(BUF_AW)) u_merger (.clk, .rst_n,
    .cmd, .cmd_valid, .cmd_ready,
    .ack_req, .ack_req_valid, .ack_req_ready,
    .rresp, .rresp_valid, .rresp_ready,
    .retx_q, .retx_valid, .retx_ready,
    .f_src, .f_addr, .f_bytes, .f_meta, .f_valid, .f_ready,
    .host_rd, .host_rd_valid, .host_rd_ready,
    .tq, .st_npsn(tx_npsn), .st_una(tx_una), .st_we(tx_we), .st_wnpsn(tx_wnpsn),
    .ct_ip, .ct_rqpn, .ct_port, .msn(tx_msn),
    .rrt_we(rrt_twe), .rrt_laddr(rrt_tladdr),
    .tmr_arm, .tmr_q, .retx_pulse(ev_retx));

  axis_t      t1, t2, t3;
  roce_meta_t tm1, tm2, tm3, tm4;
  logic       tv1, tv2, tv3, tr1, tr2, tr3;

  exh_tx u_exh_tx (.clk, .rst_n,
    .in_beat(pay_beat), .in_meta(pay_meta), .in_valid(pay_valid), .in_ready(pay_ready),
    .out_beat(t1), .out_meta(tm1), .out_valid(tv1), .out_ready(tr1));
  ibh_tx u_ibh_tx (.clk, .rst_n,
    .in_beat(t1), .in_meta(tm1), .in_valid(tv1), .in_ready(tr1),
    .out_beat(t2), .out_meta(tm2), .out_valid(tv2), .out_ready(tr2));
  udp_tx u_udp_tx (.clk, .rst_n,
    .in_beat(t2), .in_meta(tm2), .in_valid(tv2), .in_ready(tr2),
    .out_beat(t3), .out_meta(tm3), .out_valid(tv3), .out_ready(tr3));
  ipv4_tx u_ipv4_tx (.clk, .rst_n, .local_ip,
    .in_beat(t3), .in_meta(tm3), .in_valid(tv3), .in_ready(tr3),
    .out_beat(tx_beat), .out_meta(tm4), .out_valid(tx_valid), .out_ready(tx_ready));

endmodule
