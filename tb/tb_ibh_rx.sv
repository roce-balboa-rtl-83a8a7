// tb_ibh_rx - PSN check of the receive path, with a state table attached. Directed packet
// sequences cover, on the responder side, in-order WRITEs, the ACK at the end of a message, a
// duplicate WRITE (dropped, re-acknowledged), a PSN gap (dropped, one NAK only), recovery, READ
// requests advancing the expected PSN by their response count, a duplicate READ request and PSN
// wrap-around; on the requester side, in-order and out-of-order READ responses, a coalesced ACK,
// a NAK, an ACK outside the window, the final ACK, and a QP number outside the table. For each
// packet the testbench states whether it must pass, which ACK/NAK request and which
// acknowledgement event it must cause; the passed bytes (BTH removed) and the final table
// contents are checked too. Outputs see random backpressure.
module tb_ibh_rx;
  import balboa_pkg::*;
  import tb_util_pkg::*;
  localparam int NQP = 8, PMTU = 256;
  localparam int QW = $clog2(NQP);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0, cur = 0, npass = 0, ndrop = 0;

  axis_t in_beat, out_beat;
  roce_meta_t in_meta, out_meta;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [QW-1:0] st_q, tx_q;
  logic [23:0] st_epsn, st_una, st_npsn, st_wepsn, st_wuna, tx_npsn, tx_una, tx_wnpsn;
  logic st_nak_sent, st_we_epsn, st_we_nak, st_wnak, st_we_una, tx_we, setup_we;
  qp_setup_t setup;
  ack_req_t ack_req;
  ack_evt_t ack_evt;
  logic ack_req_valid, ack_req_ready, ack_evt_valid, ack_evt_ready, drop_pulse;
  axis_t inq[$];
  roce_meta_t mq[$];
  int mi = 0;
  ack_req_t reqs[$];
  ack_evt_t evts[$];
  bytes_t got_b, exp_b;

  ibh_rx #(.NQP(NQP), .PMTU(PMTU)) dut (.*);
  state_table #(.NQP(NQP)) u_tab (
    .clk, .setup_we, .setup,
    .rx_q(st_q), .rx_epsn(st_epsn), .rx_nak_sent(st_nak_sent), .rx_una(st_una), .rx_npsn(st_npsn),
    .rx_we_epsn(st_we_epsn), .rx_wepsn(st_wepsn), .rx_we_nak(st_we_nak), .rx_wnak(st_wnak),
    .rx_we_una(st_we_una), .rx_wuna(st_wuna),
    .tx_q, .tx_npsn, .tx_una, .tx_we, .tx_wnpsn
  );

  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();
  assign in_meta  = mi < mq.size() ? mq[mi] : '0;

  always_ff @(posedge clk) begin
    out_ready     <= ($urandom % 3) != 0;
    ack_req_ready <= ($urandom % 3) != 0;
    ack_evt_ready <= ($urandom % 3) != 0;
    if (in_valid && in_ready) begin
      head <= head + 1;
      if (in_beat.last) mi <= mi + 1;
    end
    if (drop_pulse) ndrop++;
    if (ack_req_valid && ack_req_ready) reqs.push_back(ack_req);
    if (ack_evt_valid && ack_evt_ready) evts.push_back(ack_evt);
    if (out_valid && out_ready) begin
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) got_b.push_back(out_beat.data[8*i +: 8]);
      if (out_beat.last) npass++;
    end
  end

  // one packet; then wait until it has been handled and compare its effects
  // ack: 0 none, 1 ACK, 2 NAK; evn: acknowledged packets in the event (-1: no event)
  task automatic pkt(input logic [7:0] op, input int qpn, input int psn, input int paylen,
                     input bit pass, input int ack, input int apsn, input int evn,
                     input bit evnak, input bit allk, input logic [7:0] syn = 8'h00,
                     input int rdlen = 0, input bit ackreq = 0);
    bytes_t p, ext;
    roce_meta_t m;
    int np0, nd0;
    p = zeros(12);
    p[0] = op; put_be(p, 2, 2, 16'hFFFF); put_be(p, 5, 3, qpn); p[8] = {ackreq, 7'd0}; put_be(p, 9, 3, psn);
    ext = zeros(int'(exh_len(op)));
    if (has_reth(op)) begin put_be(ext, 0, 8, 64'h1000); put_be(ext, 12, 4, rdlen); end
    if (has_aeth(op)) ext[0] = syn;
    p = cat(cat(p, ext), rnd_bytes(paylen));
    p = cat(p, rnd_bytes(4));                      // ICRC position
    m = '0; m.pay_len = 16'(p.size()); m.ip = 32'h0A000009;
    np0 = npass; nd0 = ndrop;
    reqs.delete(); evts.delete();
    to_beats(p, inq); mq.push_back(m);
    if (pass) for (int i = 12; i < p.size(); i++) exp_b.push_back(p[i]);
    while (head < inq.size()) @(posedge clk);
    repeat (30) @(posedge clk);
    checks++;
    if ((npass - np0) != int'(pass) || (ndrop - nd0) != int'(!pass)) begin
      failures++; $display("FAIL op %h psn %0d: pass %0d drop %0d, expected pass=%0d", op, psn, npass - np0, ndrop - nd0, pass);
    end
    checks++;
    if (ack == 0 ? reqs.size() != 0
                 : (reqs.size() != 1 || reqs[0].nak != (ack == 2) || reqs[0].psn != 24'(apsn) || reqs[0].qpn != 16'(qpn))) begin
      failures++; $display("FAIL op %h psn %0d: ack request (%0d seen), expected kind %0d psn %0d", op, psn, reqs.size(), ack, apsn);
    end
    checks++;
    if (evn < 0 ? evts.size() != 0
                : (evts.size() != 1 || evts[0].npkts != 24'(evn) || evts[0].nak != evnak || evts[0].all_acked != allk)) begin
      failures++; $display("FAIL op %h psn %0d: ack event (%0d seen), expected %0d pkts nak %0d all %0d", op, psn, evts.size(), evn, evnak, allk);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    setup_we = 0; setup = '0; tx_we = 0; tx_q = '0; tx_wnpsn = '0;
    out_ready = 0; ack_req_ready = 0; ack_evt_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); setup_we = 1; setup.qpn = 1; setup.rx_psn = 100; setup.tx_psn = 500;
    @(negedge clk); setup.qpn = 2; setup.rx_psn = 24'hFFFFFE; setup.tx_psn = 0;
    @(negedge clk); setup_we = 0;
    // requester side of QP 1 has sent PSNs 500..509
    tx_we = 1; tx_q = 1; tx_wnpsn = 510;
    @(negedge clk); tx_we = 0;
    // responder side
    pkt(OP_WRITE_FIRST,  1, 100, 256, 1, 0, 0,   -1, 0, 0);
    pkt(OP_WRITE_LAST,   1, 101, 40,  1, 1, 101, -1, 0, 0);
    pkt(OP_WRITE_ONLY,   1, 101, 8,   0, 1, 101, -1, 0, 0);   // duplicate
    pkt(OP_WRITE_ONLY,   1, 105, 8,   0, 2, 102, -1, 0, 0);   // gap: NAK
    pkt(OP_WRITE_ONLY,   1, 106, 8,   0, 0, 0,   -1, 0, 0);   // gap again: no second NAK
    pkt(OP_WRITE_MIDDLE, 1, 102, 256, 1, 1, 102, -1, 0, 0, 8'h00, 0, 1);   // AckReq set
    pkt(OP_READ_REQ,     1, 103, 0,   1, 0, 0,   -1, 0, 0, 8'h00, 3 * PMTU + 1);  // 4 responses
    pkt(OP_READ_REQ,     1, 103, 0,   1, 0, 0,   -1, 0, 0, 8'h00, 3 * PMTU + 1);  // duplicate: again
    pkt(OP_WRITE_ONLY,   1, 107, 20,  1, 1, 107, -1, 0, 0);
    // requester side
    pkt(OP_RR_FIRST,     1, 500, 256, 1, 0, 0, 1, 0, 0);
    pkt(OP_RR_MIDDLE,    1, 502, 256, 0, 0, 0, -1, 0, 0);      // out of order
    pkt(OP_ACK,          1, 504, 0,   1, 0, 0, 4, 0, 0);        // acknowledges 501..504
    pkt(OP_ACK,          1, 507, 0,   1, 0, 0, 2, 1, 0, SYN_NAK_SEQ);   // NAK: 505, 506 done
    pkt(OP_ACK,          1, 520, 0,   0, 0, 0, -1, 0, 0);       // outside the window
    pkt(OP_ACK,          1, 509, 0,   1, 0, 0, 3, 0, 1);        // all acknowledged
    // wrap-around of the expected PSN
    pkt(OP_WRITE_FIRST,  2, 24'hFFFFFE, 256, 1, 0, 0, -1, 0, 0);
    pkt(OP_WRITE_MIDDLE, 2, 24'hFFFFFF, 256, 1, 0, 0, -1, 0, 0);
    pkt(OP_WRITE_LAST,   2, 0,          12,  1, 1, 0, -1, 0, 0);
    // QP number outside the table
    pkt(OP_WRITE_ONLY,   9, 0, 8, 0, 0, 0, -1, 0, 0);
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL passed bytes differ"); end
    checks++;
    if (u_tab.epsn_m[1] != 108 || u_tab.una_m[1] != 510 || u_tab.nak_m[1] != 0 || u_tab.epsn_m[2] != 1) begin
      failures++; $display("FAIL final state epsn %0d una %0d nak %0d epsn2 %0d", u_tab.epsn_m[1], u_tab.una_m[1], u_tab.nak_m[1], u_tab.epsn_m[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
