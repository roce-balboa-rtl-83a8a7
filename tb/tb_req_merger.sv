// tb_req_merger - command and request merger with a state table and a connection table attached
// (PMTU 256 bytes). Directed scenarios: a 600-byte WRITE cut into FIRST/MIDDLE/LAST packets with
// RETH and PSNs from the state table; an ACK/NAK request inserted as a header-only packet; a
// go-back-N retransmission of that WRITE from the oldest unacknowledged PSN, replayed from the
// buffer addresses the first transmission used; a READ RESPONSE request with its host read;
// a READ request; a retransmission request with nothing outstanding (ignored). Every descriptor
// is compared field by field with the value the testbench works out; the next-PSN field of the
// state table, the read request table write, timer arming and the retransmission pulse are
// checked too. The descriptor output sees random backpressure.
module tb_req_merger;
  import balboa_pkg::*;
  localparam int NQP = 8, PMTU = 256, AW = 8;
  localparam int QW = $clog2(NQP);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, narm = 0, nretx = 0;

  rdma_cmd_t cmd;
  ack_req_t ack_req;
  rresp_req_t rresp;
  logic [QW-1:0] retx_q, tq, tmr_q, rx_q;
  logic cmd_valid, cmd_ready, ack_req_valid, ack_req_ready, rresp_valid, rresp_ready;
  logic retx_valid, retx_ready, f_valid, f_ready, host_rd_valid, host_rd_ready;
  pay_src_e f_src;
  logic [AW-1:0] f_addr;
  logic [15:0] f_bytes;
  roce_meta_t f_meta;
  host_rd_t host_rd;
  logic [23:0] st_npsn, st_una, st_wnpsn, msn, rx_epsn, rx_una, rx_npsn;
  logic st_we, rrt_we, tmr_arm, retx_pulse, setup_we, rx_we_una, rx_nak_sent;
  logic [23:0] rx_wuna;
  logic [31:0] ct_ip;
  logic [23:0] ct_rqpn;
  logic [15:0] ct_port;
  logic [63:0] rrt_laddr;
  qp_setup_t setup;

  typedef struct { pay_src_e src; int addr; int bytes; roce_meta_t m; } desc_t;
  desc_t got[$];
  host_rd_t hrds[$];
  logic [63:0] rrt_seen[$];

  req_merger #(.NQP(NQP), .PMTU(PMTU), .BUF_AW(AW)) dut (.*);
  state_table #(.NQP(NQP)) u_st (
    .clk, .setup_we, .setup, .rx_q, .rx_epsn, .rx_nak_sent, .rx_una, .rx_npsn,
    .rx_we_epsn(1'b0), .rx_wepsn(24'd0), .rx_we_nak(1'b0), .rx_wnak(1'b0),
    .rx_we_una, .rx_wuna, .tx_q(tq), .tx_npsn(st_npsn), .tx_una(st_una), .tx_we(st_we), .tx_wnpsn(st_wnpsn)
  );
  conn_table #(.NQP(NQP)) u_ct (.clk, .setup_we, .setup, .rd_q(tq), .rd_ip(ct_ip), .rd_rqpn(ct_rqpn), .rd_port(ct_port));
  assign msn = 24'd7;

  always_ff @(posedge clk) begin
    f_ready <= ($urandom % 3) != 0;
    host_rd_ready <= ($urandom % 2) != 0;
    if (f_valid && f_ready) got.push_back('{f_src, int'(f_addr), int'(f_bytes), f_meta});
    if (host_rd_valid && host_rd_ready) hrds.push_back(host_rd);
    if (rrt_we) rrt_seen.push_back(rrt_laddr);
    if (tmr_arm) narm++;
    if (retx_pulse) nretx++;
  end

  function automatic qp_setup_t su(input int q, input int txpsn, input int rqpn);
    qp_setup_t s;
    s = '0; s.qpn = 16'(q); s.rip = 32'h0A0000F0 + q; s.rqpn = 24'(rqpn); s.rport = 16'(5000 + q);
    s.rx_psn = 24'd0; s.tx_psn = 24'(txpsn);
    return s;
  endfunction

  task automatic expect_desc(input int i, input pay_src_e src, input int addr, input int bytes,
                             input logic [7:0] op, input int psn, input int q, input int rqpn,
                             input longint va = -1, input bit ackreq = 0, input int dlen = -1,
                             input logic [7:0] syn = SYN_ACK);
    checks++;
    if (i >= got.size()) begin failures++; $display("FAIL descriptor %0d missing", i); return; end
    if (got[i].src != src || (src != SRC_NONE && (got[i].addr != addr || got[i].bytes != bytes)) ||
        got[i].m.opcode != op || got[i].m.psn != 24'(psn) || got[i].m.rqpn != 24'(rqpn) ||
        got[i].m.ip != 32'h0A0000F0 + q || got[i].m.port != 16'(5000 + q) || got[i].m.qpn != 16'(q) ||
        (va >= 0 && got[i].m.vaddr != 64'(va)) || got[i].m.ackreq != ackreq ||
        (dlen >= 0 && got[i].m.dma_len != 32'(dlen)) || (op == OP_ACK && got[i].m.syndrome != syn) ||
        (src != SRC_NONE && got[i].m.pay_len != 16'(bytes))) begin
      failures++;
      $display("FAIL descriptor %0d: src %0d addr %0d bytes %0d op %h psn %0d va %h ackreq %0d", i,
               got[i].src, got[i].addr, got[i].bytes, got[i].m.opcode, got[i].m.psn, got[i].m.vaddr, got[i].m.ackreq);
    end
  endtask

  task automatic settle();
    repeat (40) @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cmd = '0; cmd_valid = 0; ack_req = '0; ack_req_valid = 0; rresp = '0; rresp_valid = 0;
    retx_q = '0; retx_valid = 0; setup_we = 0; setup = '0; rx_q = '0; rx_we_una = 0; rx_wuna = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); setup_we = 1; setup = su(1, 1000, 24'h55);
    @(negedge clk); setup = su(2, 24'hFFFFFE, 24'h66);
    @(negedge clk); setup_we = 0;
    // WRITE of 600 bytes on QP 1
    cmd = '{is_read: 0, qpn: 1, laddr: 64'h100, raddr: 64'h4000, len: 600}; cmd_valid = 1;
    @(negedge clk); while (!(cmd_valid && cmd_ready)) @(negedge clk);
    cmd_valid = 0;
    settle();
    expect_desc(0, SRC_WR, 0, 256, OP_WRITE_FIRST, 1000, 1, 24'h55, 64'h4000, 0, 600);
    expect_desc(1, SRC_WR, 4, 256, OP_WRITE_MIDDLE, 1001, 1, 24'h55, 64'h4100, 0);
    expect_desc(2, SRC_WR, 8, 88, OP_WRITE_LAST, 1002, 1, 24'h55, 64'h4200, 1);
    checks++; if (u_st.npsn_m[1] != 1003 || narm != 3) begin failures++; $display("FAIL npsn %0d arms %0d", u_st.npsn_m[1], narm); end
    // NAK request for QP 2
    @(negedge clk); ack_req = '{qpn: 2, psn: 77, nak: 1}; ack_req_valid = 1;
    @(negedge clk); while (!(ack_req_valid && ack_req_ready)) @(negedge clk);
    ack_req_valid = 0;
    settle();
    expect_desc(3, SRC_NONE, 0, 0, OP_ACK, 77, 2, 24'h66, -1, 0, -1, SYN_NAK_SEQ);
    checks++; if (got[3].m.msn != 7) begin failures++; $display("FAIL ACK MSN"); end
    // PSN 1000 acknowledged; retransmit the rest of the WRITE
    @(negedge clk); rx_q = 1; rx_we_una = 1; rx_wuna = 1001;
    @(negedge clk); rx_we_una = 0; retx_q = 1; retx_valid = 1;
    @(negedge clk); while (!(retx_valid && retx_ready)) @(negedge clk);
    retx_valid = 0;
    settle();
    expect_desc(4, SRC_BUF, 4, 256, OP_WRITE_MIDDLE, 1001, 1, 24'h55, 64'h4100, 0);
    expect_desc(5, SRC_BUF, 8, 88, OP_WRITE_LAST, 1002, 1, 24'h55, 64'h4200, 1);
    checks++; if (nretx != 1 || u_st.npsn_m[1] != 1003) begin failures++; $display("FAIL retransmission pulse %0d / npsn", nretx); end
    // READ RESPONSE of 300 bytes on QP 2
    @(negedge clk); rresp = '{qpn: 2, vaddr: 64'h9000, len: 300, psn: 500}; rresp_valid = 1;
    @(negedge clk); while (!(rresp_valid && rresp_ready)) @(negedge clk);
    rresp_valid = 0;
    settle();
    expect_desc(6, SRC_RR, 10, 256, OP_RR_FIRST, 500, 2, 24'h66);
    expect_desc(7, SRC_RR, 14, 44, OP_RR_LAST, 501, 2, 24'h66);
    checks++; if (hrds.size() != 1 || hrds[0].vaddr != 64'h9000 || hrds[0].len != 300 || hrds[0].qpn != 2) begin failures++; $display("FAIL host read"); end
    // READ of 1000 bytes on QP 2 (PSN wraps)
    @(negedge clk); cmd = '{is_read: 1, qpn: 2, laddr: 64'h7000, raddr: 64'h6000, len: 1000}; cmd_valid = 1;
    @(negedge clk); while (!(cmd_valid && cmd_ready)) @(negedge clk);
    cmd_valid = 0;
    settle();
    expect_desc(8, SRC_NONE, 0, 0, OP_READ_REQ, 24'hFFFFFE, 2, 24'h66, 64'h6000, 1, 1000);
    checks++; if (u_st.npsn_m[2] != 24'd2 || rrt_seen.size() != 1 || rrt_seen[0] != 64'h7000) begin failures++; $display("FAIL READ bookkeeping"); end
    // nothing outstanding on QP 1 after a full acknowledgement: a retransmission request is ignored
    @(negedge clk); rx_q = 1; rx_we_una = 1; rx_wuna = 1003;
    @(negedge clk); rx_we_una = 0; retx_q = 1; retx_valid = 1;
    @(negedge clk); while (!(retx_valid && retx_ready)) @(negedge clk);
    retx_valid = 0;
    settle();
    checks++; if (got.size() != 9 || nretx != 1) begin failures++; $display("FAIL %0d descriptors", got.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
