// tb_roce_stack - one RoCE v2 stack (without flow control and ICRC unit) facing a scripted remote
// peer. The stack's packet descriptors are served by a retransmission mux and buffer, and the
// testbench plays the host buses. Checked: a WRITE command leaves as one packet with correct
// IPv4, UDP, BTH and RETH fields and payload; the peer's ACK produces a completion and an
// acknowledgement event; a WRITE from the peer produces a memory command, the payload in host
// memory order, and an ACK packet back; a packet to another UDP port is dropped; with the ACK
// for a second WRITE withheld the transport timer fires and the packet is sent again.
module tb_roce_stack;
  import balboa_pkg::*;
  import tb_util_pkg::*;
  localparam int NQP = 8, PMTU = 256, BUF_AW = 8, CREDITS = 64, TIMEOUT = 400;
  localparam int QW = $clog2(NQP), CW = $clog2(CREDITS + 1);
  localparam int LIP = 32'h0A000001, RIP = 32'h0A000002;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0, wh = 0;
  int n_hdr = 0, n_to = 0, n_retx = 0;

  qp_setup_t setup;
  logic setup_valid;
  axis_t rx_beat, mem_beat, tx_beat, pay_beat, wr_beat, rr_beat;
  logic rx_valid, rx_ready, mem_valid, mem_ready, mem_cmd_valid, mem_cmd_ready, cpl_valid, cpl_ready;
  logic credit_ret, cmd_valid, cmd_ready, host_rd_valid, host_rd_ready, f_valid, f_ready;
  logic pay_valid, pay_ready, tx_valid, tx_ready, ack_evt_fire;
  logic ev_psn_drop, ev_credit_drop, ev_hdr_drop, ev_timeout, ev_nak_rx, ev_retx;
  logic wr_valid, wr_ready, rr_ready, buf_we;
  logic [CW-1:0] credits;
  mem_cmd_t mem_cmd;
  cpl_t cpl;
  rdma_cmd_t cmd;
  host_rd_t host_rd;
  pay_src_e f_src;
  logic [BUF_AW-1:0] f_addr, buf_waddr, buf_raddr;
  logic [15:0] f_bytes;
  roce_meta_t f_meta, pay_meta;
  ack_evt_t ack_evt;
  logic [DATA_W-1:0] buf_wdata, buf_rdata;

  roce_stack #(.NQP(NQP), .PMTU(PMTU), .BUF_AW(BUF_AW), .CREDITS(CREDITS), .TIMEOUT(TIMEOUT)) dut (
    .clk, .rst_n, .local_ip(LIP), .setup, .setup_valid, .rx_beat, .rx_valid, .rx_ready,
    .mem_beat, .mem_valid, .mem_ready, .mem_cmd, .mem_cmd_valid, .mem_cmd_ready, .cpl, .cpl_valid,
    .cpl_ready, .credit_ret, .cmd, .cmd_valid, .cmd_ready, .host_rd, .host_rd_valid, .host_rd_ready,
    .f_src, .f_addr, .f_bytes, .f_meta, .f_valid, .f_ready, .pay_beat, .pay_meta, .pay_valid, .pay_ready,
    .tx_beat, .tx_valid, .tx_ready, .ack_evt, .ack_evt_fire, .ev_psn_drop, .ev_credit_drop,
    .ev_hdr_drop, .ev_timeout, .ev_nak_rx, .ev_retx, .credits
  );
  retrans_mux #(.BUF_AW(BUF_AW)) u_mux (
    .clk, .rst_n, .f_src, .f_addr, .f_bytes, .f_meta, .f_valid, .f_ready,
    .wr_beat, .wr_valid, .wr_ready, .rr_beat, .rr_valid(1'b0), .rr_ready,
    .buf_we, .buf_waddr, .buf_wdata, .buf_raddr, .buf_rdata,
    .out_beat(pay_beat), .out_meta(pay_meta), .out_valid(pay_valid), .out_ready(pay_ready)
  );
  retx_buffer #(.AW(BUF_AW)) u_buf (.clk, .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata), .raddr(buf_raddr), .rdata(buf_rdata));
  assign rr_beat = '0;

  axis_t inq[$], wq[$];
  bytes_t txp, rxmem;
  bytes_t txpk[$];
  mem_cmd_t mcs[$];
  cpl_t cpls[$];
  int nevt = 0;

  assign rx_beat  = head < inq.size() ? inq[head] : '0;
  assign rx_valid = head < inq.size();
  assign wr_beat  = wh < wq.size() ? wq[wh] : '0;
  assign wr_valid = wh < wq.size();
  assign mem_ready = 1'b1; assign mem_cmd_ready = 1'b1; assign cpl_ready = 1'b1; assign host_rd_ready = 1'b1;

  always_ff @(posedge clk) begin
    tx_ready <= ($urandom % 4) != 0;
    credit_ret <= 1'b0;
    if (rx_valid && rx_ready) head <= head + 1;
    if (wr_valid && wr_ready) wh <= wh + 1;
    if (tx_valid && tx_ready && rst_n) begin
      for (int i = 0; i < 64; i++) if (tx_beat.keep[i]) txp.push_back(tx_beat.data[8*i +: 8]);
      if (tx_beat.last) begin txpk.push_back(txp); txp.delete(); end
    end
    if (mem_valid && rst_n) begin
      for (int i = 0; i < 64; i++) if (mem_beat.keep[i]) rxmem.push_back(mem_beat.data[8*i +: 8]);
      credit_ret <= 1'b1;
    end
    if (mem_cmd_valid && rst_n) mcs.push_back(mem_cmd);
    if (cpl_valid && rst_n) cpls.push_back(cpl);
    if (ack_evt_fire) nevt++;
    if (ev_hdr_drop) n_hdr++;
    if (ev_timeout) n_to++;
    if (ev_retx) n_retx++;
  end

  task automatic rx(input bytes_t ib, input int dport = 4791);
    to_beats(ip_udp(cat(ib, rnd_bytes(4)), RIP, LIP, 49152, dport), inq);
    while (head < inq.size()) @(posedge clk);
    repeat (40) @(posedge clk);
  endtask

  task automatic host_write(input int len, input longint raddr, output bytes_t data);
    data = rnd_bytes(len);
    to_beats(data, wq);
    @(negedge clk); cmd = '{is_read: 0, qpn: 1, laddr: 64'h0, raddr: raddr, len: len}; cmd_valid = 1;
    @(negedge clk); while (!(cmd_valid && cmd_ready)) @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic bytes_t aeth(input logic [7:0] syn, input int msn);
    bytes_t p = zeros(4);
    p[0] = syn; put_be(p, 1, 3, msn);
    return p;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bytes_t d, p, reth;
    cmd = '0; cmd_valid = 0; setup = '0; setup_valid = 0; tx_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); setup = '{qpn: 1, rip: RIP, rqpn: 24'h21, rport: 16'd49152, rx_psn: 24'd300, tx_psn: 24'd700};
    setup_valid = 1;
    @(negedge clk); setup_valid = 0;
    // 1. WRITE of 100 bytes leaves as a WRITE ONLY packet
    host_write(100, 64'hABC000, d);
    repeat (80) @(posedge clk);
    checks++;
    if (txpk.size() != 1) begin failures++; $display("FAIL %0d packets sent", txpk.size()); end
    else begin
      p = txpk[0];
      if (p.size() != 20 + 8 + 12 + 16 + 100 || get_be(p, 2, 2) != 20 + 8 + 12 + 16 + 100 + 4 ||
          p[9] != 17 || get_be(p, 12, 4) != LIP || get_be(p, 16, 4) != RIP ||
          get_be(p, 22, 2) != 4791 || get_be(p, 24, 2) != 8 + 12 + 16 + 100 + 4 ||
          p[28] != OP_WRITE_ONLY || get_be(p, 33, 3) != 24'h21 || get_be(p, 37, 3) != 700 || p[36][7] != 1 ||
          get_be(p, 40, 8) != 64'hABC000 || get_be(p, 52, 4) != 100) begin
        failures++; $display("FAIL WRITE packet headers");
      end
      for (int i = 0; i < 100; i++) if (p.size() > 56 + i && p[56 + i] != d[i]) begin failures++; $display("FAIL WRITE payload"); break; end
    end
    // 2. the peer acknowledges PSN 700
    rx(cat(bth(OP_ACK, 1, 700, 0), aeth(SYN_ACK, 1)));
    checks++; if (cpls.size() != 1 || cpls[0].psn != 700 || cpls[0].nak || nevt != 1) begin failures++; $display("FAIL completion / ack event"); end
    // 3. the peer writes 150 bytes to 0x5000
    d = rnd_bytes(150);
    reth = zeros(16); put_be(reth, 0, 8, 64'h5000); put_be(reth, 12, 4, 150);
    rx(cat(cat(bth(OP_WRITE_ONLY, 1, 300, 1), reth), d));
    checks++;
    if (mcs.size() != 1 || mcs[0].vaddr != 64'h5000 || mcs[0].len != 150 || !mcs[0].last || rxmem != d) begin
      failures++; $display("FAIL received WRITE (%0d commands, %0d bytes)", mcs.size(), rxmem.size());
    end
    checks++;
    if (txpk.size() != 2 || txpk[1][28] != OP_ACK || get_be(txpk[1], 37, 3) != 300 || txpk[1][40] != SYN_ACK) begin
      failures++; $display("FAIL ACK for the received WRITE");
    end
    // 4. a datagram to another UDP port is dropped
    rx(cat(bth(OP_WRITE_ONLY, 1, 301, 1), zeros(16)), 4000);
    checks++; if (n_hdr != 1 || mcs.size() != 1) begin failures++; $display("FAIL header drop"); end
    // 5. a second WRITE whose ACK never comes: the timer fires and the packet is sent again
    host_write(64, 64'hABD000, d);
    repeat (TIMEOUT + 4 * NQP + 200) @(posedge clk);
    checks++;
    if (n_to < 1 || n_retx < 1 || txpk.size() < 4 || txpk[txpk.size() - 1] != txpk[2]) begin
      failures++; $display("FAIL timeout retransmission: %0d timeouts %0d packets", n_to, txpk.size());
    end
    rx(cat(bth(OP_ACK, 1, 701, 0), aeth(SYN_ACK, 2)));
    repeat (TIMEOUT + 4 * NQP) @(posedge clk);
    checks++; if (n_to > 3) begin failures++; $display("FAIL timer still running after ACK"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
