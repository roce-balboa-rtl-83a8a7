// tb_balboa_full - the two-node end-to-end set-up of the system test, with the stack at its
// default size: 500 QPs, 4096-byte MTU, a 256 KiB retransmission buffer, 1024 receive credits,
// a 65536-cycle transport timeout, a budget of 64 packets and a 32-entry request buffer. Node A
// writes 8 KiB to node B (two MTU packets plus the ACK) and then reads 4 KiB back (one READ
// request, one MTU-sized READ RESPONSE). Both transfers are compared byte by byte, every packet
// on both links has its ICRC and IP length checked, and the number of packets on each link is
// checked against the protocol: 2 WRITE packets + 1 READ request from A, 1 ACK + 1 READ
// RESPONSE from B.
module tb_balboa_full;
  import balboa_pkg::*;


  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #2 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- two nodes ----------------
  qp_setup_t setup_a, setup_b;
  logic      setup_v;
  rdma_cmd_t tcmd_a, tcmd_b;
  logic      tcmd_va, tcmd_vb, hold_b;

  `define FNODE_SIGS(n) \
    rdma_cmd_t n``_cmd; logic n``_cmd_v, n``_cmd_r; cpl_t n``_cpl; logic n``_cpl_v, n``_cpl_r; \
    axis_t n``_wr, n``_rr, n``_mb, n``_tx, n``_rx, n``_inj; logic n``_wr_v, n``_wr_r, n``_rr_v, n``_rr_r; \
    host_rd_t n``_hr; logic n``_hr_v, n``_hr_r; mem_cmd_t n``_mc; logic n``_mc_v, n``_mc_r; \
    logic n``_mb_v, n``_mb_r, n``_cr, n``_tx_v, n``_tx_r, n``_rx_v, n``_rx_r; \
    logic n``_stall, n``_psnd, n``_crd, n``_hdrd, n``_to, n``_nak, n``_retx; logic [10:0] n``_credits; \
    int n``_ncpl, n``_nnak, n``_nmc, n``_nrd; logic n``_idle;

  `FNODE_SIGS(a)
  `FNODE_SIGS(b)

  `define FNODE(n, IP, TC, TCV, HOLD, SEEDV) \
  balboa_top u_``n ( \
    .clk, .rst_n, .local_ip(IP), .setup(setup_``n), .setup_valid(setup_v), \
    .cmd(n``_cmd), .cmd_valid(n``_cmd_v), .cmd_ready(n``_cmd_r), \
    .cpl(n``_cpl), .cpl_valid(n``_cpl_v), .cpl_ready(n``_cpl_r), \
    .wr_beat(n``_wr), .wr_valid(n``_wr_v), .wr_ready(n``_wr_r), \
    .rr_beat(n``_rr), .rr_valid(n``_rr_v), .rr_ready(n``_rr_r), \
    .host_rd(n``_hr), .host_rd_valid(n``_hr_v), .host_rd_ready(n``_hr_r), \
    .mem_cmd(n``_mc), .mem_cmd_valid(n``_mc_v), .mem_cmd_ready(n``_mc_r), \
    .mem_beat(n``_mb), .mem_valid(n``_mb_v), .mem_ready(n``_mb_r), .credit_ret(n``_cr), \
    .net_rx_beat(n``_rx), .net_rx_valid(n``_rx_v), .net_rx_ready(n``_rx_r), \
    .net_tx_beat(n``_tx), .net_tx_valid(n``_tx_v), .net_tx_ready(n``_tx_r), \
    .fc_stall(n``_stall), .ev_psn_drop(n``_psnd), .ev_credit_drop(n``_crd), .ev_hdr_drop(n``_hdrd), \
    .ev_timeout(n``_to), .ev_nak_rx(n``_nak), .ev_retx(n``_retx), .credits(n``_credits)); \
  tb_host #(.SEED(SEEDV)) h_``n (.clk, .rst_n, .tb_cmd(TC), .tb_cmd_valid(TCV), .hold_credit(HOLD), \
    .cmd(n``_cmd), .cmd_valid(n``_cmd_v), .cmd_ready(n``_cmd_r), \
    .cpl(n``_cpl), .cpl_valid(n``_cpl_v), .cpl_ready(n``_cpl_r), \
    .wr_beat(n``_wr), .wr_valid(n``_wr_v), .wr_ready(n``_wr_r), \
    .rr_beat(n``_rr), .rr_valid(n``_rr_v), .rr_ready(n``_rr_r), \
    .host_rd(n``_hr), .host_rd_valid(n``_hr_v), .host_rd_ready(n``_hr_r), \
    .mem_cmd(n``_mc), .mem_cmd_valid(n``_mc_v), .mem_cmd_ready(n``_mc_r), \
    .mem_beat(n``_mb), .mem_valid(n``_mb_v), .mem_ready(n``_mb_r), .credit_ret(n``_cr), \
    .n_cpl(n``_ncpl), .n_nak(n``_nnak), .n_memcmd(n``_nmc), .n_rdreq(n``_nrd), .idle(n``_idle));

  `FNODE(a, 32'h0A000001, tcmd_a, tcmd_va, 1'b0, 1)
  `FNODE(b, 32'h0A000002, tcmd_b, tcmd_vb, hold_b, 2)

  // ---------------- links ----------------
  logic drop_ab, drop_ba;
  logic [7:0] dop_ab, dop_ba;
  int np_ab, np_ba, nd_ab, nd_ba, ck_ab, ck_ba, fl_ab, fl_ba;
  axis_t ab_beat;
  logic  ab_v, ab_r;
  logic  inj_v;
  axis_t inj_b;

  tb_channel ch_ab (.clk, .rst_n, .in_beat(a_tx), .in_valid(a_tx_v), .in_ready(a_tx_r),
    .out_beat(ab_beat), .out_valid(ab_v), .out_ready(ab_r), .drop_arm(drop_ab), .drop_op(dop_ab),
    .npkts(np_ab), .ndropped(nd_ab), .checks(ck_ab), .failures(fl_ab));
  tb_channel ch_ba (.clk, .rst_n, .in_beat(b_tx), .in_valid(b_tx_v), .in_ready(b_tx_r),
    .out_beat(a_rx), .out_valid(a_rx_v), .out_ready(a_rx_r), .drop_arm(drop_ba), .drop_op(dop_ba),
    .npkts(np_ba), .ndropped(nd_ba), .checks(ck_ba), .failures(fl_ba));

  // injection of a foreign packet into B
  assign b_rx   = inj_v ? inj_b : ab_beat;
  assign b_rx_v = inj_v ? 1'b1 : ab_v;
  assign ab_r   = inj_v ? 1'b0 : b_rx_r;

  // ---------------- mechanism counters ----------------
  int c_stall, c_psnd, c_crd, c_hdrd, c_to, c_nak, c_retx;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      c_stall <= c_stall + int'(a_stall);
      c_psnd  <= c_psnd + int'(b_psnd) + int'(a_psnd);
      c_crd   <= c_crd + int'(b_crd);
      c_hdrd  <= c_hdrd + int'(b_hdrd);
      c_to    <= c_to + int'(a_to);
      c_nak   <= c_nak + int'(a_nak);
      c_retx  <= c_retx + int'(a_retx);
    end
  end

  // ---------------- helpers ----------------
  task automatic issue(input bit on_a, input bit rd, input int qpn, input int la, input int ra,
                       input int len);
    rdma_cmd_t c;
    c = '{is_read: rd, qpn: 16'(qpn), laddr: 64'(la), raddr: 64'(ra), len: 32'(len)};
    @(negedge clk);
    if (on_a) begin tcmd_a = c; tcmd_va = 1; end else begin tcmd_b = c; tcmd_vb = 1; end
    @(negedge clk);
    tcmd_va = 0; tcmd_vb = 0;
  endtask

  task automatic wait_cycles(input int n);
    repeat (n) @(posedge clk);
  endtask

  // wait until node A has seen `n` completions
  task automatic wait_cpl_a(input int n);
    int t = 0;
    while (a_ncpl < n && t < 40000) begin @(posedge clk); t++; end
    checks++;
    if (a_ncpl < n) begin failures++; $display("FAIL: completions %0d < %0d", a_ncpl, n); end
  endtask

  // compare dst memory of one node with src memory of the other
  task automatic cmp(input string what, input bit dst_b, input int da, input int sa, input int len);
    int bad = 0;
    for (int i = 0; i < len; i++) begin
      logic [7:0] d, s;
      d = dst_b ? h_b.mem[da + i] : h_a.mem[da + i];
      s = dst_b ? h_a.mem[sa + i] : h_b.mem[sa + i];
      if (d !== s) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL: %s: %0d bytes differ", what, bad); end
    else $display("ok: %s (%0d bytes)", what, len);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  initial begin
    tcmd_va = 0; tcmd_vb = 0; hold_b = 0; setup_v = 0; inj_v = 0; inj_b = '0;
    drop_ab = 0; drop_ba = 0; dop_ab = '0; dop_ba = '0;
    tcmd_a = '0; tcmd_b = '0; setup_a = '0; setup_b = '0;
    c_stall = 0; c_psnd = 0; c_crd = 0; c_hdrd = 0; c_to = 0; c_nak = 0; c_retx = 0;
    wait_cycles(4);
    rst_n = 1;
    wait_cycles(2);
    // QP set-up: A.1 <-> B.2 and A.3 <-> B.4
    @(negedge clk);
    setup_a = '{qpn: 1, rip: 32'h0A000002, rqpn: 2, rport: 16'hC001, rx_psn: 24'h100, tx_psn: 24'h200};
    setup_b = '{qpn: 2, rip: 32'h0A000001, rqpn: 1, rport: 16'hC002, rx_psn: 24'h200, tx_psn: 24'h100};
    setup_v = 1;
    @(negedge clk);
    setup_a = '{qpn: 3, rip: 32'h0A000002, rqpn: 4, rport: 16'hC003, rx_psn: 24'hFFFFFE, tx_psn: 24'h5};
    setup_b = '{qpn: 4, rip: 32'h0A000001, rqpn: 3, rport: 16'hC004, rx_psn: 24'h5, tx_psn: 24'hFFFFFE};
    @(negedge clk);
    setup_v = 0;

    inj_v = 0;
    // RDMA WRITE of 8 KiB: two packets of 4096 bytes
    issue(1, 0, 1, 'h100, 'h4000, 8192);
    wait_cpl_a(1);
    wait_cycles(300);      // the ACK leaves when the last packet passes the PSN check, before its payload is in memory
    cmp("WRITE 8192 B", 1, 'h4000, 'h100, 8192);
    // RDMA READ of 4 KiB: one response packet
    issue(1, 1, 1, 'h8000, 'hA000, 4096);
    wait_cycles(1000);
    cmp("READ 4096 B", 0, 'h8000, 'hA000, 4096);
    // ---------------- summary ----------------
    checks++; if (ck_ab + ck_ba != 5 || fl_ab + fl_ba != 0) begin
      failures++; $display("FAIL: ICRC checks %0d failures %0d", ck_ab + ck_ba, fl_ab + fl_ba);
    end
    $display("packets A->B %0d, B->A %0d", np_ab, np_ba);
    checks++; if (np_ab != 3 || np_ba != 2) begin failures++; $display("FAIL: packet counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
