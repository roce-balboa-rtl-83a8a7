// tb_exh_rx - extended-header processing with an MSN table and a read request table attached.
// A multi-packet WRITE, a WRITE ONLY, a READ request, a two-packet READ RESPONSE and an ACK and
// a NAK are fed in for one QP (BTH already removed, ICRC still attached). The testbench expects
// one memory command per payload packet with the address carried over from the RETH through the
// MSN table (WRITE) or taken from the read request table (READ RESPONSE), the payload without
// extended header and ICRC, one READ RESPONSE request for the READ request, a completion per
// ACK/NAK, and an MSN that counts completed WRITE messages. Outputs see random backpressure.
module tb_exh_rx;
  import balboa_pkg::*;
  import tb_util_pkg::*;
  localparam int NQP = 8;
  localparam int QW = $clog2(NQP);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0;

  axis_t in_beat, out_beat;
  roce_meta_t in_meta, out_meta;
  logic in_valid, in_ready, out_valid, out_ready;
  mem_cmd_t mem_cmd;
  rresp_req_t rresp;
  cpl_t cpl;
  logic mem_cmd_valid, mem_cmd_ready, rresp_valid, rresp_ready, cpl_valid, cpl_ready;
  logic [QW-1:0] msn_q, setup_q, tx_q;
  logic [23:0] msn_msn, msn_wmsn, tx_msn;
  logic [63:0] msn_vaddr, msn_wvaddr, rrt_laddr, rrt_wladdr, tx_laddr;
  logic msn_we, rrt_we, setup_we, tx_we;
  axis_t inq[$];
  roce_meta_t mq[$];
  int mi = 0;
  mem_cmd_t cmds[$], exp_cmds[$];
  rresp_req_t rrs[$];
  cpl_t cpls[$];
  bytes_t got_b, exp_b;

  exh_rx #(.NQP(NQP)) dut (.*);
  msn_table #(.NQP(NQP)) u_msn (
    .clk, .setup_we, .setup_q, .rx_q(msn_q), .rx_msn(msn_msn), .rx_vaddr(msn_vaddr),
    .rx_we(msn_we), .rx_wmsn(msn_wmsn), .rx_wvaddr(msn_wvaddr), .tx_q(msn_q), .tx_msn
  );
  rd_req_table #(.NQP(NQP)) u_rrt (
    .clk, .tx_we, .tx_q, .tx_laddr, .rx_q(msn_q), .rx_laddr(rrt_laddr), .rx_we(rrt_we), .rx_wladdr(rrt_wladdr)
  );

  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();
  assign in_meta  = mi < mq.size() ? mq[mi] : '0;

  always_ff @(posedge clk) begin
    out_ready     <= ($urandom % 3) != 0;
    mem_cmd_ready <= ($urandom % 3) != 0;
    rresp_ready   <= ($urandom % 3) != 0;
    cpl_ready     <= ($urandom % 3) != 0;
    if (in_valid && in_ready) begin
      head <= head + 1;
      if (in_beat.last) mi <= mi + 1;
    end
    if (mem_cmd_valid && mem_cmd_ready) cmds.push_back(mem_cmd);
    if (rresp_valid && rresp_ready) rrs.push_back(rresp);
    if (cpl_valid && cpl_ready) cpls.push_back(cpl);
    if (out_valid && out_ready)
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) got_b.push_back(out_beat.data[8*i +: 8]);
  end

  task automatic pkt(input logic [7:0] op, input int paylen, input longint va = 0, input int len = 0,
                     input logic [7:0] syn = 0, input int psn = 0);
    bytes_t p, body;
    roce_meta_t m;
    p = zeros(int'(exh_len(op)));
    if (has_reth(op)) begin put_be(p, 0, 8, va); put_be(p, 8, 4, 32'h1234); put_be(p, 12, 4, len); end
    if (has_aeth(op)) begin p[0] = syn; put_be(p, 1, 3, 0); end
    body = rnd_bytes(paylen);
    p = cat(cat(p, body), rnd_bytes(4));
    m = '0; m.opcode = op; m.qpn = 3; m.psn = 24'(psn); m.syndrome = syn; m.pay_len = 16'(p.size());
    to_beats(p, inq); mq.push_back(m);
    foreach (body[i]) exp_b.push_back(body[i]);
  endtask

  function automatic mem_cmd_t mc(input longint va, input int len, input bit rr, input bit last);
    mem_cmd_t c;
    c = '{qpn: 3, vaddr: va, len: 16'(len), is_rresp: rr, last: last};
    return c;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    setup_we = 0; setup_q = '0; tx_we = 0; tx_q = '0; tx_laddr = '0;
    out_ready = 0; mem_cmd_ready = 0; rresp_ready = 0; cpl_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); setup_we = 1; setup_q = 3;
    @(negedge clk); setup_we = 0; tx_we = 1; tx_q = 3; tx_laddr = 64'h8000;   // outstanding READ
    @(negedge clk); tx_we = 0;
    pkt(OP_WRITE_FIRST, 256, 64'h10000, 600);  exp_cmds.push_back(mc(64'h10000, 256, 0, 0));
    pkt(OP_WRITE_MIDDLE, 256);                 exp_cmds.push_back(mc(64'h10100, 256, 0, 0));
    pkt(OP_WRITE_LAST, 88);                    exp_cmds.push_back(mc(64'h10200, 88, 0, 1));
    pkt(OP_WRITE_ONLY, 100, 64'h20000, 100);   exp_cmds.push_back(mc(64'h20000, 100, 0, 1));
    pkt(OP_READ_REQ, 0, 64'h30000, 1000, 0, 77);
    pkt(OP_RR_FIRST, 256, 0, 0, SYN_ACK);      exp_cmds.push_back(mc(64'h8000, 256, 1, 0));
    pkt(OP_RR_LAST, 40, 0, 0, SYN_ACK);        exp_cmds.push_back(mc(64'h8100, 40, 1, 1));
    pkt(OP_ACK, 0, 0, 0, SYN_ACK, 55);
    pkt(OP_ACK, 0, 0, 0, SYN_NAK_SEQ, 56);
    while (head < inq.size()) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++; if (cmds.size() != exp_cmds.size()) begin failures++; $display("FAIL %0d memory commands", cmds.size()); end
    foreach (exp_cmds[i]) if (i < cmds.size()) begin
      checks++;
      if (cmds[i] != exp_cmds[i]) begin failures++; $display("FAIL memory command %0d: va %h len %0d rr %0d last %0d", i, cmds[i].vaddr, cmds[i].len, cmds[i].is_rresp, cmds[i].last); end
    end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL payload bytes differ (%0d vs %0d)", got_b.size(), exp_b.size()); end
    checks++;
    if (rrs.size() != 1 || rrs[0].vaddr != 64'h30000 || rrs[0].len != 1000 || rrs[0].psn != 77 || rrs[0].qpn != 3) begin
      failures++; $display("FAIL read response request");
    end
    checks++;
    if (cpls.size() != 2 || cpls[0].nak || cpls[0].psn != 55 || !cpls[1].nak || cpls[1].psn != 56) begin
      failures++; $display("FAIL completions");
    end
    checks++; if (u_msn.msn_m[3] != 2) begin failures++; $display("FAIL MSN %0d", u_msn.msn_m[3]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
