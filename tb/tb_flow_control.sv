// tb_flow_control - random RDMA requests on four QPs with random acknowledgement events and
// random backpressure. A reference model keeps the request order and the packets outstanding
// per QP; every cycle it checks that the head request is offered exactly when the model says it
// fits the budget (or its QP has nothing outstanding), that stall is raised otherwise, and that
// requests leave in order and unchanged.
module tb_flow_control;
  import balboa_pkg::*;
  localparam int NQP = 4, PMTU = 256, BUDGET = 4, DEPTH = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nstall = 0, nout = 0;

  rdma_cmd_t in_cmd, out_cmd;
  logic in_valid, in_ready, out_valid, out_ready, ack_evt_valid, stall;
  ack_evt_t ack_evt;
  rdma_cmd_t q[$];
  int used[NQP];

  flow_control #(.NQP(NQP), .PMTU(PMTU), .BUDGET(BUDGET), .REQ_DEPTH(DEPTH)) dut (.*);

  function automatic int npk(rdma_cmd_t c);
    return (c.len <= PMTU) ? 1 : (int'(c.len) + PMTU - 1) / PMTU;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    bit fits;
    fits = q.size() > 0 && (used[q[0].qpn] + npk(q[0]) <= BUDGET || used[q[0].qpn] == 0);
    checks++;
    if (out_valid != fits || stall != (q.size() > 0 && !fits) || in_ready != (q.size() < DEPTH)) begin
      failures++;
      if (failures < 10) $display("FAIL cycle state: ov=%0d fits=%0d stall=%0d n=%0d", out_valid, fits, stall, q.size());
    end
    if (stall) nstall++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_cmd != q[0]) begin failures++; $display("FAIL order"); end
      used[q[0].qpn] += npk(q[0]);
      void'(q.pop_front());
      nout++;
    end
    if (ack_evt_valid) used[ack_evt.qpn] = (used[ack_evt.qpn] > int'(ack_evt.npkts)) ? used[ack_evt.qpn] - int'(ack_evt.npkts) : 0;
    if (in_valid && in_ready) q.push_back(in_cmd);
  end

  initial begin
    in_valid = 0; in_cmd = '0; out_ready = 0; ack_evt_valid = 0; ack_evt = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 40000; it++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) == 0;
      in_cmd = '0; in_cmd.qpn = 16'($urandom % NQP); in_cmd.is_read = 1'($urandom);
      in_cmd.len = ($urandom % 8 == 0) ? 32'(1 + $urandom % 3000) : 32'(1 + $urandom % 600);
      in_cmd.laddr = {$urandom, $urandom}; in_cmd.raddr = {$urandom, $urandom};
      out_ready = ($urandom % 4) != 0;
      ack_evt = '0; ack_evt.qpn = 16'($urandom % NQP);
      ack_evt_valid = used[ack_evt.qpn] > 0 && ($urandom % 3) == 0;
      ack_evt.npkts = 24'(1 + $urandom % (used[ack_evt.qpn] > 0 ? used[ack_evt.qpn] : 1));
    end
    @(negedge clk); in_valid = 0; ack_evt_valid = 0;
    $display("forwarded %0d requests, %0d stall cycles", nout, nstall);
    checks++; if (nstall == 0 || nout < 1000) begin failures++; $display("FAIL too little activity"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
