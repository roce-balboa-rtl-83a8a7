// flow_control - ACK-clocked flow control on the command path.
//
// Host RDMA requests enter a request buffer (FIFO). The request at its head is forwarded to the
// packet processing pipeline only if its QP has enough budget left for all packets of the
// message; otherwise it waits in the buffer. The budget is kept per QP as the number of packets
// on the wire (sent and not yet acknowledged): forwarding a request adds its packet count, an
// acknowledgement event from the RX path subtracts the number of packets it acknowledged.
// A QP may have at most BUDGET packets outstanding; a message longer than BUDGET packets is let
// through when its QP has nothing outstanding, so that it cannot block forever. One request per cycle; the FIFO is
// first-in first-out over all QPs.
module flow_control
  import balboa_pkg::*;
#(
  parameter int unsigned NQP       = 500,
  parameter int unsigned PMTU      = 4096,
  parameter int unsigned BUDGET    = 64,     // packets in flight per QP
  parameter int unsigned REQ_DEPTH = 32,     // request buffer entries
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  rdma_cmd_t in_cmd,
  input  logic      in_valid,
  output logic      in_ready,
  output rdma_cmd_t out_cmd,
  output logic      out_valid,
  input  logic      out_ready,
  input  ack_evt_t  ack_evt,
  input  logic      ack_evt_valid,
  output logic      stall          // head request held back for lack of budget
);

  localparam int unsigned AW = $clog2(REQ_DEPTH);
  localparam int unsigned PSHIFT = $clog2(PMTU);

  rdma_cmd_t    fifo [REQ_DEPTH];
  logic [AW:0]  wp, rp;
  logic [23:0]  used [NQP];
  logic         empty, full, fits, pop;
  logic [23:0]  n;
  logic [QW-1:0] hq, eq;
  rdma_cmd_t    head;

  assign empty    = wp == rp;
  assign full     = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign in_ready = !full;
  assign head     = fifo[rp[AW-1:0]];
  assign hq       = head.qpn[QW-1:0];
  assign eq       = ack_evt.qpn[QW-1:0];
  assign n        = (head.len <= 32'(PMTU)) ? 24'd1 : 24'((head.len + 32'(PMTU) - 1) >> PSHIFT);
  assign fits     = (used[hq] + n <= 24'(BUDGET)) || (used[hq] == 0);
  assign out_cmd  = head;
  assign out_valid = !empty && fits;
  assign pop      = out_valid && out_ready;
  assign stall    = !empty && !fits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      for (int i = 0; i < NQP; i++) used[i] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        fifo[wp[AW-1:0]] <= in_cmd;
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      if (pop && ack_evt_valid && hq == eq) used[hq] <= used[hq] + n - ack_evt.npkts;
      else begin
        if (pop) used[hq] <= used[hq] + n;
        if (ack_evt_valid) used[eq] <= (used[eq] > ack_evt.npkts) ? used[eq] - ack_evt.npkts : '0;
      end
    end
  end

endmodule
