// transport_timer - per-QP retransmission timers.
//
// Each QP has a timer entry (armed flag and start time stamp) in a table. The TX path arms the
// timer of a QP when it sends a packet and the timer is not yet running; an ACK that makes
// progress restarts it, and an ACK that leaves nothing outstanding stops it. A scan pointer
// visits one entry per clock cycle and compares the elapsed time with TIMEOUT; an expired entry
// emits a timeout event for its QP (to trigger a retransmission) and restarts. With NQP entries
// the detection granularity is NQP cycles. Arming/restart/stop have priority over the scan.
module transport_timer
  import balboa_pkg::*;
#(
  parameter int unsigned NQP     = 500,
  parameter int unsigned TIMEOUT = 65536,   // cycles
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm,          // packet sent: start if not running
  input  logic [QW-1:0] arm_q,
  input  logic          restart,      // progress: restart (or stop if stop=1)
  input  logic          stop,
  input  logic [QW-1:0] restart_q,
  output logic [QW-1:0] to_q,
  output logic          to_valid,
  input  logic          to_ready
);

  logic          act_m [NQP];
  logic [31:0]   start_m [NQP];
  logic [31:0]   now;
  logic [QW-1:0] scan;
  logic          expired;

  assign expired = act_m[scan] && (now - start_m[scan] >= TIMEOUT) && !to_valid &&
                   !(arm && arm_q == scan) && !(restart && restart_q == scan);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now      <= '0;
      scan     <= '0;
      to_valid <= 1'b0;
      to_q     <= '0;
      for (int i = 0; i < NQP; i++) begin
        act_m[i]   <= 1'b0;
        start_m[i] <= '0;
      end
    end else begin
      now  <= now + 1;
      scan <= (scan == QW'(NQP - 1)) ? '0 : scan + 1'b1;
      if (to_valid && to_ready) to_valid <= 1'b0;
      if (expired) begin
        to_valid       <= 1'b1;
        to_q           <= scan;
        start_m[scan]  <= now;
      end
      if (arm && !act_m[arm_q]) begin
        act_m[arm_q]   <= 1'b1;
        start_m[arm_q] <= now;
      end
      if (restart) begin
        act_m[restart_q]   <= !stop;
        start_m[restart_q] <= now;
      end
    end
  end

endmodule
