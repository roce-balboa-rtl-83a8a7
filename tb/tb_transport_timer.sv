// tb_transport_timer - random arming, restarting and stopping of the per-QP timers, checked
// against a reference model of when each QP's timer was last (re)started. Every timeout event
// must belong to a running timer whose age is at least TIMEOUT and at most TIMEOUT plus two scan
// rounds (the scan visits one QP per cycle; a pending event holds the next one back), and no
// running timer may grow older than that without firing.
module tb_transport_timer;
  import balboa_pkg::*;
  localparam int NQP = 8, TIMEOUT = 200;
  localparam int QW = $clog2(NQP);
  localparam int SLACK = 2 * NQP + 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nto = 0, cyc = 0, pend = 0;
  bit noted = 0;

  logic arm, restart, stop, to_valid, to_ready;
  logic [QW-1:0] arm_q, restart_q, to_q;
  bit ract[NQP];
  int rstart[NQP];

  transport_timer #(.NQP(NQP), .TIMEOUT(TIMEOUT)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference model, updated at the same edges as the design
  always @(posedge clk) if (rst_n) begin
    if (to_valid && !noted) begin noted = 1; pend = cyc - 1; end   // cycle the event was raised
    if (to_valid && to_ready) begin
      int age;
      nto++;
      noted = 0;
      age = pend - rstart[to_q];
      checks++;
      if (!ract[to_q] || age < TIMEOUT || age > TIMEOUT + SLACK) begin
        failures++; $display("FAIL timeout q=%0d act=%0d age=%0d", to_q, ract[to_q], age);
      end
      rstart[to_q] = pend;
    end
    if (arm && !ract[arm_q]) begin ract[arm_q] = 1; rstart[arm_q] = cyc; end
    if (restart) begin ract[restart_q] = !stop; rstart[restart_q] = cyc; end
    for (int q = 0; q < NQP; q++) if (ract[q] && cyc - rstart[q] > TIMEOUT + SLACK + 2) begin
      failures++; $display("FAIL missed timeout q=%0d", q); rstart[q] = cyc;
    end
    cyc++;
  end

  initial begin
    {arm, restart, stop} = '0; arm_q = '0; restart_q = '0; to_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // a single armed QP fires after TIMEOUT cycles
    @(negedge clk); arm = 1; arm_q = 3;
    @(negedge clk); arm = 0;
    repeat (TIMEOUT + SLACK + 5) @(negedge clk);
    checks++; if (nto != 1) begin failures++; $display("FAIL single timeout count %0d", nto); end
    // stop it
    restart = 1; stop = 1; restart_q = 3;
    @(negedge clk); restart = 0; stop = 0;
    repeat (2 * TIMEOUT) @(negedge clk);
    checks++; if (nto != 1) begin failures++; $display("FAIL stopped timer fired"); end
    // random traffic
    for (int it = 0; it < 30000; it++) begin
      @(negedge clk);
      arm = ($urandom % 40) == 0; arm_q = QW'($urandom);
      restart = ($urandom % 150) == 0; stop = $urandom % 2; restart_q = QW'($urandom);
      to_ready = ($urandom % 4) != 0;
    end
    @(negedge clk); {arm, restart} = '0; to_ready = 1;
    repeat (TIMEOUT) @(negedge clk);
    checks++; if (nto < 20) begin failures++; $display("FAIL too few timeouts %0d", nto); end
    $display("timeouts seen: %0d", nto);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
