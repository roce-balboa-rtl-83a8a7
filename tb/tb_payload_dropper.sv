// tb_payload_dropper - receive-side credit check. Random RoCE packets (WRITE ONLY, READ RESPONSE
// ONLY, READ REQUEST, ACK) arrive with random gaps while the host side returns credits at a
// random rate, sometimes not at all, and refunds are injected. A reference model mirrors the
// credit counter cycle by cycle, decides which packets must pass (those without payload always;
// those with payload if enough credits are left) and the design's output and credit count are
// compared with it.
module tb_payload_dropper;
  import balboa_pkg::*;
  import tb_util_pkg::*;
  localparam int CREDITS = 16;
  localparam int CW = $clog2(CREDITS + 1);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0, ndrop = 0, rdrop = 0, owed = 0, cur = 0;

  axis_t in_beat, out_beat;
  roce_meta_t in_meta, out_meta;
  logic in_valid, in_ready, out_valid, out_ready, credit_ret, refund, drop_pulse;
  logic [15:0] refund_beats;
  logic [CW-1:0] credits;
  axis_t inq[$];
  roce_meta_t mq[$];
  int plen[$];
  bit tfirst = 1;
  int rcred = CREDITS, pidx = 0;
  bytes_t pk[$];
  bytes_t exp_b, got_b;
  int exp_n[$], got_n[$];

  payload_dropper #(.CREDITS(CREDITS)) dut (.*);

  logic in_gate;
  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size() && in_gate;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(credits) != rcred) begin failures++; if (failures < 5) $display("FAIL credits %0d exp %0d", credits, rcred); end
    if (drop_pulse) ndrop++;
    if (in_valid && in_ready) begin
      if (tfirst) begin
        logic [7:0] op;
        int b;
        bit need;
        op = in_beat.data[7:0];
        need = is_write(op) || is_rresp(op);
        b = int'(pay_beats(op, in_meta.pay_len));
        if (need && rcred < b) rdrop++;
        else begin
          rcred -= need ? b : 0;
          owed += need ? b : 0;
          for (int i = 0; i < plen[pidx]; i++) exp_b.push_back(pk[pidx][i]);
          exp_n.push_back(plen[pidx]);
        end
        pidx++;
      end
      tfirst = in_beat.last;
      head <= head + 1;
    end
    if (credit_ret) begin rcred++; owed--; end
    if (refund) begin rcred += int'(refund_beats); owed -= int'(refund_beats); end
    if (out_valid && out_ready) begin
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) begin got_b.push_back(out_beat.data[8*i +: 8]); cur++; end
      if (out_beat.last) begin got_n.push_back(cur); cur = 0; end
    end
  end

  // metadata is taken from a per-packet list indexed like the packets
  assign in_meta = pidx < mq.size() ? mq[pidx] : '0;

  task automatic add(input logic [7:0] op, input int paylen);
    bytes_t p;
    roce_meta_t m;
    int n;
    n = 12 + int'(exh_len(op)) + paylen + 4;
    p = rnd_bytes(n + 4 * ($urandom % 2));      // sometimes padding beyond the IB length
    p[0] = op;
    m = '0; m.opcode = op; m.pay_len = 16'(n);
    mq.push_back(m); plen.push_back(n); pk.push_back(p);
    to_beats(p, inq);
  endtask

  initial begin
    logic [7:0] ops[4] = '{8'h0A, 8'h10, 8'h0C, 8'h11};
    credit_ret = 0; refund = 0; refund_beats = '0; out_ready = 0; in_gate = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      logic [7:0] op;
      op = ops[$urandom % 4];
      add(op, (is_write(op) || is_rresp(op)) ? 1 + $urandom % 400 : 0);
    end
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      in_gate = ($urandom % 4) != 0;
      out_ready = ($urandom % 5) != 0;
      // the host drains slowly, and not at all for a while in the middle of the run
      credit_ret = owed > 3 && (it < 4000 || it > 6000) && ($urandom % 3) == 0;
      refund = !credit_ret && owed > 3 && ($urandom % 50) == 0;
      refund_beats = 16'(1 + $urandom % 2);
    end
    @(negedge clk); credit_ret = 0; refund = 0;
    repeat (50) @(negedge clk);
    checks++; if (head != inq.size()) begin failures++; $display("FAIL input not consumed"); end
    checks++; if (got_n != exp_n) begin failures++; $display("FAIL packets %0d vs %0d", got_n.size(), exp_n.size()); end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL payload bytes differ"); end
    checks++; if (ndrop != rdrop || rdrop == 0) begin failures++; $display("FAIL drops %0d exp %0d", ndrop, rdrop); end
    $display("passed %0d packets, dropped %0d", got_n.size(), ndrop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
