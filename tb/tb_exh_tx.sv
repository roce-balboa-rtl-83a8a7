// tb_exh_tx - extended-header insertion: WRITE FIRST/ONLY and READ REQUEST packets get a 16-byte
// RETH (virtual address, R_Key, DMA length), READ RESPONSE FIRST/LAST/ONLY and ACK packets a
// 4-byte AETH (syndrome, MSN), the other opcodes nothing. Random opcodes, payload sizes, metadata
// and output backpressure; the expected bytes are assembled independently in the testbench.
module tb_exh_tx;
  import balboa_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0, cur = 0;

  axis_t in_beat, out_beat;
  roce_meta_t in_meta, out_meta;
  logic in_valid, in_ready, out_valid, out_ready;
  axis_t inq[$];
  roce_meta_t mq[$];
  int mi = 0;
  bit tfirst = 1;
  bytes_t exp_b, got_b;
  int exp_n[$], got_n[$], exp_pl[$], got_pl[$];

  exh_tx dut (.clk, .rst_n, .in_beat, .in_meta, .in_valid, .in_ready,
              .out_beat, .out_meta, .out_valid, .out_ready);

  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();
  assign in_meta  = mi < mq.size() ? mq[mi] : '0;

  always_ff @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (in_valid && in_ready) begin
      head <= head + 1;
      if (in_beat.last) mi <= mi + 1;
    end
    if (out_valid && out_ready) begin
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) begin got_b.push_back(out_beat.data[8*i +: 8]); cur++; end
      if (out_beat.last) begin got_n.push_back(cur); got_pl.push_back(int'(out_meta.pay_len)); cur = 0; end
    end
  end

  task automatic send(input logic [7:0] op, input int len);
    bytes_t body, h, p;
    roce_meta_t m;
    axis_t b;
    longint s;
    m = '0;
    m.opcode = op; m.rqpn = 24'($urandom); m.psn = 24'($urandom); m.ackreq = 1'($urandom);
    m.vaddr = {$urandom, $urandom}; m.rkey = $urandom; m.dma_len = $urandom; m.syndrome = 8'($urandom);
    m.msn = 24'($urandom); m.pay_len = 16'(len); m.ip = $urandom; m.port = 16'($urandom);
    h = {};
    if (op == 8'h06 || op == 8'h0A || op == 8'h0C) begin
      h = zeros(16);
      put_be(h, 0, 8, longint'(m.vaddr)); put_be(h, 8, 4, m.rkey); put_be(h, 12, 4, m.dma_len);
    end else if (op == 8'h0D || op == 8'h0F || op == 8'h10 || op == 8'h11) begin
      h = zeros(4);
      h[0] = m.syndrome; put_be(h, 1, 3, m.msn);
    end
    body = rnd_bytes(len);
    p = cat(h, body);
    if (len == 0) begin
      b = '0; b.last = 1'b1; inq.push_back(b);      // header-only packet: one empty beat
    end else to_beats(body, inq);
    mq.push_back(m);
    foreach (p[i]) exp_b.push_back(p[i]);
    exp_n.push_back(p.size());
    exp_pl.push_back(int'(m.pay_len + 16'(h.size())));
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] ops[10] = '{8'h06, 8'h07, 8'h08, 8'h0A, 8'h0C, 8'h0D, 8'h0E, 8'h0F, 8'h10, 8'h11};
    out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (ops[k]) send(ops[k], 0);
    for (int k = 0; k < 64; k++) send(8'h0A, k + 40);     // every alignment of the last beat
    for (int k = 0; k < 60; k++) send(ops[$urandom % 10], $urandom % 700);
    while (head < inq.size()) @(posedge clk);
    repeat (200) @(posedge clk);
    checks++; if (got_n.size() != exp_n.size()) begin failures++; $display("FAIL packets %0d vs %0d", got_n.size(), exp_n.size()); end
    foreach (exp_n[i]) if (i < got_n.size()) begin
      checks++;
      if (got_n[i] != exp_n[i] || got_pl[i] != exp_pl[i]) begin
        failures++; $display("FAIL pkt %0d len %0d/%0d meta len %0d/%0d", i, got_n[i], exp_n[i], got_pl[i], exp_pl[i]);
      end
    end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL bytes differ"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
