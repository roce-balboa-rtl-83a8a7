// tb_ipv4_rx - IPv4 header check and strip: accepted packets lose their 20-byte header and are
// trimmed to the IP length; packets for another address or another protocol are dropped.
// Random backpressure on the output.
module tb_ipv4_rx;
  import balboa_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axis_t in_beat, out_beat;
  roce_meta_t out_meta;
  logic in_valid, in_ready, out_valid, out_ready, drop_pulse;
  axis_t inq[$];
  bytes_t exp_b, got_b;
  int exp_n[$], got_n[$], exp_ip[$], got_ip[$], ndrop = 0, cur = 0, head = 0;

  ipv4_rx dut (.clk, .rst_n, .local_ip(32'h0A000002), .in_beat, .in_valid, .in_ready,
               .out_beat, .out_meta, .out_valid, .out_ready, .drop_pulse);

  // The queue is read through an index that advances with a nonblocking update, so the DUT
  // samples the same beat that the handshake refers to.
  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();

  always_ff @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (in_valid && in_ready) head <= head + 1;
    if (drop_pulse) ndrop++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) begin got_b.push_back(out_beat.data[8*i +: 8]); cur++; end
      if (out_beat.last) begin got_n.push_back(cur); got_ip.push_back(out_meta.ip); cur = 0; end
    end
  end

  task automatic send(input int len, input int dst, input int proto, input int extra, input bit good);
    bytes_t body, p;
    body = rnd_bytes(len);
    p = zeros(20);
    p[0] = 8'h45; put_be(p, 2, 2, 20 + len); p[9] = 8'(proto);
    put_be(p, 12, 4, 32'h0A000001 + len); put_be(p, 16, 4, dst);
    p = cat(p, body);
    p = cat(p, rnd_bytes(extra));          // bytes beyond the IP length (e.g. padding)
    to_beats(p, inq);
    if (good) begin
      foreach (body[i]) exp_b.push_back(body[i]);
      exp_n.push_back(len); exp_ip.push_back(32'h0A000001 + len);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    send(8, 32'h0A000002, 17, 0, 1);          // minimum packet: UDP header only
    send(44, 32'h0A000002, 17, 0, 1);         // exactly one beat
    send(100, 32'h0A000002, 17, 4, 1);        // two beats, trailing bytes trimmed
    send(100, 32'h0A000003, 17, 0, 0);        // other destination
    send(300, 32'h0A000002, 6, 0, 0);         // TCP
    send(1000, 32'h0A000002, 17, 0, 1);
    send(64 - 20 + 64, 32'h0A000002, 17, 0, 1);
    for (int k = 0; k < 20; k++) send(8 + 4 * ($urandom % 200), 32'h0A000002, 17, 0, 1);
    while (head < inq.size()) @(posedge clk);
    repeat (300) @(posedge clk);
    checks++; if (got_n.size() != exp_n.size()) begin failures++; $display("FAIL packets %0d vs %0d", got_n.size(), exp_n.size()); end
    foreach (exp_n[i]) if (i < got_n.size()) begin
      checks++; if (got_n[i] != exp_n[i] || got_ip[i] != exp_ip[i]) begin failures++; $display("FAIL pkt %0d len %0d/%0d", i, got_n[i], exp_n[i]); end
    end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL payload bytes differ"); end
    checks++; if (ndrop != 2) begin failures++; $display("FAIL drops %0d", ndrop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
