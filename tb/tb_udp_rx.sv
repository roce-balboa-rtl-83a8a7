// tb_udp_rx - UDP check and strip: datagrams to the RoCE port lose their 8-byte header, are
// trimmed to the UDP length and carry the source port in their metadata; datagrams to another
// port, or too short to hold a BTH and an ICRC, are dropped. Random backpressure on the output.
module tb_udp_rx;
  import balboa_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axis_t in_beat, out_beat;
  roce_meta_t in_meta, out_meta;
  logic in_valid, in_ready, out_valid, out_ready, drop_pulse;
  axis_t inq[$];
  bytes_t exp_b, got_b;
  int exp_n[$], got_n[$], exp_p[$], got_p[$], got_ip[$], ndrop = 0, cur = 0, head = 0;

  udp_rx dut (.*);

  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();
  always_comb begin
    in_meta = '0;
    in_meta.ip = 32'hC0A80001;
  end

  always_ff @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    if (in_valid && in_ready) head <= head + 1;
    if (drop_pulse) ndrop++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) begin got_b.push_back(out_beat.data[8*i +: 8]); cur++; end
      if (out_beat.last) begin got_n.push_back(cur); got_p.push_back(out_meta.port); got_ip.push_back(out_meta.ip); cur = 0; end
    end
  end

  task automatic send(input int len, input int dport, input int extra, input bit good);
    bytes_t body, p;
    int sport;
    sport = $urandom % 65536;
    body = rnd_bytes(len);
    p = zeros(8);
    put_be(p, 0, 2, sport); put_be(p, 2, 2, dport); put_be(p, 4, 2, 8 + len);
    p = cat(p, body);
    p = cat(p, rnd_bytes(extra));
    to_beats(p, inq);
    if (good) begin
      foreach (body[i]) exp_b.push_back(body[i]);
      exp_n.push_back(len); exp_p.push_back(sport);
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
    send(16, 4791, 0, 1);                   // BTH + ICRC only
    send(56, 4791, 0, 1);                   // exactly one beat
    send(120, 4791, 6, 1);                  // trailing bytes trimmed
    send(100, 4790, 0, 0);                  // other port
    send(12, 4791, 0, 0);                   // too short
    send(64 - 8 + 64, 4791, 0, 1);          // last beat full: needs the flush beat
    for (int k = 0; k < 20; k++) send(16 + 4 * ($urandom % 300), 4791, 0, 1);
    while (head < inq.size()) @(posedge clk);
    repeat (300) @(posedge clk);
    checks++; if (got_n.size() != exp_n.size()) begin failures++; $display("FAIL packets %0d vs %0d", got_n.size(), exp_n.size()); end
    foreach (exp_n[i]) if (i < got_n.size()) begin
      checks++;
      if (got_n[i] != exp_n[i] || got_p[i] != exp_p[i] || got_ip[i] != 32'hC0A80001) begin
        failures++; $display("FAIL pkt %0d len %0d/%0d port %0d/%0d", i, got_n[i], exp_n[i], got_p[i], exp_p[i]);
      end
    end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL payload bytes differ"); end
    checks++; if (ndrop != 2) begin failures++; $display("FAIL drops %0d", ndrop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
