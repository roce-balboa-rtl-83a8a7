// tb_icrc - ICRC generator. Random IP packets (multiples of 4 bytes, as RoCE packets are) of every
// last-beat size from 4 to 64 bytes, MTU-sized packets whose last beat holds 40 bytes, and random
// ones pass through with random output backpressure; each must come out unchanged with the
// correct ICRC appended least significant byte first. The reference is a bit-serial CRC-32 over
// eight 0xFF bytes and the masked packet, itself checked on the standard "123456789" vector.
// With the output always ready, a burst of MTU-sized packets must stream at one beat per cycle
// plus at most two cycles per packet.
module tb_icrc;
  import balboa_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, head = 0, cyc = 0, nbeats = 0;
  bit free_run = 0;

  axis_t in_beat, out_beat;
  logic in_valid, in_ready, out_valid, out_ready;
  axis_t inq[$];
  bytes_t exp_b, got_b, cur;
  int exp_n[$], got_n[$];

  icrc dut (.*);

  assign in_beat  = head < inq.size() ? inq[head] : '0;
  assign in_valid = head < inq.size();

  function automatic logic [31:0] crc_bits(input bytes_t p, input int pre_ff, input bit mask);
    logic [31:0] c;
    logic [7:0] b;
    c = 32'hFFFFFFFF;
    for (int i = -pre_ff; i < p.size(); i++) begin
      if (i < 0) b = 8'hFF;
      else begin
        b = p[i];
        if (mask && (i == 1 || i == 8 || i == 10 || i == 11 || i == 26 || i == 27 || i == 32)) b = 8'hFF;
      end
      for (int j = 0; j < 8; j++) c = ((c[0] ^ b[j]) == 1'b1) ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return ~c;
  endfunction

  always_ff @(posedge clk) begin
    cyc++;
    out_ready <= free_run ? 1'b1 : (($urandom % 4) != 0);
    if (in_valid && in_ready) head <= head + 1;
    if (out_valid && out_ready) begin
      nbeats++;
      for (int i = 0; i < 64; i++) if (out_beat.keep[i]) got_b.push_back(out_beat.data[8*i +: 8]);
      if (out_beat.last) got_n.push_back(0);
    end
  end

  task automatic send(input int len);
    bytes_t p;
    logic [31:0] c;
    p = rnd_bytes(len);
    p[0] = 8'h45; put_be(p, 2, 2, len);
    to_beats(p, inq);
    c = crc_bits(p, 8, 1);
    p = cat(p, '{c[7:0], c[15:8], c[23:16], c[31:24]});
    foreach (p[i]) exp_b.push_back(p[i]);
    exp_n.push_back(0);
  endtask

  task automatic drain();
    while (head < inq.size()) @(posedge clk);
    repeat (100) @(posedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bytes_t v;
    int c0, b0, npk;
    v = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    checks++; if (crc_bits(v, 0, 0) != 32'hCBF43926) begin failures++; $display("FAIL reference CRC"); end
    out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 1; k <= 16; k++) send(64 + 4 * k);          // every last-beat size
    for (int k = 1; k <= 16; k++) send(28 + 4 * k);          // single-beat packets (up to 92 bytes)
    send(40 + 4096); send(56 + 4096); send(44 + 4096);       // MTU packets
    for (int k = 0; k < 60; k++) send(28 + 4 * ($urandom % 1100));
    drain();
    checks++; if (got_n.size() != exp_n.size()) begin failures++; $display("FAIL packets %0d vs %0d", got_n.size(), exp_n.size()); end
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL bytes or ICRC differ"); end
    // throughput: ten MTU packets with a 40-byte tail, output always ready
    free_run = 1;
    @(posedge clk);
    c0 = cyc; b0 = nbeats; npk = got_n.size();
    for (int k = 0; k < 10; k++) send(40 + 4096);
    while (got_n.size() < npk + 10) @(posedge clk);
    $display("10 MTU packets: %0d beats in %0d cycles", nbeats - b0, cyc - c0);
    checks++; if (cyc - c0 > (nbeats - b0) + 2 * 10 + 20) begin failures++; $display("FAIL throughput"); end
    drain();
    checks++; if (got_b != exp_b) begin failures++; $display("FAIL bytes differ after burst"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
