// tb_util_pkg - helpers shared by the testbenches: packets as byte queues, conversion to and
// from 512-bit beats, and big-endian header fields.
package tb_util_pkg;
  import balboa_pkg::*;

  typedef byte unsigned bytes_t[$];

  function automatic void to_beats(input bytes_t p, ref axis_t q[$]);
    axis_t b;
    int n = p.size();
    if (n == 0) begin
      b = '0; b.last = 1'b1; q.push_back(b); return;
    end
    for (int o = 0; o < n; o += 64) begin
      b = '0;
      for (int i = 0; i < 64; i++) if (o + i < n) begin
        b.data[8*i +: 8] = p[o + i];
        b.keep[i] = 1'b1;
      end
      b.last = (o + 64 >= n);
      q.push_back(b);
    end
  endfunction

  function automatic void put_be(ref bytes_t p, input int off, input int nbytes, input longint v);
    for (int i = 0; i < nbytes; i++) p[off + i] = 8'(v >> (8 * (nbytes - 1 - i)));
  endfunction

  function automatic longint get_be(input bytes_t p, input int off, input int nbytes);
    longint v = 0;
    for (int i = 0; i < nbytes; i++) v = (v << 8) | longint'(p[off + i]);
    return v;
  endfunction

  function automatic bytes_t zeros(input int n);
    bytes_t p;
    for (int i = 0; i < n; i++) p.push_back(8'h00);
    return p;
  endfunction

  function automatic bytes_t rnd_bytes(input int n);
    bytes_t p;
    for (int i = 0; i < n; i++) p.push_back(8'($urandom));
    return p;
  endfunction

  // IPv4 + UDP headers (48... 28 bytes) in front of an InfiniBand packet body.
  function automatic bytes_t ip_udp(input bytes_t ib, input int src_ip, input int dst_ip,
                                    input int sport, input int dport);
    bytes_t p = zeros(28);
    p[0] = 8'h45;
    put_be(p, 2, 2, 28 + ib.size());
    p[8] = 8'd64; p[9] = 8'd17;
    put_be(p, 12, 4, src_ip); put_be(p, 16, 4, dst_ip);
    put_be(p, 20, 2, sport); put_be(p, 22, 2, dport); put_be(p, 24, 2, 8 + ib.size());
    foreach (ib[i]) p.push_back(ib[i]);
    return p;
  endfunction

  // BTH (12 B)
  function automatic bytes_t bth(input int op, input int qpn, input int psn, input bit ackreq);
    bytes_t p = zeros(12);
    p[0] = 8'(op); put_be(p, 2, 2, 16'hFFFF); put_be(p, 5, 3, qpn);
    p[8] = {ackreq, 7'd0}; put_be(p, 9, 3, psn);
    return p;
  endfunction

  function automatic bytes_t cat(input bytes_t a, input bytes_t b);
    bytes_t p = a;
    foreach (b[i]) p.push_back(b[i]);
    return p;
  endfunction

endpackage
