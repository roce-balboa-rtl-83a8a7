// tb_retrans_mux - payload multiplexer with a retransmission buffer attached. A random sequence
// of packet descriptors takes payload from the WRITE bus, the READ RESPONSE bus, the buffer
// (replays of earlier packets, after the buffer address has wrapped too) or nowhere (header-only
// packets). The testbench keeps its own copy of what the buffer must hold and expects every
// output packet to carry the right bytes, byte count, tlast and metadata. Both host buses and the
// output see random stalls.
module tb_retrans_mux;
  import balboa_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a falling edge, so that the asynchronous resets act before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fh = 0, wh = 0, rh = 0, pk = 0, bi = 0;

  pay_src_e f_src;
  logic [AW-1:0] f_addr, buf_waddr, buf_raddr;
  logic [15:0] f_bytes;
  roce_meta_t f_meta, out_meta;
  logic f_valid, f_ready, wr_valid, wr_ready, rr_valid, rr_ready, buf_we, out_valid, out_ready;
  axis_t wr_beat, rr_beat, out_beat;
  logic [DATA_W-1:0] buf_wdata, buf_rdata;
  logic wgate, rgate;

  typedef struct { pay_src_e src; int addr; int bytes; roce_meta_t meta; } desc_t;
  desc_t dq[$];
  axis_t wq[$], rq[$];
  axis_t expq[$];            // expected output beats (data compared on kept bytes)
  roce_meta_t expm[$];
  logic [DATA_W-1:0] shadow[2**AW];

  retrans_mux #(.BUF_AW(AW)) dut (.*);
  retx_buffer #(.AW(AW)) u_buf (.clk, .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata), .raddr(buf_raddr), .rdata(buf_rdata));

  assign f_valid  = fh < dq.size();
  assign f_src    = f_valid ? dq[fh].src : SRC_NONE;
  assign f_addr   = f_valid ? AW'(dq[fh].addr) : '0;
  assign f_bytes  = f_valid ? 16'(dq[fh].bytes) : '0;
  assign f_meta   = f_valid ? dq[fh].meta : '0;
  assign wr_valid = wh < wq.size() && wgate;
  assign wr_beat  = wh < wq.size() ? wq[wh] : '0;
  assign rr_valid = rh < rq.size() && rgate;
  assign rr_beat  = rh < rq.size() ? rq[rh] : '0;

  function automatic logic [DATA_W-1:0] rnd512();
    logic [DATA_W-1:0] r;
    for (int i = 0; i < DATA_W / 32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  always_ff @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    wgate     <= ($urandom % 3) != 0;
    rgate     <= ($urandom % 3) != 0;
    if (f_valid && f_ready) fh <= fh + 1;
    if (wr_valid && wr_ready) wh <= wh + 1;
    if (rr_valid && rr_ready) rh <= rh + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (bi >= expq.size()) begin failures++; $display("FAIL extra beat"); end
      else begin
        if (out_beat.keep != expq[bi].keep || out_beat.last != expq[bi].last ||
            ((out_beat.data ^ expq[bi].data) & keep_bits(out_beat.keep)) != '0 || out_meta != expm[bi]) begin
          failures++; if (failures < 5) $display("FAIL beat %0d (packet psn %0d)", bi, expm[bi].psn);
        end
      end
      bi++;
    end
  end

  function automatic logic [DATA_W-1:0] keep_bits(input logic [KEEP_W-1:0] k);
    logic [DATA_W-1:0] r;
    for (int i = 0; i < KEEP_W; i++) r[8*i +: 8] = {8{k[i]}};
    return r;
  endfunction

  // queue one packet: descriptor, host data and expected output
  task automatic add(input pay_src_e src, input int addr, input int bytes);
    desc_t d;
    axis_t b;
    int nbeats;
    d.src = src; d.addr = addr; d.bytes = bytes;
    d.meta = '0; d.meta.psn = 24'(pk++); d.meta.opcode = 8'($urandom);
    dq.push_back(d);
    nbeats = (src == SRC_NONE) ? 1 : (bytes + 63) / 64;
    for (int j = 0; j < nbeats; j++) begin
      int a;
      a = (addr + j) % (2**AW);
      b = '0;
      if (src == SRC_WR || src == SRC_RR) begin
        b.data = rnd512(); shadow[a] = b.data;
        if (src == SRC_WR) wq.push_back(b); else rq.push_back(b);
      end else if (src == SRC_BUF) b.data = shadow[a];
      b.keep = (src == SRC_NONE) ? '0 : keep_mask(8'((j == nbeats - 1) ? bytes - 64 * j : 64));
      b.last = (j == nbeats - 1);
      expq.push_back(b); expm.push_back(d.meta);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int wp = 0;
    int hist_a[$], hist_n[$];
    out_ready = 0; wgate = 0; rgate = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    add(SRC_NONE, 0, 0);
    add(SRC_WR, 0, 64);
    add(SRC_BUF, 0, 64);
    for (int k = 0; k < 400; k++) begin
      int r, n;
      r = $urandom % 4;
      n = 1 + $urandom % 700;
      if (r == 0 || r == 1) begin
        add(r == 0 ? SRC_WR : SRC_RR, wp, n);
        hist_a.push_back(wp); hist_n.push_back(n);
        if (hist_a.size() > 4) begin void'(hist_a.pop_front()); void'(hist_n.pop_front()); end
        wp = (wp + (n + 63) / 64) % (2**AW);
      end else if (r == 2 && hist_a.size() > 0) begin
        int h;
        h = $urandom % hist_a.size();
        add(SRC_BUF, hist_a[h], hist_n[h]);
      end else add(SRC_NONE, 0, 0);
    end
    while (bi < expq.size()) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++; if (bi != expq.size() || wh != wq.size() || rh != rq.size()) begin failures++; $display("FAIL counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
