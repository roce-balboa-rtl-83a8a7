// icrc - ICRC pipeline: computes the RoCE v2 invariant CRC of each outgoing packet and appends it.
//
// The ICRC is the Ethernet CRC-32 over 8 bytes of 0xFF followed by the IP packet in which the
// fields that routers may change (IP DSCP/ECN, TTL and header checksum, UDP checksum, BTH
// reserved byte) are replaced by 0xFF. The "bitmasking stage" applies that mask to the first
// beat; the 8 leading 0xFF bytes are folded into the start value (CRC_INIT).
// Because a running CRC has to be updated once per beat, the beats of a packet fall into three
// classes, each with its own one-shot CRC unit:
//   * full 64-byte beats                  -> CRC512 (one cycle, feeds the running CRC back),
//   * a 40-byte last beat                 -> CRC320 (one shot; 40 bytes is the tail of an MTU
//                                            packet without RETH: 40 header bytes + 4096),
//   * any other last beat (4..60 bytes,   -> chain of 16 CRC32 stages, CRC32_0..CRC32_15, each
//     payload always 4-byte aligned)         folding one 32-bit word per pipeline stage.
// Last beats pass through all 16 stages whatever their class so that results stay in packet
// order. Meanwhile the beats wait in a FIFO; when the last beat of a packet leaves it, the
// complemented CRC is inserted after its last byte (least significant byte first), in the same
// beat if there is room, otherwise in one extra beat ("CRC insertion & beat creation").
// Latency: 17 cycles plus the output register for a single-beat packet; throughput one beat per
// cycle, plus one extra beat for packets whose last beat is full.
module icrc
  import balboa_pkg::*;
#(
  parameter int unsigned FIFO_AW = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  axis_t in_beat,
  input  logic  in_valid,
  output logic  in_ready,
  output axis_t out_beat,
  output logic  out_valid,
  input  logic  out_ready
);

  localparam int unsigned NST = 16;
  localparam int unsigned FD  = 2**FIFO_AW;

  function automatic logic [31:0] crc_init();
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < 8; i++) c = crc32_byte(c, 8'hFF);
    return c;
  endfunction
  localparam logic [31:0] CRC_INIT = crc_init();

  function automatic logic [31:0] crc512(input logic [31:0] c, input logic [DATA_W-1:0] d);
    for (int i = 0; i < 64; i++) c = crc32_byte(c, d[8*i +: 8]);
    return c;
  endfunction
  function automatic logic [31:0] crc320(input logic [31:0] c, input logic [319:0] d);
    for (int i = 0; i < 40; i++) c = crc32_byte(c, d[8*i +: 8]);
    return c;
  endfunction
  function automatic logic [31:0] crc32w(input logic [31:0] c, input logic [31:0] d);
    for (int i = 0; i < 4; i++) c = crc32_byte(c, d[8*i +: 8]);
    return c;
  endfunction

  typedef enum logic [1:0] {M_FULL, M_W40, M_CHAIN} mode_e;
  typedef struct packed {
    logic              v;
    mode_e             mode;
    logic [4:0]        nw;     // 32-bit words in the beat
    logic [31:0]       crc;
    logic [DATA_W-1:0] data;
  } stage_t;

  // ---------------- input side: mask, running CRC, stage 0 ----------------
  logic              first;
  logic [31:0]       crc_run;
  logic [DATA_W-1:0] md;          // masked data
  logic [31:0]       cin;
  logic [7:0]        nbytes;
  logic              take;
  stage_t            st [NST];

  // data FIFO
  axis_t       dfifo [FD];
  logic [FIFO_AW:0] dwp, drp;
  logic        dfull, dempty;
  // result FIFO
  logic [31:0] cfifo [FD];
  logic [FIFO_AW:0] cwp, crp;
  logic        cempty;

  assign dfull    = (dwp[FIFO_AW-1:0] == drp[FIFO_AW-1:0]) && (dwp[FIFO_AW] != drp[FIFO_AW]);
  assign dempty   = dwp == drp;
  assign cempty   = cwp == crp;
  assign in_ready = !dfull;
  assign take     = in_valid && in_ready;

  always_comb begin
    md = in_beat.data;
    if (first) begin
      md[8 +: 8]   = 8'hFF;    // IP DSCP / ECN
      md[64 +: 8]  = 8'hFF;    // IP TTL
      md[80 +: 16] = 16'hFFFF; // IP header checksum
      md[208 +: 16] = 16'hFFFF;// UDP checksum
      md[256 +: 8] = 8'hFF;    // BTH reserved byte
    end
    cin    = first ? CRC_INIT : crc_run;
    nbytes = keep_count(in_beat.keep);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first   <= 1'b1;
      crc_run <= CRC_INIT;
      dwp     <= '0;
      for (int i = 0; i < NST; i++) st[i] <= '0;
    end else begin
      st[0].v <= 1'b0;
      if (take) begin
        dfifo[dwp[FIFO_AW-1:0]] <= in_beat;
        dwp   <= dwp + 1'b1;
        first <= in_beat.last;
        if (!in_beat.last) begin
          crc_run <= crc512(cin, md);
        end else begin
          st[0].v    <= 1'b1;
          st[0].data <= md;
          st[0].nw   <= 5'(nbytes >> 2);
          if (nbytes == 8'd64) begin
            st[0].mode <= M_FULL;
            st[0].crc  <= crc512(cin, md);
          end else if (nbytes == 8'd40) begin
            st[0].mode <= M_W40;
            st[0].crc  <= crc320(cin, md[319:0]);
          end else begin
            st[0].mode <= M_CHAIN;
            st[0].crc  <= (nbytes >= 8'd4) ? crc32w(cin, md[31:0]) : cin;   // CRC32_0
          end
        end
      end
      // CRC32_1 .. CRC32_15
      for (int i = 1; i < NST; i++) begin
        st[i] <= st[i-1];
        if (st[i-1].v && st[i-1].mode == M_CHAIN && 5'(i) < st[i-1].nw)
          st[i].crc <= crc32w(st[i-1].crc, st[i-1].data[32*i +: 32]);
      end
    end
  end

  // results, in packet order
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cwp <= '0;
    else if (st[NST-1].v) begin
      cfifo[cwp[FIFO_AW-1:0]] <= ~st[NST-1].crc;
      cwp <= cwp + 1'b1;
    end
  end

  // ---------------- output side: insertion and beat creation ----------------
  axis_t       head;
  logic        out_free, can, extra;
  logic [31:0] icrc_v, extra_crc;
  logic [7:0]  hn;

  assign head     = dfifo[drp[FIFO_AW-1:0]];
  assign icrc_v   = cfifo[crp[FIFO_AW-1:0]];
  assign hn       = keep_count(head.keep);
  assign out_free = !out_valid || out_ready;
  assign can      = out_free && !extra && !dempty && (!head.last || !cempty);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drp       <= '0;
      crp       <= '0;
      extra     <= 1'b0;
      extra_crc <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (extra && out_free) begin
        out_beat.data <= {{(DATA_W-32){1'b0}}, extra_crc};
        out_beat.keep <= {{(KEEP_W-4){1'b0}}, 4'hF};
        out_beat.last <= 1'b1;
        out_valid     <= 1'b1;
        extra         <= 1'b0;
      end else if (can) begin
        drp       <= drp + 1'b1;
        out_valid <= 1'b1;
        out_beat  <= head;
        if (head.last) begin
          crp <= crp + 1'b1;
          if (hn <= 8'd60) begin
            out_beat.data <= head.data | ({{(DATA_W-32){1'b0}}, icrc_v} << (8 * hn));
            out_beat.keep <= head.keep | ({{(KEEP_W-4){1'b0}}, 4'hF} << hn);
          end else begin
            out_beat.last <= 1'b0;
            extra         <= 1'b1;
            extra_crc     <= icrc_v;
          end
        end
      end
    end
  end

endmodule
