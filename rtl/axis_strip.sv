// axis_strip - removes a header from the front of each packet of a 512-bit stream and realigns
// the rest, optionally trimming the packet to a length and optionally dropping it.
//
// With the first beat of a packet the user presents, combinationally from that beat, the header
// length HDR (0..63 bytes), the number of bytes to keep after the header (LEN; the trailing ICRC
// and anything beyond are cut), a drop flag and the metadata that the packet carries from here
// on. Output beat j holds input bytes HDR+64j .. HDR+64j+63, i.e. the upper 64-HDR bytes of input
// beat j and the lower HDR bytes of beat j+1, so each output beat waits for the next input beat.
// When the last input beat holds more than HDR valid bytes one extra output beat is flushed.
// A dropped packet is consumed without output. Throughput is one beat per cycle; the output is
// registered (valid/ready handshake, in_ready depends combinationally on out_ready).
module axis_strip
  import balboa_pkg::*;
#(
  parameter type META_T = roce_meta_t
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axis_t       in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [6:0]  in_hdr,     // header bytes to strip, sampled on the first beat
  input  logic [15:0] in_len,     // bytes to keep after the header, sampled on the first beat
  input  logic        in_drop,    // drop the whole packet, sampled on the first beat
  input  META_T       in_meta,    // metadata, sampled on the first beat
  output logic        in_first,   // the current input beat is the first of its packet
  output axis_t       out_beat,
  output META_T       out_meta,
  output logic        out_valid,
  input  logic        out_ready
);

  logic        first;      // next input beat starts a packet
  logic        have_prev;
  logic        flush;
  logic        dropping;
  axis_t       prev;
  logic [6:0]  hdr_q;
  logic [16:0] limit_q;    // header + kept bytes
  logic [16:0] cnt_q;      // input bytes seen before the current beat
  META_T       meta_q;

  logic        out_free;
  logic [6:0]  hdr_c;
  logic [16:0] limit_c, cnt_c;
  logic [KEEP_W-1:0] kmask;
  axis_t       cur;        // input beat with trimmed keep
  logic [16:0] room;

  assign in_first = first;
  assign out_free = !out_valid || out_ready;
  assign in_ready = !flush && ((first && in_drop) || dropping || out_free);

  always_comb begin
    hdr_c   = first ? in_hdr : hdr_q;
    limit_c = first ? ({10'd0, in_hdr} + {1'b0, in_len}) : limit_q;
    cnt_c   = first ? '0 : cnt_q;
    room    = (limit_c > cnt_c) ? (limit_c - cnt_c) : '0;
    kmask   = (room >= 17'd64) ? '1 : keep_mask(room[7:0]);
    cur      = in_beat;
    cur.keep = in_beat.keep & kmask;
  end

  function automatic axis_t combine(input axis_t a, input axis_t b, input logic [6:0] n);
    axis_t r;
    r.data = (a.data >> (8 * n)) | ((n == 0) ? '0 : (b.data << (8 * (64 - n))));
    r.keep = (a.keep >> n) | ((n == 0) ? '0 : (b.keep << (64 - n)));
    r.last = 1'b0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first     <= 1'b1;
      have_prev <= 1'b0;
      flush     <= 1'b0;
      dropping  <= 1'b0;
      out_valid <= 1'b0;
      prev      <= '0;
      hdr_q     <= '0;
      limit_q   <= '0;
      cnt_q     <= '0;
      meta_q    <= '0;
      out_beat  <= '0;
      out_meta  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (flush && out_free) begin
        out_beat      <= combine(prev, '0, hdr_q);
        out_beat.last <= 1'b1;
        out_meta      <= meta_q;
        out_valid     <= 1'b1;
        flush         <= 1'b0;
        have_prev     <= 1'b0;
      end else if (in_valid && in_ready) begin
        first <= in_beat.last;
        cnt_q <= cnt_c + 17'd64;
        if (first) begin
          hdr_q   <= in_hdr;
          limit_q <= limit_c;
          meta_q  <= in_meta;
        end
        if ((first && in_drop) || dropping) begin
          dropping <= !in_beat.last;
        end else if (!have_prev) begin
          if (in_beat.last) begin
            out_beat      <= combine(cur, '0, hdr_c);
            out_beat.last <= 1'b1;
            out_meta      <= first ? in_meta : meta_q;
            out_valid     <= 1'b1;
          end else begin
            prev      <= cur;
            have_prev <= 1'b1;
          end
        end else begin
          out_beat  <= combine(prev, cur, hdr_c);
          out_meta  <= meta_q;
          out_valid <= 1'b1;
          prev      <= cur;
          if (in_beat.last) begin
            if (keep_count(cur.keep) <= {1'b0, hdr_c}) begin
              out_beat.last <= 1'b1;
              have_prev     <= 1'b0;
            end else begin
              flush <= 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
