// axis_prepend - puts a header of HDR bytes (0..63) in front of each packet of a 512-bit
// stream and realigns the payload behind it.
//
// The header and its length are computed by the user from the metadata that arrives with the
// first beat. Output beat 0 is the header followed by the low 64-HDR bytes of input beat 0;
// output beat j takes the upper HDR bytes of input beat j-1 and the low bytes of beat j. If the
// last input beat has more than 64-HDR valid bytes, an extra beat is flushed. A header-only packet
// is presented as a single input beat with tkeep = 0 and tlast = 1. The output is registered;
// one beat per cycle except for the extra flush beat.
module axis_prepend
  import balboa_pkg::*;
#(
  parameter type META_T = roce_meta_t
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axis_t             in_beat,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_hdr,     // header bytes, lane 0 first; sampled on the first beat
  input  logic [6:0]        in_hdr_len, // header length in bytes; sampled on the first beat
  input  META_T             in_meta,    // metadata to attach to the output packet
  output logic              in_first,
  output axis_t             out_beat,
  output META_T             out_meta,
  output logic              out_valid,
  input  logic              out_ready
);

  logic        first;
  logic        flush;
  axis_t       prev;
  logic [6:0]  h_q;
  META_T       meta_q;
  logic        out_free;

  assign in_first = first;
  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free && !flush;

  // Bytes of beat a that spill over into the next output beat, at lanes 0..h-1.
  function automatic axis_t spill(input axis_t a, input logic [6:0] h);
    axis_t r;
    r.data = (h == 0) ? '0 : (a.data >> (8 * (64 - h)));
    r.keep = (h == 0) ? '0 : (a.keep >> (64 - h));
    r.last = 1'b0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first     <= 1'b1;
      flush     <= 1'b0;
      out_valid <= 1'b0;
      prev      <= '0;
      h_q       <= '0;
      meta_q    <= '0;
      out_beat  <= '0;
      out_meta  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (flush && out_free) begin
        out_beat      <= spill(prev, h_q);
        out_beat.last <= 1'b1;
        out_meta      <= meta_q;
        out_valid     <= 1'b1;
        flush         <= 1'b0;
      end else if (in_valid && in_ready) begin
        logic [6:0] h;
        axis_t      o;
        h = first ? in_hdr_len : h_q;
        if (first) begin
          o.data = (in_hdr & ({DATA_W{1'b1}} >> (8 * (64 - in_hdr_len)))) |
                   (in_beat.data << (8 * in_hdr_len));
          o.keep = keep_mask({1'b0, in_hdr_len}) | (in_beat.keep << in_hdr_len);
          h_q    <= in_hdr_len;
          meta_q <= in_meta;
        end else begin
          o.data = spill(prev, h).data | (in_beat.data << (8 * h));
          o.keep = spill(prev, h).keep | (in_beat.keep << h);
        end
        o.last = 1'b0;
        prev  <= in_beat;
        first <= in_beat.last;
        if (in_beat.last) begin
          if ({1'b0, keep_count(in_beat.keep)} + {1'b0, h} > 9'd64) flush <= 1'b1;
          else o.last = 1'b1;
        end
        out_beat  <= o;
        out_meta  <= first ? in_meta : meta_q;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
