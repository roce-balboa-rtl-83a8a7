// udp_rx - "Process UDP-Header" stage of the RX pipeline.
//
// Accepts only packets addressed to the RoCE v2 UDP port 4791, records the remote source port
// in the metadata and strips the 8-byte UDP header. The UDP checksum is not checked (RoCE v2
// senders set it to zero; the ICRC protects the packet). One beat per cycle, registered output.
module udp_rx
  import balboa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axis_t      in_beat,
  input  roce_meta_t in_meta,
  input  logic       in_valid,
  output logic       in_ready,
  output axis_t      out_beat,
  output roce_meta_t out_meta,
  output logic       out_valid,
  input  logic       out_ready,
  output logic       drop_pulse
);

  logic [15:0] sport, dport, ulen;
  logic        bad, first;
  roce_meta_t  m;

  always_comb begin
    sport = be16(in_beat.data[0 +: 16]);
    dport = be16(in_beat.data[16 +: 16]);
    ulen  = be16(in_beat.data[32 +: 16]);
    bad   = dport != 16'(ROCE_UDP_PORT) || ulen < 16'd24;
    m         = in_meta;
    m.port    = sport;
    m.pay_len = ulen - 16'd8;     // bytes from the BTH to the end of the ICRC
  end

  assign drop_pulse = in_valid && in_ready && first && bad;

  axis_strip #(.META_T(roce_meta_t)) u_strip (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(7'd8), .in_len(ulen - 16'd8), .in_drop(bad), .in_meta(m), .in_first(first),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
