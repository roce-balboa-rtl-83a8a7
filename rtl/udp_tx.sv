// udp_tx - "Generate UDP-Header" stage of the TX pipeline.
//
// Prepends the 8-byte UDP header: source port from the connection table, destination port 4791
// (RoCE v2), length covering the InfiniBand packet and the 4-byte ICRC that is appended later,
// and a zero checksum. Registered output.
module udp_tx
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
  input  logic       out_ready
);

  logic [DATA_W-1:0] hdr;
  logic [6:0]        hlen;
  roce_meta_t        m;

  always_comb begin
    hdr  = '0;
    m    = in_meta;
    hlen = 7'd8;
    hdr[0 +: 16]  = be16(in_meta.port);
    hdr[16 +: 16] = be16(16'(ROCE_UDP_PORT));
    hdr[32 +: 16] = be16(in_meta.pay_len + 16'd8 + 16'd4);   // + header + ICRC
    hdr[48 +: 16] = 16'h0000;                                  // checksum not used
    m.pay_len = in_meta.pay_len + 16'd8;
  end

  axis_prepend #(.META_T(roce_meta_t)) u_prepend (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(hdr), .in_hdr_len(hlen), .in_meta(m), .in_first(),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
