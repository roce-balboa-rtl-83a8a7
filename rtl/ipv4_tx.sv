// ipv4_tx - "Generate IP-Header" stage of the TX pipeline.
//
// Prepends a 20-byte IPv4 header (no options, don't-fragment, TTL 64, protocol UDP) from the
// local address and the remote address of the connection, with the header checksum computed
// in the same cycle (ones'-complement sum of the ten 16-bit words). The total length includes
// the 4-byte ICRC appended by the next stage. Registered output.
module ipv4_tx
  import balboa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [31:0] local_ip,
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
  logic [31:0]       cs;
  logic [15:0]       tl;

  always_comb begin
    hdr  = '0;
    m    = in_meta;
    hlen = 7'd20;
    tl   = in_meta.pay_len + 16'd20 + 16'd4;                     // + header + ICRC
    hdr[0 +: 8]    = 8'h45;                                      // IPv4, 5-word header
    hdr[8 +: 8]    = 8'h00;                                      // DSCP / ECN
    hdr[16 +: 16]  = be16(tl);
    hdr[32 +: 16]  = 16'h0000;                                   // identification
    hdr[48 +: 16]  = be16(16'h4000);                             // don't fragment
    hdr[64 +: 8]   = 8'd64;                                      // TTL
    hdr[72 +: 8]   = 8'd17;                                      // UDP
    hdr[96 +: 32]  = be32(local_ip);
    hdr[128 +: 32] = be32(in_meta.ip);
    cs = '0;
    for (int i = 0; i < 10; i++) cs += {16'd0, be16(hdr[16*i +: 16])};
    cs = {16'd0, cs[15:0]} + {16'd0, cs[31:16]};
    cs = {16'd0, cs[15:0]} + {16'd0, cs[31:16]};
    hdr[80 +: 16]  = be16(~cs[15:0]);
    m.pay_len = tl;
  end

  axis_prepend #(.META_T(roce_meta_t)) u_prepend (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(hdr), .in_hdr_len(hlen), .in_meta(m), .in_first(),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
