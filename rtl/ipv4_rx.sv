// ipv4_rx - "Process IP-Header" stage of the RX pipeline.
//
// Checks the IPv4 header at the start of each incoming packet (version 4, no options,
// protocol UDP, destination = the local address) and drops packets that fail. Accepted packets
// leave without their 20-byte header and are trimmed to the IP total length; the remote source
// address and the UDP length are put into the metadata. One beat per cycle, registered output.
module ipv4_rx
  import balboa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] local_ip,
  input  axis_t       in_beat,
  input  logic        in_valid,
  output logic        in_ready,
  output axis_t       out_beat,
  output roce_meta_t  out_meta,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        drop_pulse   // one cycle per dropped packet
);

  logic [7:0]  ver_ihl, proto;
  logic [15:0] tot_len;
  logic [31:0] src_ip, dst_ip;
  logic        bad, first;
  roce_meta_t  m;

  always_comb begin
    ver_ihl = in_beat.data[7:0];
    tot_len = be16(in_beat.data[16 +: 16]);
    proto   = in_beat.data[72 +: 8];
    src_ip  = be32(in_beat.data[96 +: 32]);
    dst_ip  = be32(in_beat.data[128 +: 32]);
    bad     = ver_ihl != 8'h45 || proto != 8'd17 || dst_ip != local_ip || tot_len < 16'd28;
    m         = '0;
    m.ip      = src_ip;
    m.pay_len = tot_len - 16'd20;
  end

  assign drop_pulse = in_valid && in_ready && first && bad;

  axis_strip #(.META_T(roce_meta_t)) u_strip (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(7'd20), .in_len(tot_len - 16'd20), .in_drop(bad), .in_meta(m), .in_first(first),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
