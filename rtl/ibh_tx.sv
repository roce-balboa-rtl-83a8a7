// ibh_tx - "Generate IBH" and "Merge IBH + Payload" stages of the TX pipeline.
//
// Builds the 12-byte InfiniBand base transport header (opcode, partition key 0xFFFF, destination
// QP = remote QP of the connection, AckReq bit, PSN assigned by the request merger from the
// state table) and puts it in front of the packet. Payloads are 4-byte aligned, so the pad
// count is always 0. Registered output.
module ibh_tx
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
    hlen = 7'd12;
    hdr[0 +: 8]   = in_meta.opcode;
    hdr[8 +: 8]   = 8'h00;                 // SE=0, MigReq=0, PadCnt=0, TVer=0
    hdr[16 +: 16] = 16'hFFFF;              // default partition key
    hdr[32 +: 8]  = 8'h00;
    hdr[40 +: 24] = be24(in_meta.rqpn);
    hdr[64 +: 8]  = {in_meta.ackreq, 7'd0};
    hdr[72 +: 24] = be24(in_meta.psn);
    m.pay_len = in_meta.pay_len + 16'd12;
  end

  axis_prepend #(.META_T(roce_meta_t)) u_prepend (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(hdr), .in_hdr_len(hlen), .in_meta(m), .in_first(),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
