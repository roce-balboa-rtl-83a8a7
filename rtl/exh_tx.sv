// exh_tx - "Generate EXH" and "Merge EXH + Payload" stages of the TX pipeline.
//
// Builds the extended transport header of each outgoing packet from its metadata and puts it in
// front of the payload: a 16-byte RETH (virtual address, rkey, DMA length) for RDMA WRITE
// FIRST/ONLY and READ requests, a 4-byte AETH (syndrome, MSN) for READ RESPONSE FIRST/LAST/ONLY
// and ACK packets, nothing for the other opcodes. The metadata's length field grows by the
// header so the next stages see the length of what follows them. Registered output, one beat
// per cycle plus at most one extra beat per packet when the payload spills over.
module exh_tx
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
    hlen = exh_len(in_meta.opcode);
    if (has_reth(in_meta.opcode)) begin
      hdr[0 +: 64]  = be64(in_meta.vaddr);
      hdr[64 +: 32] = be32(in_meta.rkey);
      hdr[96 +: 32] = be32(in_meta.dma_len);
    end else if (has_aeth(in_meta.opcode)) begin
      hdr[0 +: 8]   = in_meta.syndrome;
      hdr[8 +: 24]  = be24(in_meta.msn);
    end
    m.pay_len = in_meta.pay_len + 16'(hlen);
  end

  axis_prepend #(.META_T(roce_meta_t)) u_prepend (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(hdr), .in_hdr_len(hlen), .in_meta(m), .in_first(),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
