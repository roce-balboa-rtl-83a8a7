// retrans_mux - retransmission logic and stream mux between the host and the TX pipeline.
//
// The host delivers RDMA WRITE payload and READ RESPONSE payload on two separate buses so that
// neither blocks the other. Packet descriptors from the request merger release the payload of
// one packet each, in order: from the WRITE bus, from the READ RESPONSE bus, from the
// retransmission buffer (a replay), or none (a header-only packet, sent as one empty beat).
// Payload taken from a host bus is copied into the retransmission buffer at the descriptor's
// address on its way through, so a retransmission never has to fetch it again over PCIe. The
// output is one stream whose beats carry the packet metadata; tkeep and tlast are set from the
// descriptor's byte count. One beat per cycle; one idle cycle between packets.
module retrans_mux
  import balboa_pkg::*;
#(
  parameter int unsigned BUF_AW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pay_src_e          f_src,
  input  logic [BUF_AW-1:0] f_addr,
  input  logic [15:0]       f_bytes,
  input  roce_meta_t        f_meta,
  input  logic              f_valid,
  output logic              f_ready,
  input  axis_t             wr_beat,      // host RDMA WRITE data
  input  logic              wr_valid,
  output logic              wr_ready,
  input  axis_t             rr_beat,      // host READ RESPONSE data
  input  logic              rr_valid,
  output logic              rr_ready,
  output logic              buf_we,
  output logic [BUF_AW-1:0] buf_waddr,
  output logic [DATA_W-1:0] buf_wdata,
  output logic [BUF_AW-1:0] buf_raddr,
  input  logic [DATA_W-1:0] buf_rdata,
  output axis_t             out_beat,
  output roce_meta_t        out_meta,
  output logic              out_valid,
  input  logic              out_ready
);

  logic              act;
  pay_src_e          src;
  logic [BUF_AW-1:0] addr;
  logic [15:0]       left;      // bytes still to deliver
  roce_meta_t        meta;
  logic              out_free, go, lastb;
  logic [7:0]        nb;
  axis_t             b;

  assign out_free = !out_valid || out_ready;
  assign f_ready  = !act;
  assign lastb    = left <= 16'd64;
  assign nb       = lastb ? left[7:0] : 8'd64;

  always_comb begin
    go = 1'b0;
    b  = '0;
    wr_ready = 1'b0;
    rr_ready = 1'b0;
    if (act && out_free) begin
      case (src)
        SRC_WR:  begin go = wr_valid; wr_ready = 1'b1; b.data = wr_beat.data; end
        SRC_RR:  begin go = rr_valid; rr_ready = 1'b1; b.data = rr_beat.data; end
        SRC_BUF: begin go = 1'b1; b.data = buf_rdata; end
        default: go = 1'b1;
      endcase
    end
    b.keep = keep_mask(nb);
    b.last = lastb;
  end

  assign buf_raddr = addr;
  assign buf_we    = go && (src == SRC_WR || src == SRC_RR);
  assign buf_waddr = addr;
  assign buf_wdata = b.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act       <= 1'b0;
      src       <= SRC_NONE;
      addr      <= '0;
      left      <= '0;
      meta      <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
      out_meta  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!act && f_valid) begin
        act  <= 1'b1;
        src  <= f_src;
        addr <= f_addr;
        left <= (f_src == SRC_NONE) ? 16'd0 : f_bytes;
        meta <= f_meta;
      end else if (go) begin
        out_beat  <= b;
        out_meta  <= meta;
        out_valid <= 1'b1;
        addr      <= addr + 1'b1;
        left      <= lastb ? 16'd0 : left - 16'd64;
        if (lastb) act <= 1'b0;
      end
    end
  end

endmodule
