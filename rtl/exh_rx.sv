// exh_rx - "Process EXH" and "Payload Extraction & Stream Merging" stages of the RX pipeline.
//
// Works on packets that passed the PSN check, with the BTH already removed:
//  * RDMA WRITE FIRST/ONLY: reads the RETH (virtual address, rkey, DMA length), strips it and
//    issues a memory-write command for the payload; the address of the following packets of the
//    message is kept in the MSN table. WRITE MIDDLE/LAST continue from that address.
//    WRITE LAST/ONLY complete a message and increment the MSN.
//  * READ RESPONSE: strips the AETH (FIRST/LAST/ONLY) and writes the payload to the local
//    address recorded for the outstanding READ (read request table).
//  * READ request: turns the RETH into a READ RESPONSE request for the TX path; no payload.
//  * ACK / NAK: turns the AETH into a completion event for the host; no payload.
// The payload leaves trimmed of the 4-byte ICRC, on a stream parallel to the command. Tables are
// read and written when the first beat is taken; a packet waits while an earlier command or
// event is still undelivered.
module exh_rx
  import balboa_pkg::*;
#(
  parameter int unsigned NQP = 500,
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axis_t         in_beat,
  input  roce_meta_t    in_meta,
  input  logic          in_valid,
  output logic          in_ready,
  // payload towards host memory
  output axis_t         out_beat,
  output roce_meta_t    out_meta,
  output logic          out_valid,
  input  logic          out_ready,
  output mem_cmd_t      mem_cmd,
  output logic          mem_cmd_valid,
  input  logic          mem_cmd_ready,
  // READ RESPONSE requests towards the TX path
  output rresp_req_t    rresp,
  output logic          rresp_valid,
  input  logic          rresp_ready,
  // completions (ACK / NAK received)
  output cpl_t          cpl,
  output logic          cpl_valid,
  input  logic          cpl_ready,
  // MSN table RX port
  output logic [QW-1:0] msn_q,
  input  logic [23:0]   msn_msn,
  input  logic [63:0]   msn_vaddr,
  output logic          msn_we,
  output logic [23:0]   msn_wmsn,
  output logic [63:0]   msn_wvaddr,
  // read request table RX port
  input  logic [63:0]   rrt_laddr,
  output logic          rrt_we,
  output logic [63:0]   rrt_wladdr
);

  logic [7:0]  op;
  logic [63:0] reth_va, va;
  logic [31:0] reth_len;
  logic [6:0]  hl;
  logic [15:0] pay;
  logic        first, busy, fire, has_pay, s_in_valid, s_in_ready;
  logic        msn_we_c, rrt_we_c;
  roce_meta_t  m;

  always_comb begin
    op       = in_meta.opcode;
    reth_va  = be64(in_beat.data[0 +: 64]);
    reth_len = be32(in_beat.data[96 +: 32]);
    hl       = exh_len(op);
    pay      = in_meta.pay_len - {9'd0, hl} - 16'd4;
    msn_q    = in_meta.qpn[QW-1:0];
    has_pay  = is_write(op) || is_rresp(op);
    va       = has_reth(op) ? reth_va : (is_rresp(op) ? rrt_laddr : msn_vaddr);

    msn_we_c   = is_write(op);
    msn_wvaddr = va + 64'(pay);
    msn_wmsn   = (op == OP_WRITE_LAST || op == OP_WRITE_ONLY) ? msn_msn + 24'd1 : msn_msn;
    rrt_we_c   = is_rresp(op);
    rrt_wladdr = rrt_laddr + 64'(pay);

    m         = in_meta;
    m.vaddr   = va;
    m.dma_len = reth_len;
    m.pay_len = pay;
  end

  assign busy       = mem_cmd_valid || rresp_valid || cpl_valid;
  assign s_in_valid = in_valid && !(first && busy);
  assign in_ready   = s_in_ready && !(first && busy);
  assign fire       = in_valid && in_ready && first;
  assign msn_we     = fire && msn_we_c;
  assign rrt_we     = fire && rrt_we_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_cmd_valid <= 1'b0;
      rresp_valid   <= 1'b0;
      cpl_valid     <= 1'b0;
      mem_cmd       <= '0;
      rresp         <= '0;
      cpl           <= '0;
    end else begin
      if (mem_cmd_valid && mem_cmd_ready) mem_cmd_valid <= 1'b0;
      if (rresp_valid && rresp_ready)     rresp_valid   <= 1'b0;
      if (cpl_valid && cpl_ready)         cpl_valid     <= 1'b0;
      if (fire) begin
        if (has_pay) begin
          mem_cmd_valid <= 1'b1;
          mem_cmd <= '{qpn: in_meta.qpn, vaddr: va, len: pay, is_rresp: is_rresp(op),
                       last: (op == OP_WRITE_LAST || op == OP_WRITE_ONLY ||
                              op == OP_RR_LAST || op == OP_RR_ONLY)};
        end
        if (op == OP_READ_REQ) begin
          rresp_valid <= 1'b1;
          rresp <= '{qpn: in_meta.qpn, vaddr: reth_va, len: reth_len, psn: in_meta.psn};
        end
        if (op == OP_ACK) begin
          cpl_valid <= 1'b1;
          cpl <= '{qpn: in_meta.qpn, psn: in_meta.psn, nak: in_meta.syndrome[7:5] == 3'b011};
        end
      end
    end
  end

  axis_strip #(.META_T(roce_meta_t)) u_strip (
    .clk, .rst_n,
    .in_beat, .in_valid(s_in_valid), .in_ready(s_in_ready),
    .in_hdr(hl), .in_len(pay), .in_drop(!has_pay), .in_meta(m), .in_first(first),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
