// payload_dropper - network request crediting on the RX path.
//
// Keeps a count of credits, one per 64-byte beat of free capacity in the host-facing part of
// the receive datapath. An incoming packet that carries payload (RDMA WRITE or READ RESPONSE) is
// admitted only if the credits cover all its beats; the credits are then consumed. Otherwise
// the whole packet is dropped, so the host-facing path never stalls, and the remote node's
// retransmission delivers it later. The host side returns credits as it drains data; a packet that was admitted but
// then dropped by the PSN check gives its credits back (refund). The
// dropper sits in front of the PSN check so that a dropped packet leaves the PSN state
// untouched and shows up as a gap (answered with a NAK). The opcode is read from the first
// byte of the beat (the BTH), the packet length from the metadata. Registered output.
module payload_dropper
  import balboa_pkg::*;
#(
  parameter int unsigned CREDITS = 1024,   // beats of host-side queueing capacity
  localparam int unsigned CW = $clog2(CREDITS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axis_t         in_beat,
  input  roce_meta_t    in_meta,
  input  logic          in_valid,
  output logic          in_ready,
  output axis_t         out_beat,
  output roce_meta_t    out_meta,
  output logic          out_valid,
  input  logic          out_ready,
  input  logic          credit_ret,     // one beat drained towards the host
  input  logic          refund,         // an admitted packet was dropped later on
  input  logic [15:0]   refund_beats,
  output logic [CW-1:0] credits,
  output logic          drop_pulse
);

  logic        first, need, ok, fire;
  logic [CW-1:0] beats;
  logic [7:0]  op;

  always_comb begin
    op    = in_beat.data[7:0];
    need  = is_write(op) || is_rresp(op);
    beats = CW'(pay_beats(op, in_meta.pay_len));
    ok    = !need || (credits >= beats);
  end

  assign fire       = in_valid && in_ready && first;
  assign drop_pulse = fire && !ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= CW'(CREDITS);
    else begin
      credits <= credits - ((fire && ok && need) ? beats : '0) + CW'(credit_ret) +
                 (refund ? CW'(refund_beats) : '0);
    end
  end

  axis_strip #(.META_T(roce_meta_t)) u_strip (
    .clk, .rst_n,
    .in_beat, .in_valid, .in_ready,
    .in_hdr(7'd0), .in_len(in_meta.pay_len), .in_drop(!ok), .in_meta(in_meta), .in_first(first),
    .out_beat, .out_meta, .out_valid, .out_ready
  );

endmodule
