// tb_channel - network link model for the testbenches: passes IP packets from one stack's TX to
// another stack's RX, checks the ICRC of every packet against an independent bit-serial CRC-32,
// and can drop the next packet with a given BTH opcode (to provoke retransmissions).
module tb_channel
  import balboa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  axis_t in_beat,
  input  logic  in_valid,
  output logic  in_ready,
  output axis_t out_beat,
  output logic  out_valid,
  input  logic  out_ready,
  input  logic  drop_arm,       // pulse: drop the next packet whose opcode is drop_op
  input  logic [7:0] drop_op,
  output int    npkts,
  output int    ndropped,
  output int    checks,
  output int    failures
);

  logic       armed, first, dropping;
  logic [7:0] arm_op;
  byte unsigned pkt[$];

  // reference ICRC: bit-serial CRC-32 over 8 x 0xFF and the masked packet
  function automatic logic [31:0] ref_icrc(input byte unsigned p[$], input int n);
    logic [31:0] c;
    byte unsigned b;
    c = 32'hFFFFFFFF;
    for (int i = -8; i < n; i++) begin
      if (i < 0) b = 8'hFF;
      else begin
        b = p[i];
        if (i == 1 || i == 8 || i == 10 || i == 11 || i == 26 || i == 27 || i == 32) b = 8'hFF;
      end
      for (int j = 0; j < 8; j++) begin
        if ((c[0] ^ b[j]) == 1'b1) c = (c >> 1) ^ 32'hEDB88320;
        else c = c >> 1;
      end
    end
    return ~c;
  endfunction

  logic drop_now;
  assign drop_now  = first ? (armed && in_beat.data[231:224] == arm_op) : dropping;
  assign out_beat  = in_beat;
  assign out_valid = in_valid && !drop_now;
  assign in_ready  = drop_now ? 1'b1 : out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; first <= 1'b1; dropping <= 1'b0; arm_op <= '0;
      npkts <= 0; ndropped <= 0; checks <= 0; failures <= 0;
    end else begin
      if (drop_arm) begin armed <= 1'b1; arm_op <= drop_op; end
      if (in_valid && in_ready) begin
        for (int i = 0; i < 64; i++) if (in_beat.keep[i]) pkt.push_back(in_beat.data[8*i +: 8]);
        first <= in_beat.last;
        if (first) dropping <= drop_now;
        if (first && drop_now) armed <= 1'b0;
        if (in_beat.last) begin
          logic [31:0] got, exp;
          int n;
          n = pkt.size();
          got = {pkt[n-1], pkt[n-2], pkt[n-3], pkt[n-4]};
          exp = ref_icrc(pkt, n - 4);
          checks <= checks + 1;
          if (got !== exp || n != int'({pkt[2], pkt[3]})) begin
            failures <= failures + 1;
            $display("channel: bad packet len %0d iplen %0d icrc %h exp %h", n, {pkt[2], pkt[3]}, got, exp);
          end
          npkts <= npkts + 1;
          if (drop_now) ndropped <= ndropped + 1;
          pkt.delete();
        end
      end
    end
  end

endmodule
