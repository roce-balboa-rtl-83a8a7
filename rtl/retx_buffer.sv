// retx_buffer - payload store of the retransmission logic.
//
// In the stack this storage is one directly attached HBM channel; here it is an on-chip array of
// 2^AW beats of 512 bits, used as a ring by the request merger. One write port (payload passing
// from the host to the network) and one combinational read port (payload replayed for a
// retransmission).
module retx_buffer
  import balboa_pkg::*;
#(
  parameter int unsigned AW = 12
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**AW];

  assign rdata = mem[raddr];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

endmodule
