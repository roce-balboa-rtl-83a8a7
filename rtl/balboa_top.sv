// balboa_top - RDMA network stack for a 100G SmartNIC: RoCE v2 packet processing, ICRC,
// retransmission buffering, ACK-clocked flow control and receive crediting.
//
// Host side: RDMA commands (WRITE / READ) enter flow control, which forwards a command once its
// QP has budget for all its packets. The packet pipeline (roce_stack) cuts messages into
// packets and asks the retransmission mux for each packet's payload, which comes from the host
// WRITE or READ RESPONSE data bus (and is copied into the retransmission buffer) or, for a
// retransmission, from the buffer. Headers are prepended, the ICRC is appended and the IP packet
// leaves on net_tx. Incoming IP packets on net_rx are checked, stripped and turned into
// memory-write commands with payload, READ RESPONSE work and completions. All buses are
// 512-bit AXI4-Stream-like valid/ready interfaces in one clock domain (250 MHz in the stack's
// target, 128 Gbit/s raw). Ethernet framing, the PCIe DMA engine and the HBM controller are
// outside this module; the retransmission buffer is an on-chip array here.
module balboa_top
  import balboa_pkg::*;
#(
  parameter int unsigned NQP       = 500,
  parameter int unsigned PMTU      = 4096,
  parameter int unsigned BUF_AW    = 12,
  parameter int unsigned CREDITS   = 1024,
  parameter int unsigned TIMEOUT   = 65536,
  parameter int unsigned BUDGET    = 64,
  parameter int unsigned REQ_DEPTH = 32,
  localparam int unsigned CW = $clog2(CREDITS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] local_ip,
  input  qp_setup_t   setup,
  input  logic        setup_valid,
  // host commands and completions
  input  rdma_cmd_t   cmd,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  output cpl_t        cpl,
  output logic        cpl_valid,
  input  logic        cpl_ready,
  // host data towards the network
  input  axis_t       wr_beat,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  axis_t       rr_beat,
  input  logic        rr_valid,
  output logic        rr_ready,
  output host_rd_t    host_rd,
  output logic        host_rd_valid,
  input  logic        host_rd_ready,
  // data from the network towards host memory
  output mem_cmd_t    mem_cmd,
  output logic        mem_cmd_valid,
  input  logic        mem_cmd_ready,
  output axis_t       mem_beat,
  output logic        mem_valid,
  input  logic        mem_ready,
  input  logic        credit_ret,
  // network (IP packets; Ethernet framing by the MAC)
  input  axis_t       net_rx_beat,
  input  logic        net_rx_valid,
  output logic        net_rx_ready,
  output axis_t       net_tx_beat,
  output logic        net_tx_valid,
  input  logic        net_tx_ready,
  // status
  output logic        fc_stall,
  output logic        ev_psn_drop,
  output logic        ev_credit_drop,
  output logic        ev_hdr_drop,
  output logic        ev_timeout,
  output logic        ev_nak_rx,
  output logic        ev_retx,
  output logic [CW-1:0] credits
);

  rdma_cmd_t fc_cmd;
  logic      fc_valid, fc_ready;
  ack_evt_t  ack_evt;
  logic      ack_evt_fire;

  flow_control #(.NQP(NQP), .PMTU(PMTU), .BUDGET(BUDGET), .REQ_DEPTH(REQ_DEPTH)) u_fc (
    .clk, .rst_n,
    .in_cmd(cmd), .in_valid(cmd_valid), .in_ready(cmd_ready),
    .out_cmd(fc_cmd), .out_valid(fc_valid), .out_ready(fc_ready),
    .ack_evt, .ack_evt_valid(ack_evt_fire), .stall(fc_stall));

  pay_src_e          f_src;
  logic [BUF_AW-1:0] f_addr;
  logic [15:0]       f_bytes;
  roce_meta_t        f_meta, pay_meta;
  logic              f_valid, f_ready, pay_valid, pay_ready;
  axis_t             pay_beat, tx_beat;
  logic              tx_valid, tx_ready;

  roce_stack #(.NQP(NQP), .PMTU(PMTU), .BUF_AW(BUF_AW), .CREDITS(CREDITS), .TIMEOUT(TIMEOUT))
  u_stack (
    .clk, .rst_n, .local_ip, .setup, .setup_valid,
    .rx_beat(net_rx_beat), .rx_valid(net_rx_valid), .rx_ready(net_rx_ready),
    .mem_beat, .mem_valid, .mem_ready, .mem_cmd, .mem_cmd_valid, .mem_cmd_ready,
    .cpl, .cpl_valid, .cpl_ready, .credit_ret,
    .cmd(fc_cmd), .cmd_valid(fc_valid), .cmd_ready(fc_ready),
    .host_rd, .host_rd_valid, .host_rd_ready,
    .f_src, .f_addr, .f_bytes, .f_meta, .f_valid, .f_ready,
    .pay_beat, .pay_meta, .pay_valid, .pay_ready,
    .tx_beat, .tx_valid, .tx_ready,
    .ack_evt, .ack_evt_fire,
    .ev_psn_drop, .ev_credit_drop, .ev_hdr_drop, .ev_timeout, .ev_nak_rx, .ev_retx, .credits);

  logic              buf_we;
  logic [BUF_AW-1:0] buf_waddr, buf_raddr;
  logic [DATA_W-1:0] buf_wdata, buf_rdata;

  retrans_mux #(.BUF_AW(BUF_AW)) u_retrans (.clk, .rst_n,
    .f_src, .f_addr, .f_bytes, .f_meta, .f_valid, .f_ready,
    .wr_beat, .wr_valid, .wr_ready, .rr_beat, .rr_valid, .rr_ready,
    .buf_we, .buf_waddr, .buf_wdata, .buf_raddr, .buf_rdata,
    .out_beat(pay_beat), .out_meta(pay_meta), .out_valid(pay_valid), .out_ready(pay_ready));

  retx_buffer #(.AW(BUF_AW)) u_retx_buf (.clk, .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata),
    .raddr(buf_raddr), .rdata(buf_rdata));

  icrc u_icrc (.clk, .rst_n,
    .in_beat(tx_beat), .in_valid(tx_valid), .in_ready(tx_ready),
    .out_beat(net_tx_beat), .out_valid(net_tx_valid), .out_ready(net_tx_ready));

endmodule
