// balboa_pkg - types, constants and helper functions shared by the RoCE v2 stack.
//
// The datapath is a 512-bit AXI4-Stream bus (64 byte lanes) clocked at 250 MHz, which gives
// 128 Gbit/s of raw bus bandwidth for a 100G link. Byte lane 0 (data[7:0]) carries the first
// byte on the wire; multi-byte header fields are big-endian, so they are byte-swapped when
// placed into the lane order (see be16/be24/be32/be64).
//
// Packet metadata travels next to the data as a "sideband" struct that is valid on every beat
// of a packet (roce_meta_t). The opcodes are the InfiniBand RC opcodes for the one-sided
// operations the stack supports (RDMA WRITE, RDMA READ, READ RESPONSE, ACK).
package balboa_pkg;

  localparam int unsigned DATA_W = 512;
  localparam int unsigned KEEP_W = DATA_W / 8;
  localparam int unsigned ROCE_UDP_PORT = 4791;

  // One beat of an AXI4-Stream bus.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] keep;
    logic              last;
  } axis_t;

  // InfiniBand Reliable Connection opcodes (BTH byte 0).
  typedef enum logic [7:0] {
    OP_WRITE_FIRST  = 8'h06,
    OP_WRITE_MIDDLE = 8'h07,
    OP_WRITE_LAST   = 8'h08,
    OP_WRITE_ONLY   = 8'h0A,
    OP_READ_REQ     = 8'h0C,
    OP_RR_FIRST     = 8'h0D,
    OP_RR_MIDDLE    = 8'h0E,
    OP_RR_LAST      = 8'h0F,
    OP_RR_ONLY      = 8'h10,
    OP_ACK          = 8'h11
  } ib_opcode_e;

  // AETH syndromes used by the stack.
  localparam logic [7:0] SYN_ACK     = 8'h1F;  // ACK, credit field "invalid"
  localparam logic [7:0] SYN_NAK_SEQ = 8'h60;  // NAK: PSN sequence error

  // Per-packet metadata. On RX it is filled in stage by stage; on TX it is produced by the
  // request merger and consumed by the header generators.
  typedef struct packed {
    logic [7:0]  opcode;
    logic [15:0] qpn;       // local QP number (table index)
    logic [23:0] rqpn;      // remote QP number (BTH destination QP on TX)
    logic [23:0] psn;
    logic        ackreq;
    logic [63:0] vaddr;     // RETH virtual address / local address for payload placement
    logic [31:0] rkey;
    logic [31:0] dma_len;   // RETH DMA length
    logic [7:0]  syndrome;  // AETH
    logic [23:0] msn;       // AETH
    logic [15:0] pay_len;   // payload bytes of this packet
    logic [31:0] ip;        // remote IPv4 address
    logic [15:0] port;      // UDP source port
  } roce_meta_t;

  // Host request (RDMA WRITE or RDMA READ) entering the stack.
  typedef struct packed {
    logic        is_read;
    logic [15:0] qpn;
    logic [63:0] laddr;     // local buffer address
    logic [63:0] raddr;     // remote buffer address
    logic [31:0] len;       // bytes, multiple of 4
  } rdma_cmd_t;

  // Command towards host memory (the DMA engine) for payload received from the network.
  typedef struct packed {
    logic [15:0] qpn;
    logic [63:0] vaddr;
    logic [15:0] len;       // payload bytes of this packet
    logic        is_rresp;  // 1: READ RESPONSE data, 0: RDMA WRITE data
    logic        last;      // last packet of the message
  } mem_cmd_t;

  // Command towards the host to read local memory for an incoming READ request.
  typedef struct packed {
    logic [15:0] qpn;
    logic [63:0] vaddr;
    logic [31:0] len;
  } host_rd_t;

  // Event produced by the RX PSN check for ACK / NAK / READ RESPONSE packets.
  typedef struct packed {
    logic [15:0] qpn;
    logic [23:0] npkts;     // packets newly acknowledged
    logic        all_acked; // nothing outstanding any more
    logic        nak;       // retransmission requested by the remote node
  } ack_evt_t;

  // ACK / NAK to be generated by the TX path.
  typedef struct packed {
    logic [15:0] qpn;
    logic [23:0] psn;
    logic        nak;
  } ack_req_t;

  // READ RESPONSE to be generated by the TX path.
  typedef struct packed {
    logic [15:0] qpn;
    logic [63:0] vaddr;
    logic [31:0] len;
    logic [23:0] psn;
  } rresp_req_t;

  // Completion towards the host (remote ACK received, or NAK).
  typedef struct packed {
    logic [15:0] qpn;
    logic [23:0] psn;
    logic        nak;
  } cpl_t;

  // Payload sources of the retransmission / stream mux.
  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,   // header-only packet: one empty beat
    SRC_WR   = 2'd1,   // host RDMA WRITE data bus
    SRC_RR   = 2'd2,   // host READ RESPONSE data bus
    SRC_BUF  = 2'd3    // retransmission buffer
  } pay_src_e;

  // Queue-pair set-up (connection set-up / QP registration).
  typedef struct packed {
    logic [15:0] qpn;
    logic [31:0] rip;
    logic [23:0] rqpn;
    logic [15:0] rport;
    logic [23:0] rx_psn;    // first PSN expected from the remote node
    logic [23:0] tx_psn;    // first PSN this node sends
  } qp_setup_t;

  function automatic logic [15:0] be16(input logic [15:0] x);
    return {x[7:0], x[15:8]};
  endfunction
  function automatic logic [23:0] be24(input logic [23:0] x);
    return {x[7:0], x[15:8], x[23:16]};
  endfunction
  function automatic logic [31:0] be32(input logic [31:0] x);
    return {x[7:0], x[15:8], x[23:16], x[31:24]};
  endfunction
  function automatic logic [63:0] be64(input logic [63:0] x);
    return {be32(x[31:0]), be32(x[63:32])};
  endfunction

  // Number of valid bytes in a contiguous tkeep.
  function automatic logic [7:0] keep_count(input logic [KEEP_W-1:0] k);
    logic [7:0] c;
    c = '0;
    for (int i = 0; i < KEEP_W; i++) c += {7'd0, k[i]};
    return c;
  endfunction

  // tkeep with the n lowest byte lanes set (n = 0..64).
  function automatic logic [KEEP_W-1:0] keep_mask(input logic [7:0] n);
    logic [KEEP_W-1:0] k;
    for (int i = 0; i < KEEP_W; i++) k[i] = (i < int'(n));
    return k;
  endfunction

  function automatic logic is_write(input logic [7:0] op);
    return op == OP_WRITE_FIRST || op == OP_WRITE_MIDDLE || op == OP_WRITE_LAST || op == OP_WRITE_ONLY;
  endfunction
  function automatic logic is_rresp(input logic [7:0] op);
    return op == OP_RR_FIRST || op == OP_RR_MIDDLE || op == OP_RR_LAST || op == OP_RR_ONLY;
  endfunction
  function automatic logic has_reth(input logic [7:0] op);
    return op == OP_WRITE_FIRST || op == OP_WRITE_ONLY || op == OP_READ_REQ;
  endfunction
  function automatic logic has_aeth(input logic [7:0] op);
    return op == OP_RR_FIRST || op == OP_RR_LAST || op == OP_RR_ONLY || op == OP_ACK;
  endfunction
  // Length of the extended transport header (RETH 16 B, AETH 4 B).
  function automatic logic [6:0] exh_len(input logic [7:0] op);
    return has_reth(op) ? 7'd16 : (has_aeth(op) ? 7'd4 : 7'd0);
  endfunction

  // 64-byte beats of payload a packet delivers to the host, from its opcode and the length of
  // everything behind the UDP header (BTH + extended header + payload + ICRC).
  function automatic logic [15:0] pay_beats(input logic [7:0] op, input logic [15:0] ib_len);
    logic [15:0] p;
    p = ib_len - 16'd16 - {9'd0, exh_len(op)};
    return (is_write(op) || is_rresp(op)) ? ((p + 16'd63) >> 6) : 16'd0;
  endfunction

  // CRC-32 (IEEE 802.3, reflected, polynomial 0x04C11DB7) of one byte.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] b);
    logic [31:0] c;
    c = crc ^ {24'd0, b};
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  // 24-bit PSN arithmetic.
  function automatic logic [23:0] psn_add(input logic [23:0] a, input logic [23:0] b);
    return a + b;
  endfunction

endpackage
