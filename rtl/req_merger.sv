// req_merger - "Command & Request Merger" at the head of the TX pipeline.
//
// Merges four sources of outgoing traffic and cuts every message into packets of at most PMTU
// payload bytes:
//   1. ACK / NAK requests from the RX PSN check (highest priority, inserted between packets),
//   2. retransmission requests (NAK received or transport timeout),
//   3. READ RESPONSE requests from the RX path, and
//   4. host RDMA WRITE / READ commands (after flow control);
// sources 3 and 4 share the link round-robin at message granularity.
// For each packet it emits one descriptor to the retransmission / stream mux: the payload source
// (host WRITE bus, host READ RESPONSE bus, retransmission buffer, or none), the buffer address,
// the byte count and the packet metadata (opcode, PSNs, remote QP, RETH/AETH fields, remote IP
// and port from the connection table). New WRITE and READ messages take their PSNs from the
// state table; READ RESPONSEs use the PSNs of the READ request. Each host message is given a
// region of the retransmission buffer (a ring) and is recorded in a per-QP retransmission command
// memory; a retransmission replays that message go-back-N from the oldest unacknowledged PSN,
// with the payload taken from the buffer. One descriptor per clock cycle at most.
module req_merger
  import balboa_pkg::*;
#(
  parameter int unsigned NQP    = 500,
  parameter int unsigned PMTU   = 4096,
  parameter int unsigned BUF_AW = 12,    // retransmission buffer address bits (64-byte beats)
  localparam int unsigned QW = $clog2(NQP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rdma_cmd_t         cmd,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  ack_req_t          ack_req,
  input  logic              ack_req_valid,
  output logic              ack_req_ready,
  input  rresp_req_t        rresp,
  input  logic              rresp_valid,
  output logic              rresp_ready,
  input  logic [QW-1:0]     retx_q,
  input  logic              retx_valid,
  output logic              retx_ready,
  // descriptor towards the retransmission / stream mux
  output pay_src_e          f_src,
  output logic [BUF_AW-1:0] f_addr,
  output logic [15:0]       f_bytes,
  output roce_meta_t        f_meta,
  output logic              f_valid,
  input  logic              f_ready,
  // host memory read for READ RESPONSE data
  output host_rd_t          host_rd,
  output logic              host_rd_valid,
  input  logic              host_rd_ready,
  // table ports
  output logic [QW-1:0]     tq,
  input  logic [23:0]       st_npsn,
  input  logic [23:0]       st_una,
  output logic              st_we,
  output logic [23:0]       st_wnpsn,
  input  logic [31:0]       ct_ip,
  input  logic [23:0]       ct_rqpn,
  input  logic [15:0]       ct_port,
  input  logic [23:0]       msn,
  output logic              rrt_we,
  output logic [63:0]       rrt_laddr,
  output logic              tmr_arm,
  output logic [QW-1:0]     tmr_q,
  output logic              retx_pulse      // a retransmission was started
);

  localparam int unsigned PSHIFT = $clog2(PMTU);

  typedef enum logic [1:0] {K_WRITE, K_READ, K_RRESP} kind_e;

  typedef struct packed {
    logic              is_read;
    logic [63:0]       raddr;
    logic [31:0]       len;
    logic [23:0]       psn0;
    logic [BUF_AW-1:0] base;
  } retx_ent_t;

  retx_ent_t retx_m [NQP];

  // current message
  logic              act;
  kind_e             k;
  logic [QW-1:0]     q;
  logic [23:0]       psn;
  logic [31:0]       rem;        // bytes still to send
  logic [31:0]       off;        // byte offset of the next packet in the message
  logic [63:0]       raddr;      // remote address of the message start
  logic [BUF_AW-1:0] base;
  logic              from_buf;
  logic              rr_turn;    // round-robin pointer: 1 = READ RESPONSE first
  logic [BUF_AW-1:0] wptr;       // retransmission ring write pointer

  logic out_free;
  assign out_free = !f_valid || f_ready;

  // selection of the table index
  typedef enum logic [2:0] {S_NONE, S_ACK, S_CONT, S_RETX, S_RRESP, S_CMD} sel_e;
  sel_e sel;
  logic pick_rr;

  always_comb begin
    pick_rr = rresp_valid && (rr_turn || !cmd_valid);
    sel = S_NONE;
    if (out_free) begin
      if (ack_req_valid)                    sel = S_ACK;
      else if (act)                         sel = S_CONT;
      else if (retx_valid)                  sel = S_RETX;
      else if (pick_rr && !host_rd_valid)   sel = S_RRESP;
      else if (cmd_valid)                   sel = S_CMD;
    end
    case (sel)
      S_ACK:   tq = ack_req.qpn[QW-1:0];
      S_CONT:  tq = q;
      S_RETX:  tq = retx_q;
      S_RRESP: tq = rresp.qpn[QW-1:0];
      default: tq = cmd.qpn[QW-1:0];
    endcase
  end

  assign ack_req_ready = sel == S_ACK;
  assign retx_ready    = sel == S_RETX;
  assign rresp_ready   = sel == S_RRESP;
  assign cmd_ready     = sel == S_CMD;

  function automatic logic [23:0] npk(input logic [31:0] len);
    return (len <= 32'(PMTU)) ? 24'd1 : 24'((len + 32'(PMTU) - 1) >> PSHIFT);
  endfunction
  function automatic logic [BUF_AW-1:0] nbeats(input logic [31:0] len);
    return BUF_AW'((len + 32'd63) >> 6);
  endfunction

  // replay of the recorded message from the oldest unacknowledged PSN
  retx_ent_t re;
  logic [23:0] ridx;
  logic        rvalid;
  always_comb begin
    re     = retx_m[retx_q];
    ridx   = st_una - re.psn0;
    rvalid = (st_una != st_npsn) && (ridx < npk(re.len));
  end

  // table writes
  assign st_we     = (sel == S_CMD);
  assign st_wnpsn  = st_npsn + npk(cmd.len);
  assign rrt_we    = (sel == S_CMD) && cmd.is_read;
  assign rrt_laddr = cmd.laddr;

  // packet generation for the current message
  roce_meta_t pm;
  logic [15:0] pbytes;
  logic        pfirst, plast;
  always_comb begin
    pbytes = (rem > 32'(PMTU)) ? 16'(PMTU) : rem[15:0];
    pfirst = (off == 0);
    plast  = (rem <= 32'(PMTU));
    pm = '0;
    pm.qpn   = 16'(q);
    pm.rqpn  = ct_rqpn;
    pm.ip    = ct_ip;
    pm.port  = ct_port;
    pm.psn   = psn;
    pm.vaddr = raddr + 64'(off);
    pm.dma_len = rem;
    pm.rkey  = '0;
    pm.msn   = msn;
    pm.syndrome = SYN_ACK;
    case (k)
      K_WRITE: begin
        pm.opcode  = pfirst ? (plast ? OP_WRITE_ONLY : OP_WRITE_FIRST)
                            : (plast ? OP_WRITE_LAST : OP_WRITE_MIDDLE);
        pm.pay_len = pbytes;
        pm.ackreq  = plast;
      end
      K_READ: begin
        pm.opcode  = OP_READ_REQ;
        pm.pay_len = '0;
        pm.ackreq  = 1'b1;
      end
      default: begin
        pm.opcode  = pfirst ? (plast ? OP_RR_ONLY : OP_RR_FIRST)
                            : (plast ? OP_RR_LAST : OP_RR_MIDDLE);
        pm.pay_len = pbytes;
      end
    endcase
  end

  assign tmr_arm = (sel == S_CONT) && (k != K_RRESP);
  assign tmr_q   = q;
  assign retx_pulse = (sel == S_RETX) && rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0;
      k <= K_WRITE;
      q <= '0;
      psn <= '0;
      rem <= '0;
      off <= '0;
      raddr <= '0;
      base <= '0;
      from_buf <= 1'b0;
      rr_turn <= 1'b0;
      wptr <= '0;
      f_valid <= 1'b0;
      f_src <= SRC_NONE;
      f_addr <= '0;
      f_bytes <= '0;
      f_meta <= '0;
      host_rd_valid <= 1'b0;
      host_rd <= '0;
    end else begin
      if (f_valid && f_ready) f_valid <= 1'b0;
      if (host_rd_valid && host_rd_ready) host_rd_valid <= 1'b0;
      case (sel)
        S_ACK: begin
          f_valid <= 1'b1;
          f_src   <= SRC_NONE;
          f_bytes <= '0;
          f_meta  <= '{opcode: OP_ACK, qpn: ack_req.qpn, rqpn: ct_rqpn, psn: ack_req.psn,
                       ackreq: 1'b0, vaddr: '0, rkey: '0, dma_len: '0,
                       syndrome: ack_req.nak ? SYN_NAK_SEQ : SYN_ACK, msn: msn,
                       pay_len: '0, ip: ct_ip, port: ct_port};
        end
        S_CONT: begin
          f_valid <= 1'b1;
          f_meta  <= pm;
          f_bytes <= (k == K_READ) ? 16'd0 : pbytes;
          f_addr  <= base + BUF_AW'(off >> 6);
          f_src   <= (k == K_READ) ? SRC_NONE : from_buf ? SRC_BUF :
                     (k == K_WRITE) ? SRC_WR : SRC_RR;
          psn     <= psn + 24'd1;
          if (k == K_READ || plast) act <= 1'b0;
          rem     <= rem - 32'(pbytes);
          off     <= off + 32'(pbytes);
        end
        S_RETX: begin
          if (rvalid) begin
            act      <= 1'b1;
            k        <= re.is_read ? K_READ : K_WRITE;
            q        <= retx_q;
            psn      <= st_una;
            off      <= 32'(ridx) << PSHIFT;
            rem      <= re.len - (32'(ridx) << PSHIFT);
            raddr    <= re.raddr;
            base     <= re.base;
            from_buf <= 1'b1;
          end
        end
        S_RRESP: begin
          act      <= 1'b1;
          k        <= K_RRESP;
          q        <= rresp.qpn[QW-1:0];
          psn      <= rresp.psn;
          off      <= '0;
          rem      <= rresp.len;
          raddr    <= '0;
          base     <= wptr;
          wptr     <= wptr + nbeats(rresp.len);
          from_buf <= 1'b0;
          rr_turn  <= 1'b0;
          host_rd_valid <= 1'b1;
          host_rd  <= '{qpn: rresp.qpn, vaddr: rresp.vaddr, len: rresp.len};
        end
        S_CMD: begin
          act      <= 1'b1;
          k        <= cmd.is_read ? K_READ : K_WRITE;
          q        <= cmd.qpn[QW-1:0];
          psn      <= st_npsn;
          off      <= '0;
          rem      <= cmd.len;
          raddr    <= cmd.raddr;
          base     <= wptr;
          if (!cmd.is_read) wptr <= wptr + nbeats(cmd.len);
          from_buf <= 1'b0;
          rr_turn  <= 1'b1;
          retx_m[cmd.qpn[QW-1:0]] <= '{is_read: cmd.is_read, raddr: cmd.raddr,
                                       len: cmd.len, psn0: st_npsn, base: wptr};
        end
        default: ;
      endcase
    end
  end

endmodule
