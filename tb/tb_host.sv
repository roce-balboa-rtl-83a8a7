// tb_host - behavioural host for the testbenches: a byte-addressed memory with the DMA side of
// the stack. It issues RDMA commands given by the test (sending WRITE payload from its memory on
// the WRITE data bus), serves READ requests from the stack on the READ RESPONSE data bus, writes
// received payload into its memory at the address of each memory-write command, returns one
// receive credit per drained beat (unless hold_credit is set) and counts completions.
module tb_host
  import balboa_pkg::*;
#(
  parameter int MEMSZ = 65536,
  parameter int SEED  = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  rdma_cmd_t tb_cmd,
  input  logic      tb_cmd_valid,
  input  logic      hold_credit,
  output rdma_cmd_t cmd,
  output logic      cmd_valid,
  input  logic      cmd_ready,
  input  cpl_t      cpl,
  input  logic      cpl_valid,
  output logic      cpl_ready,
  output axis_t     wr_beat,
  output logic      wr_valid,
  input  logic      wr_ready,
  output axis_t     rr_beat,
  output logic      rr_valid,
  input  logic      rr_ready,
  input  host_rd_t  host_rd,
  input  logic      host_rd_valid,
  output logic      host_rd_ready,
  input  mem_cmd_t  mem_cmd,
  input  logic      mem_cmd_valid,
  output logic      mem_cmd_ready,
  input  axis_t     mem_beat,
  input  logic      mem_valid,
  output logic      mem_ready,
  output logic      credit_ret,
  output int        n_cpl,
  output int        n_nak,
  output int        n_memcmd,
  output int        n_rdreq,
  output logic      idle
);

  logic [7:0] mem [MEMSZ];
  rdma_cmd_t  cq[$];
  axis_t      wq[$], rq[$];
  mem_cmd_t   mq[$];
  logic [63:0] waddr;
  int          wleft;
  int          pend_credit;

  initial for (int i = 0; i < MEMSZ; i++) mem[i] = 8'((i * 7 + SEED * 13 + i / 256) & 8'hFF);

  function automatic void push_beats(ref axis_t q[$], input logic [63:0] a, input int len);
    axis_t b;
    for (int o = 0; o < len; o += 64) begin
      b = '0;
      for (int i = 0; i < 64; i++) if (o + i < len) begin
        b.data[8*i +: 8] = mem[int'(a) + o + i];
        b.keep[i] = 1'b1;
      end
      b.last = (o + 64 >= len);
      q.push_back(b);
    end
  endfunction

  // Queues are read through indices advanced by nonblocking updates so that the design samples
  // exactly the entry that its handshake refers to.
  int ch = 0, wh = 0, rh = 0;
  assign cmd       = ch < cq.size() ? cq[ch] : '0;
  assign cmd_valid = ch < cq.size();
  assign wr_beat   = wh < wq.size() ? wq[wh] : '0;
  assign wr_valid  = wh < wq.size();
  assign rr_beat   = rh < rq.size() ? rq[rh] : '0;
  assign rr_valid  = rh < rq.size();
  assign cpl_ready = 1'b1;
  assign host_rd_ready = 1'b1;
  assign mem_cmd_ready = 1'b1;
  assign mem_ready = 1'b1;
  assign idle = ch == cq.size() && wh == wq.size() && rh == rq.size();

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cpl <= 0; n_nak <= 0; n_memcmd <= 0; n_rdreq <= 0;
      wleft <= 0; waddr <= '0; pend_credit <= 0; credit_ret <= 1'b0;
    end else begin
      if (tb_cmd_valid) begin
        cq.push_back(tb_cmd);
        if (!tb_cmd.is_read) push_beats(wq, tb_cmd.laddr, int'(tb_cmd.len));
      end
      if (cmd_valid && cmd_ready) ch <= ch + 1;
      if (wr_valid && wr_ready) wh <= wh + 1;
      if (rr_valid && rr_ready) rh <= rh + 1;
      if (host_rd_valid) begin
        push_beats(rq, host_rd.vaddr, int'(host_rd.len));
        n_rdreq <= n_rdreq + 1;
      end
      if (cpl_valid) begin
        if (cpl.nak) n_nak <= n_nak + 1; else n_cpl <= n_cpl + 1;
      end
      if (mem_cmd_valid) begin
        mq.push_back(mem_cmd);
        n_memcmd <= n_memcmd + 1;
      end
      credit_ret <= 1'b0;
      if (mem_valid) begin
        // payload follows its command; the command is issued no later than the first beat
        mem_cmd_t c;
        int base;
        c = mq.size() > 0 ? mq[0] : (mem_cmd_valid ? mem_cmd : '0);
        base = (wleft == 0) ? int'(c.vaddr) : int'(waddr);
        for (int i = 0; i < 64; i++) if (mem_beat.keep[i]) mem[base + i] = mem_beat.data[8*i +: 8];
        if (mem_beat.last) begin
          wleft <= 0;
          if (mq.size() > 0) void'(mq.pop_front());
        end else begin
          wleft <= 1;
          waddr <= 64'(base + 64);
        end
        pend_credit = pend_credit + 1;
      end
      if (!hold_credit && pend_credit > 0) begin
        credit_ret <= 1'b1;
        pend_credit = pend_credit - 1;
      end
    end
  end

endmodule
