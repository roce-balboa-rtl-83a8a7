// tb_conn_table - writes random connection records for random QPs and checks the combinational
// read port against a reference array after every write.
module tb_conn_table;
  import balboa_pkg::*;
  localparam int NQP = 500;
  localparam int QW = $clog2(NQP);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic setup_we;
  qp_setup_t setup;
  logic [QW-1:0] rd_q;
  logic [31:0] rd_ip;
  logic [23:0] rd_rqpn;
  logic [15:0] rd_port;
  logic [31:0] m_ip[NQP];
  logic [23:0] m_rqpn[NQP];
  logic [15:0] m_port[NQP];

  conn_table #(.NQP(NQP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    setup_we = 0; setup = '0; rd_q = '0;
    for (int it = 0; it < NQP + 5000; it++) begin
      @(negedge clk);
      setup_we = 1; setup = '0;
      setup.qpn = 16'(it < NQP ? it : $urandom % NQP);
      setup.rip = $urandom; setup.rqpn = 24'($urandom); setup.rport = 16'($urandom);
      m_ip[setup.qpn] = setup.rip; m_rqpn[setup.qpn] = setup.rqpn; m_port[setup.qpn] = setup.rport;
      if (it >= NQP) begin
        rd_q = QW'($urandom % NQP);
        #2;
        checks++;
        if (rd_ip != m_ip[rd_q] || rd_rqpn != m_rqpn[rd_q] || rd_port != m_port[rd_q]) begin
          // a read of the entry being written this cycle still shows the old contents
          if (!(rd_q == QW'(setup.qpn))) begin failures++; $display("FAIL q=%0d", rd_q); end
        end
      end
    end
    @(negedge clk); setup_we = 0;
    for (int q = 0; q < NQP; q++) begin
      rd_q = QW'(q); #1;
      checks++;
      if (rd_ip != m_ip[q] || rd_rqpn != m_rqpn[q] || rd_port != m_port[q]) begin failures++; $display("FAIL final q=%0d", q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
