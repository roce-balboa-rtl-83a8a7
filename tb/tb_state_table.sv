// tb_state_table - random mix of connection setups and RX/TX port writes against a reference
// model of the four per-QP PSN fields. Inputs change on the falling edge; the combinational read
// ports are compared with the model just before each rising edge. Setup has priority over the
// port writes to the same cycle.
module tb_state_table;
  import balboa_pkg::*;
  localparam int NQP = 500;
  localparam int QW = $clog2(NQP);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic setup_we, rx_we_epsn, rx_we_nak, rx_we_una, tx_we, rx_wnak, rx_nak_sent;
  qp_setup_t setup;
  logic [QW-1:0] rx_q, tx_q;
  logic [23:0] rx_epsn, rx_una, rx_npsn, rx_wepsn, rx_wuna, tx_npsn, tx_una, tx_wnpsn;
  logic [23:0] m_epsn[NQP], m_npsn[NQP], m_una[NQP];
  logic        m_nak[NQP];
  bit          valid[NQP];

  state_table #(.NQP(NQP)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    {setup_we, rx_we_epsn, rx_we_nak, rx_we_una, tx_we, rx_wnak} = '0;
    setup = '0; rx_q = '0; tx_q = '0; rx_wepsn = '0; rx_wuna = '0; tx_wnpsn = '0;
    // set up every QP once
    for (int q = 0; q < NQP; q++) begin
      @(negedge clk);
      setup_we = 1; setup = '0; setup.qpn = 16'(q);
      setup.rx_psn = 24'($urandom); setup.tx_psn = 24'($urandom);
      m_epsn[q] = setup.rx_psn; m_npsn[q] = setup.tx_psn; m_una[q] = setup.tx_psn; m_nak[q] = 0;
    end
    @(negedge clk); setup_we = 0;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      rx_q = QW'($urandom % NQP); tx_q = QW'($urandom % NQP);
      // compare the read ports for the addresses now presented
      #2;
      checks++;
      if (rx_epsn != m_epsn[rx_q] || rx_nak_sent != m_nak[rx_q] || rx_una != m_una[rx_q] ||
          rx_npsn != m_npsn[rx_q] || tx_npsn != m_npsn[tx_q] || tx_una != m_una[tx_q]) begin
        failures++;
        if (failures < 5) $display("FAIL read q=%0d/%0d", rx_q, tx_q);
      end
      setup_we   = ($urandom % 16) == 0;
      setup      = '0; setup.qpn = 16'($urandom % NQP);
      setup.rx_psn = 24'($urandom); setup.tx_psn = 24'($urandom);
      rx_we_epsn = $urandom % 2; rx_wepsn = 24'($urandom);
      rx_we_nak  = $urandom % 2; rx_wnak  = 1'($urandom);
      rx_we_una  = $urandom % 2; rx_wuna  = 24'($urandom);
      tx_we      = $urandom % 2; tx_wnpsn = 24'($urandom);
      if (setup_we) begin
        m_epsn[setup.qpn] = setup.rx_psn; m_npsn[setup.qpn] = setup.tx_psn;
        m_una[setup.qpn] = setup.tx_psn; m_nak[setup.qpn] = 0;
      end else begin
        if (rx_we_epsn) m_epsn[rx_q] = rx_wepsn;
        if (rx_we_nak)  m_nak[rx_q]  = rx_wnak;
        if (rx_we_una)  m_una[rx_q]  = rx_wuna;
        if (tx_we)      m_npsn[tx_q] = tx_wnpsn;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
