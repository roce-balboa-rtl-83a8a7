// tb_msn_table - random setups (which clear an entry) and RX-port writes of MSN and virtual
// address, checked on both read ports against a reference model. Setup wins over a write in the
// same cycle.
module tb_msn_table;
  import balboa_pkg::*;
  localparam int NQP = 500;
  localparam int QW = $clog2(NQP);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic setup_we, rx_we;
  logic [QW-1:0] setup_q, rx_q, tx_q;
  logic [23:0] rx_msn, rx_wmsn, tx_msn;
  logic [63:0] rx_vaddr, rx_wvaddr;
  logic [23:0] m_msn[NQP];
  logic [63:0] m_va[NQP];

  msn_table #(.NQP(NQP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    setup_we = 0; rx_we = 0; setup_q = '0; rx_q = '0; tx_q = '0; rx_wmsn = '0; rx_wvaddr = '0;
    for (int q = 0; q < NQP; q++) begin
      @(negedge clk); setup_we = 1; setup_q = QW'(q); m_msn[q] = '0; m_va[q] = '0;
    end
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      setup_we = 0; rx_we = 0;
      rx_q = QW'($urandom % NQP); tx_q = QW'($urandom % NQP);
      #2;
      checks++;
      if (rx_msn != m_msn[rx_q] || rx_vaddr != m_va[rx_q] || tx_msn != m_msn[tx_q]) begin
        failures++; if (failures < 5) $display("FAIL q=%0d/%0d", rx_q, tx_q);
      end
      setup_we = ($urandom % 8) == 0; setup_q = QW'($urandom % NQP);
      rx_we = $urandom % 2; rx_wmsn = 24'($urandom); rx_wvaddr = {$urandom, $urandom};
      if (setup_we) begin m_msn[setup_q] = '0; m_va[setup_q] = '0; end
      else if (rx_we) begin m_msn[rx_q] = rx_wmsn; m_va[rx_q] = rx_wvaddr; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
