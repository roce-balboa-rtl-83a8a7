// tb_rd_req_table - random TX-side writes (new read requests) and RX-side writes (address
// advanced by a read response) against a reference model; the TX write wins a same-cycle clash.
module tb_rd_req_table;
  import balboa_pkg::*;
  localparam int NQP = 500;
  localparam int QW = $clog2(NQP);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tx_we, rx_we;
  logic [QW-1:0] tx_q, rx_q;
  logic [63:0] tx_laddr, rx_laddr, rx_wladdr;
  logic [63:0] m[NQP];

  rd_req_table #(.NQP(NQP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    tx_we = 0; rx_we = 0; tx_q = '0; rx_q = '0; tx_laddr = '0; rx_wladdr = '0;
    for (int q = 0; q < NQP; q++) begin
      @(negedge clk); tx_we = 1; tx_q = QW'(q); tx_laddr = {$urandom, $urandom}; m[q] = tx_laddr;
    end
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      tx_we = 0; rx_we = 0; rx_q = QW'($urandom % NQP);
      #2;
      checks++;
      if (rx_laddr != m[rx_q]) begin failures++; if (failures < 5) $display("FAIL q=%0d", rx_q); end
      tx_we = $urandom % 2; tx_q = ($urandom % 4 == 0) ? rx_q : QW'($urandom % NQP);
      tx_laddr = {$urandom, $urandom};
      rx_we = $urandom % 2; rx_wladdr = rx_laddr + 64'($urandom % 4096);
      if (tx_we) m[tx_q] = tx_laddr;
      else if (rx_we) m[rx_q] = rx_wladdr;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
