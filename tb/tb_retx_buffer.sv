// tb_retx_buffer - fills the payload buffer with random beats, then mixes random writes with
// reads of random addresses, checking the asynchronous read port against a reference array.
module tb_retx_buffer;
  import balboa_pkg::*;
  localparam int AW = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [DATA_W-1:0] wdata, rdata;
  logic [DATA_W-1:0] m[2**AW];

  retx_buffer #(.AW(AW)) dut (.*);

  function automatic logic [DATA_W-1:0] rnd512();
    logic [DATA_W-1:0] r;
    for (int i = 0; i < DATA_W / 32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = rnd512(); m[a] = wdata;
    end
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      we = 0; raddr = AW'($urandom);
      #2;
      checks++;
      if (rdata != m[raddr]) begin failures++; if (failures < 5) $display("FAIL a=%0d", raddr); end
      we = $urandom % 2; waddr = ($urandom % 4 == 0) ? raddr : AW'($urandom); wdata = rnd512();
      if (we) m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
