// tb_spi_slave: self-checking test of spi_slave.  A task-level SPI master
// (mode 0, SCK = clk/16) writes random byte strings at random addresses of
// a 64 KiB SRAM through the slave, checks them in the SRAM directly
// (including that neighbouring bytes are untouched), and reads them and
// preloaded words back through the SPI read command.
module tb_spi_slave;
  import semantic_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sck, cs_n, mosi, miso;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  int checks = 0, failures = 0;

  spi_slave dut (.clk, .rst_n, .spi_sck(sck), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
                 .m_req, .m_rsp);
  sram_bank #(.SIZE_BYTES(65536)) mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  `include "spi_tb_tasks.svh"

  function automatic logic [7:0] mem_byte(input logic [31:0] a);
    return mem.mem[a[15:2]][8*a[1:0] +: 8];
  endfunction

  initial begin
    logic [7:0] d [$], q [$], old [$];
    logic [31:0] a;
    int n;
    sck = 0; cs_n = 1; mosi = 0;
    for (int i = 0; i < 16384; i++) mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      a = 32'($urandom % 60000);
      n = 1 + int'($urandom % 13);
      d = {};
      for (int i = 0; i < n; i++) d.push_back(8'($urandom));
      old = {};
      old.push_back(mem_byte(a - 1));
      old.push_back(mem_byte(a + 32'(n)));
      spi_write(a, d);
      repeat (40) @(posedge clk);
      begin
        int ok;
        ok = 1;
        for (int i = 0; i < n; i++) if (mem_byte(a + 32'(i)) != d[i]) ok = 0;
        check(ok == 1, $sformatf("write of %0d bytes at %h", n, a));
      end
      check(mem_byte(a - 1) == old[0] && mem_byte(a + 32'(n)) == old[1], "neighbouring bytes kept");
      spi_read(a, n, q);
      check(q == d, $sformatf("read back %p expected %p", q, d));
    end
    // read of preloaded data across word boundaries
    a = 32'h0000_1002;
    spi_read(a, 10, q);
    begin
      int ok;
      ok = 1;
      for (int i = 0; i < 10; i++) if (q[i] != mem_byte(a + 32'(i))) ok = 0;
      check(ok == 1, "preloaded bytes read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
