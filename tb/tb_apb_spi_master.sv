// tb_apb_spi_master: self-checking test of apb_spi_master.  A mode-0 SPI
// slave model (samples MOSI on rising SCK, changes MISO on falling SCK)
// exchanges random bytes with the master; checks both directions, the SCK
// half period (DIV cycles), the byte time (16*DIV), chip select and the
// completion interrupt.
module tb_apb_spi_master;
  import semantic_pkg::*;
  localparam int DIV = 3;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic sck, cs_n, mosi, miso, irq;
  int checks = 0, failures = 0;

  apb_spi_master dut (.clk, .rst_n, .apb_req, .apb_rsp, .spi_sck(sck), .spi_cs_n(cs_n),
                      .spi_mosi(mosi), .spi_miso(miso), .irq);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  `include "apb_tb_tasks.svh"

  // slave model
  logic [7:0] s_tx, s_rx;
  int nbits = 0, last_edge = 0, min_half = 1 << 30, max_half = 0, cyc = 0, nirq = 0;
  always @(posedge clk) begin
    cyc++;
    nirq += int'(irq);
  end
  always @(posedge sck) begin
    s_rx = {s_rx[6:0], mosi};
    nbits++;
  end
  always @(negedge sck) begin
    s_tx = {s_tx[6:0], 1'b0};
  end
  assign miso = s_tx[7];
  always @(sck) begin
    if (last_edge != 0) begin
      if (cyc - last_edge < min_half) min_half = cyc - last_edge;
      if (cyc - last_edge > max_half) max_half = cyc - last_edge;
    end
    last_edge = cyc;
  end

  initial begin
    logic [31:0] q;
    logic [7:0] m, sl;
    int t0, t1;
    apb_req = '0; s_tx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(cs_n == 1'b1, "chip select inactive after reset");
    apb_wr(12'h008, 32'(DIV));
    apb_wr(12'h00C, 32'h0);
    check(cs_n == 1'b0, "chip select driven by software");
    for (int i = 0; i < 10; i++) begin
      m = 8'($urandom); sl = 8'($urandom);
      s_tx = sl; nbits = 0; last_edge = 0;
      apb_wr(12'h000, 32'(m));
      t0 = cyc;
      do apb_rd(12'h004, q); while (q[0]);
      t1 = cyc;
      apb_rd(12'h000, q);
      check(q[7:0] == sl, $sformatf("master received %h expected %h", q[7:0], sl));
      check(s_rx == m && nbits == 8, $sformatf("slave received %h expected %h (%0d bits)", s_rx, m, nbits));
      check(t1 - t0 >= 16 * DIV - 1 && t1 - t0 <= 16 * DIV + 8, $sformatf("byte time %0d", t1 - t0));
    end
    check(min_half == DIV && max_half == DIV, $sformatf("SCK half period %0d..%0d", min_half, max_half));
    check(nirq == 10, $sformatf("%0d completion interrupts", nirq));
    apb_wr(12'h00C, 32'h1);
    check(cs_n == 1'b1, "chip select released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
