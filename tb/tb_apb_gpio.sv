// tb_apb_gpio: self-checking test of apb_gpio.  Checks output and output
// enable registers drive the pins, inputs are seen after the two-flop
// synchroniser (two cycles), and irq follows masked inputs.
module tb_apb_gpio;
  import semantic_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic [15:0] gin, gout, goe;
  logic irq;
  int checks = 0, failures = 0;

  apb_gpio #(.NGPIO(16)) dut (.clk, .rst_n, .apb_req, .apb_rsp, .gpio_in(gin), .gpio_out(gout), .gpio_oe(goe), .irq);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  `include "apb_tb_tasks.svh"

  initial begin
    logic [31:0] q;
    logic [15:0] v;
    apb_req = '0; gin = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      v = 16'($urandom);
      apb_wr(12'h000, 32'(v));
      apb_wr(12'h004, 32'(~v));
      check(gout == v && goe == ~v, "outputs and enables");
      apb_rd(12'h000, q);
      check(q == 32'(v), "OUT read back");
      @(negedge clk);
      gin = 16'($urandom);
      @(posedge clk); #1;
      @(posedge clk); #1;
      apb_rd(12'h008, q);
      check(q == 32'(gin), $sformatf("IN %h expected %h", q, gin));
    end
    @(negedge clk); gin = 16'h0010;
    apb_wr(12'h00C, 32'h0001);
    #1 check(!irq, "masked input gives no irq");
    apb_wr(12'h00C, 32'h0011);
    #1 check(irq, "unmasked input gives irq");
    // latency: input change visible on IN after two clock edges
    @(negedge clk); gin = 16'h0000;
    @(posedge clk); #1 check(irq, "first synchroniser stage only");
    @(posedge clk); #1 check(!irq, "irq drops after two edges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
