// tb_apb_timer: self-checking test of apb_timer.  Checks register reset
// values and read-back, that the counter advances one step per cycle while
// enabled and holds while disabled, that a compare match restarts the count
// after exactly COMPARE+1 cycles and sets the flag, and that irq follows the
// flag, the enable bit and the write-1-to-clear.
module tb_apb_timer;
  import semantic_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic irq;
  int checks = 0, failures = 0;

  apb_timer dut (.clk, .rst_n, .apb_req, .apb_rsp, .irq);
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
    logic [31:0] q, q2;
    int t0, t1;
    apb_req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    apb_rd(12'h008, q);
    check(q == 32'hFFFF_FFFF, "COMPARE reset value");
    apb_rd(12'h004, q);
    repeat (10) @(posedge clk);
    apb_rd(12'h004, q2);
    check(q == 0 && q2 == 0, "counter holds while disabled");
    // free-running: two reads 10 cycles apart differ by the cycle distance
    apb_wr(12'h008, 32'd1000);
    apb_wr(12'h000, 32'h1);
    apb_rd(12'h004, q);
    repeat (10) @(negedge clk);
    apb_rd(12'h004, q2);
    check(q2 - q >= 32'd10 && q2 - q <= 32'd14, $sformatf("counter advanced %0d across 10 idle cycles plus one access", q2 - q));
    // period: COMPARE = 49 -> flag every 50 cycles
    apb_wr(12'h000, 32'h0);
    apb_wr(12'h004, 32'h0);
    apb_wr(12'h008, 32'd49);
    apb_wr(12'h00C, 32'h1);
    check(!irq, "irq low before enable");
    apb_wr(12'h000, 32'h3);
    t0 = 0;
    while (!irq) begin @(posedge clk); t0++; end
    apb_wr(12'h00C, 32'h1);
    #1 check(!irq, "flag cleared");
    t1 = 0;
    while (!irq) begin @(posedge clk); t1++; end
    check(t0 >= 49 && t0 <= 51, $sformatf("first match after %0d cycles", t0));
    check(t1 >= 45 && t1 <= 50, $sformatf("next match %0d cycles after clear", t1));
    apb_wr(12'h000, 32'h1);
    #1 check(!irq, "irq masked by interrupt enable");
    apb_rd(12'h00C, q);
    check(q == 32'h1, "flag still set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
