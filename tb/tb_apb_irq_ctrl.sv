// tb_apb_irq_ctrl: self-checking test of apb_irq_ctrl.  Checks that source
// pulses are latched as pending, that cpu_irq needs the enable bit, that
// irq_id names the lowest enabled pending source, and that writing 1 to
// PENDING clears exactly the written bits.
module tb_apb_irq_ctrl;
  import semantic_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic [7:0] src;
  logic cpu_irq;
  logic [4:0] irq_id;
  int checks = 0, failures = 0;

  apb_irq_ctrl #(.NIRQ(8)) dut (.clk, .rst_n, .apb_req, .apb_rsp, .src, .cpu_irq, .irq_id);
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
    logic [7:0] p, e, model;
    apb_req = '0; src = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    model = '0;
    for (int i = 0; i < 30; i++) begin
      p = 8'($urandom);
      e = 8'($urandom);
      @(negedge clk); src = p;
      @(negedge clk); src = '0;
      model |= p;
      apb_wr(12'h004, 32'(e));
      apb_rd(12'h000, q);
      check(q[7:0] == model, $sformatf("pending %h expected %h", q[7:0], model));
      #1 check(cpu_irq == |(model & e), "cpu_irq");
      if (|(model & e)) begin
        int lo;
        lo = 0;
        while (!model[lo] || !e[lo]) lo++;
        check(irq_id == 5'(lo), $sformatf("irq_id %0d expected %0d", irq_id, lo));
        apb_rd(12'h008, q);
        check(q == 32'(lo), "ID register");
      end
      p = 8'($urandom);
      apb_wr(12'h000, 32'(p));
      model &= ~p;
    end
    apb_rd(12'h000, q);
    check(q[7:0] == model, "pending after clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
