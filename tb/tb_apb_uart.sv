// tb_apb_uart: self-checking test of apb_uart.  An independent serial model
// decodes the TX line (sampling each bit in its middle) and drives the RX
// line.  Checks the sent bytes, the exact bit time (a 0x00 byte keeps the
// line low for 9 bit times), back-pressure of a second DATA write, received
// bytes, the receive interrupt, overrun and framing-error flags.
module tb_apb_uart;
  import semantic_pkg::*;
  localparam int DIV = 20;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic tx, rx, irq;
  int checks = 0, failures = 0;

  apb_uart dut (.clk, .rst_n, .apb_req, .apb_rsp, .uart_tx(tx), .uart_rx(rx), .irq);
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

  // TX line decoder
  logic [7:0] got [$];
  int low_len [$];
  initial begin
    logic [7:0] b;
    int n;
    forever begin
      @(negedge tx);
      n = 0;
      fork
        begin
          // count settled low samples, one per cycle at the falling clock edge
          forever begin
            @(negedge clk);
            if (tx) break;
            n++;
          end
        end
        begin
          repeat (DIV / 2) @(posedge clk);
          for (int i = 0; i < 8; i++) begin
            repeat (DIV) @(posedge clk);
            b[i] = tx;
          end
          repeat (DIV) @(posedge clk);
          if (tx !== 1'b1) $display("stop bit low");
        end
      join
      got.push_back(b);
      low_len.push_back(n);
    end
  end

  task automatic send_rx(input logic [7:0] b, input logic stop);
    logic [9:0] f;
    f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (DIV) @(posedge clk);
    end
    rx = 1'b1;
  endtask

  initial begin
    logic [31:0] q;
    logic [7:0] sent [$];
    int t;
    apb_req = '0; rx = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    apb_rd(12'h008, q);
    check(q == 32'd16, "DIV reset value");
    apb_wr(12'h008, 32'(DIV));
    // transmit: the first byte 0x00 measures the bit time
    sent.push_back(8'h00);
    for (int i = 0; i < 6; i++) sent.push_back(8'($urandom));
    t = 0;
    foreach (sent[i]) begin
      int c0;
      c0 = $time;
      apb_wr(12'h000, 32'(sent[i]));
      if (i == 2) check(($time - c0) / 10 > DIV, "second waiting byte stalls the write");
    end
    do apb_rd(12'h004, q); while (q[0]);
    repeat (2 * DIV) @(posedge clk);
    check(got == sent, $sformatf("sent %p decoded %p", sent, got));
    check(low_len.size() > 0 && low_len[0] == 9 * DIV, $sformatf("0x00 frame low for %0d cycles", low_len.size() ? low_len[0] : 0));
    // receive with interrupt
    apb_wr(12'h00C, 32'h1);
    for (int i = 0; i < 5; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      check(!irq, "no receive interrupt while empty");
      send_rx(b, 1'b1);
      repeat (DIV) @(posedge clk);
      check(irq, "receive interrupt");
      apb_rd(12'h000, q);
      check(q[7:0] == b, $sformatf("received %h expected %h", q[7:0], b));
    end
    // overrun
    send_rx(8'h11, 1'b1);
    send_rx(8'h22, 1'b1);
    repeat (DIV) @(posedge clk);
    apb_rd(12'h004, q);
    check(q[2] && q[1], "overrun flag");
    apb_rd(12'h000, q);
    check(q[7:0] == 8'h22, "latest byte kept");
    apb_wr(12'h004, 32'h4);
    // framing error
    send_rx(8'h33, 1'b0);
    repeat (2 * DIV) @(posedge clk);
    apb_rd(12'h004, q);
    check(q[3] && !q[1] && !q[2], $sformatf("framing error flag, status %h", q));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
