// tb_opcua_regs: self-checking test of the OPC UA engine's APB register
// block with a request FIFO and a reply FIFO attached.  Checks: CTRL reset
// value and write/read; words written to RXDATA appear in the request FIFO
// in order; a write to RXDATA while the FIFO is full is stretched with wait
// states until a word is taken; TXDATA pops reply words, STATUS reports the
// count and the last-word flag, MSGCNT counts completed messages; irq follows
// the reply FIFO and the enable bit; CHUNK reads chunk_size.
module tb_opcua_regs;
  import semantic_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic enable, clear, rxf_push, txf_pop, irq;
  logic [31:0] rxf_data;
  logic rxf_in_ready, rxf_out_valid, rxf_out_ready;
  logic [31:0] rxf_out_data;
  logic [4:0] rxf_cnt, txf_cnt;
  logic txf_in_valid, txf_in_ready, txf_valid;
  logic [32:0] txf_in_data, txf_data;
  int checks = 0, failures = 0;

  opcua_regs #(.NSTG(3)) dut (
    .clk, .rst_n, .apb_req, .apb_rsp, .enable, .clear,
    .rxf_push, .rxf_full(!rxf_in_ready), .rxf_data,
    .txf_valid, .txf_data, .txf_count(16'(txf_cnt)), .txf_pop,
    .allocated(3'b101), .chunk_size(32'd1234), .irq
  );
  sync_fifo #(.WIDTH(32), .DEPTH(16)) rxf (
    .clk, .rst_n, .clear, .in_valid(rxf_push), .in_ready(rxf_in_ready), .in_data(rxf_data),
    .out_valid(rxf_out_valid), .out_ready(rxf_out_ready), .out_data(rxf_out_data), .count(rxf_cnt));
  sync_fifo #(.WIDTH(33), .DEPTH(16)) txf (
    .clk, .rst_n, .clear, .in_valid(txf_in_valid), .in_ready(txf_in_ready), .in_data(txf_in_data),
    .out_valid(txf_valid), .out_ready(txf_pop), .out_data(txf_data), .count(txf_cnt));

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

  // APB transfer; returns data and the number of wait states
  task automatic apb(input logic we, input logic [11:0] a, input logic [31:0] d,
                     output logic [31:0] q, output int waits);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: we, paddr: a, pwdata: d};
    @(negedge clk);
    apb_req.penable = 1'b1;
    waits = 0;
    #1;
    while (!apb_rsp.pready) begin @(negedge clk); #1; waits++; end
    q = apb_rsp.prdata;
    @(posedge clk); #1;
    apb_req = '0;
  endtask

  initial begin
    logic [31:0] q;
    int w;
    apb_req = '0; rxf_out_ready = 0; txf_in_valid = 0; txf_in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    apb(1'b0, 12'h000, 0, q, w);
    check(q == 32'h1 && enable, "CTRL reset value");
    apb(1'b0, 12'h010, 0, q, w);
    check(q == 32'd1234, "CHUNK register");
    // fill the request FIFO
    for (int i = 0; i < 16; i++) begin
      apb(1'b1, 12'h008, 32'hA0 + 32'(i), q, w);
      check(w == 0, $sformatf("no wait state on push %0d", i));
    end
    apb(1'b0, 12'h004, 0, q, w);
    check(q[16] == 1'b1 && q[23:20] == 4'b0101, $sformatf("STATUS full/allocated %h", q));
    // push into the full FIFO: released 5 cycles later by a pop
    fork
      apb(1'b1, 12'h008, 32'hBEEF, q, w);
      begin repeat (6) @(negedge clk); rxf_out_ready = 1; @(negedge clk); rxf_out_ready = 0; end
    join
    check(w >= 4, $sformatf("push stretched by %0d wait states", w));
    for (int i = 0; i < 16; i++) begin
      check(rxf_out_data == (i < 15 ? 32'hA1 + 32'(i) : 32'hBEEF), $sformatf("request word %0d = %h", i, rxf_out_data));
      @(negedge clk); rxf_out_ready = 1; @(negedge clk); rxf_out_ready = 0;
    end
    // reply words: 2 messages of 3 and 2 words
    check(!irq, "irq low with empty reply FIFO");
    apb(1'b1, 12'h000, 32'h3, q, w);
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      txf_in_valid = 1; txf_in_data = {(i == 2 || i == 4), 32'hC0 + 32'(i)};
    end
    @(negedge clk); txf_in_valid = 0;
    #1 check(irq, "irq with reply words and enable");
    apb(1'b0, 12'h004, 0, q, w);
    check(q[15:0] == 16'd5 && !q[17], $sformatf("STATUS count %h", q));
    for (int i = 0; i < 5; i++) begin
      apb(1'b0, 12'h004, 0, q, w);
      check(q[17] == (i == 2 || i == 4), $sformatf("last flag at word %0d", i));
      apb(1'b0, 12'h00C, 0, q, w);
      check(q == 32'hC0 + 32'(i), $sformatf("reply word %0d = %h", i, q));
    end
    apb(1'b0, 12'h014, 0, q, w);
    check(q == 32'd2, $sformatf("MSGCNT %0d", q));
    apb(1'b0, 12'h00C, 0, q, w);
    check(q == 32'd0, "empty TXDATA reads 0");
    #1 check(!irq, "irq low again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
