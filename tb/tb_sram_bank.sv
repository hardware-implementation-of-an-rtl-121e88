// tb_sram_bank: self-checking test of sram_bank.  Writes random words and
// byte-masked updates into a scoreboard copy, reads every written word back
// and checks data and the one-cycle read latency (rvalid exactly one cycle
// after the request).
module tb_sram_bank;
  import semantic_pkg::*;
  localparam int unsigned SIZE = 4096;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [31:0] model [SIZE/4];
  logic        written [SIZE/4];

  sram_bank #(.SIZE_BYTES(SIZE)) dut (.clk, .rst_n, .req, .rsp);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic we, input int idx, input logic [31:0] d,
                        input logic [3:0] strb, output logic [31:0] q);
    req = '{valid: 1'b1, we: we, addr: 32'(idx) << 2, wdata: d, wstrb: strb};
    @(posedge clk); #1;
    req = '0;
    checks++;
    if (!rsp.rvalid) begin failures++; $display("rvalid not one cycle after request"); end
    q = rsp.rdata;
  endtask

  initial begin
    logic [31:0] q, d;
    logic [3:0]  s;
    int idx;
    req = '0;
    for (int i = 0; i < SIZE/4; i++) written[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++;
    if (rsp.rvalid) begin failures++; $display("rvalid while idle"); end
    for (int i = 0; i < 400; i++) begin
      idx = $urandom_range(SIZE/4 - 1);
      d = $urandom;
      s = written[idx] ? 4'($urandom) : 4'hF;
      access(1'b1, idx, d, s, q);
      for (int b = 0; b < 4; b++) if (s[b]) model[idx][8*b +: 8] = d[8*b +: 8];
      written[idx] = 1;
    end
    for (int i = 0; i < SIZE/4; i++) if (written[i]) begin
      access(1'b0, i, 32'h0, 4'h0, q);
      checks++;
      if (q !== model[i]) begin
        failures++;
        $display("word %0d read %h expected %h", i, q, model[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
