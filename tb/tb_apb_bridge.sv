// tb_apb_bridge: self-checking test of apb_bridge.  Six APB register slaves
// with programmable wait states are modelled here.  Checks: each slave is
// written and read back through the bridge; PSEL goes only to the addressed
// slave and PENABLE is low in the SETUP cycle; the response arrives two
// cycles after acceptance plus one cycle per wait state; an index with no
// slave answers 0 without any PSEL.
module tb_apb_bridge;
  import semantic_pkg::*;
  localparam int NP = 6;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  apb_req_t apb_req [NP];
  apb_rsp_t apb_rsp [NP];
  int checks = 0, failures = 0;
  logic [31:0] regs [NP][4];
  int waits [NP];
  int wcnt [NP];
  int psel_seen [NP];

  apb_bridge #(.NP(NP)) dut (.clk, .rst_n, .req, .rsp, .apb_req, .apb_rsp);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // APB slave models
  for (genvar p = 0; p < NP; p++) begin : g_slv
    always_comb begin
      apb_rsp[p].pready  = apb_req[p].psel && apb_req[p].penable && wcnt[p] >= waits[p];
      apb_rsp[p].prdata  = regs[p][apb_req[p].paddr[3:2]];
      apb_rsp[p].pslverr = 1'b0;
    end
    always @(posedge clk) begin
      if (apb_req[p].psel && !apb_req[p].penable) psel_seen[p]++;
      if (apb_req[p].psel && apb_req[p].penable) begin
        if (apb_rsp[p].pready) begin
          wcnt[p] <= 0;
          if (apb_req[p].pwrite) regs[p][apb_req[p].paddr[3:2]] <= apb_req[p].pwdata;
        end else wcnt[p] <= wcnt[p] + 1;
      end
    end
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic xfer(input logic we, input logic [31:0] a, input logic [31:0] d,
                      output logic [31:0] q, output int lat);
    logic ok;
    req = '{valid: 1'b1, we: we, addr: a, wdata: d, wstrb: 4'hF};
    do begin #1 ok = rsp.ready; @(posedge clk); end while (!ok);
    #1 req = '0;
    lat = 0;
    while (!rsp.rvalid) begin @(posedge clk); #1; lat++; end
    q = rsp.rdata;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] q;
    int lat;
    req = '0;
    for (int p = 0; p < NP; p++) begin
      waits[p] = p % 3; wcnt[p] = 0; psel_seen[p] = 0;
      for (int r = 0; r < 4; r++) regs[p][r] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < 4; r++) begin
        int prev [NP];
        for (int k = 0; k < NP; k++) prev[k] = psel_seen[k];
        xfer(1'b1, APB_BASE + 32'(p * 4096 + r * 4), 32'(p * 100 + r + 7), q, lat);
        check(lat == 2 + waits[p], $sformatf("write latency slave %0d: %0d", p, lat));
        for (int k = 0; k < NP; k++)
          check(psel_seen[k] - prev[k] == (k == p ? 1 : 0), $sformatf("psel slave %0d on access to %0d", k, p));
      end
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < 4; r++) begin
        xfer(1'b0, APB_BASE + 32'(p * 4096 + r * 4), 0, q, lat);
        check(q == 32'(p * 100 + r + 7), $sformatf("read slave %0d reg %0d = %0d", p, r, q));
        check(lat == 2 + waits[p], $sformatf("read latency slave %0d: %0d", p, lat));
      end
    begin
      int tot = 0;
      for (int k = 0; k < NP; k++) tot += psel_seen[k];
      xfer(1'b0, APB_BASE + 32'(9 * 4096), 0, q, lat);
      for (int k = 0; k < NP; k++) tot -= psel_seen[k];
      check(q == 0 && tot == 0, "unmapped peripheral");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
