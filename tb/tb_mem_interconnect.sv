// tb_mem_interconnect: self-checking test of mem_interconnect.
// Six small SRAM banks stand in for SRAM0..4 and the APB bridge.  Checks:
// routing (every master writes and reads back a word in every slave),
// per-bank priority (all six masters request one bank in the same cycle and
// only that bank's priority master is accepted), round-robin service on the
// slave without a priority master (every window of six consecutive grants
// holds all six masters), and the default slave for unmapped addresses.
module tb_mem_interconnect;
  import semantic_pkg::*;
  localparam int NM = 6, NS = 6;
  logic clk = 0, rst_n = 0;
  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  mem_req_t s_req [NS];
  mem_rsp_t s_rsp [NS];
  int checks = 0, failures = 0;

  mem_interconnect dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  for (genvar s = 0; s < NS; s++) begin : g_mem
    sram_bank #(.SIZE_BYTES(4096)) u_mem (.clk, .rst_n, .req(s_req[s]), .rsp(s_rsp[s]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] base(input int s);
    return (s == NS - 1) ? APB_BASE : 32'(s) * 32'h0010_0000;
  endfunction

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // single transfer by master m, waits for accept and response
  task automatic xfer(input int m, input logic we, input logic [31:0] a,
                      input logic [31:0] d, output logic [31:0] q);
    logic ok;
    m_req[m] = '{valid: 1'b1, we: we, addr: a, wdata: d, wstrb: 4'hF};
    do begin #1 ok = m_rsp[m].ready; @(posedge clk); end while (!ok);
    #1 m_req[m] = '0;
    while (!m_rsp[m].rvalid) begin @(posedge clk); #1; end
    q = m_rsp[m].rdata;
    @(posedge clk); #1;
  endtask

  int prio_of [NS] = '{0, 1, 3, 2, 4, -1};
  int order [$];

  initial begin
    logic [31:0] q;
    for (int m = 0; m < NM; m++) m_req[m] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // routing
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < NM; m++)
        xfer(m, 1'b1, base(s) + 32'(m * 16), 32'hA000_0000 + 32'(s * 256 + m), q);
    for (int s = 0; s < NS; s++)
      for (int m = 0; m < NM; m++) begin
        xfer(m, 1'b0, base(s) + 32'(m * 16), 0, q);
        check(q == 32'hA000_0000 + 32'(s * 256 + m), $sformatf("routing m%0d s%0d got %h", m, s, q));
      end

    // priority: all masters hit bank s in the same cycle
    for (int s = 0; s < NS - 1; s++) begin
      for (int m = 0; m < NM; m++) m_req[m] = '{valid: 1'b1, we: 1'b0, addr: base(s) + 32'(m*16), wdata: 0, wstrb: 0};
      #1;
      for (int m = 0; m < NM; m++)
        check(m_rsp[m].ready == (m == prio_of[s]), $sformatf("priority bank %0d master %0d ready=%0d", s, m, m_rsp[m].ready));
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) m_req[m] = '0;
      repeat (3) @(posedge clk); #1;
    end

    // round-robin on the slave without priority master: each master keeps
    // requesting; record grant order
    for (int m = 0; m < NM; m++) begin
        automatic int mm = m;
        fork
          begin
            automatic logic ok;
            repeat (8) begin
              m_req[mm] = '{valid: 1'b1, we: 1'b0, addr: base(NS-1), wdata: 0, wstrb: 0};
              do begin #1 ok = m_rsp[mm].ready; @(posedge clk); end while (!ok);
              order.push_back(mm);
              #1 m_req[mm] = '0;
              while (!m_rsp[mm].rvalid) begin @(posedge clk); #1; end
            end
          end
        join_none
    end
    wait fork;
    check(order.size() == 48, $sformatf("round-robin grants %0d", order.size()));
    for (int w = 0; w + NM <= order.size(); w += NM) begin
      logic [NM-1:0] seen;
      seen = '0;
      for (int k = 0; k < NM; k++) seen[order[w+k]] = 1'b1;
      check(&seen, $sformatf("round-robin window %0d saw %b", w, seen));
    end

    // unmapped address
    @(posedge clk); #1;
    xfer(2, 1'b0, 32'h2000_0000, 0, q);
    check(q == 32'hDEC0_DE00, "default slave");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
