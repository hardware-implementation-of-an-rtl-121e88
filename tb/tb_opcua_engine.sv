// tb_opcua_engine: end-to-end test of the OPC UA engine through its APB
// slave.  Three stream-processor models serve the S3 stages; a 64 KiB SRAM
// holds the namespace and is reached through the engine's main-memory
// master.  Runs the shared scenario (Hello, three secure channels, read and
// write node, chunked request and reply, concurrent sessions, errors, close
// and reopen) and counts contention on the namespace master.
module tb_opcua_engine;
  import semantic_pkg::*;
  `include "opcua_tb_helpers.svh"
  localparam int NSTG = 3;
  localparam logic [31:0] NS_BASE = 32'h0040_0000;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic irq;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  mem_req_t hl_req [NSTG], ns_req [NSTG];
  mem_rsp_t hl_rsp [NSTG], ns_rsp [NSTG];
  logic [NSTG-1:0] rx_done, rx_overflow, tx_start, tx_done, ev_crx, ev_ctx;
  logic [15:0] rx_len [NSTG], tx_len [NSTG];
  logic [3:0] ev_ack, ev_err;
  int checks = 0, failures = 0;
  int served [NSTG], nsacc [NSTG];
  int contention = 0;

  opcua_engine #(.NSTG(NSTG)) dut (
    .clk, .rst_n, .apb_req, .apb_rsp, .irq, .m_req, .m_rsp,
    .hl_req, .hl_rsp, .ns_req, .ns_rsp, .rx_done, .rx_overflow, .rx_len,
    .tx_start, .tx_len, .tx_done, .ev_ack, .ev_err,
    .ev_chunk_rx(ev_crx), .ev_chunk_tx(ev_ctx)
  );
  sram_bank #(.SIZE_BYTES(65536)) nsmem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  for (genvar s = 0; s < NSTG; s++) begin : g_hl
    hlsp_model #(.NS_BASE(NS_BASE)) u_hl (
      .clk, .rst_n, .hl_req(hl_req[s]), .hl_rsp(hl_rsp[s]), .ns_req(ns_req[s]), .ns_rsp(ns_rsp[s]),
      .rx_done(rx_done[s]), .rx_len(rx_len[s]), .tx_start(tx_start[s]), .tx_len(tx_len[s]),
      .tx_done(tx_done[s]), .n_served(served[s]), .n_ns_access(nsacc[s])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    int n = 0;
    for (int s = 0; s < NSTG; s++) n += int'(ns_req[s].valid);
    if (n > 1) contention++;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb(input logic we, input logic [11:0] a, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: we, paddr: a, pwdata: d};
    @(negedge clk);
    apb_req.penable = 1'b1;
    #1;
    while (!apb_rsp.pready) begin @(negedge clk); #1; end
    q = apb_rsp.prdata;
    @(posedge clk); #1;
    apb_req = '0;
  endtask
  task automatic reg_wr(input logic [11:0] a, input logic [31:0] d);
    logic [31:0] q;
    apb(1'b1, a, d, q);
  endtask
  task automatic reg_rd(input logic [11:0] a, output logic [31:0] q);
    apb(1'b0, a, 0, q);
  endtask
  function automatic void ns_poke(input int n, input logic [31:0] v);
    nsmem.mem[(NS_BASE[15:0] + 16'(4 * n)) >> 2] = v;
  endfunction
  function automatic logic [31:0] ns_peek(input int n);
    return nsmem.mem[(NS_BASE[15:0] + 16'(4 * n)) >> 2];
  endfunction

  `include "opcua_scenario.svh"

  initial begin
    apb_req = '0;
    for (int n = 0; n < 1024; n++) ns_poke(n, 32'h5EED_0000 + 32'(n * 3));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_scenario();
    check(contention > 0, "namespace master contended by several stages");
    check(sc_ack == 1 && sc_opn == 3 && sc_read == 3 && sc_write == 3 && sc_range == 1 &&
          sc_concurrent == 1 && sc_clo == 1 && sc_err == 2, "scenario steps completed");
    $display("served %0d %0d %0d, ns accesses %0d %0d %0d, contention cycles %0d",
             served[0], served[1], served[2], nsacc[0], nsacc[1], nsacc[2], contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
