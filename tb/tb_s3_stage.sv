// tb_s3_stage: self-checking test of one S3 stage.  A model of the
// high-level stream processor sits on the stage's buffer port.  Checks: a
// chunked request is assembled and can be read back word by word through
// the stream processor port; while the communication processor writes, the
// stream processor port is held off (priority), and it is served in the
// cycles the bus is free; a reply written through that port leaves in
// chunks that match the reference chunking.
module tb_s3_stage;
  import semantic_pkg::*;
  `include "opcua_tb_helpers.svh"
  logic clk = 0, rst_n = 0;
  logic [31:0] chunk_size;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_data, out_data;
  mem_req_t hl_req;
  mem_rsp_t hl_rsp;
  logic rx_done, rx_overflow, tx_start, tx_busy, tx_done, ev_crx, ev_ctx;
  logic [15:0] rx_len, tx_len;
  int checks = 0, failures = 0;
  int held_off = 0, served_during_rx = 0, n_rx = 0;

  s3_stage #(.BUF_BYTES(4096)) dut (
    .clk, .rst_n, .chunk_size, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid, .out_ready, .out_data, .out_last, .hl_req, .hl_rsp,
    .rx_done, .rx_overflow, .rx_len, .tx_start, .tx_len, .tx_busy, .tx_done,
    .ev_chunk_rx(ev_crx), .ev_chunk_tx(ev_ctx)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  words_t out_cur;
  pkts_t  out_pkts;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      out_cur.push_back(out_data);
      if (out_last) begin out_pkts.push_back(out_cur); out_cur = {}; end
    end
    out_ready <= ($urandom_range(2) != 0);
    if (rx_done) n_rx++;
    if (hl_req.valid && !hl_rsp.ready) held_off++;
    if (hl_req.valid && hl_rsp.ready && dut.ll_req.valid) served_during_rx++;
  end

  task automatic send_pkts(input pkts_t p);
    logic ok;
    @(negedge clk);
    foreach (p[k])
      foreach (p[k][i]) begin
        in_valid = 1'b1;
        in_data = p[k][i];
        in_last = (i == p[k].size() - 1);
        #1 ok = in_ready;
        while (!ok) begin @(negedge clk); #1 ok = in_ready; end
        @(negedge clk);
      end
    in_valid = 1'b0;
  endtask

  // one stream-processor access; returns read data
  task automatic hl(input logic we, input int a, input logic [31:0] d, output logic [31:0] q);
    logic ok;
    @(negedge clk);
    hl_req = '{valid: 1'b1, we: we, addr: 32'(a), wdata: d, wstrb: 4'hF};
    #1 ok = hl_rsp.ready;
    while (!ok) begin @(negedge clk); #1 ok = hl_rsp.ready; end
    @(posedge clk); #1;
    hl_req = '0;
    while (!hl_rsp.rvalid) begin @(posedge clk); #1; end
    q = hl_rsp.rdata;
  endtask

  initial begin
    bytes_t m, r;
    words_t w, rd;
    logic [31:0] q;
    in_valid = 0; in_data = 0; in_last = 0; tx_start = 0; tx_len = 0; hl_req = '0;
    chunk_size = 32'd256;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // request in chunks, with the stream processor polling the buffer
    // concurrently (it must be held off while the LLCP writes)
    m = make_msg(MT_MSG, 32'd2, 32'd40, 32'd3, rand_bytes(700));
    fork
      send_pkts(chunk(m, 300));
      begin
        while (n_rx == 0) hl(1'b0, 0, 0, q);
      end
    join
    check(held_off > 0, "stream processor held off while the LLCP writes");
    check(served_during_rx == 0, "never granted together with the LLCP");
    check(rx_len == 16'(m.size()), $sformatf("rx_len %0d", rx_len));
    w = pack(m);
    w[0][31:24] = 8'h43;
    w[1] = 32'd300;
    for (int i = 0; i < w.size(); i++) begin
      hl(1'b0, 4 * i, 0, q);
      rd.push_back(q);
    end
    // last word: bytes past the message are don't-care
    rd[rd.size() - 1] &= w[w.size() - 1] == rd[rd.size() - 1] ? 32'hFFFF_FFFF : 32'hFFFF_FFFF >> (8 * (4 - m.size() % 4));
    check(rd == w, "request read back through the stream processor port");

    // reply written by the stream processor, sent in 256-byte chunks
    r = make_msg(MT_MSG, 32'd2, 32'd900, 32'd3, rand_bytes(555));
    w = pack(r);
    foreach (w[i]) hl(1'b1, 4 * i, w[i], q);
    @(negedge clk);
    tx_start = 1'b1; tx_len = 16'(r.size());
    @(negedge clk);
    tx_start = 1'b0;
    while (!tx_done) @(posedge clk);
    repeat (5) @(posedge clk);
    check(out_pkts == chunk(r, 256), $sformatf("reply chunks (%0d)", out_pkts.size()));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
