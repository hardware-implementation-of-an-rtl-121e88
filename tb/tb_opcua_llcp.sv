// tb_opcua_llcp: self-checking test of the low-level communication
// processor with a message buffer beside it.  Checks: a message sent in
// several chunks is reassembled into the buffer as one message (first
// header, bodies concatenated) and rx_len is right; a single-chunk message;
// an abort chunk discards a partial message; reception stays blocked after
// rx_done until the reply has gone out; a reply is cut into chunks of the
// negotiated size with chunk types, sizes and sequence numbers patched and
// bodies intact; an OPN reply leaves as one chunk; a message larger than
// the buffer raises rx_overflow instead of rx_done.
module tb_opcua_llcp;
  import semantic_pkg::*;
  `include "opcua_tb_helpers.svh"
  localparam int BUF = 2048;
  logic clk = 0, rst_n = 0;
  logic [31:0] chunk_size;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_data, out_data;
  mem_req_t buf_req;
  mem_rsp_t buf_rsp;
  logic rx_done, rx_overflow, tx_start, tx_busy, tx_done, ev_crx, ev_ctx;
  logic [15:0] rx_len, tx_len;
  int checks = 0, failures = 0;
  int n_rx_done = 0, n_ovf = 0, n_crx = 0, n_ctx = 0;
  logic [15:0] last_rx_len;

  opcua_llcp #(.BUF_BYTES(BUF)) dut (
    .clk, .rst_n, .chunk_size, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid, .out_ready, .out_data, .out_last, .buf_req, .buf_rsp,
    .rx_done, .rx_overflow, .rx_len, .tx_start, .tx_len, .tx_busy, .tx_done,
    .ev_chunk_rx(ev_crx), .ev_chunk_tx(ev_ctx)
  );
  sram_bank #(.SIZE_BYTES(BUF)) mem (.clk, .rst_n, .req(buf_req), .rsp(buf_rsp));

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

  always @(posedge clk) begin
    if (rx_done) begin n_rx_done++; last_rx_len = rx_len; end
    if (rx_overflow) n_ovf++;
    if (ev_crx) n_crx++;
    if (ev_ctx) n_ctx++;
    out_ready <= ($urandom_range(3) != 0);
  end

  words_t out_cur;
  pkts_t  out_pkts;
  always @(posedge clk)
    if (out_valid && out_ready) begin
      out_cur.push_back(out_data);
      if (out_last) begin out_pkts.push_back(out_cur); out_cur = {}; end
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

  function automatic bytes_t buf_bytes(input int n);
    bytes_t b;
    for (int i = 0; i < n; i++) b.push_back(mem.mem[i / 4][8*(i % 4) +: 8]);
    return b;
  endfunction

  task automatic wait_rx(input int n0);
    int t = 0;
    while (n_rx_done == n0 && t < 50000) begin @(posedge clk); t++; end
  endtask

  task automatic do_tx(input bytes_t msg, input int csz, output pkts_t got);
    for (int i = 0; i < msg.size(); i++) mem.mem[i / 4][8*(i % 4) +: 8] = msg[i];
    chunk_size = 32'(csz);
    out_pkts = {};
    @(negedge clk);
    tx_start = 1'b1;
    tx_len = 16'(msg.size());
    @(negedge clk);
    tx_start = 1'b0;
    while (!tx_done) @(posedge clk);
    repeat (5) @(posedge clk);
    got = out_pkts;
  endtask

  // expected: the first chunk's header with the total size, then the body
  function automatic bytes_t assembled(input bytes_t msg, input int csz);
    bytes_t e;
    e = msg;
    if (msg.size() > csz) begin
      e[3] = 8'h43;
      put32(e, 4, 32'(csz));
    end
    return e;
  endfunction

  initial begin
    bytes_t m, got_b, body;
    pkts_t  p, got;
    int n0;
    in_valid = 0; in_data = 0; in_last = 0; tx_start = 0; tx_len = 0;
    chunk_size = 32'd8192;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // 1. multi-chunk request (3 chunks of at most 200 bytes)
    m = make_msg(MT_MSG, 32'd1, 32'd100, 32'd7, rand_bytes(450));
    p = chunk(m, 200);
    check(p.size() == 3, "test builds 3 chunks");
    n0 = n_rx_done;
    send_pkts(p);
    wait_rx(n0);
    check(n_rx_done == n0 + 1, "rx_done after multi-chunk message");
    check(last_rx_len == 16'(m.size()), $sformatf("rx_len %0d expected %0d", last_rx_len, m.size()));
    got_b = buf_bytes(m.size());
    check(got_b == assembled(m, 200), "reassembled message in buffer");
    check(n_crx == 2, $sformatf("continuation chunks merged %0d", n_crx));

    // 2. reception blocked until the reply is sent
    repeat (5) @(posedge clk);
    check(!in_ready, "in_ready low while the reply is pending");

    // 3. reply in chunks of 100 bytes
    body = rand_bytes(301);
    m = make_msg(MT_MSG, 32'd1, 32'd500, 32'd7, body);
    do_tx(m, 100, got);
    p = chunk(m, 100);
    check(got.size() == 4, $sformatf("reply chunks %0d", got.size()));
    check(got == p, "reply chunks equal the reference chunking");
    check(n_ctx == 3, $sformatf("continuation chunks sent %0d", n_ctx));
    check(in_ready, "reception released after tx_done");

    // 4. single-chunk request, then abort of a partial message
    m = make_msg(MT_MSG, 32'd1, 32'd101, 32'd8, rand_bytes(37));
    n0 = n_rx_done;
    send_pkts(chunk(m, 8192));
    wait_rx(n0);
    check(last_rx_len == 16'(m.size()) && buf_bytes(m.size()) == m, "single-chunk message");
    do_tx(make_msg(MT_MSG, 32'd1, 32'd600, 32'd8, rand_bytes(10)), 8192, got);
    check(got.size() == 1, "short reply in one chunk");
    begin
      bytes_t a;
      pkts_t pa;
      m = make_msg(MT_MSG, 32'd1, 32'd102, 32'd9, rand_bytes(300));
      pa = chunk(m, 128);
      a = make_msg(MT_MSG, 32'd1, 32'd103, 32'd9, rand_bytes(8));
      a[3] = 8'h41;                          // abort chunk
      n0 = n_rx_done;
      send_pkts('{pa[0], pack(a)});
      repeat (50) @(posedge clk);
      check(n_rx_done == n0, "no rx_done for an aborted message");
      m = make_msg(MT_MSG, 32'd1, 32'd104, 32'd10, rand_bytes(90));
      send_pkts(chunk(m, 8192));
      wait_rx(n0);
      check(last_rx_len == 16'(m.size()) && buf_bytes(m.size()) == m, "message after abort");
    end
    do_tx(make_msg(MT_MSG, 32'd1, 32'd601, 32'd10, rand_bytes(4)), 8192, got);

    // 5. OPN reply is not split
    m = make_msg(MT_OPN, 32'd1, 32'd1, 32'd1, rand_bytes(250));
    do_tx(m, 64, got);
    check(got.size() == 1 && got[0] == pack(m), "OPN reply as one chunk");

    // 6. overflow: 2300-byte message into a 2048-byte buffer
    m = make_msg(MT_MSG, 32'd1, 32'd105, 32'd11, rand_bytes(2300));
    n0 = n_rx_done;
    send_pkts(chunk(m, 1000));
    repeat (50) @(posedge clk);
    check(n_ovf == 1 && n_rx_done == n0, "overflow reported, no rx_done");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
