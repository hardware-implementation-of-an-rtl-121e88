// opcua_scenario.svh: end-to-end OPC UA scenario shared by the engine and
// chip testbenches.  The including module provides:
//   reg_wr(addr, data), reg_rd(addr, q)  engine register access (byte offset)
//   ns_poke(node, value), ns_peek(node)   namespace memory back door
//   check(cond, msg)                      result bookkeeping
//   opcua_tb_helpers.svh                  message builders
// Request words go to RXDATA; reply words are popped from TXDATA using the
// last-word flag in STATUS.  The client offers a 1024-byte receive buffer so
// that long replies are chunked, and sends some requests in 100-byte chunks.

localparam logic [11:0] R_CTRL = 12'h000, R_STATUS = 12'h004, R_RXDATA = 12'h008,
                        R_TXDATA = 12'h00C, R_CHUNK = 12'h010, R_MSGCNT = 12'h014;

int sc_ack = 0, sc_opn = 0, sc_read = 0, sc_write = 0, sc_range = 0, sc_clo = 0,
    sc_err = 0, sc_concurrent = 0;

task automatic send_words(input words_t w);
  foreach (w[i]) reg_wr(R_RXDATA, w[i]);
endtask

task automatic send_pkts(input pkts_t p);
  foreach (p[k]) send_words(p[k]);
endtask

// pop one reply packet (waits for it)
task automatic recv_pkt(output words_t w);
  logic [31:0] st, d;
  int guard = 0;
  w = {};
  forever begin
    reg_rd(R_STATUS, st);
    if (st[15:0] == 0) begin
      guard++;
      if (guard > 20000) begin check(0, "reply timeout"); return; end
      continue;
    end
    reg_rd(R_TXDATA, d);
    w.push_back(d);
    if (st[17]) return;
  end
endtask

// pop a reply made of several chunks; returns the reassembled body bytes
// after the 24-byte header, and the number of chunks
task automatic recv_msg(output bytes_t body, output int nchunks, output logic [31:0] chan);
  words_t w;
  bytes_t b;
  body = {};
  nchunks = 0;
  forever begin
    recv_pkt(w);
    if (w.size() < 2) return;
    b = unpack(w, int'(w[1]));
    chan = w[2];
    for (int i = 24; i < b.size(); i++) body.push_back(b[i]);
    nchunks++;
    if (w[0][31:24] != 8'h43) return;
  end
endtask

function automatic bytes_t req_body(input int op, input int node, input logic [31:0] value,
                                    input int count, input int pad);
  bytes_t b;
  for (int i = 0; i < 16 + pad; i++) b.push_back(8'h00);
  put32(b, 0, 32'(op)); put32(b, 4, 32'(node)); put32(b, 8, value); put32(b, 12, 32'(count));
  for (int i = 16; i < 16 + pad; i++) b[i] = 8'(i);
  return b;
endfunction

task automatic run_scenario();
  words_t w;
  bytes_t body, m;
  int nch;
  logic [31:0] chan, q, st;
  logic [31:0] seq [4];

  // Hello / Acknowledge
  send_words('{{8'h46, 8'h4C, 8'h45, 8'h48}, 32'd32, 32'd0, 32'd1024, 32'd65536, 32'd0, 32'd0, 32'hFFFF_FFFF});
  recv_pkt(w);
  check(w.size() == 7 && w[0] == {8'h46, 8'h4B, 8'h43, 8'h41} && w[4] == 32'd1024,
        $sformatf("ACK %p", w));
  if (w.size() == 7 && w[0][23:0] == MT_ACK) sc_ack++;
  reg_rd(R_CHUNK, q);
  check(q == 32'd1024, "negotiated chunk size");

  // three secure channels
  for (int c = 1; c <= 3; c++) begin
    m = make_msg(MT_OPN, 32'd0, 32'd1, 32'(c), rand_bytes(40));
    send_pkts(chunk(m, 8192));
    recv_msg(body, nch, chan);
    check(chan == 32'(c) && nch == 1, $sformatf("OPN reply channel %0d", chan));
    if (chan == 32'(c)) sc_opn++;
    seq[c] = 32'd2;
  end
  reg_rd(R_STATUS, st);
  check(st[22:20] == 3'b111, "three stages allocated");

  // a fourth OPN is refused
  send_pkts(chunk(make_msg(MT_OPN, 32'd0, 32'd1, 32'd9, rand_bytes(40)), 8192));
  recv_pkt(w);
  check(w.size() == 4 && w[0][23:0] == MT_ERR && w[2] == BAD_TCP_SERVER_TOO_BUSY, "ERR server too busy");
  if (w.size() == 4 && w[0][23:0] == MT_ERR) sc_err++;

  // read and write node on every channel
  for (int c = 1; c <= 3; c++) begin
    int node = 10 + c;
    send_pkts(chunk(make_msg(MT_MSG, 32'(c), seq[c]++, 32'(100 + c), req_body(1, node, 0, 0, 0)), 8192));
    recv_msg(body, nch, chan);
    check(chan == 32'(c) && body.size() == 12 && get32(body, 8) == ns_peek(node),
          $sformatf("read node %0d on channel %0d", node, c));
    if (body.size() == 12) sc_read++;
    send_pkts(chunk(make_msg(MT_MSG, 32'(c), seq[c]++, 32'(200 + c), req_body(2, node, 32'hFACE_0000 + 32'(c), 0, 0)), 8192));
    recv_msg(body, nch, chan);
    check(body.size() == 12 && ns_peek(node) == 32'hFACE_0000 + 32'(c), $sformatf("write node %0d", node));
    if (body.size() == 12) sc_write++;
  end

  // chunked request (100-byte chunks) and chunked reply (1024-byte chunks)
  send_pkts(chunk(make_msg(MT_MSG, 32'd2, seq[2]++, 32'd300, req_body(3, 100, 0, 300, 250)), 100));
  recv_msg(body, nch, chan);
  check(body.size() == 8 + 1200 && nch == 2, $sformatf("range reply %0d bytes in %0d chunks", body.size(), nch));
  begin
    int ok = 1;
    for (int k = 0; k < 300 && 8 + 4 * k + 3 < body.size(); k++)
      if (get32(body, 8 + 4 * k) != ns_peek(100 + k)) ok = 0;
    check(ok == 1, "range reply contents");
    if (ok == 1 && nch == 2) sc_range++;
  end

  // three channels at once: requests queued before any reply is read
  for (int c = 1; c <= 3; c++)
    send_pkts(chunk(make_msg(MT_MSG, 32'(c), seq[c]++, 32'(400 + c), req_body(3, 20 * c, 0, 40, 0)), 8192));
  begin
    logic [3:0] seen = '0;
    for (int k = 0; k < 3; k++) begin
      recv_msg(body, nch, chan);
      if (chan >= 1 && chan <= 3 && body.size() == 168 && get32(body, 8) == ns_peek(20 * int'(chan)))
        seen[chan] = 1'b1;
    end
    check(seen == 4'b1110, $sformatf("concurrent replies from all channels %b", seen));
    if (seen == 4'b1110) sc_concurrent++;
  end

  // unknown channel, close channel 2, reopen it
  send_pkts(chunk(make_msg(MT_MSG, 32'd9, 32'd5, 32'd1, req_body(1, 1, 0, 0, 0)), 8192));
  recv_pkt(w);
  check(w.size() == 4 && w[2] == BAD_TCP_SECURE_CHANNEL_UNKNOWN, "ERR channel unknown");
  if (w.size() == 4) sc_err++;
  send_pkts(chunk(make_msg(MT_CLO, 32'd2, seq[2]++, 32'd500, rand_bytes(4)), 8192));
  repeat (200) @(posedge clk);
  reg_rd(R_STATUS, st);
  check(st[22:20] == 3'b101 && st[15:0] == 0, $sformatf("CLO frees stage, no reply (%h)", st));
  if (st[22:20] == 3'b101) sc_clo++;
  send_pkts(chunk(make_msg(MT_OPN, 32'd0, 32'd1, 32'd77, rand_bytes(40)), 8192));
  recv_msg(body, nch, chan);
  check(chan == 32'd2, "OPN reuses the closed stage");
  reg_rd(R_MSGCNT, q);
  check(q > 0, $sformatf("MSGCNT %0d", q));
endtask
