// opcua_tb_helpers.svh: testbench helpers for OPC UA binary messages,
// included into the body of a testbench module.  Builds
// messages with a 24-byte MSG header (message header, symmetric security
// header, sequence header), splits them into chunks the way an OPC UA peer
// does (the header repeated per chunk, chunk type C/F, per-chunk size and
// sequence number) and packs bytes into little-endian 32-bit words padded
// with zeros to a whole word.
  typedef logic [7:0]  bytes_t [$];
  typedef logic [31:0] words_t [$];
  typedef words_t      pkts_t [$];

  function automatic void put32(ref bytes_t b, input int at, input logic [31:0] v);
    for (int i = 0; i < 4; i++) b[at + i] = v[8*i +: 8];
  endfunction

  function automatic logic [31:0] get32(input bytes_t b, input int at);
    return {b[at+3], b[at+2], b[at+1], b[at]};
  endfunction

  // message: header with the given type and channel, sequence number seq,
  // request id rid, followed by body
  function automatic bytes_t make_msg(input logic [23:0] mt, input logic [31:0] chan,
                                      input logic [31:0] seq, input logic [31:0] rid,
                                      input bytes_t body);
    bytes_t b;
    for (int i = 0; i < 24; i++) b.push_back(8'h00);
    b[0] = mt[7:0]; b[1] = mt[15:8]; b[2] = mt[23:16]; b[3] = 8'h46;
    put32(b, 4, 32'(24 + body.size()));
    put32(b, 8, chan);
    put32(b, 12, 32'h0000_0011);     // token id
    put32(b, 16, seq);
    put32(b, 20, rid);
    foreach (body[i]) b.push_back(body[i]);
    return b;
  endfunction

  function automatic bytes_t rand_bytes(input int n);
    bytes_t b;
    repeat (n) b.push_back(8'($urandom));
    return b;
  endfunction

  function automatic words_t pack(input bytes_t b);
    words_t w;
    for (int i = 0; i < b.size(); i += 4) begin
      logic [31:0] x;
      x = '0;
      for (int k = 0; k < 4; k++) if (i + k < b.size()) x[8*k +: 8] = b[i + k];
      w.push_back(x);
    end
    return w;
  endfunction

  function automatic bytes_t unpack(input words_t w, input int nbytes);
    bytes_t b;
    for (int i = 0; i < nbytes; i++) b.push_back(w[i / 4][8*(i % 4) +: 8]);
    return b;
  endfunction

  // split a message into chunks of at most csize bytes
  function automatic pkts_t chunk(input bytes_t msg, input int csize);
    pkts_t p;
    int body_len, per, off, k;
    body_len = msg.size() - 24;
    per = csize - 24;
    off = 0;
    k = 0;
    do begin
      bytes_t c;
      int n;
      n = (body_len - off > per) ? per : body_len - off;
      for (int i = 0; i < 24; i++) c.push_back(msg[i]);
      c[3] = (off + n == body_len) ? 8'h46 : 8'h43;
      put32(c, 4, 32'(24 + n));
      put32(c, 16, get32(msg, 16) + 32'(k));
      for (int i = 0; i < n; i++) c.push_back(msg[24 + off + i]);
      p.push_back(pack(c));
      off += n;
      k++;
    end while (off < body_len);
    return p;
  endfunction
