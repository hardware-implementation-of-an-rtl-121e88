// tb_opcua_transport: self-checking test of the OPC UA transport stage.
// Request packets are driven word by word; three S3 stage models accept
// forwarded words with random back-pressure and can return reply packets.
// Checks: Hello is answered by an Acknowledge with the negotiated buffer
// sizes (and chunk_size follows); OPN packets go to the free stages in
// order with SecureChannelId rewritten to stage+1; a fourth OPN is refused
// with Bad_TcpServerTooBusy; MSG and CLO reach the stage named by their
// channel id and CLO frees it; unknown channel ids, unknown message types and
// oversized messages get the matching ERR and are discarded without losing
// word alignment; replies from all stages and the stage itself are merged
// without interleaving, each source served once per round.
module tb_opcua_transport;
  import semantic_pkg::*;
  localparam int NSTG = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [31:0] in_data, out_data;
  logic [NSTG-1:0] s3_in_valid, s3_in_ready, s3_out_valid, s3_out_ready, s3_out_last;
  logic [31:0] s3_in_data;
  logic s3_in_last;
  logic [31:0] s3_out_data [NSTG];
  logic [NSTG-1:0] allocated;
  logic [31:0] chunk_size;
  logic [3:0] ev_ack, ev_err;
  int checks = 0, failures = 0;

  opcua_transport #(.NSTG(NSTG)) dut (
    .clk, .rst_n, .enable(1'b1), .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .out_last,
    .s3_in_valid, .s3_in_ready, .s3_in_data, .s3_in_last,
    .s3_out_valid, .s3_out_ready, .s3_out_data, .s3_out_last,
    .allocated, .chunk_size, .ev_ack, .ev_err
  );

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

  // ---------------- stage models ----------------
  typedef logic [31:0] pkt_t [$];
  pkt_t stage_rx [NSTG][$];
  pkt_t cur_rx [NSTG];
  pkt_t stage_tx [NSTG][$];   // replies to send
  int   tx_pos [NSTG];

  always @(posedge clk) begin
    for (int s = 0; s < NSTG; s++) begin
      if (s3_in_valid[s] && s3_in_ready[s]) begin
        cur_rx[s].push_back(s3_in_data);
        if (s3_in_last) begin
          stage_rx[s].push_back(cur_rx[s]);
          cur_rx[s] = {};
        end
      end
      s3_in_ready[s] <= ($urandom_range(3) != 0);
      if (s3_out_valid[s] && s3_out_ready[s]) begin
        if (tx_pos[s] == stage_tx[s][0].size() - 1) begin
          void'(stage_tx[s].pop_front());
          tx_pos[s] = 0;
        end else tx_pos[s]++;
      end
    end
  end
  always_comb
    for (int s = 0; s < NSTG; s++) begin
      s3_out_valid[s] = stage_tx[s].size() > 0;
      s3_out_data[s]  = s3_out_valid[s] ? stage_tx[s][0][tx_pos[s]] : 32'h0;
      s3_out_last[s]  = s3_out_valid[s] && tx_pos[s] == stage_tx[s][0].size() - 1;
    end

  // ---------------- output monitor ----------------
  pkt_t out_pkts [$];
  pkt_t cur_out;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      cur_out.push_back(out_data);
      if (out_last) begin
        out_pkts.push_back(cur_out);
        cur_out = {};
      end
    end
    out_ready <= ($urandom_range(4) != 0);
  end

  // ---------------- driver ----------------
  task automatic send_words(input pkt_t w);
    logic ok;
    @(negedge clk);
    foreach (w[i]) begin
      in_valid = 1'b1;
      in_data = w[i];
      #1 ok = in_ready;
      while (!ok) begin @(negedge clk); #1 ok = in_ready; end
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  function automatic pkt_t make(input logic [23:0] mt, input logic [7:0] ct,
                                input int size, input logic [31:0] chan);
    pkt_t w;
    w.push_back({ct, mt});
    w.push_back(32'(size));
    for (int i = 2; i < (size + 3) / 4; i++)
      w.push_back(i == 2 ? chan : 32'hC0DE_0000 + 32'(i));
    return w;
  endfunction

  task automatic expect_out(input pkt_t exp, input string what);
    int t = 0;
    while (out_pkts.size() == 0 && t < 2000) begin @(posedge clk); t++; end
    check(out_pkts.size() > 0, {what, ": no reply"});
    if (out_pkts.size() > 0) begin
      pkt_t got;
      got = out_pkts.pop_front();
      check(got == exp, $sformatf("%s: reply %p expected %p", what, got, exp));
    end
  endtask

  function automatic pkt_t err(input logic [31:0] code);
    pkt_t w;
    w = '{{CT_FINAL, MT_ERR}, 32'd16, code, 32'hFFFF_FFFF};
    return w;
  endfunction

  task automatic expect_fwd(input int s, input pkt_t exp, input string what);
    int t = 0;
    while (stage_rx[s].size() == 0 && t < 2000) begin @(posedge clk); t++; end
    check(stage_rx[s].size() > 0, {what, ": nothing forwarded"});
    if (stage_rx[s].size() > 0) begin
      pkt_t got;
      got = stage_rx[s].pop_front();
      check(got == exp, $sformatf("%s: forwarded %p expected %p", what, got, exp));
    end
  endtask

  initial begin
    pkt_t p, e;
    in_valid = 0; in_data = 0;
    for (int s = 0; s < NSTG; s++) tx_pos[s] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // Hello: client receive buffer 4096, send buffer 65536, url of 11 bytes
    p = '{{CT_FINAL, MT_HEL}, 32'd43, 32'd0, 32'd4096, 32'd65536, 32'd0, 32'd0,
          32'd11, 32'h2e637061, 32'h3a706374, 32'h00782f2f};
    send_words(p);
    e = '{{CT_FINAL, MT_ACK}, 32'd28, 32'd0, 32'd8192, 32'd4096, 32'd8192, 32'd0};
    expect_out(e, "ACK");
    check(chunk_size == 32'd4096, $sformatf("chunk_size %0d", chunk_size));

    // three OPN fill the three stages, the fourth is refused
    for (int s = 0; s < NSTG; s++) begin
      p = make(MT_OPN, CT_FINAL, 40 + s, 32'd0);
      send_words(p);
      e = p; e[2] = 32'(s + 1);
      expect_fwd(s, e, $sformatf("OPN %0d", s));
    end
    check(allocated == 3'b111, "all stages allocated");
    send_words(make(MT_OPN, CT_FINAL, 40, 32'd0));
    expect_out(err(BAD_TCP_SERVER_TOO_BUSY), "OPN with no free stage");

    // MSG chunks by channel id
    p = make(MT_MSG, CT_CONT, 101, 32'd2);
    send_words(p);
    expect_fwd(1, p, "MSG C to channel 2");
    p = make(MT_MSG, CT_FINAL, 64, 32'd3);
    send_words(p);
    expect_fwd(2, p, "MSG F to channel 3");
    send_words(make(MT_MSG, CT_FINAL, 64, 32'd7));
    expect_out(err(BAD_TCP_SECURE_CHANNEL_UNKNOWN), "MSG to unknown channel");

    // CLO frees stage 0, next OPN reuses it
    p = make(MT_CLO, CT_FINAL, 57, 32'd1);
    send_words(p);
    expect_fwd(0, p, "CLO channel 1");
    repeat (3) @(posedge clk);
    check(allocated == 3'b110, "stage 0 freed by CLO");
    send_words(make(MT_MSG, CT_FINAL, 32, 32'd1));
    expect_out(err(BAD_TCP_SECURE_CHANNEL_UNKNOWN), "MSG to closed channel");
    p = make(MT_OPN, CT_FINAL, 48, 32'd0);
    send_words(p);
    e = p; e[2] = 32'd1;
    expect_fwd(0, e, "OPN reuses stage 0");

    // invalid type and oversized message, then a Hello still parses
    send_words(make(24'h5A5958, CT_FINAL, 30, 32'd0));
    expect_out(err(BAD_TCP_MESSAGE_TYPE_INVALID), "invalid message type");
    send_words(make(MT_MSG, CT_FINAL, 9000, 32'd2));
    expect_out(err(BAD_TCP_MESSAGE_TOO_LARGE), "message too large");
    p = '{{CT_FINAL, MT_HEL}, 32'd32, 32'd0, 32'd16384, 32'd2048, 32'd0, 32'd0, 32'hFFFF_FFFF};
    send_words(p);
    e = '{{CT_FINAL, MT_ACK}, 32'd28, 32'd0, 32'd2048, 32'd8192, 32'd8192, 32'd0};
    expect_out(e, "ACK after errors");
    check(chunk_size == 32'd8192, "chunk_size after second Hello");

    // fair merge: three stage replies and one local reply pending together
    repeat (5) @(posedge clk);
    for (int s = 0; s < NSTG; s++)
      stage_tx[s].push_back('{32'h1000 * (s + 1) + 1, 32'h1000 * (s + 1) + 2, 32'h1000 * (s + 1) + 3});
    send_words(make(24'h5A5958, CT_FINAL, 12, 32'd0));
    repeat (200) @(posedge clk);
    check(out_pkts.size() == 4, $sformatf("merged packets %0d", out_pkts.size()));
    begin
      logic [3:0] seen;
      pkt_t g;
      seen = '0;
      while (out_pkts.size() > 0) begin
        g = out_pkts.pop_front();
        if (g.size() == 3 && g[0][11:0] == 12'h001 && g[1] == g[0] + 1 && g[2] == g[0] + 2)
          seen[g[0][15:12] - 1] = 1'b1;
        else if (g == err(BAD_TCP_MESSAGE_TYPE_INVALID))
          seen[3] = 1'b1;
        else
          check(0, $sformatf("interleaved or corrupt packet %p", g));
      end
      check(seen == 4'hF, $sformatf("all sources served once: %b", seen));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
