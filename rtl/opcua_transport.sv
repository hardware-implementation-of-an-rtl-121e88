// opcua_transport: transport stage of the OPC UA engine.
//
// Requests arrive as a stream of 32-bit little-endian words from the
// peripheral bus (one OPC UA binary TCP message per packet, padded with
// zero bytes to a whole word).  Word 0 holds MessageType and chunk type,
// word 1 MessageSize.  The stage itself answers the basic connection
// handshake, as the paper describes: a Hello (HEL) is answered with an
// Acknowledge (ACK) that advertises the protocol version, the receive and send
// buffer sizes, the maximum message size and the maximum chunk count.  The
// buffer sizes follow the OPC UA rule that the server's receive buffer is no
// larger than the client's send buffer and vice versa; the negotiated send
// buffer size is output as chunk_size for the S3 stages.
//
// OpenSecureChannel (OPN), MSG and CloseSecureChannel (CLO) chunks are
// forwarded to an S3 stage.  An OPN goes to the lowest-numbered free stage,
// which is then allocated to that secure channel; the transport stage writes
// the channel id (stage index + 1) into the SecureChannelId field of the
// forwarded OPN.  MSG and CLO select the stage from SecureChannelId; CLO frees
// the stage.  Errors are answered with an ERR message: no free stage
// (Bad_TcpServerTooBusy), unknown channel (Bad_TcpSecureChannelUnknown),
// chunk larger than the receive buffer (Bad_TcpMessageTooLarge), other
// message types (Bad_TcpMessageTypeInvalid).  The rest of a rejected message
// is discarded.  Channel-id assignment and the error choices are this
// design's own.
//
// Replies from the stage itself and from the S3 stages share the output
// stream; a round-robin arbiter (the paper's fair and deterministic
// schedule) picks the next source whenever a packet has ended, so every
// source waits at most NSTG packets.  Timing: one input word per cycle while
// forwarding; a local reply is emitted one word per cycle.
module opcua_transport
  import semantic_pkg::*;
#(
  parameter int unsigned NSTG             = 3,
  parameter logic [31:0] PROTOCOL_VERSION = 32'd0,
  parameter logic [31:0] RECV_BUF         = 32'd8192,
  parameter logic [31:0] SEND_BUF         = 32'd8192,
  parameter logic [31:0] MAX_MSG          = 32'd8192,
  parameter logic [31:0] MAX_CHUNKS       = 32'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  // request words from the bus interface
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       in_data,
  // reply words towards the bus interface
  output logic              out_valid,
  input  logic              out_ready,
  output logic [31:0]       out_data,
  output logic              out_last,
  // per S3 stage request and reply streams
  output logic [NSTG-1:0]   s3_in_valid,
  input  logic [NSTG-1:0]   s3_in_ready,
  output logic [31:0]       s3_in_data,
  output logic              s3_in_last,
  input  logic [NSTG-1:0]   s3_out_valid,
  output logic [NSTG-1:0]   s3_out_ready,
  input  logic [31:0]       s3_out_data [NSTG],
  input  logic [NSTG-1:0]   s3_out_last,
  // status
  output logic [NSTG-1:0]   allocated,
  output logic [31:0]       chunk_size,
  output logic [3:0]        ev_ack,      // pulse per event kind, for counters
  output logic [3:0]        ev_err
);
  localparam int unsigned SW = $clog2(NSTG > 1 ? NSTG : 2);

  typedef enum logic [3:0] {
    R_W0, R_W1, R_W2, R_HEL, R_DECIDE, R_FWD_HDR, R_FWD, R_DISCARD, R_REPLY
  } rstate_t;
  rstate_t rs;

  logic [31:0] w0, w1, w2;
  logic [31:0] hel [5];
  logic [2:0]  hel_i;
  logic [13:0] words_left;        // words of the packet still to read
  logic [1:0]  hdr_i;
  logic [SW-1:0] tgt;
  logic        free_after;
  logic [31:0] loc [7];           // local reply (ACK or ERR)
  logic [2:0]  loc_n, loc_i;
  logic        loc_pend;
  logic [23:0] mtype;
  logic        loc_set;         // a local reply was written this cycle

  assign mtype = w0[23:0];

  // free stage search
  logic          have_free;
  logic [SW-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int s = NSTG - 1; s >= 0; s--)
      if (!allocated[s]) begin
        have_free = 1'b1;
        free_idx  = SW'(s);
      end
  end

  function automatic logic [31:0] umin(input logic [31:0] a, input logic [31:0] b);
    return (a < b) ? a : b;
  endfunction

  // ---------------- request side ----------------
  always_comb begin
    in_ready = 1'b0;
    unique case (rs)
      R_W0, R_W1, R_W2, R_HEL, R_DISCARD: in_ready = enable;
      R_FWD:  in_ready = s3_in_ready[tgt];
      default: in_ready = 1'b0;
    endcase
  end

  always_comb begin
    s3_in_valid = '0;
    s3_in_data  = in_data;
    s3_in_last  = 1'b0;
    if (rs == R_FWD_HDR) begin
      s3_in_valid[tgt] = 1'b1;
      s3_in_data = (hdr_i == 2'd0) ? w0 : (hdr_i == 2'd1) ? w1 : w2;
      s3_in_last = (hdr_i == 2'd2) && (words_left == '0);
    end else if (rs == R_FWD) begin
      s3_in_valid[tgt] = in_valid;
      s3_in_last = (words_left == 14'd1);
    end
  end

  task automatic make_err(input logic [31:0] code);
    loc[0] <= {CT_FINAL, MT_ERR};
    loc[1] <= 32'd16;
    loc[2] <= code;
    loc[3] <= 32'hFFFF_FFFF;      // null reason string
    loc_n  <= 3'd4;
    loc_set <= 1'b1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_W0;
      w0 <= '0; w1 <= '0; w2 <= '0;
      hel_i <= '0; hdr_i <= '0; tgt <= '0; free_after <= 1'b0;
      words_left <= '0;
      allocated <= '0;
      chunk_size <= SEND_BUF;
      loc_n <= '0;
      for (int i = 0; i < 7; i++) loc[i] <= '0;
      for (int i = 0; i < 5; i++) hel[i] <= '0;
      ev_ack <= '0; ev_err <= '0;
      loc_set <= 1'b0;
    end else begin
      loc_set <= 1'b0;
      ev_ack <= '0;
      ev_err <= '0;
      unique case (rs)
        R_W0: if (in_valid && in_ready) begin
          w0 <= in_data;
          rs <= R_W1;
        end
        R_W1: if (in_valid && in_ready) begin
          w1 <= in_data;
          words_left <= 14'(((in_data + 32'd3) >> 2) - 32'd2);
          if (mtype == MT_HEL) begin
            rs <= R_HEL;
            hel_i <= '0;
          end else if (mtype == MT_OPN || mtype == MT_MSG || mtype == MT_CLO)
            rs <= R_W2;
          else
            rs <= R_DECIDE;
        end
        R_W2: if (in_valid && in_ready) begin
          w2 <= in_data;
          words_left <= words_left - 14'd1;
          rs <= R_DECIDE;
        end
        R_HEL: if (in_valid && in_ready) begin
          hel[hel_i] <= in_data;
          words_left <= words_left - 14'd1;
          if (hel_i == 3'd4) rs <= R_DECIDE;
          hel_i <= hel_i + 3'd1;
        end
        R_DECIDE: if (!loc_pend) begin
          if (w1 > RECV_BUF || w1 < 32'd8) begin
            make_err(BAD_TCP_MESSAGE_TOO_LARGE);
            ev_err[0] <= 1'b1;
            rs <= R_DISCARD;
          end else if (mtype == MT_HEL) begin
            // Acknowledge: server values limited by the client's (hel[1] =
            // client receive buffer, hel[2] = client send buffer)
            loc[0] <= {CT_FINAL, MT_ACK};
            loc[1] <= 32'd28;
            loc[2] <= PROTOCOL_VERSION;
            loc[3] <= umin(RECV_BUF, hel[2]);
            loc[4] <= umin(SEND_BUF, hel[1]);
            loc[5] <= MAX_MSG;
            loc[6] <= MAX_CHUNKS;
            loc_n  <= 3'd7;
            loc_set <= 1'b1;
            chunk_size <= umin(SEND_BUF, hel[1]);
            ev_ack[0] <= 1'b1;
            rs <= R_DISCARD;
          end else if (mtype == MT_OPN) begin
            if (have_free) begin
              tgt <= free_idx;
              w2 <= 32'(free_idx) + 32'd1;
              allocated[free_idx] <= 1'b1;
              free_after <= 1'b0;
              hdr_i <= '0;
              ev_ack[1] <= 1'b1;
              rs <= R_FWD_HDR;
            end else begin
              make_err(BAD_TCP_SERVER_TOO_BUSY);
              ev_err[1] <= 1'b1;
              rs <= R_DISCARD;
            end
          end else if (mtype == MT_MSG || mtype == MT_CLO) begin
            if (w2 >= 32'd1 && w2 <= NSTG && allocated[SW'(w2 - 32'd1)]) begin
              tgt <= SW'(w2 - 32'd1);
              free_after <= (mtype == MT_CLO);
              hdr_i <= '0;
              ev_ack[2] <= (mtype == MT_MSG);
              ev_ack[3] <= (mtype == MT_CLO);
              rs <= R_FWD_HDR;
            end else begin
              make_err(BAD_TCP_SECURE_CHANNEL_UNKNOWN);
              ev_err[2] <= 1'b1;
              rs <= R_DISCARD;
            end
          end else begin
            make_err(BAD_TCP_MESSAGE_TYPE_INVALID);
            ev_err[3] <= 1'b1;
            rs <= R_DISCARD;
          end
        end
        R_FWD_HDR: if (s3_in_ready[tgt]) begin
          hdr_i <= hdr_i + 2'd1;
          if (hdr_i == 2'd2) rs <= (words_left == '0) ? R_REPLY : R_FWD;
        end
        R_FWD: if (in_valid && in_ready) begin
          words_left <= words_left - 14'd1;
          if (words_left == 14'd1) rs <= R_REPLY;
        end
        R_DISCARD: begin
          if (words_left == '0) rs <= R_REPLY;
          else if (in_valid && in_ready) begin
            words_left <= words_left - 14'd1;
            if (words_left == 14'd1) rs <= R_REPLY;
          end
        end
        R_REPLY: begin
          if (free_after) allocated[tgt] <= 1'b0;
          free_after <= 1'b0;
          rs <= R_W0;
        end
        default: rs <= R_W0;
      endcase
    end
  end

  // ---------------- reply side: fair merge of NSTG+1 sources ----------------
  logic [NSTG:0]       src_req;
  logic [$clog2(NSTG+1)-1:0] src_idx, cur;
  logic                src_any, locked;
  logic                cur_valid, cur_last;
  logic [31:0]         cur_data;

  assign src_req = {loc_pend, s3_out_valid};

  rr_arbiter #(.N(NSTG + 1)) u_arb (
    .clk, .rst_n, .req(src_req), .advance(!locked && src_any),
    .grant(), .grant_idx(src_idx), .any(src_any)
  );

  always_comb begin
    if (int'(cur) == NSTG) begin
      cur_valid = loc_pend;
      cur_data  = loc[loc_i];
      cur_last  = (loc_i == loc_n - 3'd1);
    end else begin
      cur_valid = s3_out_valid[cur];
      cur_data  = s3_out_data[cur];
      cur_last  = s3_out_last[cur];
    end
    out_valid = locked && cur_valid;
    out_data  = cur_data;
    out_last  = cur_last;
    s3_out_ready = '0;
    if (locked && int'(cur) < NSTG) s3_out_ready[cur] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      cur <= '0;
      loc_i <= '0;
      loc_pend <= 1'b0;
    end else begin
      if (loc_set) begin
        loc_pend <= 1'b1;
        loc_i <= '0;
      end
      if (!locked) begin
        if (src_any) begin
          locked <= 1'b1;
          cur <= src_idx;
        end
      end else if (out_valid && out_ready) begin
        if (int'(cur) == NSTG) loc_i <= loc_i + 3'd1;
        if (cur_last) begin
          locked <= 1'b0;
          if (int'(cur) == NSTG) loc_pend <= 1'b0;
        end
      end
    end
  end
endmodule
