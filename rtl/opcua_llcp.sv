// opcua_llcp: low-level communication processor of an S3 stage.
//
// Reception: chunks of one OPC UA message arrive as word packets (see
// opcua_transport).  The processor unpacks them byte by byte into the
// message buffer: the whole first chunk is stored from address 0, and of
// every later chunk only the body behind the 24-byte chunk header (message
// header, symmetric security header, sequence header) is appended, so the
// buffer ends up holding one message with a single header.  A final chunk
// ('F') completes the message: rx_done pulses with rx_len (bytes in the
// buffer).  An abort chunk ('A') discards the partly assembled message.  A
// message that would overflow the buffer is dropped and rx_overflow pulses
// at its final chunk.  After rx_done no further chunk is taken until the
// reply has been sent (tx_done): one request per session is in flight.
//
// Transmission: on tx_start the reply, tx_len bytes in the buffer starting
// with a 24-byte MSG header, is cut into chunks of at most chunk_size bytes.
// Each chunk repeats the header with its chunk type ('C' or 'F'), its own
// MessageSize and a SequenceNumber incremented per chunk.  OPN replies,
// whose security header has variable length, go out as one chunk.  Words
// leave as packets with out_last on the last word of each chunk.  tx_start
// with tx_len = 0 sends nothing and only releases reception (a request such
// as CloseSecureChannel that has no reply).
//
// The paper states that this processor handles reception and transmission
// with emphasis on chunking; the byte-serial structure, the one-request
// lockstep and the header handling are this design's own.  Timing: one byte
// per cycle on reception, two cycles per byte read from the buffer on
// transmission (single-port SRAM, 1-cycle read latency).
module opcua_llcp
  import semantic_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] chunk_size,
  // chunks from the transport stage
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        in_last,
  // chunks to the transport stage
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        out_last,
  // message buffer port (priority master of the stage's buffer bus)
  output mem_req_t    buf_req,
  input  mem_rsp_t    buf_rsp,
  // towards the stream processor
  output logic        rx_done,
  output logic        rx_overflow,
  output logic [15:0] rx_len,
  input  logic        tx_start,
  input  logic [15:0] tx_len,
  output logic        tx_busy,
  output logic        tx_done,
  output logic        ev_chunk_rx,   // a continuation chunk was merged
  output logic        ev_chunk_tx    // a continuation chunk was sent
);
  localparam int unsigned HB = SYM_HDR_BYTES;

  // ---------------- reception ----------------
  typedef enum logic [1:0] {RX_RUN, RX_HOLD} rxs_t;
  rxs_t        rxs;
  logic [31:0] w;
  logic        w_valid;
  logic [1:0]  lane;
  logic [31:0] cpos, csize;
  logic [7:0]  ctype;
  logic [15:0] wptr;
  logic        first, ovf;
  logic [7:0]  b;
  logic        chunk_end, want, store;

  assign in_ready = (rxs == RX_RUN) && !w_valid;
  assign b = w[8*lane +: 8];
  assign chunk_end = (cpos + 32'd1 >= csize) && (cpos >= 32'd7);
  assign want  = first || cpos >= HB;     // byte belongs in the buffer
  assign store = want && !ovf && (32'(wptr) < BUF_BYTES);

  // ---------------- transmission ----------------
  typedef enum logic [2:0] {TX_IDLE, TX_HRD, TX_HWAIT, TX_SETUP, TX_EMIT, TX_BWAIT} txs_t;
  txs_t        txs;
  logic [7:0]  hdr [HB];
  logic [4:0]  hi;
  logic [15:0] rptr, body_left, cbody, j, tlen;
  logic [31:0] seq0, kchunk;
  logic        is_opn, cfinal;
  logic [31:0] ow;
  logic [1:0]  ol;
  logic        ov, olast;
  logic        push;
  logic [7:0]  pbyte;
  logic [31:0] csz_tx, seq_k;

  assign csz_tx = 32'(cbody) + HB;
  assign seq_k  = seq0 + kchunk;

  always_comb begin
    // patched header byte j of the current chunk
    pbyte = 8'h00;
    if (txs == TX_EMIT && j < 16'(HB)) begin
      pbyte = hdr[j[4:0]];
      if (j == 16'd3) pbyte = cfinal ? CT_FINAL : CT_CONT;
      else if (j >= 16'd4 && j < 16'd8) pbyte = csz_tx[8*(j-16'd4) +: 8];
      else if (j >= 16'd16 && j < 16'd20 && !is_opn) pbyte = seq_k[8*(j-16'd16) +: 8];
    end else if (txs == TX_BWAIT) begin
      pbyte = buf_rsp.rdata[8*rptr[1:0] +: 8];
    end
  end

  assign push = !ov && ((txs == TX_EMIT && j < 16'(HB)) || (txs == TX_BWAIT && buf_rsp.rvalid));

  // buffer port: reception writes, transmission reads
  always_comb begin
    buf_req = '0;
    if (w_valid && store) begin
      buf_req.valid = 1'b1;
      buf_req.we    = 1'b1;
      buf_req.addr  = 32'(wptr);
      buf_req.wdata = {4{b}};
      buf_req.wstrb = 4'b0001 << wptr[1:0];
    end else if (txs == TX_HRD) begin
      buf_req.valid = 1'b1;
      buf_req.addr  = 32'(hi);
    end else if (txs == TX_EMIT && j >= 16'(HB) && !ov) begin
      buf_req.valid = 1'b1;
      buf_req.addr  = 32'(rptr);
    end
    buf_req.addr[1:0] = 2'b00;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rxs <= RX_RUN;
      w <= '0; w_valid <= 1'b0; lane <= '0;
      cpos <= '0; csize <= 32'hFFFF_FFFF; ctype <= '0;
      wptr <= '0; first <= 1'b1; ovf <= 1'b0;
      rx_done <= 1'b0; rx_overflow <= 1'b0; rx_len <= '0; ev_chunk_rx <= 1'b0;
    end else begin
      rx_done <= 1'b0;
      rx_overflow <= 1'b0;
      ev_chunk_rx <= 1'b0;
      if (rxs == RX_HOLD) begin
        if (tx_done) rxs <= RX_RUN;
      end else if (!w_valid) begin
        if (in_valid) begin
          w <= in_data;
          w_valid <= 1'b1;
          lane <= '0;
        end
      end else begin
        // one byte of the current chunk per cycle
        if (cpos == 32'd3) ctype <= b;
        if (cpos >= 32'd4 && cpos < 32'd8) csize[8*(cpos-32'd4) +: 8] <= b;
        if (cpos == 32'd4) csize[31:8] <= '0;
        if (store) wptr <= wptr + 16'd1;
        else if (want) ovf <= 1'b1;
        if (chunk_end) begin
          cpos <= '0;
          csize <= 32'hFFFF_FFFF;
          w_valid <= 1'b0;
          if (ctype == CT_FINAL) begin
            first <= 1'b1;
            ovf <= 1'b0;
            wptr <= '0;
            if (ovf || (want && !store)) rx_overflow <= 1'b1;
            else begin
              rx_done <= 1'b1;
              rx_len <= store ? wptr + 16'd1 : wptr;
              rxs <= RX_HOLD;
            end
          end else if (ctype == CT_ABORT) begin
            first <= 1'b1;
            ovf <= 1'b0;
            wptr <= '0;
          end else begin
            first <= 1'b0;
            ev_chunk_rx <= !first;
          end
        end else begin
          cpos <= cpos + 32'd1;
          lane <= lane + 2'd1;
          if (lane == 2'd3) w_valid <= 1'b0;
        end
      end
    end
  end

  // ---------------- transmission FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      txs <= TX_IDLE;
      hi <= '0; rptr <= '0; body_left <= '0; cbody <= '0; j <= '0; tlen <= '0;
      seq0 <= '0; kchunk <= '0; is_opn <= 1'b0; cfinal <= 1'b0;
      ow <= '0; ol <= '0; ov <= 1'b0; olast <= 1'b0;
      tx_done <= 1'b0; ev_chunk_tx <= 1'b0;
      for (int i = 0; i < HB; i++) hdr[i] <= '0;
    end else begin
      tx_done <= 1'b0;
      ev_chunk_tx <= 1'b0;
      if (ov && out_ready) ov <= 1'b0;
      if (push) begin
        ow[8*ol +: 8] <= pbyte;
        if (ol == 2'd0) ow[31:8] <= '0;
        if (ol == 2'd3 || j + 16'd1 == 16'(csz_tx)) begin
          ov <= 1'b1;
          olast <= (j + 16'd1 == 16'(csz_tx));
          ol <= '0;
        end else ol <= ol + 2'd1;
      end
      unique case (txs)
        TX_IDLE: if (tx_start && tx_len == '0) begin
          tx_done <= 1'b1;            // no reply (e.g. CloseSecureChannel)
        end else if (tx_start) begin
          tlen <= tx_len;
          hi <= '0;
          kchunk <= '0;
          txs <= TX_HRD;
        end
        TX_HRD: txs <= TX_HWAIT;
        TX_HWAIT: if (buf_rsp.rvalid) begin
          hdr[hi] <= buf_rsp.rdata[8*hi[1:0] +: 8];
          if (hi == 5'(HB - 1)) begin
            txs <= TX_SETUP;
            body_left <= tlen - 16'(HB);
            rptr <= 16'(HB);
          end else begin
            hi <= hi + 5'd1;
            txs <= TX_HRD;
          end
        end
        TX_SETUP: begin
          is_opn <= ({hdr[2], hdr[1], hdr[0]} == MT_OPN);
          seq0 <= {hdr[19], hdr[18], hdr[17], hdr[16]};
          if ({hdr[2], hdr[1], hdr[0]} == MT_OPN || 32'(body_left) + HB <= chunk_size) begin
            cbody <= body_left;
            cfinal <= 1'b1;
          end else begin
            cbody <= 16'(chunk_size - HB);
            cfinal <= 1'b0;
          end
          j <= '0;
          txs <= TX_EMIT;
        end
        TX_EMIT: begin
          if (j < 16'(HB)) begin
            if (push) j <= j + 16'd1;
          end else if (j == 16'(csz_tx)) begin
            if (!ov) begin
              body_left <= body_left - cbody;
              kchunk <= kchunk + 32'd1;
              if (cfinal) begin
                tx_done <= 1'b1;
                txs <= TX_IDLE;
              end else begin
                ev_chunk_tx <= 1'b1;
                txs <= TX_SETUP;
              end
            end
          end else if (!ov) begin
            txs <= TX_BWAIT;
          end
        end
        TX_BWAIT: if (push) begin
          j <= j + 16'd1;
          rptr <= rptr + 16'd1;
          txs <= TX_EMIT;
        end
        default: txs <= TX_IDLE;
      endcase
    end
  end

  assign out_valid = ov;
  assign out_data  = ow;
  assign out_last  = olast;
  assign tx_busy   = (txs != TX_IDLE);
endmodule
