// opcua_engine: hardware OPC UA server engine (transport stage, NSTG S3
// stages, configuration registers, APB slave and main-memory master).
//
// Request words written by the CPU over APB pass a request FIFO into the
// transport stage, which answers Hello itself and forwards secure-channel
// traffic to the S3 stage that owns the channel.  Each S3 stage assembles
// chunks into its message buffer; its high-level stream processor (not
// included: the paper does not give its instruction set) processes the
// request through the per-stage ports hl_*, looks nodes up in the namespace
// image in main memory (SRAM4) through ns_req/ns_rsp, and hands the reply
// back for chunked transmission.  Replies are merged by the transport stage
// into the reply FIFO that the CPU drains over APB.
//
// Main-memory access from the stages goes through one bus master (the AXI
// master of the engine diagram), shared round-robin so that each stage
// waits for at most NSTG-1 other transfers: the fair and deterministic
// schedule the paper describes.  A granted stage keeps the master until
// its response returns (one transfer in flight).  NSTG = 3 stages and 24 KiB
// of message buffer in total are the paper's configuration; FIFO depths are
// this design's choice.  The whole engine runs on one clock; the clock
// gating and the synchronisation to the main-memory clock of the chip are
// not modelled.
module opcua_engine
  import semantic_pkg::*;
#(
  parameter int unsigned NSTG      = 3,
  parameter int unsigned BUF_BYTES = 8192,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // peripheral bus slave
  input  apb_req_t        apb_req,
  output apb_rsp_t        apb_rsp,
  output logic            irq,
  // main-memory master
  output mem_req_t        m_req,
  input  mem_rsp_t        m_rsp,
  // per-stage stream processor ports
  input  mem_req_t        hl_req [NSTG],
  output mem_rsp_t        hl_rsp [NSTG],
  input  mem_req_t        ns_req [NSTG],
  output mem_rsp_t        ns_rsp [NSTG],
  output logic [NSTG-1:0] rx_done,
  output logic [NSTG-1:0] rx_overflow,
  output logic [15:0]     rx_len [NSTG],
  input  logic [NSTG-1:0] tx_start,
  input  logic [15:0]     tx_len [NSTG],
  output logic [NSTG-1:0] tx_done,
  // event pulses for observation
  output logic [3:0]      ev_ack,
  output logic [3:0]      ev_err,
  output logic [NSTG-1:0] ev_chunk_rx,
  output logic [NSTG-1:0] ev_chunk_tx
);
  localparam int unsigned SW = $clog2(NSTG > 1 ? NSTG : 2);
  localparam int unsigned FW = $clog2(FIFO_DEPTH);

  logic        enable, clear;
  logic        rxf_push, rxf_ready;
  logic [31:0] rxf_data;
  logic        tr_in_valid, tr_in_ready;
  logic [31:0] tr_in_data;
  logic        tr_out_valid, tr_out_ready, tr_out_last;
  logic [31:0] tr_out_data;
  logic        txf_valid, txf_pop;
  logic [32:0] txf_data;
  logic [FW:0] txf_count, rxf_count;
  logic [NSTG-1:0] allocated;
  logic [31:0] chunk_size;

  logic [NSTG-1:0] s3_in_valid, s3_in_ready, s3_out_valid, s3_out_ready, s3_out_last;
  logic [31:0]     s3_in_data;
  logic            s3_in_last;
  logic [31:0]     s3_out_data [NSTG];

  opcua_regs #(.NSTG(NSTG)) u_regs (
    .clk, .rst_n, .apb_req, .apb_rsp, .enable, .clear,
    .rxf_push, .rxf_full(!rxf_ready), .rxf_data,
    .txf_valid, .txf_data, .txf_count(16'(txf_count)), .txf_pop,
    .allocated, .chunk_size, .irq
  );

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_rxf (
    .clk, .rst_n, .clear,
    .in_valid(rxf_push), .in_ready(rxf_ready), .in_data(rxf_data),
    .out_valid(tr_in_valid), .out_ready(tr_in_ready), .out_data(tr_in_data),
    .count(rxf_count)
  );

  sync_fifo #(.WIDTH(33), .DEPTH(FIFO_DEPTH)) u_txf (
    .clk, .rst_n, .clear,
    .in_valid(tr_out_valid), .in_ready(tr_out_ready), .in_data({tr_out_last, tr_out_data}),
    .out_valid(txf_valid), .out_ready(txf_pop), .out_data(txf_data),
    .count(txf_count)
  );

  opcua_transport #(.NSTG(NSTG), .RECV_BUF(32'(BUF_BYTES)), .SEND_BUF(32'(BUF_BYTES)),
                    .MAX_MSG(32'(BUF_BYTES))) u_transport (
    .clk, .rst_n, .enable,
    .in_valid(tr_in_valid), .in_ready(tr_in_ready), .in_data(tr_in_data),
    .out_valid(tr_out_valid), .out_ready(tr_out_ready), .out_data(tr_out_data),
    .out_last(tr_out_last),
    .s3_in_valid, .s3_in_ready, .s3_in_data, .s3_in_last,
    .s3_out_valid, .s3_out_ready, .s3_out_data, .s3_out_last,
    .allocated, .chunk_size, .ev_ack, .ev_err
  );

  for (genvar s = 0; s < NSTG; s++) begin : g_stage
    s3_stage #(.BUF_BYTES(BUF_BYTES)) u_s3 (
      .clk, .rst_n, .chunk_size,
      .in_valid(s3_in_valid[s]), .in_ready(s3_in_ready[s]),
      .in_data(s3_in_data), .in_last(s3_in_last),
      .out_valid(s3_out_valid[s]), .out_ready(s3_out_ready[s]),
      .out_data(s3_out_data[s]), .out_last(s3_out_last[s]),
      .hl_req(hl_req[s]), .hl_rsp(hl_rsp[s]),
      .rx_done(rx_done[s]), .rx_overflow(rx_overflow[s]), .rx_len(rx_len[s]),
      .tx_start(tx_start[s]), .tx_len(tx_len[s]), .tx_busy(), .tx_done(tx_done[s]),
      .ev_chunk_rx(ev_chunk_rx[s]), .ev_chunk_tx(ev_chunk_tx[s])
    );
  end

  // ---------------- main-memory master, round-robin over the stages -------
  logic [NSTG-1:0] ns_valid;
  logic [SW-1:0]   gi, owner;
  logic            gany, busy;

  always_comb for (int s = 0; s < NSTG; s++) ns_valid[s] = ns_req[s].valid;

  rr_arbiter #(.N(NSTG)) u_nsarb (
    .clk, .rst_n, .req(ns_valid), .advance(!busy && gany && m_rsp.ready),
    .grant(), .grant_idx(gi), .any(gany)
  );

  always_comb begin
    m_req = ns_req[gi];
    m_req.valid = gany && !busy;
  end

  always_comb begin
    for (int s = 0; s < NSTG; s++) begin
      ns_rsp[s] = '0;
      ns_rsp[s].rdata = m_rsp.rdata;
      ns_rsp[s].ready = gany && !busy && m_rsp.ready && gi == SW'(s);
      ns_rsp[s].rvalid = busy && m_rsp.rvalid && owner == SW'(s);
    end
  end

  // busy: a transfer is in flight, no new grant until its response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      owner <= '0;
    end else if (m_req.valid && m_rsp.ready) begin
      busy <= 1'b1;
      owner <= gi;
    end else if (m_rsp.rvalid) begin
      busy <= 1'b0;
    end
  end
endmodule
