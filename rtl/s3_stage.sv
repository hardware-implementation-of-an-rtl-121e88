// s3_stage: one S3 (security, segmentation and services) stage of the OPC UA
// engine; each stage serves one secure channel / session.
//
// As in the engine diagram, the stage joins three components on a
// multi-master address bus: the low-level communication processor
// (opcua_llcp), the SRAM message buffer (sram_bank, BUF_BYTES) and the
// high-level stream processor.  The stream processor is not part of this
// RTL (its instruction set is not published); its buffer port hl_req/hl_rsp
// and its message handshake (rx_done/rx_len, tx_start/tx_len/tx_done) are
// ports of the stage.  Bus arbitration is fixed priority, communication
// processor first; the stream processor is granted in every cycle the
// communication processor leaves the bus free, and the response of the
// single-cycle SRAM is steered back to the master that issued the request.
// The 8 KiB default is the paper's 24 KiB of message buffer SRAM divided by
// its three stages; the arbitration rule is this design's choice.
module s3_stage
  import semantic_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] chunk_size,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        in_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        out_last,
  // stream processor side
  input  mem_req_t    hl_req,
  output mem_rsp_t    hl_rsp,
  output logic        rx_done,
  output logic        rx_overflow,
  output logic [15:0] rx_len,
  input  logic        tx_start,
  input  logic [15:0] tx_len,
  output logic        tx_busy,
  output logic        tx_done,
  output logic        ev_chunk_rx,
  output logic        ev_chunk_tx
);
  mem_req_t ll_req, m_req;
  mem_rsp_t ll_rsp, m_rsp;
  logic     hl_owner;   // the outstanding response belongs to the stream processor

  opcua_llcp #(.BUF_BYTES(BUF_BYTES)) u_llcp (
    .clk, .rst_n, .chunk_size,
    .in_valid, .in_ready, .in_data, .in_last,
    .out_valid, .out_ready, .out_data, .out_last,
    .buf_req(ll_req), .buf_rsp(ll_rsp),
    .rx_done, .rx_overflow, .rx_len, .tx_start, .tx_len, .tx_busy, .tx_done,
    .ev_chunk_rx, .ev_chunk_tx
  );

  sram_bank #(.SIZE_BYTES(BUF_BYTES)) u_buf (
    .clk, .rst_n, .req(m_req), .rsp(m_rsp)
  );

  always_comb begin
    m_req = ll_req.valid ? ll_req : hl_req;
    ll_rsp = m_rsp;
    hl_rsp = m_rsp;
    ll_rsp.ready  = m_rsp.ready;
    hl_rsp.ready  = m_rsp.ready && !ll_req.valid;
    ll_rsp.rvalid = m_rsp.rvalid && !hl_owner;
    hl_rsp.rvalid = m_rsp.rvalid && hl_owner;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hl_owner <= 1'b0;
    else        hl_owner <= !ll_req.valid && hl_req.valid;
  end
endmodule
