// hlsp_model: behavioural stand-in for the high-level stream processor of
// one S3 stage, used only by testbenches.  The real processor runs service
// programs from an instruction ROM; this model implements a tiny test
// protocol so that complete requests can pass through the engine:
//   the body of a MSG request starts with {op, node, value, count} (4 words)
//   op 1 read node : reply body {op, node, value of node}
//   op 2 write node: stores value at node, reply body {op, node, 0}
//   op 3 read range: reply body {op, node, count words from node on}
//   an OPN request is answered with an OPN reply echoing its first 16 body
//   bytes; a CLO request gets no reply (tx_len = 0).
// Node n lives at NS_BASE + 4*n in main memory, reached through ns_req.
// Reply header = request header (the transport stage set the channel id).
module hlsp_model
  import semantic_pkg::*;
#(
  parameter logic [31:0] NS_BASE = 32'h0040_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  output mem_req_t    hl_req,
  input  mem_rsp_t    hl_rsp,
  output mem_req_t    ns_req,
  input  mem_rsp_t    ns_rsp,
  input  logic        rx_done,
  input  logic [15:0] rx_len,
  output logic        tx_start,
  output logic [15:0] tx_len,
  input  logic        tx_done,
  output int          n_served,
  output int          n_ns_access
);
  // one access on the buffer port (ns = 0) or the namespace port (ns = 1)
  task automatic acc(input logic ns, input logic we, input logic [31:0] a,
                     input logic [31:0] d, output logic [31:0] q);
    logic ok;
    mem_req_t r;
    r = '{valid: 1'b1, we: we, addr: a, wdata: d, wstrb: 4'hF};
    @(negedge clk);
    if (ns) ns_req = r; else hl_req = r;
    #1 ok = ns ? ns_rsp.ready : hl_rsp.ready;
    while (!ok) begin @(negedge clk); #1 ok = ns ? ns_rsp.ready : hl_rsp.ready; end
    @(posedge clk); #1;
    if (ns) ns_req = '0; else hl_req = '0;
    while (!(ns ? ns_rsp.rvalid : hl_rsp.rvalid)) begin @(posedge clk); #1; end
    q = ns ? ns_rsp.rdata : hl_rsp.rdata;
  endtask

  initial begin
    logic [31:0] hdr [6];
    logic [31:0] body [4];
    logic [31:0] q, v;
    int nw;
    hl_req = '0; ns_req = '0; tx_start = 0; tx_len = 0;
    n_served = 0; n_ns_access = 0;
    forever begin
      @(negedge clk);
      if (rst_n && rx_done) begin
        nw = (int'(rx_len) + 3) / 4;
        for (int i = 0; i < 6; i++) acc(1'b0, 1'b0, 32'(4 * i), 0, hdr[i]);
        for (int i = 0; i < 4; i++)
          if (6 + i < nw) acc(1'b0, 1'b0, 32'(24 + 4 * i), 0, body[i]);
          else body[i] = 0;
        tx_len = 0;
        if (hdr[0][23:0] == MT_OPN) begin
          for (int i = 0; i < 4; i++) acc(1'b0, 1'b1, 32'(24 + 4 * i), body[i], q);
          tx_len = 16'd40;
        end else if (hdr[0][23:0] == MT_MSG) begin
          acc(1'b0, 1'b1, 32'd24, body[0], q);
          acc(1'b0, 1'b1, 32'd28, body[1], q);
          if (body[0] == 32'd1) begin
            acc(1'b1, 1'b0, NS_BASE + 4 * body[1], 0, v);
            n_ns_access++;
            acc(1'b0, 1'b1, 32'd32, v, q);
            tx_len = 16'd36;
          end else if (body[0] == 32'd2) begin
            acc(1'b1, 1'b1, NS_BASE + 4 * body[1], body[2], q);
            n_ns_access++;
            acc(1'b0, 1'b1, 32'd32, 32'd0, q);
            tx_len = 16'd36;
          end else begin
            for (int k = 0; k < int'(body[3]); k++) begin
              acc(1'b1, 1'b0, NS_BASE + 4 * (body[1] + 32'(k)), 0, v);
              n_ns_access++;
              acc(1'b0, 1'b1, 32'(32 + 4 * k), v, q);
            end
            tx_len = 16'(32 + 4 * body[3]);
          end
        end
        // header words stay in place; hand the reply over
        @(negedge clk);
        tx_start = 1'b1;
        @(negedge clk);
        tx_start = 1'b0;
        #1 while (!tx_done) begin @(negedge clk); #1; end
        n_served++;
      end
    end
  end
endmodule
