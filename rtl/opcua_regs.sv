// opcua_regs: APB slave and configuration registers of the OPC UA engine.
//
// The CPU reaches the engine through this peripheral-bus slave: it pushes
// request words into the transport stage and pops reply words, and it
// controls and observes the engine.  The paper states that the bus interface
// gives the CPU access to registers controlling the engine; the register map
// below is this design's own.
//
//   0x00 CTRL     rw  [0] enable transport stage, [1] interrupt enable,
//                     [2] clear both FIFOs (write 1, self clearing)
//   0x04 STATUS   ro  [15:0] reply words waiting, [16] request FIFO full,
//                     [17] head reply word is the last of its message,
//                     [23:20] stages allocated to a secure channel
//   0x08 RXDATA   wo  push one request word; the APB transfer waits (PREADY
//                     low) while the request FIFO is full
//   0x0C TXDATA   ro  pop one reply word; reads 0 when none is waiting
//   0x10 CHUNK    ro  send chunk size negotiated by the last Hello
//   0x14 MSGCNT   ro  number of complete reply messages popped so far
//
// irq is high while reply words wait and CTRL[1] is set.  Reads take one
// ACCESS cycle; a push into a full FIFO stretches the ACCESS phase.
module opcua_regs
  import semantic_pkg::*;
#(
  parameter int unsigned NSTG = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  apb_req_t        apb_req,
  output apb_rsp_t        apb_rsp,
  output logic            enable,
  output logic            clear,
  // request FIFO write side
  output logic            rxf_push,
  input  logic            rxf_full,
  output logic [31:0]     rxf_data,
  // reply FIFO read side
  input  logic            txf_valid,
  input  logic [32:0]     txf_data,   // {last, word}
  input  logic [15:0]     txf_count,
  output logic            txf_pop,
  input  logic [NSTG-1:0] allocated,
  input  logic [31:0]     chunk_size,
  output logic            irq
);
  logic        irq_en;
  logic [31:0] msgcnt;
  logic        acc;

  assign acc = apb_req.psel && apb_req.penable;

  always_comb begin
    apb_rsp = '0;
    apb_rsp.pready = 1'b1;
    rxf_push = 1'b0;
    txf_pop  = 1'b0;
    rxf_data = apb_req.pwdata;
    unique case (apb_req.paddr[11:2])
      10'h000: apb_rsp.prdata = {29'd0, 1'b0, irq_en, enable};
      10'h001: apb_rsp.prdata = {8'd0, 4'(allocated), 2'd0, txf_valid && txf_data[32],
                                 rxf_full, txf_count};
      10'h002: if (acc && apb_req.pwrite) begin
        apb_rsp.pready = !rxf_full;
        rxf_push = !rxf_full;
      end
      10'h003: begin
        apb_rsp.prdata = txf_valid ? txf_data[31:0] : 32'd0;
        txf_pop = acc && !apb_req.pwrite && txf_valid;
      end
      10'h004: apb_rsp.prdata = chunk_size;
      10'h005: apb_rsp.prdata = msgcnt;
      default: apb_rsp.pslverr = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable <= 1'b1;
      irq_en <= 1'b0;
      clear  <= 1'b0;
      msgcnt <= '0;
    end else begin
      clear <= 1'b0;
      if (acc && apb_req.pwrite && apb_req.paddr[11:2] == 10'h000) begin
        enable <= apb_req.pwdata[0];
        irq_en <= apb_req.pwdata[1];
        clear  <= apb_req.pwdata[2];
      end
      if (txf_pop && txf_data[32]) msgcnt <= msgcnt + 32'd1;
    end
  end

  assign irq = irq_en && txf_valid;
endmodule
