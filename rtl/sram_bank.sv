// sram_bank: single-port SRAM with byte write strobes, used for the five
// main-memory banks of the core subsystem (SRAM0 instructions 256 KiB, SRAM1
// data 256 KiB, SRAM2 TX 96 KiB, SRAM3 RX 96 KiB, SRAM4 namespace 64 KiB, as
// printed in the chip's block diagram) and for the message buffer of each S3
// stage of the OPC UA engine.
//
// On silicon these are dual-rail SRAM macros; here the macro is written as an
// array so it synthesises to a memory.  Interface: a mem_req_t request is
// always accepted (ready = 1); a read returns its data with rvalid exactly one
// cycle later; a write updates the bytes enabled by wstrb and also produces
// one rvalid (write acknowledge).  Addresses are byte addresses; the bank
// decodes the word index from the bits below SIZE_BYTES.  Contents are not
// reset.
module sram_bank
  import semantic_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned IW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [IW-1:0] idx;
  logic [31:0] rdata_q;
  logic        rvalid_q;

  assign idx = req.addr[IW+1:2];

  always_ff @(posedge clk) begin
    if (req.valid) begin
      if (req.we) begin
        for (int b = 0; b < 4; b++)
          if (req.wstrb[b]) mem[idx][8*b +: 8] <= req.wdata[8*b +: 8];
      end else begin
        rdata_q <= mem[idx];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= req.valid;
  end

  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;
endmodule
