// apb_spi_master: SPI master on the peripheral bus, for external sensors and
// actuators.  The paper only lists SPI among the CPU's standard serial
// peripherals; this byte-wide mode-0 master is this design's own.
//
//   0x00 DATA    w: start an 8-bit transfer of the written byte (the APB
//                   transfer waits, PREADY low, while one is running)
//                r: byte received by the last transfer
//   0x04 STATUS  [0] transfer running
//   0x08 DIV     clock cycles per SCK half period (reset DIV_RESET, >= 1)
//   0x0C CS      [0] level of the chip-select output (reset 1, inactive)
//
// Mode 0, most significant bit first: MOSI is set up while SCK is low, MISO
// is sampled on the rising SCK edge, and a byte takes 16*DIV clock cycles.
// Chip select is driven by software so that several bytes form one frame.
// irq pulses for one cycle when a transfer ends.
module apb_spi_master
  import semantic_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     spi_sck,
  output logic     spi_cs_n,
  output logic     spi_mosi,
  input  logic     spi_miso,
  output logic     irq
);
  logic [15:0] div, cnt;
  logic [7:0]  sh_tx, sh_rx, rx;
  logic [3:0]  edges;          // SCK half periods left in the byte
  logic        busy, wr;
  // irq: one-cycle pulse when a transfer ends (the interrupt controller
  // latches it)

  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite && apb_rsp.pready;

  always_comb begin
    apb_rsp = '{pready: 1'b1, prdata: 32'd0, pslverr: 1'b0};
    if (apb_req.pwrite && apb_req.paddr[3:2] == 2'd0) apb_rsp.pready = !busy;
    unique case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = 32'(rx);
      2'd1: apb_rsp.prdata = 32'(busy);
      2'd2: apb_rsp.prdata = 32'(div);
      default: apb_rsp.prdata = 32'(spi_cs_n);
    endcase
  end

  assign spi_mosi = sh_tx[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= DIV_RESET; cnt <= '0; sh_tx <= '0; sh_rx <= '0; rx <= '0;
      edges <= '0; busy <= 1'b0; spi_sck <= 1'b0; spi_cs_n <= 1'b1; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (wr) begin
        unique case (apb_req.paddr[3:2])
          2'd0: begin
            sh_tx <= apb_req.pwdata[7:0];
            busy  <= 1'b1;
            edges <= 4'd15;
            cnt   <= div - 16'd1;
          end
          2'd2: div <= (apb_req.pwdata[15:0] == 16'd0) ? 16'd1 : apb_req.pwdata[15:0];
          2'd3: spi_cs_n <= apb_req.pwdata[0];
          default: ;
        endcase
      end else if (busy) begin
        if (cnt != 16'd0) cnt <= cnt - 16'd1;
        else begin
          cnt <= div - 16'd1;
          spi_sck <= !spi_sck;
          if (!spi_sck) sh_rx <= {sh_rx[6:0], spi_miso};        // rising edge
          else          sh_tx <= {sh_tx[6:0], 1'b0};            // falling edge
          if (edges == 4'd0) begin
            busy <= 1'b0;
            rx   <= sh_rx;
            irq  <= 1'b1;
          end
          edges <= edges - 4'd1;
        end
      end
    end
  end
endmodule
