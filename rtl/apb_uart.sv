// apb_uart: serial port on the peripheral bus (UART1 and UART2 of the chip).
//
// The paper lists UART, SPI and I2C as the standard serial peripherals of the
// CPU and gives nothing more, so this is a plain 8N1 UART of this design's
// own: one start bit, eight data bits LSB first, one stop bit, a
// programmable bit time and one holding register in each direction.
//
//   0x00 DATA    w: send a byte (the transfer waits, PREADY low, while a
//                   byte is already waiting to be sent)
//                r: received byte; reading it clears STATUS[1]
//   0x04 STATUS  [0] transmitter busy or byte waiting, [1] byte received,
//                [2] overrun, [3] framing error (bad stop bit);
//                write 1 to [2] or [3] to clear them
//   0x08 DIV     clock cycles per bit (reset DIV_RESET, at least 4)
//   0x0C CTRL    [0] interrupt on received byte, [1] interrupt when the
//                transmitter is idle
//
// Timing: the receiver synchronises RX with two flops, finds the middle of
// the start bit DIV/2 cycles after its falling edge and samples every DIV
// cycles from there.  The transmitter holds each bit for exactly DIV cycles.
module apb_uart
  import semantic_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     uart_tx,
  input  logic     uart_rx,
  output logic     irq
);
  logic [15:0] div;
  logic [1:0]  ctrl;
  // transmitter
  logic [7:0]  hold;
  logic        hold_v, tx_busy;
  logic [9:0]  tx_sh;
  logic [3:0]  tx_bits;
  logic [15:0] tx_cnt;
  // receiver
  logic [1:0]  rx_s;
  logic        rx_busy, rx_v, overrun, ferr;
  logic [7:0]  rx_data, rx_sh;
  logic [3:0]  rx_bits;
  logic [15:0] rx_cnt;

  logic wr, rd;
  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite && apb_rsp.pready;
  assign rd = apb_req.psel && apb_req.penable && !apb_req.pwrite;

  always_comb begin
    apb_rsp = '{pready: 1'b1, prdata: 32'd0, pslverr: 1'b0};
    if (apb_req.pwrite && apb_req.paddr[3:2] == 2'd0) apb_rsp.pready = !hold_v;
    unique case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = 32'(rx_data);
      2'd1: apb_rsp.prdata = {28'd0, ferr, overrun, rx_v, tx_busy || hold_v};
      2'd2: apb_rsp.prdata = 32'(div);
      default: apb_rsp.prdata = 32'(ctrl);
    endcase
  end

  assign irq = (ctrl[0] && rx_v) || (ctrl[1] && !tx_busy && !hold_v);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= DIV_RESET; ctrl <= '0;
      hold <= '0; hold_v <= 1'b0; tx_busy <= 1'b0; tx_sh <= '1; tx_bits <= '0; tx_cnt <= '0;
      rx_s <= 2'b11; rx_busy <= 1'b0; rx_v <= 1'b0; overrun <= 1'b0; ferr <= 1'b0;
      rx_data <= '0; rx_sh <= '0; rx_bits <= '0; rx_cnt <= '0;
    end else begin
      // register writes and reads
      if (wr) begin
        unique case (apb_req.paddr[3:2])
          2'd0: begin hold <= apb_req.pwdata[7:0]; hold_v <= 1'b1; end
          2'd1: begin
            if (apb_req.pwdata[2]) overrun <= 1'b0;
            if (apb_req.pwdata[3]) ferr <= 1'b0;
          end
          2'd2: div <= (apb_req.pwdata[15:0] < 16'd4) ? 16'd4 : apb_req.pwdata[15:0];
          default: ctrl <= apb_req.pwdata[1:0];
        endcase
      end
      if (rd && apb_req.paddr[3:2] == 2'd0) rx_v <= 1'b0;

      // transmitter
      if (!tx_busy) begin
        if (hold_v) begin
          tx_sh   <= {1'b1, hold, 1'b0};
          hold_v  <= 1'b0;
          tx_busy <= 1'b1;
          tx_bits <= 4'd10;
          tx_cnt  <= div - 16'd1;
        end
      end else if (tx_cnt != 16'd0) begin
        tx_cnt <= tx_cnt - 16'd1;
      end else if (tx_bits == 4'd1) begin
        tx_busy <= 1'b0;
        tx_sh   <= '1;
      end else begin
        tx_sh   <= {1'b1, tx_sh[9:1]};
        tx_bits <= tx_bits - 4'd1;
        tx_cnt  <= div - 16'd1;
      end

      // receiver
      rx_s <= {rx_s[0], uart_rx};
      if (!rx_busy) begin
        if (!rx_s[1]) begin
          rx_busy <= 1'b1;
          rx_bits <= 4'd0;
          rx_cnt  <= (div >> 1) - 16'd1;
        end
      end else if (rx_cnt != 16'd0) begin
        rx_cnt <= rx_cnt - 16'd1;
      end else begin
        rx_cnt  <= div - 16'd1;
        rx_bits <= rx_bits + 4'd1;
        if (rx_bits == 4'd0) begin
          if (rx_s[1]) rx_busy <= 1'b0;          // glitch, not a start bit
        end else if (rx_bits <= 4'd8) begin
          rx_sh <= {rx_s[1], rx_sh[7:1]};
        end else begin
          rx_busy <= 1'b0;
          if (!rx_s[1]) ferr <= 1'b1;
          else begin
            rx_data <= rx_sh;
            rx_v    <= 1'b1;
            if (rx_v && !(rd && apb_req.paddr[3:2] == 2'd0)) overrun <= 1'b1;
          end
        end
      end
    end
  end

  assign uart_tx = tx_sh[0];
endmodule
