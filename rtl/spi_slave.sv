// spi_slave: boot and configuration SPI slave with a main-bus master port.
//
// After power-up an external device (flash, host) loads the volatile main
// memory and sets up the chip through this port; the paper states only that
// a dedicated SPI slave configures the chip and initialises main memory from
// an external source.  Because the slave is a master on the main
// interconnect, it reaches every SRAM bank and, through the APB bridge, every
// peripheral register.  The command set below is this design's own.
//
// Protocol (SPI mode 0: data sampled on the rising SCK edge, changed on the
// falling edge, most significant bit first; a transaction ends when CS_N
// rises):
//   0x02 A3 A2 A1 A0 D0 D1 ...      write bytes from address A, incrementing
//   0x03 A3 A2 A1 A0 XX D0 D1 ...   read bytes from address A (XX: one dummy
//                                   byte while the first read completes)
// The address is sent most significant byte first.  Every data byte is one
// main-bus transfer: a byte write (wstrb selects the byte lane) or a word read
// whose byte lane is returned.
//
// SCK, CS_N and MOSI are sampled with the system clock through two-flop
// synchronisers, so SCK must be at most clk/8; then each byte lasts at least
// 64 clock cycles, enough for one bus transfer even under contention.  MISO
// changes after the falling SCK edge is seen.
module spi_slave
  import semantic_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     spi_sck,
  input  logic     spi_cs_n,
  input  logic     spi_mosi,
  output logic     spi_miso,
  output mem_req_t m_req,
  input  mem_rsp_t m_rsp
);
  localparam logic [7:0] CMD_WRITE = 8'h02, CMD_READ = 8'h03;

  logic [2:0]  sck_s;
  logic [1:0]  cs_s, mosi_s;
  logic        rise, fall, active;
  logic [2:0]  bitcnt;
  logic [7:0]  sh_in, sh_out, cmd, rdbyte;
  logic [2:0]  bytecnt;        // saturates at 6
  logic [31:0] addr;
  logic        wait_r, rd_pend;
  logic [1:0]  rd_lane;

  assign rise   = sck_s[2:1] == 2'b01;
  assign fall   = sck_s[2:1] == 2'b10;
  assign active = !cs_s[1];
  assign spi_miso = sh_out[7];

  logic [31:0] a_last, a_next;
  assign a_last = {addr[23:0], sh_in[6:0], mosi_s[1]};   // address with its last byte
  assign a_next = addr + 32'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0; cs_s <= 2'b11; mosi_s <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], spi_sck};
      cs_s   <= {cs_s[0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end

  // serial side and command decoding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt <= '0; sh_in <= '0; sh_out <= '0; cmd <= '0; bytecnt <= '0; addr <= '0;
      m_req <= '0; wait_r <= 1'b0; rd_pend <= 1'b0; rd_lane <= '0; rdbyte <= '0;
    end else begin
      // bus side: hold the request until accepted, then wait for the response
      if (m_req.valid && m_rsp.ready) begin
        m_req.valid <= 1'b0;
        wait_r <= 1'b1;
      end
      if (wait_r && m_rsp.rvalid) begin
        wait_r <= 1'b0;
        if (rd_pend) begin
          rdbyte  <= m_rsp.rdata[8*rd_lane +: 8];
          rd_pend <= 1'b0;
        end
      end

      if (!active) begin
        bitcnt <= '0;
        bytecnt <= '0;
      end else if (rise) begin
        sh_in  <= {sh_in[6:0], mosi_s[1]};
        bitcnt <= bitcnt + 3'd1;
        if (bitcnt == 3'd7) begin
          // a whole byte {sh_in[6:0], mosi} has arrived
          if (bytecnt != 3'd6) bytecnt <= bytecnt + 3'd1;
          unique case (bytecnt)
            3'd0: cmd <= {sh_in[6:0], mosi_s[1]};
            3'd1, 3'd2, 3'd3: addr <= {addr[23:0], sh_in[6:0], mosi_s[1]};
            3'd4: begin
              addr <= {addr[23:0], sh_in[6:0], mosi_s[1]};
              if (cmd == CMD_READ) begin
                m_req   <= '{valid: 1'b1, we: 1'b0, addr: {a_last[31:2], 2'b00}, wdata: '0, wstrb: 4'b0000};
                rd_pend <= 1'b1;
                rd_lane <= a_last[1:0];
              end
            end
            default: begin
              if (cmd == CMD_WRITE) begin
                m_req <= '{valid: 1'b1, we: 1'b1, addr: {addr[31:2], 2'b00},
                           wdata: {4{sh_in[6:0], mosi_s[1]}}, wstrb: 4'b0001 << addr[1:0]};
                addr <= addr + 32'd1;
              end else if (cmd == CMD_READ) begin
                // the byte read last goes out next; fetch the following one
                sh_out  <= rdbyte;
                addr    <= addr + 32'd1;
                m_req   <= '{valid: 1'b1, we: 1'b0, addr: {a_next[31:2], 2'b00}, wdata: '0, wstrb: 4'b0000};
                rd_pend <= 1'b1;
                rd_lane <= a_next[1:0];
              end
            end
          endcase
        end
      end else if (fall && bitcnt != 3'd0) begin
        sh_out <= {sh_out[6:0], 1'b0};
      end
    end
  end

  // the protocol leaves at least one byte time between two transfers
  assert property (@(posedge clk) disable iff (!rst_n)
                   (rise && active && bitcnt == 3'd7 && bytecnt >= 3'd4 &&
                    (cmd == CMD_WRITE || cmd == CMD_READ) && !(bytecnt == 3'd4 && cmd == CMD_WRITE))
                   |-> !m_req.valid && !wait_r);
endmodule
