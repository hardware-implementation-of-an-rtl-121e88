// semantic_soc: top level of the SemantIC field-device chip, as far as it is
// built in RTL.
//
// Core subsystem: five SRAM banks (SRAM0 instructions 256 KiB, SRAM1 data
// 256 KiB, SRAM2 Ethernet TX 96 KiB, SRAM3 Ethernet RX 96 KiB, SRAM4 OPC UA
// namespace 64 KiB) behind the main interconnect, which gives the CPU, the
// Ethernet DMA and the OPC UA engine priority on their banks; the AXI/APB
// bridge leads to the peripheral bus with the OPC UA engine's slave port, a
// timer, GPIO, the interrupt controller, two UARTs, the SPI master and the
// I2C master (polled, no interrupt).  The OPC UA engine is a master on the
// interconnect (namespace lookups in SRAM4) and a slave on the APB.
// The boot SPI slave (spi_slave) is the sixth interconnect master: an
// external device loads main memory and peripheral registers through it.
//
// Not built, and therefore brought out as ports: the RISC-V CPU (its
// instruction and data master ports, its interrupt input), the Ethernet RX/TX
// DMA master ports, and the per-stage ports of the OPC UA engine's
// high-level stream processors.  The
// Ethernet MAC and IPv4 blocks, SGMII/RMII, SerDes, ADPLL, ABB generator, IO
// cells, MBIST and the configuration register file
// are not part of this RTL.  The chip's separate clock domains (CPU 250 MHz,
// peripherals 100 MHz, OPC UA engine 50 MHz) are collapsed into one clock.
//
// Interrupt sources of the interrupt controller: 0 OPC UA engine reply
// ready, 1 timer, 2 GPIO, 3 UART1, 4 UART2, 5 SPI master.
module semantic_soc
  import semantic_pkg::*;
#(
  parameter int unsigned SRAM0_BYTES = 262144,
  parameter int unsigned SRAM1_BYTES = 262144,
  parameter int unsigned SRAM2_BYTES = 98304,
  parameter int unsigned SRAM3_BYTES = 98304,
  parameter int unsigned SRAM4_BYTES = 65536,
  parameter int unsigned NSTG        = 3,
  parameter int unsigned MSGBUF_BYTES = 8192,
  parameter int unsigned NGPIO       = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // CPU ports (CPU not included)
  input  mem_req_t        cpu_i_req,
  output mem_rsp_t        cpu_i_rsp,
  input  mem_req_t        cpu_d_req,
  output mem_rsp_t        cpu_d_rsp,
  output logic            cpu_irq,
  output logic [4:0]      cpu_irq_id,
  // Ethernet DMA master ports (DMA not included)
  input  mem_req_t        dma_rx_req,
  output mem_rsp_t        dma_rx_rsp,
  input  mem_req_t        dma_tx_req,
  output mem_rsp_t        dma_tx_rsp,
  // boot / configuration SPI slave pins
  input  logic            spi_sck,
  input  logic            spi_cs_n,
  input  logic            spi_mosi,
  output logic            spi_miso,
  // OPC UA stream processor ports, one set per S3 stage
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
  output logic [3:0]      ev_ack,
  output logic [3:0]      ev_err,
  output logic [NSTG-1:0] ev_chunk_rx,
  output logic [NSTG-1:0] ev_chunk_tx,
  // GPIO pins
  input  logic [NGPIO-1:0] gpio_in,
  output logic [NGPIO-1:0] gpio_out,
  output logic [NGPIO-1:0] gpio_oe,
  // serial ports
  output logic            uart1_tx,
  input  logic            uart1_rx,
  output logic            uart2_tx,
  input  logic            uart2_rx,
  // SPI master for external sensors and actuators
  output logic            spim_sck,
  output logic            spim_cs_n,
  output logic            spim_mosi,
  input  logic            spim_miso,
  output logic            i2c_scl_oe,   // open drain: 1 pulls SCL low
  input  logic            i2c_scl_i,
  output logic            i2c_sda_oe,   // open drain: 1 pulls SDA low
  input  logic            i2c_sda_i
);
  localparam int unsigned NS = 6;

  mem_req_t m_req [N_MST];
  mem_rsp_t m_rsp [N_MST];
  mem_req_t s_req [NS];
  mem_rsp_t s_rsp [NS];
  apb_req_t apb_req [N_APB];
  apb_rsp_t apb_rsp [N_APB];
  logic     irq_opcua, irq_timer, irq_gpio, irq_uart1, irq_uart2, irq_spim;

  assign m_req[M_CPU_I]  = cpu_i_req;
  assign m_req[M_CPU_D]  = cpu_d_req;
  assign m_req[M_DMA_RX] = dma_rx_req;
  assign m_req[M_DMA_TX] = dma_tx_req;
  assign cpu_i_rsp  = m_rsp[M_CPU_I];
  assign cpu_d_rsp  = m_rsp[M_CPU_D];
  assign dma_rx_rsp = m_rsp[M_DMA_RX];
  assign dma_tx_rsp = m_rsp[M_DMA_TX];

  mem_interconnect #(.NM(N_MST), .NS(NS)) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  sram_bank #(.SIZE_BYTES(SRAM0_BYTES)) u_sram0 (.clk, .rst_n, .req(s_req[0]), .rsp(s_rsp[0]));
  sram_bank #(.SIZE_BYTES(SRAM1_BYTES)) u_sram1 (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));
  sram_bank #(.SIZE_BYTES(SRAM2_BYTES)) u_sram2 (.clk, .rst_n, .req(s_req[2]), .rsp(s_rsp[2]));
  sram_bank #(.SIZE_BYTES(SRAM3_BYTES)) u_sram3 (.clk, .rst_n, .req(s_req[3]), .rsp(s_rsp[3]));
  sram_bank #(.SIZE_BYTES(SRAM4_BYTES)) u_sram4 (.clk, .rst_n, .req(s_req[4]), .rsp(s_rsp[4]));

  spi_slave u_spis (
    .clk, .rst_n, .spi_sck, .spi_cs_n, .spi_mosi, .spi_miso,
    .m_req(m_req[M_SPIS]), .m_rsp(m_rsp[M_SPIS])
  );

  apb_bridge #(.NP(N_APB)) u_bridge (
    .clk, .rst_n, .req(s_req[5]), .rsp(s_rsp[5]), .apb_req, .apb_rsp
  );

  opcua_engine #(.NSTG(NSTG), .BUF_BYTES(MSGBUF_BYTES)) u_opcua (
    .clk, .rst_n,
    .apb_req(apb_req[APB_OPCUA]), .apb_rsp(apb_rsp[APB_OPCUA]), .irq(irq_opcua),
    .m_req(m_req[M_OPCUA]), .m_rsp(m_rsp[M_OPCUA]),
    .hl_req, .hl_rsp, .ns_req, .ns_rsp,
    .rx_done, .rx_overflow, .rx_len, .tx_start, .tx_len, .tx_done,
    .ev_ack, .ev_err, .ev_chunk_rx, .ev_chunk_tx
  );

  apb_timer u_timer (
    .clk, .rst_n, .apb_req(apb_req[APB_TIMER]), .apb_rsp(apb_rsp[APB_TIMER]), .irq(irq_timer)
  );

  apb_gpio #(.NGPIO(NGPIO)) u_gpio (
    .clk, .rst_n, .apb_req(apb_req[APB_GPIO]), .apb_rsp(apb_rsp[APB_GPIO]),
    .gpio_in, .gpio_out, .gpio_oe, .irq(irq_gpio)
  );

  apb_irq_ctrl #(.NIRQ(8)) u_irq (
    .clk, .rst_n, .apb_req(apb_req[APB_IRQ]), .apb_rsp(apb_rsp[APB_IRQ]),
    .src({2'd0, irq_spim, irq_uart2, irq_uart1, irq_gpio, irq_timer, irq_opcua}), .cpu_irq, .irq_id(cpu_irq_id)
  );

  apb_uart u_uart1 (
    .clk, .rst_n, .apb_req(apb_req[APB_UART1]), .apb_rsp(apb_rsp[APB_UART1]),
    .uart_tx(uart1_tx), .uart_rx(uart1_rx), .irq(irq_uart1)
  );

  apb_uart u_uart2 (
    .clk, .rst_n, .apb_req(apb_req[APB_UART2]), .apb_rsp(apb_rsp[APB_UART2]),
    .uart_tx(uart2_tx), .uart_rx(uart2_rx), .irq(irq_uart2)
  );

  apb_spi_master u_spim (
    .clk, .rst_n, .apb_req(apb_req[APB_SPI]), .apb_rsp(apb_rsp[APB_SPI]),
    .spi_sck(spim_sck), .spi_cs_n(spim_cs_n), .spi_mosi(spim_mosi), .spi_miso(spim_miso),
    .irq(irq_spim)
  );

  apb_i2c_master u_i2c (
    .clk, .rst_n, .apb_req(apb_req[APB_I2C]), .apb_rsp(apb_rsp[APB_I2C]),
    .scl_oe(i2c_scl_oe), .scl_i(i2c_scl_i), .sda_oe(i2c_sda_oe), .sda_i(i2c_sda_i)
  );
endmodule
