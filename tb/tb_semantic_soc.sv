// tb_semantic_soc: end-to-end test of the whole chip at its default sizes.
//
// The processor's data port is driven by this bench: it reaches the OPC UA
// engine, timer, GPIO and interrupt controller through the interconnect and
// the APB bridge, exactly as software would.  Three stream-processor models
// serve the S3 stages and keep their namespace in SRAM4 (base 0x0040_0000)
// through the engine's memory master.  While the OPC UA scenario runs, the
// instruction port fetches from SRAM0 and the two DMA ports and the SPI
// slave writes and reads back random bytes in SRAM1 over its SPI pins, so
// every bank sees competing masters.
//
// Mechanisms counted (each must occur at least once):
//   Hello/Acknowledge, OpenSecureChannel, MSG, CloseSecureChannel,
//   all four transport errors, request chunk reassembly, reply chunking,
//   several stages contending for the namespace master, the OPC UA master
//   winning SRAM4 over a waiting DMA master, APB wait states from a full
//   request FIFO, timer and GPIO interrupts through the interrupt
//   controller, the default slave answering an unmapped address, and memory
//   access through the boot SPI slave, both UARTs and the SPI master in
//   loopback.
module tb_semantic_soc;
  import semantic_pkg::*;
  `include "opcua_tb_helpers.svh"
  localparam int NSTG = 3;
  localparam logic [31:0] NS_BASE = 32'h0040_0000;
  logic clk = 0, rst_n = 0;
  mem_req_t mreq [N_MST];
  mem_rsp_t mrsp [N_MST];
  logic cpu_irq;
  logic [4:0] cpu_irq_id;
  mem_req_t hl_req [NSTG], ns_req [NSTG];
  mem_rsp_t hl_rsp [NSTG], ns_rsp [NSTG];
  logic [NSTG-1:0] rx_done, rx_overflow, tx_start, tx_done, ev_crx, ev_ctx;
  logic [15:0] rx_len [NSTG], tx_len [NSTG];
  logic [3:0] ev_ack, ev_err;
  logic [15:0] gpio_in, gpio_out, gpio_oe;
  int checks = 0, failures = 0;
  int served [NSTG], nsacc [NSTG];
  bit traffic_on = 0;
  logic sck, cs_n, mosi, miso;
  logic u1, u2;   // each UART's TX is looped back to its RX
  logic spim_sck, spim_cs_n, spim_mosi;   // SPI master MOSI looped to MISO
  logic i2c_scl_oe, i2c_sda_oe;           // I2C bus with pull-ups, no device
  int   n_scl = 0;
  always @(negedge i2c_scl_oe) n_scl++;   // SCL rising edges

  semantic_soc dut (
    .clk, .rst_n,
    .cpu_i_req(mreq[M_CPU_I]), .cpu_i_rsp(mrsp[M_CPU_I]),
    .cpu_d_req(mreq[M_CPU_D]), .cpu_d_rsp(mrsp[M_CPU_D]),
    .cpu_irq, .cpu_irq_id,
    .dma_rx_req(mreq[M_DMA_RX]), .dma_rx_rsp(mrsp[M_DMA_RX]),
    .dma_tx_req(mreq[M_DMA_TX]), .dma_tx_rsp(mrsp[M_DMA_TX]),
    .spi_sck(sck), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .hl_req, .hl_rsp, .ns_req, .ns_rsp, .rx_done, .rx_overflow, .rx_len,
    .tx_start, .tx_len, .tx_done, .ev_ack, .ev_err,
    .ev_chunk_rx(ev_crx), .ev_chunk_tx(ev_ctx),
    .gpio_in, .gpio_out, .gpio_oe,
    .uart1_tx(u1), .uart1_rx(u1), .uart2_tx(u2), .uart2_rx(u2),
    .spim_sck, .spim_cs_n, .spim_mosi, .spim_miso(spim_mosi),
    .i2c_scl_oe, .i2c_scl_i(!i2c_scl_oe), .i2c_sda_oe, .i2c_sda_i(!i2c_sda_oe)
  );
  for (genvar s = 0; s < NSTG; s++) begin : g_hl
    hlsp_model #(.NS_BASE(NS_BASE)) u_hl (
      .clk, .rst_n, .hl_req(hl_req[s]), .hl_rsp(hl_rsp[s]), .ns_req(ns_req[s]), .ns_rsp(ns_rsp[s]),
      .rx_done(rx_done[s]), .rx_len(rx_len[s]), .tx_start(tx_start[s]), .tx_len(tx_len[s]),
      .tx_done(tx_done[s]), .n_served(served[s]), .n_ns_access(nsacc[s])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_hel, n_opn, n_msg, n_clo, n_err [4], n_crx, n_ctx, n_nscont, n_prio, n_apbwait;
  initial begin
    n_hel = 0; n_opn = 0; n_msg = 0; n_clo = 0; n_crx = 0; n_ctx = 0;
    n_nscont = 0; n_prio = 0; n_apbwait = 0;
    foreach (n_err[i]) n_err[i] = 0;
  end
  always @(posedge clk) if (rst_n) begin
    int n;
    n = 0;
    n_hel += int'(ev_ack[0]); n_opn += int'(ev_ack[1]);
    n_msg += int'(ev_ack[2]); n_clo += int'(ev_ack[3]);
    for (int i = 0; i < 4; i++) n_err[i] += int'(ev_err[i]);
    n_crx += $countones(ev_crx);
    n_ctx += $countones(ev_ctx);
    for (int s = 0; s < NSTG; s++) n += int'(ns_req[s].valid);
    if (n > 1) n_nscont++;
    // the OPC UA master is served by SRAM4 while a DMA master waits for it
    if (dut.s_req[4].valid && dut.m_req[M_OPCUA].valid && dut.m_rsp[M_OPCUA].ready &&
        mreq[M_DMA_RX].valid && mreq[M_DMA_RX].addr[31:20] == 12'h004 && !mrsp[M_DMA_RX].ready)
      n_prio++;
    if (dut.apb_req[APB_OPCUA].psel && dut.apb_req[APB_OPCUA].penable && !dut.apb_rsp[APB_OPCUA].pready)
      n_apbwait++;
  end

  // ---------------- bus masters ----------------
  task automatic xfer(input int m, input logic we, input logic [31:0] a,
                      input logic [31:0] d, output logic [31:0] q);
    logic ok;
    @(negedge clk);
    mreq[m] = '{valid: 1'b1, we: we, addr: a, wdata: d, wstrb: 4'hF};
    do begin #1 ok = mrsp[m].ready; @(posedge clk); end while (!ok);
    #1 mreq[m] = '0;
    while (!mrsp[m].rvalid) begin @(posedge clk); #1; end
    q = mrsp[m].rdata;
  endtask

  localparam logic [31:0] OPCUA_BASE = APB_BASE + 32'h0000_0000;
  localparam logic [31:0] TIMER_BASE = APB_BASE + 32'h0000_1000;
  localparam logic [31:0] GPIO_BASE  = APB_BASE + 32'h0000_2000;
  localparam logic [31:0] IRQ_BASE   = APB_BASE + 32'h0000_3000;
  localparam logic [31:0] UART1_BASE = APB_BASE + 32'h0000_4000;
  localparam logic [31:0] UART2_BASE = APB_BASE + 32'h0000_5000;
  localparam logic [31:0] SPIM_BASE  = APB_BASE + 32'h0000_6000;
  localparam logic [31:0] I2C_BASE   = APB_BASE + 32'h0000_7000;

  task automatic reg_wr(input logic [11:0] a, input logic [31:0] d);
    logic [31:0] q;
    xfer(M_CPU_D, 1'b1, OPCUA_BASE + 32'(a), d, q);
  endtask
  task automatic reg_rd(input logic [11:0] a, output logic [31:0] q);
    xfer(M_CPU_D, 1'b0, OPCUA_BASE + 32'(a), 0, q);
  endtask
  function automatic void ns_poke(input int n, input logic [31:0] v);
    dut.u_sram4.mem[14'(n)] = v;
  endfunction
  function automatic logic [31:0] ns_peek(input int n);
    return dut.u_sram4.mem[14'(n)];
  endfunction

  `include "opcua_scenario.svh"
  `include "spi_tb_tasks.svh"

  // boot SPI slave: byte strings written into SRAM1 and read back over SPI
  int n_spi = 0, n_uart = 0, n_spim = 0, n_i2c = 0;
  task automatic spi_traffic();
    logic [7:0] d [$], q [$];
    logic [31:0] a;
    while (traffic_on) begin
      a = 32'h0013_0000 + 32'($urandom % 4096);
      d = {};
      for (int i = 0; i < 12; i++) d.push_back(8'($urandom));
      spi_write(a, d);
      spi_read(a, 12, q);
      check(q == d, $sformatf("SPI read back at %h", a));
      n_spi++;
    end
  endtask

  // background traffic: write then read back random words in a bank window
  int n_bg = 0;
  task automatic background(input int m, input logic [31:0] base, input int words);
    logic [31:0] a, d, q;
    while (traffic_on) begin
      a = base + 32'(4 * ($urandom % words));
      d = $urandom;
      xfer(m, 1'b1, a, d, q);
      xfer(m, 1'b0, a, 0, q);
      check(q == d, $sformatf("master %0d read back %h at %h, expected %h", m, q, a, d));
      n_bg++;
    end
  endtask
  // instruction fetches from SRAM0, which holds a known pattern
  task automatic fetch();
    logic [31:0] a, q;
    while (traffic_on) begin
      a = 32'(4 * ($urandom % 1024));
      xfer(M_CPU_I, 1'b0, a, 0, q);
      check(q == ~a, $sformatf("fetch %h gave %h", a, q));
    end
  endtask

  initial begin
    logic [31:0] q;
    words_t w;
    bytes_t big;
    for (int m = 0; m < N_MST; m++) mreq[m] = '0;
    gpio_in = '0;
    sck = 1'b0; cs_n = 1'b1; mosi = 1'b0;
    for (int n = 0; n < 1024; n++) ns_poke(n, 32'h5EED_0000 + 32'(n * 3));
    for (int i = 0; i < 1024; i++) dut.u_sram0.mem[i] = ~(32'(4 * i));
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // decode: unmapped address answers from the default slave
    xfer(M_CPU_D, 1'b0, 32'h2000_0000, 0, q);
    check(q == 32'hDEC0_DE00, "default slave");

    traffic_on = 1;
    fork
      fetch();
      background(M_DMA_RX, 32'h0040_8000, 4096);   // upper half of SRAM4
      background(M_DMA_TX, 32'h0020_0000, 8192);   // SRAM2
      spi_traffic();                               // SRAM1 over SPI
      begin
        run_scenario();
        // remaining transport errors: unknown type and oversize chunk
        send_words('{{8'h46, 8'h5A, 8'h59, 8'h58}, 32'd16, 32'd0, 32'd0});
        recv_pkt(w);
        check(w.size() == 4 && w[2] == BAD_TCP_MESSAGE_TYPE_INVALID, "ERR type invalid");
        big = make_msg(MT_MSG, 32'd1, 32'd50, 32'd1, rand_bytes(8200 - 24));
        send_words(pack(big));
        recv_pkt(w);
        check(w.size() == 4 && w[2] == BAD_TCP_MESSAGE_TOO_LARGE, "ERR message too large");
        traffic_on = 0;
      end
    join

    // timer interrupt through the interrupt controller
    xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h4, 32'h6, q);        // enable timer and GPIO
    xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h0, 32'hFF, q);       // clear pending
    xfer(M_CPU_D, 1'b1, TIMER_BASE + 32'h8, 32'd99, q);
    xfer(M_CPU_D, 1'b1, TIMER_BASE + 32'h0, 32'h3, q);
    begin
      int t;
      t = 0;
      while (!cpu_irq && t < 1000) begin @(posedge clk); t++; end
      check(cpu_irq && cpu_irq_id == 5'd1, $sformatf("timer interrupt (id %0d)", cpu_irq_id));
    end
    xfer(M_CPU_D, 1'b1, TIMER_BASE + 32'h0, 32'h0, q);
    xfer(M_CPU_D, 1'b1, TIMER_BASE + 32'hC, 32'h1, q);
    xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h0, 32'hFF, q);
    #1 check(!cpu_irq, "interrupt cleared");
    // GPIO: output drives the pin, an input raises an interrupt
    xfer(M_CPU_D, 1'b1, GPIO_BASE + 32'h0, 32'hA5A5, q);
    xfer(M_CPU_D, 1'b1, GPIO_BASE + 32'h4, 32'hFFFF, q);
    check(gpio_out == 16'hA5A5 && gpio_oe == 16'hFFFF, "GPIO outputs");
    xfer(M_CPU_D, 1'b1, GPIO_BASE + 32'hC, 32'h0001, q);
    @(negedge clk); gpio_in = 16'h0001;
    repeat (4) @(posedge clk);
    #1 check(cpu_irq && cpu_irq_id == 5'd2, $sformatf("GPIO interrupt (id %0d)", cpu_irq_id));
    xfer(M_CPU_D, 1'b0, IRQ_BASE + 32'h8, 0, q);
    check(q == 32'd2, "interrupt ID register");
    // UARTs in loopback: a byte sent comes back and raises the interrupt
    xfer(M_CPU_D, 1'b1, GPIO_BASE + 32'hC, 32'h0000, q);
    xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h0, 32'hFF, q);
    xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h4, 32'h18, q);
    for (int u = 0; u < 2; u++) begin
      logic [31:0] base;
      logic [7:0] b;
      int t;
      base = u == 0 ? UART1_BASE : UART2_BASE;
      b = 8'($urandom);
      xfer(M_CPU_D, 1'b1, base + 32'hC, 32'h1, q);
      xfer(M_CPU_D, 1'b1, base + 32'h0, 32'(b), q);
      t = 0;
      while (!cpu_irq && t < 2000) begin @(posedge clk); t++; end
      check(cpu_irq && cpu_irq_id == 5'(3 + u), $sformatf("UART%0d interrupt (id %0d)", u + 1, cpu_irq_id));
      xfer(M_CPU_D, 1'b0, base + 32'h0, 0, q);
      check(q[7:0] == b, $sformatf("UART%0d loopback %h expected %h", u + 1, q[7:0], b));
      if (q[7:0] == b) n_uart++;
      xfer(M_CPU_D, 1'b1, base + 32'hC, 32'h0, q);
      xfer(M_CPU_D, 1'b1, IRQ_BASE + 32'h0, 32'hFF, q);
    end

    // SPI master in loopback: the byte sent is the byte received
    begin
      logic [7:0] b;
      b = 8'($urandom);
      xfer(M_CPU_D, 1'b1, SPIM_BASE + 32'hC, 32'h0, q);
      xfer(M_CPU_D, 1'b1, SPIM_BASE + 32'h0, 32'(b), q);
      do xfer(M_CPU_D, 1'b0, SPIM_BASE + 32'h4, 0, q); while (q[0]);
      xfer(M_CPU_D, 1'b0, SPIM_BASE + 32'h0, 0, q);
      check(q[7:0] == b, $sformatf("SPI master loopback %h expected %h", q[7:0], b));
      if (q[7:0] == b) n_spim++;
      xfer(M_CPU_D, 1'b0, IRQ_BASE + 32'h0, 0, q);
      check(q[5], "SPI master completion latched by the interrupt controller");
    end

    // I2C master: address byte to an empty bus is answered with NACK
    begin
      int s0;
      s0 = n_scl;
      xfer(M_CPU_D, 1'b1, I2C_BASE + 32'hC, 32'd2, q);
      xfer(M_CPU_D, 1'b1, I2C_BASE + 32'h0, 32'h13A0, q);   // START, WRITE 0xA0, STOP
      do xfer(M_CPU_D, 1'b0, I2C_BASE + 32'h4, 0, q); while (q[0]);
      check(q[1], "I2C address without a device is not acknowledged");
      // nine clock pulses for address and acknowledge, one release for STOP
      check(n_scl - s0 == 10, $sformatf("I2C: %0d SCL rising edges", n_scl - s0));
      check(!i2c_scl_oe && !i2c_sda_oe, "I2C bus released after STOP");
      if (q[1] && n_scl - s0 == 10) n_i2c++;
    end

    $display("HEL %0d OPN %0d MSG %0d CLO %0d ERR %0d/%0d/%0d/%0d continuation chunks in %0d out %0d",
             n_hel, n_opn, n_msg, n_clo, n_err[0], n_err[1], n_err[2], n_err[3], n_crx, n_ctx);
    $display("ns contention %0d, SRAM4 priority wins %0d, APB wait cycles %0d, background %0d, SPI %0d",
             n_nscont, n_prio, n_apbwait, n_bg, n_spi);
    check(n_hel > 0, "mechanism: Hello/Acknowledge");
    check(n_opn > 0, "mechanism: OpenSecureChannel");
    check(n_msg > 0, "mechanism: MSG routed to a stage");
    check(n_clo > 0, "mechanism: CloseSecureChannel");
    for (int i = 0; i < 4; i++) check(n_err[i] > 0, $sformatf("mechanism: transport error %0d", i));
    check(n_crx > 0, "mechanism: request chunk reassembly");
    check(n_ctx > 0, "mechanism: reply chunking");
    check(n_nscont > 0, "mechanism: namespace master contention");
    check(n_prio > 0, "mechanism: OPC UA priority on SRAM4");
    check(n_apbwait > 0, "mechanism: APB wait state");
    check(n_spi > 0, "mechanism: memory loaded over the boot SPI slave");
    check(n_uart == 2, "mechanism: both UARTs send and receive");
    check(n_spim == 1, "mechanism: SPI master transfer");
    check(n_i2c == 1, "mechanism: I2C master byte with acknowledge check");
    check(sc_ack == 1 && sc_opn == 3 && sc_read == 3 && sc_write == 3 && sc_range == 1 &&
          sc_concurrent == 1 && sc_clo == 1 && sc_err == 2, "scenario steps completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
