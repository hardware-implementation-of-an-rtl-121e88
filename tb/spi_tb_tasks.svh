// spi_tb_tasks.svh: SPI master tasks (mode 0, SCK = clk/16, MSB first) for
// testbenches of the boot SPI slave.  The including module declares clk,
// sck, cs_n, mosi and miso.
task automatic spi_byte(input logic [7:0] tx, output logic [7:0] rx);
  for (int b = 7; b >= 0; b--) begin
    mosi = tx[b];
    repeat (8) @(negedge clk);
    sck = 1'b1;
    rx[b] = miso;
    repeat (8) @(negedge clk);
    sck = 1'b0;
  end
endtask
task automatic spi_begin();
  @(negedge clk);
  cs_n = 1'b0;
  repeat (8) @(negedge clk);
endtask
task automatic spi_end();
  repeat (8) @(negedge clk);
  cs_n = 1'b1;
  repeat (16) @(negedge clk);
endtask
task automatic spi_write(input logic [31:0] a, input logic [7:0] d [$]);
  logic [7:0] r;
  spi_begin();
  spi_byte(8'h02, r);
  for (int i = 3; i >= 0; i--) spi_byte(a[8*i +: 8], r);
  foreach (d[i]) spi_byte(d[i], r);
  spi_end();
endtask
task automatic spi_read(input logic [31:0] a, input int n, output logic [7:0] q [$]);
  logic [7:0] r;
  q = {};
  spi_begin();
  spi_byte(8'h03, r);
  for (int i = 3; i >= 0; i--) spi_byte(a[8*i +: 8], r);
  spi_byte(8'h00, r);
  for (int i = 0; i < n; i++) begin
    spi_byte(8'h00, r);
    q.push_back(r);
  end
  spi_end();
endtask
