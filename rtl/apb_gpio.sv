// apb_gpio: general-purpose I/O on the peripheral bus.  The paper only names
// a GPIO block; its register set here is this design's own.  Each of the
// NGPIO pins has an output value and an output enable; inputs pass a
// two-flop synchroniser.  irq rises while any synchronised input selected by
// IRQ_MASK is high.
//   0x00 OUT rw output values   0x04 OE rw output enables
//   0x08 IN  ro synchronised inputs   0x0C IRQ_MASK rw
// APB transfers complete in one ACCESS cycle.
module apb_gpio
  import semantic_pkg::*;
#(
  parameter int unsigned NGPIO = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  apb_req_t         apb_req,
  output apb_rsp_t         apb_rsp,
  input  logic [NGPIO-1:0] gpio_in,
  output logic [NGPIO-1:0] gpio_out,
  output logic [NGPIO-1:0] gpio_oe,
  output logic             irq
);
  logic [NGPIO-1:0] s1, s2, mask;
  logic wr;

  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_comb begin
    apb_rsp = '0;
    apb_rsp.pready = 1'b1;
    unique case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = 32'(gpio_out);
      2'd1: apb_rsp.prdata = 32'(gpio_oe);
      2'd2: apb_rsp.prdata = 32'(s2);
      2'd3: apb_rsp.prdata = 32'(mask);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; mask <= '0; gpio_out <= '0; gpio_oe <= '0;
    end else begin
      s1 <= gpio_in;
      s2 <= s1;
      if (wr) begin
        unique case (apb_req.paddr[3:2])
          2'd0: gpio_out <= apb_req.pwdata[NGPIO-1:0];
          2'd1: gpio_oe  <= apb_req.pwdata[NGPIO-1:0];
          2'd3: mask     <= apb_req.pwdata[NGPIO-1:0];
          default: ;
        endcase
      end
    end
  end

  assign irq = |(s2 & mask);
endmodule
