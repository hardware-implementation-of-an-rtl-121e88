// apb_timer: general-purpose timer on the peripheral bus.  The paper only
// names a timer; this is the simplest useful one, of this design's making.
// A 32-bit counter increments every cycle while enabled; when it reaches
// COMPARE it restarts from 0 and sets the sticky match flag, which drives
// irq while the interrupt is enabled.
//   0x00 CTRL    rw [0] enable, [1] interrupt enable
//   0x04 COUNT   rw counter value
//   0x08 COMPARE rw match value
//   0x0C STATUS  rw [0] match flag, write 1 to clear
// APB transfers complete in one ACCESS cycle.
module apb_timer
  import semantic_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     irq
);
  logic        en, ien, flag;
  logic [31:0] count, cmp;
  logic        wr;

  assign wr = apb_req.psel && apb_req.penable && apb_req.pwrite;

  always_comb begin
    apb_rsp = '0;
    apb_rsp.pready = 1'b1;
    unique case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = {30'd0, ien, en};
      2'd1: apb_rsp.prdata = count;
      2'd2: apb_rsp.prdata = cmp;
      2'd3: apb_rsp.prdata = {31'd0, flag};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= 1'b0; ien <= 1'b0; flag <= 1'b0;
      count <= '0; cmp <= '1;
    end else begin
      if (en) begin
        if (count == cmp) begin
          count <= '0;
          flag  <= 1'b1;
        end else count <= count + 32'd1;
      end
      if (wr) begin
        unique case (apb_req.paddr[3:2])
          2'd0: begin en <= apb_req.pwdata[0]; ien <= apb_req.pwdata[1]; end
          2'd1: count <= apb_req.pwdata;
          2'd2: cmp <= apb_req.pwdata;
          2'd3: if (apb_req.pwdata[0]) flag <= 1'b0;
        endcase
      end
    end
  end

  assign irq = ien && flag;
endmodule
