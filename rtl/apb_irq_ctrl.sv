// apb_irq_ctrl: interrupt controller beside the CPU.  The paper only names
// it; this one is of this design's making.  NIRQ level-sensitive sources are
// latched into a pending register (sticky until cleared by writing 1), masked
// by an enable register, and the CPU's interrupt request is the OR of the
// enabled pending bits; irq_id gives the lowest-numbered one.
//   0x00 PENDING rw1c   0x04 ENABLE rw   0x08 ID ro (lowest enabled pending)
// APB transfers complete in one ACCESS cycle.
module apb_irq_ctrl
  import semantic_pkg::*;
#(
  parameter int unsigned NIRQ = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  apb_req_t        apb_req,
  output apb_rsp_t        apb_rsp,
  input  logic [NIRQ-1:0] src,
  output logic            cpu_irq,
  output logic [4:0]      irq_id
);
  logic [NIRQ-1:0] pend, en, act;
  logic wr;

  assign wr  = apb_req.psel && apb_req.penable && apb_req.pwrite;
  assign act = pend & en;

  always_comb begin
    irq_id = '0;
    for (int i = NIRQ - 1; i >= 0; i--) if (act[i]) irq_id = 5'(i);
  end

  always_comb begin
    apb_rsp = '0;
    apb_rsp.pready = 1'b1;
    unique case (apb_req.paddr[3:2])
      2'd0: apb_rsp.prdata = 32'(pend);
      2'd1: apb_rsp.prdata = 32'(en);
      2'd2: apb_rsp.prdata = 32'(irq_id);
      default: apb_rsp.prdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; en <= '0;
    end else begin
      pend <= (pend & ~((wr && apb_req.paddr[3:2] == 2'd0) ? apb_req.pwdata[NIRQ-1:0] : '0)) | src;
      if (wr && apb_req.paddr[3:2] == 2'd1) en <= apb_req.pwdata[NIRQ-1:0];
    end
  end

  assign cpu_irq = |act;
endmodule
