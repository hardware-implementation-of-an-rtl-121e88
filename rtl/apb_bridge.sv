// apb_bridge: the AXI/APB bridge and APB interconnect of the core subsystem.
//
// It is a slave on the main-memory interconnect and the single master of the
// peripheral bus.  A main-bus request at APB_BASE + k*0x1000 is turned into an
// AMBA 3 APB transfer to peripheral k (OPC UA engine, timer, GPIO, interrupt
// controller, UART1, UART2, SPI master, I2C master); the low 12 address bits become
// PADDR.  Each transfer takes a SETUP cycle and at least one ACCESS cycle (longer while
// PREADY is low); the main-bus response (rvalid, with PRDATA for reads)
// follows in the cycle after the ACCESS phase completes.  An index with no
// peripheral answers 0 without an APB transfer.  The peripheral set and
// window size are this design's choices; the paper shows the bridge and the
// APB interconnect only as blocks.
module apb_bridge
  import semantic_pkg::*;
#(
  parameter int unsigned NP = N_APB
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output mem_rsp_t rsp,
  output apb_req_t apb_req [NP],
  input  apb_rsp_t apb_rsp [NP]
);
  typedef enum logic [1:0] {IDLE, SETUP, ACCESS, RESP} state_t;
  state_t state;
  localparam int PW = $clog2(NP);
  logic [3:0]  sel;
  logic        write;
  logic [11:0] addr;
  logic [31:0] wdata, rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      sel   <= '0;
      write <= 1'b0;
      addr  <= '0;
      wdata <= '0;
      rdata <= '0;
    end else begin
      unique case (state)
        IDLE: if (req.valid) begin
          sel   <= req.addr[15:12];
          write <= req.we;
          addr  <= req.addr[11:0];
          wdata <= req.wdata;
          rdata <= '0;
          state <= (int'(req.addr[15:12]) < NP) ? SETUP : RESP;
        end
        SETUP:  state <= ACCESS;
        ACCESS: if (apb_rsp[PW'(sel)].pready) begin
          rdata <= apb_rsp[PW'(sel)].prdata;
          state <= RESP;
        end
        RESP:   state <= IDLE;
      endcase
    end
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      apb_req[p].psel    = (state == SETUP || state == ACCESS) && sel == 4'(p);
      apb_req[p].penable = (state == ACCESS) && sel == 4'(p);
      apb_req[p].pwrite  = write;
      apb_req[p].paddr   = addr;
      apb_req[p].pwdata  = wdata;
    end
  end

  assign rsp.ready  = (state == IDLE);
  assign rsp.rvalid = (state == RESP);
  assign rsp.rdata  = rdata;
endmodule
