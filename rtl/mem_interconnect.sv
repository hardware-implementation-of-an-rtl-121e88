// mem_interconnect: the main-memory interconnect of the core subsystem.
//
// Six bus masters (CPU instruction and data ports, Ethernet RX and TX DMA,
// OPC UA engine, SPI slave) reach six slaves (SRAM0..SRAM4 and the
// AXI/APB bridge).  Following the paper, every SRAM bank gives priority to
// one master: the CPU for SRAM0 (instruction port) and SRAM1 (data port), the
// Ethernet DMA for SRAM2 (TX) and SRAM3 (RX), the OPC UA engine for SRAM4.
// Among the other masters a bank arbitrates round-robin; the APB bridge has
// no priority master and is round-robin only.  These tie-break rules, the
// address map (SRAMn at n*0x0010_0000, peripherals at 0x1000_0000) and the
// simplified single-beat bus (see semantic_pkg) are choices of this design.
//
// Timing: address decode and arbitration are combinational; the request is
// presented to the slave in the cycle the master raises valid, and ready
// returns in that cycle when granted.  Each slave has at most one transfer in
// flight; a new one may be granted in the cycle the previous response
// (rvalid) returns, so a 1-cycle SRAM sustains one transfer per cycle.
// Addresses that hit no slave are answered by an internal default slave with
// rdata = 0xDEC0_DE00 one cycle later.  Masters must keep one transfer
// outstanding at most (checked by an assertion).
module mem_interconnect
  import semantic_pkg::*;
#(
  parameter int unsigned NM = 6,
  parameter int unsigned NS = 6,
  // priority master of each slave, -1 for none (pure round-robin)
  parameter int PRIO [6] = '{0, 1, 3, 2, 4, -1}
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t m_req [NM],
  output mem_rsp_t m_rsp [NM],
  output mem_req_t s_req [NS],
  input  mem_rsp_t s_rsp [NS]
);
  localparam int unsigned MIW = $clog2(NM);
  localparam int unsigned SIW = $clog2(NS + 1);
  localparam logic [SIW-1:0] NOSLV = SIW'(NS);

  logic [SIW-1:0] dec [NM];
  logic [NM-1:0]  pend;              // master has a transfer in flight
  logic [NS-1:0]  busy;
  logic [MIW-1:0] owner [NS];
  logic [NS-1:0][NM-1:0] rq, rq_rr, rr_gnt;
  logic [MIW-1:0] rr_idx [NS];
  logic [NS-1:0]  rr_any, sel_any, sel_prio, acc;
  logic [MIW-1:0] sel [NS];

  // default slave for unmapped addresses
  logic           dflt_busy;
  logic [MIW-1:0] dflt_owner;
  logic [NM-1:0]  dflt_rq;
  logic           dflt_any;
  logic [MIW-1:0] dflt_sel;

  // ---------------- address decode ----------------
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      if (m_req[m].addr[31:28] == APB_BASE[31:28] && m_req[m].addr[27:16] == '0)
        dec[m] = SIW'(NS - 1);
      else if (m_req[m].addr[31:23] == '0 && int'(m_req[m].addr[22:20]) < NS - 1)
        dec[m] = SIW'(m_req[m].addr[22:20]);
      else
        dec[m] = NOSLV;
    end
  end

  // ---------------- per-slave arbitration ----------------
  for (genvar s = 0; s < NS; s++) begin : g_slv
    always_comb begin
      for (int m = 0; m < NM; m++) begin
        rq[s][m]    = m_req[m].valid && !pend[m] && dec[m] == SIW'(s);
        rq_rr[s][m] = rq[s][m] && (m != PRIO[s]);
      end
    end

    rr_arbiter #(.N(NM)) u_rr (
      .clk, .rst_n,
      .req(rq_rr[s]), .advance(acc[s] && !sel_prio[s]),
      .grant(rr_gnt[s]), .grant_idx(rr_idx[s]), .any(rr_any[s])
    );

    // per-slave locals keep each slave's decision independent of the others
    logic           l_prio, l_any, l_acc;
    logic [MIW-1:0] l_sel;
    always_comb begin
      l_prio = (PRIO[s] >= 0) && rq[s][PRIO[s] >= 0 ? PRIO[s] : 0];
      l_sel  = l_prio ? MIW'(PRIO[s]) : rr_idx[s];
      l_any  = (l_prio || rr_any[s]) && (!busy[s] || s_rsp[s].rvalid);
      l_acc  = l_any && s_rsp[s].ready;
    end
    assign sel_prio[s] = l_prio;
    assign sel[s]      = l_sel;
    assign sel_any[s]  = l_any;
    assign acc[s]      = l_acc;
    always_comb begin
      s_req[s]       = m_req[l_sel];
      s_req[s].valid = l_any;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy[s]  <= 1'b0;
        owner[s] <= '0;
      end else if (acc[s]) begin
        busy[s]  <= 1'b1;
        owner[s] <= sel[s];
      end else if (s_rsp[s].rvalid) begin
        busy[s]  <= 1'b0;
      end
    end
  end

  // ---------------- default slave ----------------
  always_comb begin
    dflt_any = 1'b0;
    dflt_sel = '0;
    for (int m = 0; m < NM; m++) begin
      dflt_rq[m] = m_req[m].valid && !pend[m] && dec[m] == NOSLV;
      if (dflt_rq[m] && !dflt_any) begin
        dflt_any = 1'b1;
        dflt_sel = MIW'(m);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dflt_busy  <= 1'b0;
      dflt_owner <= '0;
    end else begin
      dflt_busy  <= dflt_any;
      dflt_owner <= dflt_sel;
    end
  end

  // ---------------- responses to the masters ----------------
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = '0;
      for (int s = 0; s < NS; s++) begin
        if (acc[s] && sel[s] == MIW'(m)) m_rsp[m].ready = 1'b1;
        if (busy[s] && s_rsp[s].rvalid && owner[s] == MIW'(m)) begin
          m_rsp[m].rvalid = 1'b1;
          m_rsp[m].rdata  = s_rsp[s].rdata;
        end
      end
      if (dflt_any && dflt_sel == MIW'(m)) m_rsp[m].ready = 1'b1;
      if (dflt_busy && dflt_owner == MIW'(m)) begin
        m_rsp[m].rvalid = 1'b1;
        m_rsp[m].rdata  = 32'hDEC0_DE00;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= '0;
    else
      for (int m = 0; m < NM; m++) begin
        if (m_req[m].valid && m_rsp[m].ready) pend[m] <= 1'b1;
        else if (m_rsp[m].rvalid)             pend[m] <= 1'b0;
      end
  end

  // a master keeps its request stable until it is accepted
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NM; m++)
        assert (!(pend[m] && m_rsp[m].ready))
          else $error("master %0d granted while a transfer is in flight", m);
    end
  end
endmodule
