// apb_i2c_master: I2C master on the peripheral bus, for external sensors and
// actuators.  The paper only lists I2C among the CPU's standard serial
// peripherals; this command-driven byte master is this design's own.
//
//   0x00 CMD     w: [7:0] byte to send, [8] START (or repeated START) first,
//                   [9] WRITE the byte, [10] READ a byte, [11] answer NACK
//                   instead of ACK after the read, [12] STOP last.  The APB
//                   transfer waits (PREADY low) while a command runs.
//   0x04 STATUS  [0] busy, [1] last written byte was not acknowledged
//   0x08 RXDATA  byte received by the last READ
//   0x0C DIV     clock cycles per quarter SCL period (reset DIV_RESET, >= 1)
//
// SCL and SDA are open drain: *_oe = 1 pulls the line low, 0 releases it to
// the pull-up; scl_i and sda_i read the lines back.  Each SCL period has four
// quarter steps: change SDA (SCL low), release SCL, sample SDA (SCL high),
// pull SCL low.  A slave that stretches the clock holds SCL low and the
// master waits before sampling.  Bytes are sent most significant bit first
// and followed by the acknowledge bit.
module apb_i2c_master
  import semantic_pkg::*;
#(
  parameter logic [15:0] DIV_RESET = 16'd8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  apb_req_t apb_req,
  output apb_rsp_t apb_rsp,
  output logic     scl_oe,
  input  logic     scl_i,
  output logic     sda_oe,
  input  logic     sda_i
);
  typedef enum logic [1:0] {P_IDLE, P_START, P_BYTE, P_STOP} phase_t;
  phase_t      phase;
  logic [15:0] div, cnt;
  logic [1:0]  step;
  logic [3:0]  bitn;            // 0..8, bit 8 is the acknowledge
  logic [7:0]  sh, rx;
  logic        do_write, do_read, do_stop, nack_out, nack_in;
  logic        wr, busy;

  assign busy = phase != P_IDLE;
  assign wr   = apb_req.psel && apb_req.penable && apb_req.pwrite && apb_rsp.pready;

  always_comb begin
    apb_rsp = '{pready: 1'b1, prdata: 32'd0, pslverr: 1'b0};
    if (apb_req.pwrite && apb_req.paddr[3:2] == 2'd0) apb_rsp.pready = !busy;
    unique case (apb_req.paddr[3:2])
      2'd1: apb_rsp.prdata = {30'd0, nack_in, busy};
      2'd2: apb_rsp.prdata = 32'(rx);
      2'd3: apb_rsp.prdata = 32'(div);
      default: apb_rsp.prdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; div <= DIV_RESET; cnt <= '0; step <= '0; bitn <= '0;
      sh <= '0; rx <= '0; do_write <= 1'b0; do_read <= 1'b0; do_stop <= 1'b0;
      nack_out <= 1'b0; nack_in <= 1'b0; scl_oe <= 1'b0; sda_oe <= 1'b0;
    end else if (phase == P_IDLE) begin
      if (wr && apb_req.paddr[3:2] == 2'd3)
        div <= (apb_req.pwdata[15:0] == 16'd0) ? 16'd1 : apb_req.pwdata[15:0];
      if (wr && apb_req.paddr[3:2] == 2'd0) begin
        sh       <= apb_req.pwdata[7:0];
        do_write <= apb_req.pwdata[9];
        do_read  <= apb_req.pwdata[10];
        nack_out <= apb_req.pwdata[11];
        do_stop  <= apb_req.pwdata[12];
        step <= '0; bitn <= '0; cnt <= '0;
        if (apb_req.pwdata[8])                             phase <= P_START;
        else if (apb_req.pwdata[9] || apb_req.pwdata[10])  phase <= P_BYTE;
        else if (apb_req.pwdata[12])                       phase <= P_STOP;
      end
    end else if (cnt != 16'd0) begin
      cnt <= cnt - 16'd1;
    end else if (step == 2'd2 && phase == P_BYTE && !scl_i) begin
      // clock stretching: wait until SCL is really high
    end else begin
      cnt  <= div - 16'd1;
      step <= step + 2'd1;
      unique case (phase)
        P_START: unique case (step)
          2'd0: sda_oe <= 1'b0;
          2'd1: scl_oe <= 1'b0;
          2'd2: sda_oe <= 1'b1;
          default: begin
            scl_oe <= 1'b1;
            phase  <= (do_write || do_read) ? P_BYTE : (do_stop ? P_STOP : P_IDLE);
          end
        endcase
        P_BYTE: unique case (step)
          2'd0: begin
            if (bitn == 4'd8) sda_oe <= do_read && !nack_out;     // acknowledge slot
            else              sda_oe <= do_write && !sh[7];
          end
          2'd1: scl_oe <= 1'b0;
          2'd2: begin
            if (bitn == 4'd8) begin
              if (do_write) nack_in <= sda_i;
            end else begin
              sh <= {sh[6:0], sda_i};
            end
          end
          default: begin
            scl_oe <= 1'b1;
            if (bitn == 4'd8) begin
              bitn   <= '0;
              sda_oe <= 1'b0;
              if (do_read) rx <= sh;
              phase  <= do_stop ? P_STOP : P_IDLE;
            end else begin
              bitn <= bitn + 4'd1;
            end
          end
        endcase
        P_STOP: unique case (step)
          2'd0: sda_oe <= 1'b1;
          2'd1: scl_oe <= 1'b0;
          2'd2: begin
            sda_oe <= 1'b0;
            phase  <= P_IDLE;
          end
          default: ;
        endcase
        default: phase <= P_IDLE;
      endcase
    end
  end
endmodule
