// tb_apb_i2c_master: self-checking test of apb_i2c_master.  The open-drain
// bus is modelled as wired-AND; a behavioural slave at address 0x50 holds a
// 256-byte register file with an auto-incrementing pointer (first written
// byte sets the pointer).  The test writes random bytes, reads them back with
// a repeated START, checks the slave saw them, checks that an absent address
// is reported as not acknowledged, and that the SCL period is 4*DIV cycles.
module tb_apb_i2c_master;
  import semantic_pkg::*;
  localparam int DIV = 5;
  logic clk = 0, rst_n = 0;
  apb_req_t apb_req;
  apb_rsp_t apb_rsp;
  logic scl_oe, sda_oe, s_oe;
  wire  scl = !scl_oe;
  wire  sda = !(sda_oe || s_oe);
  int checks = 0, failures = 0;

  apb_i2c_master dut (.clk, .rst_n, .apb_req, .apb_rsp, .scl_oe, .scl_i(scl), .sda_oe, .sda_i(sda));
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  `include "apb_tb_tasks.svh"

  // ---------------- slave model ----------------
  logic [7:0] regs [256];
  logic [7:0] sh, tx, ptr;
  int bitn, nbyte, nstart = 0, nstop = 0;
  bit in_frame = 0, selected = 0, reading = 0, nacked = 0;
  int cyc = 0, last_rise = 0, period = 0;
  always @(posedge clk) cyc++;
  initial s_oe = 1'b0;
  always @(negedge sda) if (scl) begin
    in_frame = 1; selected = 0; bitn = 0; nbyte = 0; s_oe = 0; nstart++;
  end
  always @(posedge sda) if (scl && in_frame) begin
    in_frame = 0; s_oe = 0; nstop++;
  end
  always @(posedge scl) begin
    if (last_rise != 0) period = cyc - last_rise;
    last_rise = cyc;
    if (in_frame) begin
      if (bitn < 8) sh = {sh[6:0], sda};
      else if (reading && nbyte > 0) nacked = sda;
      bitn++;
    end
  end
  always @(negedge scl) if (in_frame) begin
    if (bitn == 8) begin
      if (!(reading && nbyte > 0)) begin
        // byte received from the master
        if (nbyte == 0) begin
          selected = sh[7:1] == 7'h50;
          reading  = sh[0];
          nacked   = 0;
        end else if (selected && nbyte == 1) ptr = sh;
        else if (selected) begin regs[ptr] = sh; ptr++; end
        s_oe = selected;
      end else s_oe = 0;
    end else if (bitn == 9) begin
      bitn = 0;
      nbyte++;
      s_oe = 0;
      if (selected && reading && !nacked) begin
        tx = regs[ptr]; ptr++;
        s_oe = !tx[7];
      end
    end else if (selected && reading && nbyte > 0 && !nacked && bitn >= 1 && bitn <= 7) begin
      s_oe = !tx[7 - bitn];
    end
  end

  // ---------------- master commands ----------------
  localparam logic [12:0] C_START = 13'h100, C_WRITE = 13'h200, C_READ = 13'h400,
                          C_NACK = 13'h800, C_STOP = 13'h1000;
  task automatic cmd(input logic [12:0] c, output logic [31:0] st);
    apb_wr(12'h000, 32'(c));
    do apb_rd(12'h004, st); while (st[0]);
  endtask

  initial begin
    logic [31:0] st, q;
    logic [7:0] a, d [4];
    apb_req = '0;
    foreach (regs[i]) regs[i] = 8'(i);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    apb_wr(12'h00C, 32'(DIV));
    for (int t = 0; t < 4; t++) begin
      a = 8'($urandom);
      foreach (d[i]) d[i] = 8'($urandom);
      cmd(C_START | C_WRITE | 13'hA0, st);
      check(!st[1], "address acknowledged");
      cmd(C_WRITE | 13'(a), st);
      foreach (d[i]) cmd(C_WRITE | 13'(d[i]) | (i == 3 ? C_STOP : 13'h0), st);
      check(!st[1], "data acknowledged");
      begin
        int ok;
        ok = 1;
        foreach (d[i]) if (regs[8'(a + 8'(i))] != d[i]) ok = 0;
        check(ok == 1, $sformatf("slave holds the written bytes at %h", a));
      end
      // read back: pointer write, repeated START, read with ACK, last NACK
      cmd(C_START | C_WRITE | 13'hA0, st);
      cmd(C_WRITE | 13'(a), st);
      cmd(C_START | C_WRITE | 13'hA1, st);
      check(!st[1], "read address acknowledged");
      foreach (d[i]) begin
        cmd(C_READ | (i == 3 ? (C_NACK | C_STOP) : 13'h0), st);
        apb_rd(12'h008, q);
        check(q[7:0] == d[i], $sformatf("read %h expected %h", q[7:0], d[i]));
      end
    end
    // absent device
    cmd(C_START | C_WRITE | 13'hB4, st);
    check(st[1], "absent address not acknowledged");
    cmd(C_STOP, st);
    check(period == 4 * DIV, $sformatf("SCL period %0d", period));
    check(nstart == 13 && nstop == 9, $sformatf("%0d START and %0d STOP conditions", nstart, nstop));
    check(scl && sda, "bus released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
