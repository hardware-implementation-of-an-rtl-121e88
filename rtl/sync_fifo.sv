// sync_fifo: single-clock FIFO used to decouple word streams in the OPC UA
// engine.  Storage is a register array of DEPTH entries of WIDTH bits (DEPTH
// a power of two).  Push when in_valid && in_ready, pop when out_valid &&
// out_ready; data written is visible at the output one cycle later.  count
// reports the fill level.  A helper of this design, not a block of the paper.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != DEPTH[PW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;
endmodule
