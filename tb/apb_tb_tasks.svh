// apb_tb_tasks.svh: APB master tasks for testbenches, included into a module
// that declares clk, apb_req (apb_req_t) and apb_rsp (apb_rsp_t).
task automatic apb(input logic we, input logic [11:0] a, input logic [31:0] d,
                   output logic [31:0] q);
  @(negedge clk);
  apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: we, paddr: a, pwdata: d};
  @(negedge clk);
  apb_req.penable = 1'b1;
  #1;
  while (!apb_rsp.pready) begin @(negedge clk); #1; end
  q = apb_rsp.prdata;
  @(posedge clk); #1;
  apb_req = '0;
endtask
task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
  logic [31:0] q;
  apb(1'b1, a, d, q);
endtask
task automatic apb_rd(input logic [11:0] a, output logic [31:0] q);
  apb(1'b0, a, 0, q);
endtask
