// apb_bfm.svh: APB master tasks for testbenches. The including module
// declares `clk` (10-unit period), `p_req` (cim_pkg::apb_req_t) and `p_rsp`
// (cim_pkg::apb_rsp_t). One SETUP cycle, then ACCESS until pready.

task automatic apb_xfer(input logic wr, input logic [11:0] a, input logic [31:0] wd,
                        output logic [31:0] rd, output logic err);
  @(negedge clk);
  p_req = '{psel: 1'b1, penable: 1'b0, pwrite: wr, paddr: a, pwdata: wd};
  @(negedge clk);
  p_req.penable = 1'b1;
  #1;
  while (!p_rsp.pready) begin @(negedge clk); #1; end
  rd = p_rsp.prdata; err = p_rsp.pslverr;
  @(posedge clk); #1;
  p_req = '0;
endtask
