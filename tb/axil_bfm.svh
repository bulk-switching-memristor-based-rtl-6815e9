// axil_bfm.svh: AXI4-Lite master tasks for testbenches.
// The including module declares `clk` (10-unit period) and `m_req`
// (cim_pkg::axil_req_t, driven here) / `m_rsp` (cim_pkg::axil_rsp_t).
// Signals are driven just after the falling edge and sampled just before the
// rising edge, so the tasks never race the design's flops.

task automatic axil_idle();
  m_req = '0;
endtask

task automatic axil_write(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp,
                          input logic [3:0] strb = 4'hF);
  @(negedge clk);
  m_req.aw_valid = 1'b1; m_req.aw_addr = a;
  m_req.w_valid  = 1'b1; m_req.w_data  = d; m_req.w_strb = strb;
  m_req.b_ready  = 1'b1;
  #1;
  while (!(m_rsp.aw_ready && m_rsp.w_ready)) begin @(negedge clk); #1; end
  @(posedge clk); #1;
  m_req.aw_valid = 1'b0; m_req.w_valid = 1'b0;
  while (!m_rsp.b_valid) begin @(negedge clk); #1; end
  resp = m_rsp.b_resp;
  @(posedge clk); #1;
  m_req.b_ready = 1'b0;
endtask

task automatic axil_read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
  @(negedge clk);
  m_req.ar_valid = 1'b1; m_req.ar_addr = a; m_req.r_ready = 1'b1;
  #1;
  while (!m_rsp.ar_ready) begin @(negedge clk); #1; end
  @(posedge clk); #1;
  m_req.ar_valid = 1'b0;
  while (!m_rsp.r_valid) begin @(negedge clk); #1; end
  d = m_rsp.r_data; resp = m_rsp.r_resp;
  @(posedge clk); #1;
  m_req.r_ready = 1'b0;
endtask
