// tb_apb_bridge: three APB slaves emulated here (register files with 0, 1
// and 3 wait states; slave 2 flags an error on address 0xFFC) check that each
// AXI access becomes one SETUP and ACCESS sequence on the right psel with the
// right address and data, that wait states are honoured, that read data and
// pslverr return as AXI data and SLVERR, and that window 3 answers SLVERR.
module tb_apb_bridge;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  apb_req_t [2:0] apb_req;
  apb_rsp_t [2:0] apb_rsp;
  int checks = 0, failures = 0;
  logic [31:0] regs [3][1024];
  int waitc [3];
  int setups [3];

  apb_bridge dut (.clk, .rst_n, .axi_req(m_req), .axi_rsp(m_rsp), .apb_req, .apb_rsp);
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  for (genvar p = 0; p < 3; p++) begin : g_p
    localparam int WS = (p == 0) ? 0 : (p == 1) ? 1 : 3;
    always_comb begin
      apb_rsp[p].pready  = apb_req[p].psel && apb_req[p].penable && (waitc[p] >= WS);
      apb_rsp[p].prdata  = regs[p][apb_req[p].paddr[11:2]];
      apb_rsp[p].pslverr = (p == 2) && (apb_req[p].paddr == 12'hFFC);
    end
    always @(posedge clk) begin
      if (apb_req[p].psel && !apb_req[p].penable) begin setups[p]++; waitc[p] <= 0; end
      else if (apb_req[p].psel && apb_req[p].penable) begin
        waitc[p] <= waitc[p] + 1;
        if (apb_rsp[p].pready && apb_req[p].pwrite) regs[p][apb_req[p].paddr[11:2]] <= apb_req[p].pwdata;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    logic [31:0] exp_v [3][16];
    axil_idle();
    for (int p = 0; p < 3; p++) begin waitc[p] = 0; setups[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++)
      for (int k = 0; k < 16; k++) begin
        exp_v[p][k] = $urandom;
        axil_write(APB_BASE + 32'(p * 32'h1000 + k * 4), exp_v[p][k], rsp);
        checks++; if (rsp != RESP_OKAY) failures++;
      end
    for (int p = 0; p < 3; p++)
      for (int k = 0; k < 16; k++) begin
        axil_read(APB_BASE + 32'(p * 32'h1000 + k * 4), d, rsp);
        checks++; if (d != exp_v[p][k] || rsp != RESP_OKAY) failures++;
      end
    for (int p = 0; p < 3; p++) begin checks++; if (setups[p] != 32) failures++; end
    axil_read(APB_BASE + 32'h2FFC, d, rsp);
    checks++; if (rsp != RESP_SLVERR) failures++;
    axil_read(APB_BASE + 32'h3000, d, rsp);
    checks++; if (rsp != RESP_SLVERR) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
