// tb_config_reg: reset values, read/write of PLL_CFG (with strobes) and
// TILE_EN, the read-only ID word and SLVERR on writes to ID and unmapped reads.
module tb_config_reg;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic [31:0] pll_cfg;
  logic [3:0] tile_en;
  int checks = 0, failures = 0;

  config_reg dut (.clk, .rst_n, .axi_req(m_req), .axi_rsp(m_rsp), .pll_cfg, .tile_en);
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: got %0h want %0h", what, got, want); end
  endtask

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    axil_idle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    check("pll reset", pll_cfg, 1); check("tile_en reset", tile_en, 4'hF);
    axil_write(32'h0, 32'hDEADBEEF, rsp);
    check("pll", pll_cfg, 32'hDEADBEEF);
    axil_write(32'h0, 32'h12345678, rsp, 4'b0010);
    check("pll strobe", pll_cfg, 32'hDEAD56EF);
    axil_write(32'h4, 32'h5, rsp);
    check("tile_en", tile_en, 4'h5);
    axil_read(32'h4, d, rsp);  check("tile_en read", d, 5);
    axil_read(32'h8, d, rsp);  check("ID", d, 32'h4349_4D34);
    axil_write(32'h8, 32'h0, rsp); check("ID write refused", rsp, RESP_SLVERR);
    axil_read(32'h40, d, rsp); check("unmapped", rsp, RESP_SLVERR);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
