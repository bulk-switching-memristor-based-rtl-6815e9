// tb_sram: writes random words (some with partial byte strobes) to random
// addresses of a 32 kB SRAM through AXI4-Lite, keeps an expected image in an
// associative array, and reads every written word back.
module tb_sram;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  int checks = 0, failures = 0;
  logic [31:0] img [int];

  sram #(.BYTES(32768)) dut (.clk, .rst_n, .axi_req(m_req), .axi_rsp(m_rsp));
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    axil_idle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int w = $urandom_range(0, 8191);
      automatic logic [31:0] v = $urandom;
      automatic logic [3:0] s = img.exists(w) ? 4'($urandom) : 4'hF;
      axil_write(32'(w*4), v, rsp, s);
      checks++; if (rsp != RESP_OKAY) failures++;
      if (!img.exists(w)) img[w] = '0;
      for (int b = 0; b < 4; b++) if (s[b]) img[w][8*b +: 8] = v[8*b +: 8];
    end
    foreach (img[w]) begin
      axil_read(32'(w*4), d, rsp);
      checks++;
      if (d !== img[w] || rsp != RESP_OKAY) begin
        failures++;
        if (failures < 10) $display("word %0d: got %h want %h", w, d, img[w]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
