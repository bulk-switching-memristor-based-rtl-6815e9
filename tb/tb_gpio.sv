// tb_gpio: OUT and OE registers drive the pins, IN reads the pins after the
// two-flop synchroniser (value visible two cycles later), IN is read-only.
module tb_gpio;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t p_req;
  apb_rsp_t p_rsp;
  logic [15:0] gpio_o, gpio_oe, gpio_i = '0;
  int checks = 0, failures = 0;

  gpio dut (.clk, .rst_n, .apb_req(p_req), .apb_rsp(p_rsp), .gpio_o, .gpio_oe, .gpio_i);
  always #5 clk = ~clk;
  `include "apb_bfm.svh"

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; logic e;
    p_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      automatic logic [15:0] o = 16'($urandom), oe = 16'($urandom), i = 16'($urandom);
      apb_xfer(1, 12'h0, 32'(o), d, e);
      apb_xfer(1, 12'h4, 32'(oe), d, e);
      checks++; if (gpio_o !== o || gpio_oe !== oe) failures++;
      gpio_i = i;
      repeat (3) @(posedge clk);
      apb_xfer(0, 12'h8, 0, d, e);
      checks++; if (d[15:0] !== i || e) failures++;
      apb_xfer(0, 12'h0, 0, d, e);
      checks++; if (d[15:0] !== o) failures++;
    end
    apb_xfer(1, 12'h8, 0, d, e);
    checks++; if (!e) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
