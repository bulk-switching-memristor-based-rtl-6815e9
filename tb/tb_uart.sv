// tb_uart: loops tx back to rx; sends random bytes through DATA and checks
// the 8N1 frame on the wire bit by bit (start 0, LSB first, stop 1, DIV
// cycles per bit) and the received byte, rx_valid, busy refusal and overrun.
module tb_uart;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t p_req;
  apb_rsp_t p_rsp;
  logic tx, rx;
  int checks = 0, failures = 0;
  localparam int DIV = 16;

  uart dut (.clk, .rst_n, .apb_req(p_req), .apb_rsp(p_rsp), .tx, .rx);
  assign rx = tx;
  always #5 clk = ~clk;
  `include "apb_bfm.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin failures++; if (failures < 10) $display("FAIL %s: got %0h want %0h", what, got, want); end
  endtask

  // wire monitor: sample each bit in its middle
  task automatic watch_frame(input logic [7:0] b);
    while (tx) @(posedge clk);
    repeat (DIV / 2) @(posedge clk);
    check("start bit", tx, 0);
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      check("data bit", tx, b[i]);
    end
    repeat (DIV) @(posedge clk);
    check("stop bit", tx, 1);
  endtask

  initial begin
    logic [31:0] d; logic e;
    p_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    apb_xfer(0, 12'h8, 0, d, e);
    check("DIV reset", d, 868);
    apb_xfer(1, 12'h8, DIV, d, e);
    for (int t = 0; t < 12; t++) begin
      automatic logic [7:0] b = 8'($urandom);
      fork
        apb_xfer(1, 12'h0, 32'(b), d, e);
        watch_frame(b);
      join
      apb_xfer(1, 12'h0, 32'h55, d, e);
      check("write while busy refused", e, 1);
      repeat (3 * DIV) @(posedge clk);
      apb_xfer(0, 12'h4, 0, d, e);
      check("rx valid", d[1], 1);
      check("tx idle", d[0], 0);
      apb_xfer(0, 12'h0, 0, d, e);
      check("rx byte", d[7:0], b);
      apb_xfer(0, 12'h4, 0, d, e);
      check("rx valid cleared", d[1], 0);
    end
    // overrun: two bytes without reading
    for (int k = 0; k < 2; k++) begin
      apb_xfer(1, 12'h0, 32'hA5, d, e);
      repeat (12 * DIV) @(posedge clk);
    end
    apb_xfer(0, 12'h4, 0, d, e);
    check("overrun", d[2], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
