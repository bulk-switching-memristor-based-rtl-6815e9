// tb_spi_master: a mode-0 SPI slave emulated here shifts out a random byte
// MSB first (changing on the falling edge) and captures MOSI on the rising
// edge; checks both bytes, 8 clock pulses, chip select, busy refusal and the
// SCLK period (2*DIV cycles).
module tb_spi_master;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  apb_req_t p_req;
  apb_rsp_t p_rsp;
  logic sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;
  logic [7:0] s_tx, s_rx;
  int edges = 0, last_rise = 0, period = 0, cyc = 0;

  spi_master dut (.clk, .rst_n, .apb_req(p_req), .apb_rsp(p_rsp), .sclk, .mosi, .miso, .cs_n);
  always #5 clk = ~clk;
  `include "apb_bfm.svh"

  always @(posedge clk) cyc++;
  always @(posedge sclk) begin
    s_rx = {s_rx[6:0], mosi}; edges++;
    if (last_rise != 0) period = cyc - last_rise;
    last_rise = cyc;
  end
  always @(negedge sclk) s_tx = {s_tx[6:0], 1'b0};
  assign miso = s_tx[7];

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

  initial begin
    logic [31:0] d; logic e;
    p_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check("cs idle", cs_n, 1);
    apb_xfer(1, 12'hC, 1, d, e);
    check("cs active", cs_n, 0);
    apb_xfer(1, 12'h8, 3, d, e);
    for (int t = 0; t < 10; t++) begin
      automatic logic [7:0] mb = 8'($urandom);
      s_tx = 8'($urandom);
      begin
        automatic logic [7:0] sb = s_tx;
        edges = 0; last_rise = 0;
        apb_xfer(1, 12'h0, 32'(mb), d, e);
        apb_xfer(1, 12'h0, 32'hFF, d, e);
        check("write while busy refused", e, 1);
        do apb_xfer(0, 12'h4, 0, d, e); while (d[0]);
        check("slave got", s_rx, mb);
        apb_xfer(0, 12'h0, 0, d, e);
        check("master got", d[7:0], sb);
        check("8 clocks", edges, 8);
        check("sclk period", period, 6);
        check("sclk idle low", sclk, 0);
      end
    end
    apb_xfer(1, 12'hC, 0, d, e);
    check("cs released", cs_n, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
