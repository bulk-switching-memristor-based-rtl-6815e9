// tb_lenet_conv1: runs the first convolution layer of a LeNet-class network
// on the chip at its default size, the way a training loop's forward pass
// would use it. The layer is 4 filters of 5x5 with signed 2-bit weights
// (-1, 0, +1 steps on a 4-level conductance grid), mapped differentially:
// filter f uses column 2f for its positive part and 2f+1 for its negative
// part, 25 rows for the 25 pixels of a window (a 25 x 8 slice of tile 0).
//
// 1. Every one of the 200 cells is programmed with write-and-verify to one of
//    four READ-code windows (the 2-bit levels); the bench records which cells
//    reached their window.
// 2. A 12x12 test image (pixel = (37x + 91y + 13xy) mod 256) is slid over with a
//    5x5 window, stride 2 (16 windows). For each window the 25 pixels go to
//    IN, a MAC runs, and the four DIFF outputs are read.
// 3. Each DIFF is checked exactly against the codes computed from the cells'
//    stored levels, and its sign is compared with the ideal integer
//    convolution of the intended weights: with all cells verified the signs
//    must agree wherever the ideal value is clearly away from zero.
// Mechanism counts (cells verified, windows run, sign agreements) must be
// nonzero. Watchdog: 4,000,000 cycles.
module tb_lenet_conv1;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic uart_line, spi_sclk, spi_mosi, spi_cs_n, bus_conflict;
  logic [15:0] gpio_o, gpio_oe;
  logic [31:0] pll_cfg;
  logic [3:0][WLDAC_BITS-1:0] wl_dac_code;
  logic [3:0] tile_busy;
  int checks = 0, failures = 0;

  cim_soc dut (
    .clk, .rst_n, .cpu_req(m_req), .cpu_rsp(m_rsp),
    .uart_tx(uart_line), .uart_rx(uart_line),
    .gpio_o, .gpio_oe, .gpio_i(16'h0),
    .spi_sclk, .spi_mosi, .spi_miso(spi_mosi), .spi_cs_n,
    .pll_cfg, .wl_dac_code, .tile_busy, .bus_conflict
  );
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] T0 = TILE_BASE;
  // READ-code windows (gain 3) of the four conductance steps 0..3
  localparam int WLO [4] = '{20, 40, 60, 80};
  localparam int WW = 3;

  function automatic int lvl(int r, int c);
    return int'(dut.g_tile[0].g_on.u_tile.u_xbar.level[r][c]);
  endfunction

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic wait_idle(output logic [31:0] st);
    logic [1:0] rsp;
    do axil_read(T0 + 32'h110, st, rsp); while (st[0]);
  endtask

  // intended weight of filter f at pixel k: -1, 0 or +1 (times one step)
  function automatic int weight(int f, int k);
    return ((f * 7 + k * 5 + (k / 5) * 3) % 3) - 1;
  endfunction

  function automatic int pixel(int x, int y);
    return (37 * x + 91 * y + 13 * x * y) % 256;
  endfunction

  initial begin
    logic [1:0] rsp; logic [31:0] d, st;
    int n_verified = 0, n_windows = 0, n_sign_ok = 0, n_sign_tested = 0;
    byte unsigned xin [64];
    int code [64];
    axil_idle();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. program the 25 x 8 slice ----
    axil_write(T0 + 32'h104, 32'd3, rsp);
    axil_write(T0 + 32'h10C, 32'd4, rsp);
    for (int k = 0; k < 25; k++)
      for (int c = 0; c < 8; c++) begin
        automatic int w = weight(c / 2, k);
        // positive column holds 1 + max(w,0) steps, negative column 1 + max(-w,0)
        automatic int stp = 1 + (((c % 2) == 0) ? ((w > 0) ? w : 0) : ((w < 0) ? -w : 0));
        automatic int lo = WLO[stp];
        axil_write(T0 + 32'h108, {8'(lo + WW), 8'(lo), 2'b0, 6'(c), 2'b0, 6'(k)}, rsp);
        check("WV accepted", rsp, RESP_OKAY);
        wait_idle(st);
        if (st[2]) n_verified++;
      end
    $display("cells verified: %0d of 200", n_verified);
    check("most cells verified", n_verified >= 180, 1);

    // ---- 2./3. convolution windows ----
    axil_write(T0 + 32'h104, 32'd1, rsp);
    for (int wy = 0; wy < 4; wy++)
      for (int wx = 0; wx < 4; wx++) begin
        for (int r = 0; r < 64; r++) xin[r] = 0;
        for (int k = 0; k < 25; k++) xin[k] = 8'(pixel(2 * wx + k % 5, 2 * wy + k / 5));
        for (int w = 0; w < 16; w++) begin
          axil_write(T0 + 32'(w * 4), {xin[4*w+3], xin[4*w+2], xin[4*w+1], xin[4*w]}, rsp);
          check("IN write", rsp, RESP_OKAY);
        end
        axil_write(T0 + 32'h100, 32'(OP_MAC), rsp);
        check("MAC accepted", rsp, RESP_OKAY);
        wait_idle(st);
        for (int c = 0; c < 8; c++) begin
          automatic longint s = 0;
          for (int r = 0; r < 64; r++) s += longint'(xin[r]) * (14 + lvl(r, c));
          s = s / (2560 >> 1);
          code[c] = (s > 255) ? 255 : int'(s);
        end
        for (int f = 0; f < 4; f++) begin
          automatic int ideal = 0;
          axil_read(T0 + 32'h80 + 32'(f * 4), d, rsp);
          check("DIFF vs stored levels", signed'(d), code[2*f] - code[2*f+1]);
          for (int k = 0; k < 25; k++) ideal += int'(xin[k]) * weight(f, k);
          // one weight step is 20 READ codes = about 25 level units, so at
          // gain 1 the ideal sum maps to about ideal * 25 / 1280 MAC codes;
          // verify windows and ADC rounding leave roughly +-10 codes of error
          if (ideal > 800 || ideal < -800) begin
            n_sign_tested++;
            if ((signed'(d) > 0) == (ideal > 0)) n_sign_ok++;
          end
        end
        n_windows++;
      end
    $display("windows=%0d sign agreement %0d of %0d", n_windows, n_sign_ok, n_sign_tested);
    check("sign agreement", n_sign_ok, n_sign_tested);
    check("mech verified", n_verified > 0, 1);
    check("mech windows", n_windows, 16);
    check("mech sign tests", n_sign_tested > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
