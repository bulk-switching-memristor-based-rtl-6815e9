// tb_cim_soc: end-to-end test of the whole chip at its default size (four
// 64x64 tiles, 32 KB instruction and 512 KB data memory), driven through the
// processor's AXI4-Lite master port the way firmware would drive it.
//
// Flow: load words into instruction memory; read the chip ID and set the PLL
// register; place one input vector per tile in data memory and let the DMA
// engine copy it into each tile's input buffer; start MACs on all four tiles
// so they run at the same time; let the DMA copy the results back to data
// memory and compare every code with a reference computed here from the cell
// levels of each tile's array model:
//   code = min(255, floor(sum_i x_i * (14 + L_ij) / (2560 >> gain))).
// Then: differential outputs, ADC clipping, single-cell READ, SET and RESET
// pulses, write-and-verify (success, over-reset, giving up), a long DMA copy
// with the processor using the bus at the same time (arbitration conflicts),
// DECERR for unmapped space and for a switched-off tile (whose stored levels
// must survive the off period), and the UART, GPIO and SPI peripherals with
// loop-back wiring. Every mechanism is counted; any count left at zero is a
// failure. Watchdog: 3,000,000 cycles.
module tb_cim_soc;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic uart_line, spi_sclk, spi_mosi, spi_cs_n, bus_conflict;
  logic [15:0] gpio_o, gpio_oe, gpio_i;
  logic [31:0] pll_cfg;
  logic [3:0][WLDAC_BITS-1:0] wl_dac_code;
  logic [3:0] tile_busy;
  int checks = 0, failures = 0;

  cim_soc dut (
    .clk, .rst_n, .cpu_req(m_req), .cpu_rsp(m_rsp),
    .uart_tx(uart_line), .uart_rx(uart_line),
    .gpio_o, .gpio_oe, .gpio_i,
    .spi_sclk, .spi_mosi, .spi_miso(spi_mosi), .spi_cs_n,
    .pll_cfg, .wl_dac_code, .tile_busy, .bus_conflict
  );
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  // mechanism counters
  int n_imem = 0, n_cfg = 0, n_dma_in = 0, n_dma_out = 0, n_mac = 0, n_parallel = 0;
  int n_diff = 0, n_clip = 0, n_read = 0, n_pulse = 0, n_wv_ok = 0, n_wv_fail = 0;
  int n_over = 0, n_conflict = 0, n_decerr = 0, n_tile_off = 0, n_uart = 0, n_gpio = 0, n_spi = 0;

  always @(posedge clk) begin
    if (bus_conflict) n_conflict++;
    if ($countones(tile_busy) > 1) n_parallel++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lvl(int t, int r, int c);
    case (t)
      0: return int'(dut.g_tile[0].g_on.u_tile.u_xbar.level[r][c]);
      1: return int'(dut.g_tile[1].g_on.u_tile.u_xbar.level[r][c]);
      2: return int'(dut.g_tile[2].g_on.u_tile.u_xbar.level[r][c]);
      default: return int'(dut.g_tile[3].g_on.u_tile.u_xbar.level[r][c]);
    endcase
  endfunction

  function automatic logic [31:0] tile(int t);
    return TILE_BASE + 32'(t * 32'h1000);
  endfunction

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [1:0] rsp;
    axil_write(a, d, rsp);
    check($sformatf("write %h resp", a), rsp, RESP_OKAY);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    logic [1:0] rsp;
    axil_read(a, d, rsp);
    check($sformatf("read %h resp", a), rsp, RESP_OKAY);
  endtask

  task automatic tile_wait(input int t, output logic [31:0] st);
    do rd(tile(t) + 32'h110, st); while (st[0]);
  endtask

  task automatic dma_copy(input logic [31:0] src, input logic [31:0] dst, input int len);
    logic [31:0] st;
    wr(DMA_BASE + 32'h0, src);
    wr(DMA_BASE + 32'h4, dst);
    wr(DMA_BASE + 32'h8, 32'(len));
    wr(DMA_BASE + 32'hC, 32'd1);
    do rd(DMA_BASE + 32'h10, st); while (st[0]);
    check("DMA finished without error", st[2:1], 2'b01);
  endtask

  function automatic int read_code(int t, int r, int c, int gain);
    return (255 * (14 + lvl(t, r, c))) / (2560 >> gain);
  endfunction

  byte unsigned x [4][64];
  int gain_of [4] = '{0, 1, 2, 3};
  int xmax_of [4] = '{15, 30, 60, 255};

  initial begin
    logic [1:0] rsp; logic [31:0] d, st;
    int code [64];
    axil_idle();
    gpio_i = 16'hBEEF;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- instruction memory load ----
    for (int k = 0; k < 8; k++) wr(IMEM_BASE + 32'(k * 4), 32'h0000_0013 + 32'(k << 7));
    for (int k = 0; k < 8; k++) begin
      rd(IMEM_BASE + 32'(k * 4), d);
      check("IMEM", d, 32'h0000_0013 + 32'(k << 7)); n_imem++;
    end
    rd(IMEM_BASE + 32'h7FFC, d);

    // ---- configuration block ----
    rd(CFG_BASE + 32'h8, d);
    check("chip ID", d, 32'h4349_4D34);
    wr(CFG_BASE + 32'h0, 32'h0000_0105);
    check("PLL config pins", pll_cfg, 32'h0000_0105); n_cfg++;

    // ---- inputs: DMEM -> tile input buffers by DMA ----
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < 64; r++) x[t][r] = 8'($urandom_range(0, xmax_of[t]));
      for (int w = 0; w < 16; w++)
        wr(DMEM_BASE + 32'(t * 256 + w * 4), {x[t][4*w+3], x[t][4*w+2], x[t][4*w+1], x[t][4*w]});
      dma_copy(DMEM_BASE + 32'(t * 256), tile(t), 16);
      for (int w = 0; w < 16; w++) begin
        rd(tile(t) + 32'(w * 4), d);
        check("tile input buffer", d, {x[t][4*w+3], x[t][4*w+2], x[t][4*w+1], x[t][4*w]});
      end
      n_dma_in++;
      wr(tile(t) + 32'h104, 32'(gain_of[t]) | (32'(100 + t) << 16));
      check("WL DAC code pins", wl_dac_code[t], 100 + t);
    end

    // ---- MAC on all tiles at once ----
    for (int t = 0; t < 4; t++) wr(tile(t) + 32'h100, 32'(OP_MAC));
    for (int t = 0; t < 4; t++) begin
      tile_wait(t, st);
      if (t == 3) begin check("tile 3 ADC clipped", st[16], 1); n_clip += int'(st[16]); end
      if (t < 2) check($sformatf("no clipping tile %0d", t), st[16], 0);
    end

    // ---- results: tile OUT -> DMEM by DMA, checked by the processor ----
    for (int t = 0; t < 4; t++) begin
      dma_copy(tile(t) + 32'h40, DMEM_BASE + 32'h8000 + 32'(t * 256), 16);
      n_dma_out++;
      for (int c = 0; c < 64; c++) begin
        automatic longint s = 0;
        for (int r = 0; r < 64; r++) s += longint'(x[t][r]) * (14 + lvl(t, r, c));
        s = s / (2560 >> gain_of[t]);
        code[c] = (s > 255) ? 255 : int'(s);
      end
      for (int w = 0; w < 16; w++) begin
        rd(DMEM_BASE + 32'h8000 + 32'(t * 256 + w * 4), d);
        for (int b = 0; b < 4; b++) begin
          check($sformatf("tile %0d MAC col %0d", t, 4*w+b), d[8*b +: 8], code[4*w+b]);
          if (d[8*b +: 8] == 8'(code[4*w+b])) n_mac++;
        end
      end
      if (t == 0)
        for (int k = 0; k < 32; k++) begin
          rd(tile(0) + 32'h80 + 32'(k * 4), d);
          check("DIFF", signed'(d), code[2*k] - code[2*k+1]);
          if (signed'(d) == code[2*k] - code[2*k+1]) n_diff++;
        end
      rd(tile(t) + 32'h114, d);
      check("tile MAC counter", d[15:0], 1);
    end

    // ---- single-cell read ----
    for (int k = 0; k < 4; k++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      wr(tile(1) + 32'h104, 32'd3);
      wr(tile(1) + 32'h100, {16'(c), 2'b0, 6'(r), 8'(OP_READ)});
      tile_wait(1, st);
      check("READ code", st[15:8], read_code(1, r, c, 3));
      if (st[15:8] == 8'(read_code(1, r, c, 3))) n_read++;
    end

    // ---- programming pulses ----
    for (int k = 0; k < 4; k++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63), a = $urandom_range(0, 15);
      automatic int lv0 = lvl(2, r, c);
      automatic bit do_set = k[0];
      automatic int step = 1 + a / 2 + (((r*7 + c*13) >> 2) & 1);
      automatic int want = do_set ? lv0 + step : lv0 - step;
      if (want > 127) want = 127;
      if (want < 0) want = 0;
      wr(tile(2) + 32'h100, {4'(a), 2'b0, 6'(c), 2'b0, 6'(r), 5'b0, do_set ? OP_SET : OP_RESET});
      tile_wait(2, st);
      check("pulse level", lvl(2, r, c), want);
      if (lvl(2, r, c) == want) n_pulse++;
    end
    rd(tile(2) + 32'h114, d);
    check("pulse counter", d[31:16], 4);

    // ---- write and verify ----
    wr(tile(0) + 32'h104, 32'd3);
    for (int k = 0; k < 6; k++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      automatic int lo = $urandom_range(20, 90);
      wr(tile(0) + 32'h108, {8'(lo + 3), 8'(lo), 2'b0, 6'(c), 2'b0, 6'(r)});
      tile_wait(0, st);
      if (st[2]) begin
        n_wv_ok++;
        check("verified code in window", (read_code(0, r, c, 3) >= lo) && (read_code(0, r, c, 3) <= lo + 3), 1);
      end
    end
    wr(tile(0) + 32'h10C, 32'd1);
    for (int k = 0; k < 40 && (n_wv_fail == 0 || k < 8); k++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      automatic int lo = $urandom_range(20, 90);
      wr(tile(0) + 32'h108, {8'(lo), 8'(lo), 2'b0, 6'(c), 2'b0, 6'(r)});
      tile_wait(0, st);
      checks++; if (st[2] == st[3]) failures++;
      if (st[3]) begin
        n_wv_fail++;
        check("gave-up cell outside window", read_code(0, r, c, 3) != lo, 1);
      end else if (st[2]) begin
        n_wv_ok++;
        check("verified code", read_code(0, r, c, 3), lo);
      end
    end
    rd(tile(0) + 32'h110, st);
    n_over = int'(st[31:24]);

    // ---- bus arbitration: long DMA copy while the processor uses the bus ----
    for (int k = 0; k < 64; k++) wr(DMEM_BASE + 32'h1_0000 + 32'(k * 4), 32'hA500_0000 + 32'(k));
    begin
      automatic int c0 = n_conflict;
      wr(DMA_BASE + 32'h0, DMEM_BASE + 32'h1_0000);
      wr(DMA_BASE + 32'h4, DMEM_BASE + 32'h2_0000);
      wr(DMA_BASE + 32'h8, 32'd64);
      wr(DMA_BASE + 32'hC, 32'd1);
      for (int k = 0; k < 20; k++) begin
        rd(IMEM_BASE + 32'(k % 8) * 4, d);
        check("IMEM during DMA", d, 32'h0000_0013 + 32'((k % 8) << 7));
      end
      do rd(DMA_BASE + 32'h10, st); while (st[0]);
      check("DMA copy status", st[2:1], 2'b01);
      for (int k = 0; k < 64; k++) begin
        rd(DMEM_BASE + 32'h2_0000 + 32'(k * 4), d);
        check("DMA copy data", d, 32'hA500_0000 + 32'(k));
      end
      check("conflicts during shared use", n_conflict > c0, 1);
    end

    // ---- decode errors and tile switch-off ----
    axil_read(32'h5000_0000, d, rsp);
    check("unmapped read", rsp, RESP_DECERR); if (rsp == RESP_DECERR) n_decerr++;
    axil_write(32'h3000_3000, 0, rsp);
    check("unmapped APB window", rsp, RESP_DECERR); if (rsp == RESP_DECERR) n_decerr++;
    begin
      automatic int keep = lvl(3, 5, 9);
      wr(CFG_BASE + 32'h4, 32'b0111);
      axil_read(tile(3) + 32'h40, d, rsp);
      check("switched-off tile", rsp, RESP_DECERR);
      wr(CFG_BASE + 32'h4, 32'b1111);
      rd(tile(3) + 32'h40, d);
      check("tile registers reset by switch-off", d, 0);
      check("stored level kept", lvl(3, 5, 9), keep);
      if (rsp == RESP_DECERR && d == 0 && lvl(3, 5, 9) == keep) n_tile_off++;
    end

    // ---- UART loop-back ----
    wr(APB_BASE + 32'h8, 32'd16);
    for (int k = 0; k < 3; k++) begin
      automatic logic [7:0] b = 8'($urandom);
      wr(APB_BASE + 32'h0, 32'(b));
      do rd(APB_BASE + 32'h4, st); while (!st[1]);
      rd(APB_BASE + 32'h0, d);
      check("UART loop-back", d[7:0], b);
      if (d[7:0] == b) n_uart++;
    end

    // ---- GPIO ----
    wr(APB_BASE + 32'h1000, 32'h1234);
    wr(APB_BASE + 32'h1004, 32'hFF00);
    check("GPIO out", gpio_o, 16'h1234);
    check("GPIO oe", gpio_oe, 16'hFF00);
    rd(APB_BASE + 32'h1008, d);
    check("GPIO in", d[15:0], 16'hBEEF);
    if (gpio_o == 16'h1234 && d[15:0] == 16'hBEEF) n_gpio++;

    // ---- SPI loop-back ----
    wr(APB_BASE + 32'h2008, 32'd2);
    wr(APB_BASE + 32'h200C, 32'd1);
    check("SPI chip select", spi_cs_n, 0);
    for (int k = 0; k < 3; k++) begin
      automatic logic [7:0] b = 8'($urandom);
      wr(APB_BASE + 32'h2000, 32'(b));
      do rd(APB_BASE + 32'h2004, st); while (st[0]);
      rd(APB_BASE + 32'h2000, d);
      check("SPI loop-back", d[7:0], b);
      if (d[7:0] == b) n_spi++;
    end
    wr(APB_BASE + 32'h200C, 32'd0);

    // ---- every mechanism must have happened ----
    $display("imem=%0d cfg=%0d dma_in=%0d dma_out=%0d mac=%0d parallel=%0d diff=%0d clip=%0d",
             n_imem, n_cfg, n_dma_in, n_dma_out, n_mac, n_parallel, n_diff, n_clip);
    $display("read=%0d pulse=%0d wv_ok=%0d wv_fail=%0d over_reset=%0d conflict=%0d decerr=%0d",
             n_read, n_pulse, n_wv_ok, n_wv_fail, n_over, n_conflict, n_decerr);
    $display("tile_off=%0d uart=%0d gpio=%0d spi=%0d", n_tile_off, n_uart, n_gpio, n_spi);
    check("mech imem", n_imem > 0, 1);       check("mech cfg", n_cfg > 0, 1);
    check("mech dma_in", n_dma_in > 0, 1);   check("mech dma_out", n_dma_out > 0, 1);
    check("mech mac", n_mac > 0, 1);         check("mech parallel tiles", n_parallel > 0, 1);
    check("mech diff", n_diff > 0, 1);       check("mech clip", n_clip > 0, 1);
    check("mech read", n_read > 0, 1);       check("mech pulse", n_pulse > 0, 1);
    check("mech wv ok", n_wv_ok > 0, 1);     check("mech wv fail", n_wv_fail > 0, 1);
    check("mech over-reset", n_over > 0, 1); check("mech conflict", n_conflict > 0, 1);
    check("mech decerr", n_decerr > 0, 1);   check("mech tile off", n_tile_off > 0, 1);
    check("mech uart", n_uart > 0, 1);       check("mech gpio", n_gpio > 0, 1);
    check("mech spi", n_spi > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
