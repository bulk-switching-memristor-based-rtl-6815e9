// tb_cim_tile: end-to-end test of one tile through its AXI4-Lite port.
// The expected MAC codes are computed here from the cell levels of the array
// model: code_j = min(255, floor(sum_i x_i * (14 + L_ij) / (2560 >> gain))),
// which is what 8 LSB-first pulses and the halving ADC must produce. It checks
// MAC codes, differential outputs, ADC clipping, the 73-cycle MAC latency,
// single-cell reads, set/reset pulses, and write-and-verify (success,
// over-reset, failure after the trial limit).
module tb_cim_tile;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic [9:0] wl_dac_code;
  logic busy;
  int checks = 0, failures = 0;
  int n_over = 0, n_wv_ok = 0, n_wv_fail = 0;

  cim_tile dut (.clk, .rst_n, .axi_req(m_req), .axi_rsp(m_rsp), .wl_dac_code, .busy);

  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // MAC latency: cycles from command accept to done
  int lat_start = -1, last_lat = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.tc_valid && dut.tc_ready && dut.tc_cmd.op == OP_MAC) lat_start = cyc;
    if (dut.tc_done && dut.mode == MODE_MAC) last_lat = cyc - lat_start;
  end

  function automatic int lvl(int r, int c);
    return int'(dut.u_xbar.level[r][c]);
  endfunction

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic wait_idle();
    logic [31:0] st; logic [1:0] rsp;
    do axil_read(32'h110, st, rsp); while (st[0]);
  endtask

  byte unsigned x [64];

  task automatic run_mac(input int gain, input int xmax);
    logic [1:0] rsp; logic [31:0] d;
    int code [64];
    for (int r = 0; r < 64; r++) x[r] = 8'($urandom_range(0, xmax));
    for (int w = 0; w < 16; w++) begin
      axil_write(32'(w*4), {x[4*w+3], x[4*w+2], x[4*w+1], x[4*w]}, rsp);
      check("IN write resp", rsp, 0);
    end
    axil_write(32'h104, 32'(gain), rsp);
    axil_write(32'h100, 32'(OP_MAC), rsp);
    check("CMD resp", rsp, 0);
    wait_idle();
    check("MAC latency", last_lat, 73);
    for (int c = 0; c < 64; c++) begin
      automatic longint s = 0;
      for (int r = 0; r < 64; r++) s += longint'(x[r]) * (14 + lvl(r, c));
      s = s / (2560 >> gain);
      code[c] = (s > 255) ? 255 : int'(s);
    end
    for (int w = 0; w < 16; w++) begin
      axil_read(32'h40 + 32'(w*4), d, rsp);
      for (int b = 0; b < 4; b++) check($sformatf("MAC col %0d", 4*w+b), d[8*b +: 8], code[4*w+b]);
    end
    for (int k = 0; k < 32; k++) begin
      axil_read(32'h80 + 32'(k*4), d, rsp);
      check($sformatf("DIFF %0d", k), signed'(d), code[2*k] - code[2*k+1]);
    end
  endtask

  function automatic int read_code(int r, int c, int gain);
    return (255 * (14 + lvl(r, c))) / (2560 >> gain);
  endfunction

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    axil_idle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- MAC ----
    run_mac(0, 15);
    run_mac(2, 40);
    run_mac(1, 30);
    run_mac(1, 30);
    run_mac(3, 255);           // drives the ADC past full scale
    axil_read(32'h110, d, rsp);
    check("ADC clip flag", d[16], 1);
    run_mac(0, 3);
    axil_read(32'h110, d, rsp);
    check("ADC clip flag cleared", d[16], 0);
    // ---- single-cell read ----
    axil_write(32'h104, 32'd3, rsp);
    for (int t = 0; t < 6; t++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      axil_write(32'h100, {16'(c), 2'b0, 6'(r), 8'(OP_READ)}, rsp);
      wait_idle();
      axil_read(32'h110, d, rsp);
      check("READ code", d[15:8], read_code(r, c, 3));
    end
    // ---- program pulses ----
    for (int t = 0; t < 6; t++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63), a = $urandom_range(0, 15);
      automatic int lv0 = lvl(r, c), other = lvl(r, c ^ 1);
      automatic bit do_set = t[0];
      automatic int step = 1 + a / 2 + (((r*7 + c*13) >> 2) & 1);
      automatic int want = do_set ? lv0 + step : lv0 - step;
      if (want > 127) want = 127;
      if (want < 0) want = 0;
      axil_write(32'h100, {4'(a), 2'b0, 6'(c), 2'b0, 6'(r), 5'b0, do_set ? OP_SET : OP_RESET}, rsp);
      wait_idle();
      check("pulse level", lvl(r, c), want);
      check("neighbour untouched", lvl(r, c ^ 1), other);
    end
    // ---- busy refusal ----
    axil_write(32'h100, 32'(OP_MAC), rsp);
    axil_write(32'h100, 32'(OP_MAC), rsp);
    check("CMD while busy refused", rsp, RESP_SLVERR);
    wait_idle();
    // ---- write and verify ----
    axil_read(32'h10C, d, rsp);
    check("default trials", d[2:0], 2);
    for (int t = 0; t < 24; t++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      automatic int lo = $urandom_range(15, 100), hi = lo + 2;
      axil_write(32'h108, {8'(hi), 8'(lo), 2'b0, 6'(c), 2'b0, 6'(r)}, rsp);
      check("WV resp", rsp, 0);
      wait_idle();
      axil_read(32'h110, d, rsp);
      checks++;
      if (d[2] == d[3]) failures++;            // exactly one of ok / fail
      check("trials within limit", d[6:4] <= 2, 1);
      if (d[2]) begin
        n_wv_ok++;
        check("WV final code in window", (read_code(r, c, 3) >= lo) && (read_code(r, c, 3) <= hi), 1);
      end else begin
        n_wv_fail++;
        check("WV fail used all trials or pulse cap", (d[6:4] == 2) || (read_code(r, c, 3) < lo) ||
              (read_code(r, c, 3) > hi), 1);
      end
    end
    // one trial and a one-code window: some cells must give up after an over-reset
    axil_write(32'h10C, 32'd1, rsp);
    for (int t = 0; t < 16; t++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63);
      automatic int lo = $urandom_range(15, 100);
      axil_write(32'h108, {8'(lo), 8'(lo), 2'b0, 6'(c), 2'b0, 6'(r)}, rsp);
      wait_idle();
      axil_read(32'h110, d, rsp);
      check("trials within 1", d[6:4] <= 1, 1);
      if (d[3]) begin
        n_wv_fail++;
        check("failed cell outside window", read_code(r, c, 3) != lo, 1);
      end else begin
        n_wv_ok++;
        check("WV final code", read_code(r, c, 3), lo);
      end
    end
    check("some write-verify gave up", n_wv_fail > 0, 1);
    axil_read(32'h110, d, rsp);
    n_over = d[31:24];
    $display("write-verify: ok=%0d fail=%0d over-resets=%0d", n_wv_ok, n_wv_fail, n_over);
    check("some write-verify succeeded", n_wv_ok > 0, 1);
    check("over-reset seen", n_over > 0, 1);
    axil_read(32'h114, d, rsp);
    check("MAC counter (one refused)", d[15:0], 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
