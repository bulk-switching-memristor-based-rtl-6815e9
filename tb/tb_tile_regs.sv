// tb_tile_regs: checks the tile register map through AXI4-Lite: input buffer
// with byte strobes, output codes and signed differential results written by
// an emulated timing controller, CMD decoding into a tile command and its
// refusal while busy, CFG, WV start fields, WV_TRIALS reset value, STATUS
// fields, counters and SLVERR on unmapped or read-only addresses.
module tb_tile_regs;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req;
  axil_rsp_t m_rsp;
  logic cmd_valid, cmd_ready = 0;
  tile_cmd_t cmd;
  logic [63:0][7:0] in_buf;
  logic [1:0] tia_gain;
  logic [9:0] wl_dac_code;
  logic wv_start, wv_busy = 0, wv_ok = 0, wv_fail = 0, ev_over_reset = 0;
  logic [5:0] wv_row, wv_col;
  logic [7:0] wv_lo, wv_hi, rd_code = 0;
  logic [2:0] wv_max, wv_trials = 0, out_phase = 0;
  logic tc_busy = 0, op_done = 0, rd_done = 0, out_we = 0, prog_strobe = 0, busy;
  logic [7:0][7:0] adc_code;
  logic [7:0] adc_sat = 0;
  int checks = 0, failures = 0;

  tile_regs dut (.clk, .rst_n, .axi_req(m_req), .axi_rsp(m_rsp), .*);
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
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h want %0h", what, got, want);
    end
  endtask

  logic [7:0] outs [64];

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    axil_idle();
    adc_code = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // input buffer
    for (int w = 0; w < 16; w++) axil_write(32'(w*4), 32'h11223344 + 32'(w), rsp);
    axil_write(32'h8, 32'hAABBCCDD, rsp, 4'b0101);
    for (int w = 0; w < 16; w++) begin
      axil_read(32'(w*4), d, rsp);
      check("IN readback", d, (w == 2) ? 32'h11BB33DD : 32'h11223344 + 32'(w));
    end
    check("in_buf row 9", in_buf[9], 8'h33);
    check("in_buf row 8", in_buf[8], 8'hDD);
    check("in_buf row 10", in_buf[10], 8'hBB);
    // output buffer written in 8 phases
    for (int p = 0; p < 8; p++) begin
      @(negedge clk);
      out_we = 1; out_phase = 3'(p);
      for (int g = 0; g < 8; g++) begin
        adc_code[g] = 8'($urandom);
        outs[8*g + p] = adc_code[g];
      end
      adc_sat = (p == 5) ? 8'h10 : 8'h0;
    end
    @(negedge clk) out_we = 0;
    for (int w = 0; w < 16; w++) begin
      axil_read(32'h40 + 32'(w*4), d, rsp);
      check("OUT", d, {outs[4*w+3], outs[4*w+2], outs[4*w+1], outs[4*w]});
    end
    for (int k = 0; k < 32; k++) begin
      axil_read(32'h80 + 32'(k*4), d, rsp);
      check("DIFF", signed'(d), int'(outs[2*k]) - int'(outs[2*k+1]));
    end
    axil_read(32'h110, d, rsp);
    check("sat flag", d[16], 1);
    // command
    fork
      axil_write(32'h100, {4'd9, 2'b0, 6'd33, 2'b0, 6'd17, 5'b0, OP_SET}, rsp);
      begin
        while (!cmd_valid) @(posedge clk);
        #1;
        check("cmd op", cmd.op, OP_SET); check("cmd row", cmd.row, 17);
        check("cmd col", cmd.col, 33); check("cmd amp", cmd.amp, 9);
      end
    join
    check("busy while pending", busy, 1);
    axil_write(32'h100, 32'(OP_MAC), rsp);
    check("CMD refused while busy", rsp, RESP_SLVERR);
    axil_write(32'h0, 32'h0, rsp);
    check("IN refused while busy", rsp, RESP_SLVERR);
    @(negedge clk) cmd_ready = 1;
    @(negedge clk) cmd_ready = 0;
    check("cmd taken", cmd_valid, 0);
    // configuration and write-verify start
    axil_write(32'h104, {6'b0, 10'h2A5, 14'b0, 2'd3}, rsp);
    check("gain", tia_gain, 3); check("wl code", wl_dac_code, 10'h2A5);
    axil_read(32'h104, d, rsp);
    check("CFG readback", d, {6'b0, 10'h2A5, 14'b0, 2'd3});
    axil_read(32'h10C, d, rsp);
    check("WV_TRIALS reset", d, 2);
    fork
      axil_write(32'h108, {8'd90, 8'd80, 2'b0, 6'd5, 2'b0, 6'd7}, rsp);
      begin
        while (!wv_start) @(posedge clk);
        #1;
        check("wv row", wv_row, 7); check("wv col", wv_col, 5);
        check("wv lo", wv_lo, 80); check("wv hi", wv_hi, 90); check("wv max", wv_max, 2);
      end
    join
    // status and counters
    @(negedge clk);
    wv_ok = 1; wv_trials = 3'd2; rd_done = 1; op_done = 1; rd_code = 8'h5C; ev_over_reset = 1;
    @(negedge clk);
    rd_done = 0; op_done = 0; ev_over_reset = 0; prog_strobe = 1; op_done = 1;
    @(negedge clk);
    prog_strobe = 0; op_done = 1;                    // a MAC completion
    @(negedge clk);
    op_done = 0;
    axil_read(32'h110, d, rsp);
    check("STATUS", d, {8'd1, 7'b0, 1'b1, 8'h5C, 1'b0, 3'd2, 1'b0, 1'b1, 1'b0, 1'b0});
    axil_read(32'h114, d, rsp);
    check("COUNT", d, {16'd1, 16'd1});
    // errors
    axil_write(32'h40, 32'h0, rsp);   check("OUT is read-only", rsp, RESP_SLVERR);
    axil_read(32'h200, d, rsp);       check("unmapped", rsp, RESP_SLVERR);
    axil_write(32'h110, 32'h0, rsp);  check("STATUS read-only", rsp, RESP_SLVERR);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
