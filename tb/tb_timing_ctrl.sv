// tb_timing_ctrl: drives the timing controller with MAC, READ, SET and RESET
// commands and checks its cycle-level sequence: per MAC phase 8 sample cycles
// and 1 conversion (9), 8 phases in order with out_we/out_phase after each
// conversion, done 73 cycles after accept; READ uses phase col%8 and ends
// after 10 cycles with rd_code from ADC col/8; a program pulse raises one
// strobe after PULSE_CYCLES cycles with the command's polarity and amplitude.
// The ADCs are emulated here: valid one cycle after convert.
module tb_timing_ctrl;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  tile_cmd_t cmd;
  logic [7:0] rd_code;
  op_mode_e mode;
  logic [5:0] row_sel, col_sel;
  logic [2:0] phase, out_phase;
  logic dac_load, dac_ones, dac_step, adc_sample, adc_convert, out_we, prog_strobe, prog_set;
  logic [7:0][7:0] adc_code;
  logic adc_valid = 0;
  logic [3:0] prog_amp;
  int checks = 0, failures = 0;

  timing_ctrl #(.PULSE_CYCLES(4)) dut (.*);
  always #5 clk = ~clk;

  // ADC emulation: code of group g after phase p is 16*g + p
  always_ff @(posedge clk) begin
    adc_valid <= adc_convert;
    if (adc_convert) for (int g = 0; g < 8; g++) adc_code[g] <= 8'(16*g + int'(phase));
  end

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
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic issue(input tile_op_e op, input int r, input int c, input int a,
                       output int cycles, output int samples, output int converts,
                       output int writes, output int strobes);
    int expect_phase = 0;
    @(negedge clk);
    cmd = '{op: op, row: 6'(r), col: 6'(c), amp: 4'(a)};
    cmd_valid = 1;
    #1;
    check("ready when idle", cmd_ready, 1);
    check("dac load at accept", dac_load, (op == OP_MAC || op == OP_READ));
    check("dac ones", dac_ones, op == OP_READ);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1; samples = 0; converts = 0; writes = 0; strobes = 0;
    while (!done) begin
      if (adc_sample) samples++;
      if (adc_convert) begin
        converts++;
        check("samples before convert", samples, 8 * converts);
        check("phase", phase, (op == OP_READ) ? c % 8 : converts - 1);
      end
      if (out_we) begin
        check("out phase order", out_phase, expect_phase);
        expect_phase++; writes++;
      end
      if (prog_strobe) strobes++;
      check("mode", mode, (op == OP_MAC) ? MODE_MAC : (op == OP_READ) ? MODE_READ : MODE_PROG);
      check("busy", cmd_ready, 0);
      @(negedge clk);
      cycles++;
    end
    if (out_we) writes++;
    if (prog_strobe) begin
      strobes++;
      check("prog polarity", prog_set, op == OP_SET);
      check("prog amp", prog_amp, a);
      check("prog row", row_sel, r);
      check("prog col", col_sel, c);
    end
    if (op == OP_READ) check("rd_code", rd_code, 16 * (c / 8) + c % 8);
    @(negedge clk);
    check("idle after done", cmd_ready, 1);
  endtask

  initial begin
    int cy, s, cv, w, st;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      issue(OP_MAC, 0, 0, 0, cy, s, cv, w, st);
      check("MAC cycles", cy, 73);
      check("MAC samples", s, 64);
      check("MAC conversions", cv, 8);
      check("MAC writes", w, 8);
    end
    for (int t = 0; t < 8; t++) begin
      automatic int c = $urandom_range(0, 63), r = $urandom_range(0, 63);
      issue(OP_READ, r, c, 0, cy, s, cv, w, st);
      check("READ cycles", cy, 10);
      check("READ samples", s, 8);
      check("READ conversions", cv, 1);
      check("READ writes none", w, 0);
    end
    for (int t = 0; t < 8; t++) begin
      automatic int c = $urandom_range(0, 63), r = $urandom_range(0, 63), a = $urandom_range(0, 15);
      issue(t[0] ? OP_SET : OP_RESET, r, c, a, cy, s, cv, w, st);
      check("pulse cycles", cy, 4);
      check("pulse strobes", st, 1);
      check("pulse no sampling", s, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
