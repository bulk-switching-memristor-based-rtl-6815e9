// cim_tile: one self-contained compute-in-memory tile.
//
// A 64x64 1T1R bulk-RRAM crossbar computes a vector-matrix product in place:
// the 64 input bytes are applied bit-serially to the drive lines by 64 DACs,
// each bit line sums the currents of its cells, and 8 TIA/ADC channels, each
// shared by 8 bit lines, weight the 8 bit-serial partial sums by 2^-1..2^-8
// while sampling and convert once, giving one 8-bit code per column in 9
// cycles; 8 such phases read the whole array (72 cycles). A local timing
// controller sequences this without the processor; a write-and-verify
// sequencer programs single cells with set/reset pulse trains and reads.
// The digital part (tile_regs) exposes buffers, commands and status on an
// AXI4-Lite slave port. The structure (DACs, DL/BL switch matrices, array,
// shared TIA/ADC, timing controller) follows the chip; the word-line DAC is an
// analog part outside this RTL, so its 10-bit code is an output.
//
// Timing: see timing_ctrl (MAC done 73 cycles after the command is accepted).
module cim_tile #(
  parameter int unsigned ROWS         = cim_pkg::ROWS,
  parameter int unsigned COLS         = cim_pkg::COLS,
  parameter int unsigned GROUP        = cim_pkg::GROUP,
  parameter int unsigned ADC_FS       = 2560,
  parameter int unsigned PULSE_CYCLES = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  cim_pkg::axil_req_t                 axi_req,
  output cim_pkg::axil_rsp_t                 axi_rsp,
  output logic [cim_pkg::WLDAC_BITS-1:0]     wl_dac_code,
  output logic                               busy
);
  import cim_pkg::*;

  localparam int unsigned NGRP = COLS / GROUP;
  localparam int unsigned PW   = $clog2(GROUP);

  // register side
  logic                  r_cmd_valid, r_cmd_ready;
  tile_cmd_t             r_cmd;
  logic [ROWS-1:0][7:0]  in_buf;
  logic [1:0]            tia_gain;
  logic                  wv_start, wv_busy, wv_ok, wv_fail, ev_over_reset;
  logic [5:0]            wv_row, wv_col;
  logic [7:0]            wv_lo, wv_hi;
  logic [2:0]            wv_max, wv_trials;
  logic                  w_cmd_valid, w_cmd_ready;
  tile_cmd_t             w_cmd;

  // timing controller side
  logic                  tc_valid, tc_ready, tc_done;
  tile_cmd_t             tc_cmd;
  logic [7:0]            rd_code;
  op_mode_e              mode;
  logic [5:0]            row_sel, col_sel;
  logic [PW-1:0]         phase, out_phase;
  logic                  dac_load, dac_ones, dac_step, adc_sample, adc_convert, out_we;
  logic                  prog_strobe, prog_set;
  logic [AMP_BITS-1:0]   prog_amp;

  // analog front end
  logic [ROWS-1:0][7:0]      dac_x;
  logic [ROWS-1:0]           dac_pulse, dl_read, dl_prog;
  logic [COLS-1:0]           wl_on;
  current_t [COLS-1:0]       bl_current;
  current_t [NGRP-1:0]       tia_in;
  logic [NGRP-1:0][7:0]      adc_code;
  logic [NGRP-1:0]           adc_valid, adc_sat;

  tile_regs #(.ROWS(ROWS), .COLS(COLS), .GROUP(GROUP)) u_regs (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .cmd_valid(r_cmd_valid), .cmd_ready(r_cmd_ready), .cmd(r_cmd),
    .in_buf, .tia_gain, .wl_dac_code,
    .wv_start, .wv_row, .wv_col, .wv_lo, .wv_hi, .wv_max,
    .wv_busy, .wv_ok, .wv_fail, .wv_trials, .ev_over_reset,
    .tc_busy(!tc_ready), .op_done(tc_done), .rd_done(tc_done && mode == MODE_READ), .rd_code,
    .out_we, .out_phase, .adc_code, .adc_sat, .prog_strobe, .busy
  );

  write_verify u_wv (
    .clk, .rst_n, .start(wv_start), .row(wv_row), .col(wv_col), .lo(wv_lo), .hi(wv_hi),
    .max_trials(wv_max), .busy(wv_busy), .ok(wv_ok), .fail(wv_fail), .trials(wv_trials),
    .ev_over_reset, .cmd_valid(w_cmd_valid), .cmd_ready(w_cmd_ready), .cmd(w_cmd),
    .op_done(tc_done), .rd_code
  );

  // the write-verify sequencer owns the timing controller while it runs
  assign tc_valid    = wv_busy ? w_cmd_valid : r_cmd_valid;
  assign tc_cmd      = wv_busy ? w_cmd       : r_cmd;
  assign w_cmd_ready = wv_busy && tc_ready;
  assign r_cmd_ready = !wv_busy && tc_ready;

  timing_ctrl #(.COLS(COLS), .GROUP(GROUP), .PULSE_CYCLES(PULSE_CYCLES)) u_tc (
    .clk, .rst_n, .cmd_valid(tc_valid), .cmd_ready(tc_ready), .cmd(tc_cmd),
    .done(tc_done), .rd_code, .mode, .row_sel, .col_sel, .phase,
    .dac_load, .dac_ones, .dac_step, .adc_sample, .adc_convert,
    .adc_code, .adc_valid(adc_valid[0]), .out_we, .out_phase,
    .prog_strobe, .prog_set, .prog_amp
  );

  assign dac_x = dac_ones ? {ROWS{8'hFF}} : in_buf;

  dl_dac_array #(.ROWS(ROWS), .IN_BITS(8)) u_dac (
    .clk, .rst_n, .load(dac_load), .x(dac_x), .step(dac_step), .dl_pulse(dac_pulse)
  );

  dl_switch_matrix #(.ROWS(ROWS)) u_dlsw (
    .mode, .dac_pulse, .row_sel(row_sel[$clog2(ROWS)-1:0]), .dl_read, .dl_prog
  );

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .dl_read, .dl_prog, .wl_on, .prog_strobe, .prog_set, .prog_amp, .bl_current
  );

  bl_switch_matrix #(.COLS(COLS), .GROUP(GROUP)) u_blsw (
    .mode, .phase, .col_sel(col_sel[$clog2(COLS)-1:0]), .bl_current, .tia_in, .wl_on
  );

  for (genvar g = 0; g < NGRP; g++) begin : g_adc
    tia_adc #(.ADC_BITS(8), .ADC_FS(ADC_FS)) u_adc (
      .clk, .rst_n, .clear(1'b0), .sample(adc_sample), .convert(adc_convert), .gain(tia_gain),
      .i_in(tia_in[g]), .code(adc_code[g]), .valid(adc_valid[g]), .sat(adc_sat[g])
    );
  end

endmodule
