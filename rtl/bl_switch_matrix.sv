// bl_switch_matrix: bit-line and word-line switching of one CIM tile.
//
// One TIA and ADC serve a group of GROUP adjacent bit lines (group g holds
// columns g*GROUP .. g*GROUP+GROUP-1), so a full-array MAC is read out in
// GROUP phases: in phase p, TIA g sees the current of column g*GROUP+p. The
// word lines run along the columns and gate the access transistors: all are
// on during MAC, only the selected column is on during READ and PROG.
// The sharing of one TIA/ADC by 8 bit lines follows the chip; the choice of
// adjacent columns as a group is this design's.
//
// Purely combinational; currents are integers in conductance-step units.
module bl_switch_matrix #(
  parameter int unsigned COLS  = cim_pkg::COLS,
  parameter int unsigned GROUP = cim_pkg::GROUP
) (
  input  cim_pkg::op_mode_e                      mode,
  input  logic [$clog2(GROUP)-1:0]               phase,
  input  logic [$clog2(COLS)-1:0]                col_sel,
  input  cim_pkg::current_t [COLS-1:0]           bl_current,
  output cim_pkg::current_t [COLS/GROUP-1:0]     tia_in,
  output logic [COLS-1:0]                        wl_on
);
  import cim_pkg::*;

  localparam int unsigned NGRP = COLS / GROUP;

  always_comb begin
    for (int g = 0; g < NGRP; g++) tia_in[g] = bl_current[g*GROUP + int'(phase)];
    unique case (mode)
      MODE_MAC:             wl_on = '1;
      MODE_READ, MODE_PROG: wl_on = COLS'(1) << col_sel;
      default:              wl_on = '0;
    endcase
  end

endmodule
