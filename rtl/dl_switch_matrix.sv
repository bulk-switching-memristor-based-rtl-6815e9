// dl_switch_matrix: drive-line switch matrix of one CIM tile.
//
// The drive lines are shared by compute and programming. In MAC mode every
// DAC pulse reaches its drive line; in READ mode only the selected row is
// driven, so that one cell can be measured; in PROG mode no read pulse is
// passed and the selected row is switched to the program-pulse driver
// (`dl_prog` one-hot). IDLE leaves all lines floating. Which operations the
// switches support (set/reset/read/MAC) follows the chip description; the
// per-mode routing above is this design's reading of it.
//
// Purely combinational.
module dl_switch_matrix #(
  parameter int unsigned ROWS = cim_pkg::ROWS
) (
  input  cim_pkg::op_mode_e         mode,
  input  logic [ROWS-1:0]           dac_pulse,
  input  logic [$clog2(ROWS)-1:0]   row_sel,
  output logic [ROWS-1:0]           dl_read,
  output logic [ROWS-1:0]           dl_prog
);
  import cim_pkg::*;

  logic [ROWS-1:0] row_onehot;
  assign row_onehot = ROWS'(1) << row_sel;

  always_comb begin
    dl_read = '0;
    dl_prog = '0;
    unique case (mode)
      MODE_MAC:  dl_read = dac_pulse;
      MODE_READ: dl_read = dac_pulse & row_onehot;
      MODE_PROG: dl_prog = row_onehot;
      default:   ;
    endcase
  end

endmodule
