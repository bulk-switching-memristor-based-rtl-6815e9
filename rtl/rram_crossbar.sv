// rram_crossbar: BEHAVIOURAL MODEL of the 64x64 1T1R bulk-RRAM array of one
// tile. It is not synthesizable hardware: the real part is an analog array of
// memristors built above the CMOS logic.
//
// Each cell holds a conductance level 0..2^LEVEL_BITS-1 (128 levels). A cell
// with level L conducts G_OFF+L current units when its drive line carries a
// read pulse and its column's word line is on; the bit-line current is the
// sum over the driven rows (Ohm's and Kirchhoff's laws), I_j = sum_i x_i G_ij.
// With G_OFF = 14 the on/off ratio is about 10, like the 0.4-4 uA range of
// the device. Devices are fabricated in the on state, so every cell starts at
// a high level 96..127 chosen by a fixed hash of its position.
//
// Programming: on a clock edge with `prog_strobe`, every cell whose drive line
// is selected in `dl_prog` and whose word line is on moves up (`prog_set`) or
// down (reset) by 1 + prog_amp/2 levels plus a per-cell offset of 0 or 1, a
// simple stand-in for device-to-device variation, saturating at the ends.
// Larger pulse amplitude (1.5 V + 0.1 V * amp) gives a larger change, as in
// the incremental step pulse scheme. The step law is this model's choice.
//
// Timing: currents are combinational in dl_read/wl_on; level changes occur at
// the clock edge of the strobe.
module rram_crossbar #(
  parameter int unsigned ROWS       = cim_pkg::ROWS,
  parameter int unsigned COLS       = cim_pkg::COLS,
  parameter int unsigned LEVEL_BITS = cim_pkg::LEVEL_BITS,
  parameter int unsigned G_OFF      = 14
) (
  input  logic                              clk,
  input  logic [ROWS-1:0]                   dl_read,
  input  logic [ROWS-1:0]                   dl_prog,
  input  logic [COLS-1:0]                   wl_on,
  input  logic                              prog_strobe,
  input  logic                              prog_set,
  input  logic [cim_pkg::AMP_BITS-1:0]      prog_amp,
  output cim_pkg::current_t [COLS-1:0]      bl_current
);
  import cim_pkg::*;

  localparam int MAXL = (1 << LEVEL_BITS) - 1;

  typedef logic [COLS-1:0][LEVEL_BITS-1:0] row_t;

  function automatic row_t fab_row(int r);
    for (int c = 0; c < COLS; c++) fab_row[c] = LEVEL_BITS'(MAXL - ((r*37 + c*11) % 32));
  endfunction

  // levels of all cells, row-major; each row is held by its own generate block
  logic [ROWS-1:0][COLS-1:0][LEVEL_BITS-1:0] level;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    // starts in the as-fabricated (on) state
    logic [COLS-1:0][LEVEL_BITS-1:0] lv = fab_row(r);

    always_ff @(posedge clk) begin
      if (prog_strobe && dl_prog[r]) begin
        for (int c = 0; c < COLS; c++) begin
          if (wl_on[c]) begin
            automatic int step = 1 + int'(prog_amp) / 2 + (((r*7 + c*13) >> 2) & 1);
            automatic int nl   = prog_set ? int'(lv[c]) + step : int'(lv[c]) - step;
            if (nl > MAXL) nl = MAXL;
            if (nl < 0)    nl = 0;
            lv[c] <= LEVEL_BITS'(nl);
          end
        end
      end
    end

    assign level[r] = lv;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_comb begin
      bl_current[c] = '0;
      if (wl_on[c])
        for (int r = 0; r < ROWS; r++)
          if (dl_read[r]) bl_current[c] = bl_current[c] + current_t'(G_OFF) + current_t'(level[r][c]);
    end
  end

endmodule
