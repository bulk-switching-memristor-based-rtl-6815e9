// dl_dac_array: digital side of the 64 drive-line DACs of one CIM tile.
//
// Each drive line receives its 8-bit input as a train of 8 one-bit pulses of
// fixed amplitude; the n-th pulse carries the n-th bit of the input, least
// significant bit first, so that the halving sample-and-add ADC weights the
// last (most significant) pulse by 1/2, as in the bit-serial scheme of the
// chip. A '1' bit means "apply the read voltage for this cycle", a '0' means
// "apply nothing"; the analog pulse amplitude itself is outside this module.
//
// Interface and timing: `load` captures `x` (one byte per row) into a shift
// register per row; `dl_pulse` is the current bit of every row, valid from the
// cycle after `load`; `step` shifts every register one bit to the right at the
// next clock edge. `load` has priority over `step`. Reset clears all registers.
module dl_dac_array #(
  parameter int unsigned ROWS    = cim_pkg::ROWS,
  parameter int unsigned IN_BITS = cim_pkg::IN_BITS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            load,
  input  logic [ROWS-1:0][IN_BITS-1:0]    x,
  input  logic                            step,
  output logic [ROWS-1:0]                 dl_pulse
);

  logic [ROWS-1:0][IN_BITS-1:0] sh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q <= '0;
    end else if (load) begin
      sh_q <= x;
    end else if (step) begin
      for (int r = 0; r < ROWS; r++) sh_q[r] <= sh_q[r] >> 1;
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) dl_pulse[r] = sh_q[r][0];
  end

endmodule
