// tia_adc: BEHAVIOURAL MODEL of one transimpedance amplifier followed by the
// binary-weighted multi-cycle sampling ADC. The real part is a mixed-signal
// circuit; here the sampled voltage is an integer proportional to the
// bit-line current.
//
// Each cycle with `sample` high adds the present bit-line signal to the held
// value and halves the sum. After the 8 bit-serial input pulses the held value
// is D = 2^-1 V[8] + 2^-2 V[7] + ... + 2^-8 V[1], so the input bits are
// weighted by their significance and the bit-serial VMM is recovered in the
// analog domain. One conversion cycle (`convert`) then digitises it to an
// ADC_BITS code: 8 samples + 1 conversion = 9 cycles per output, as on chip.
// The held value is kept exactly in fixed point (8 fraction bits):
// acc = sum_n I_n * 2^(n-1). The code is floor(acc / FS) clipped to 255,
// where FS = ADC_FS >> gain is the full-scale current; `sat` flags clipping.
// The full-scale value and the 2-bit TIA gain are this design's choices.
//
// Timing: `code`, `sat` and `valid` are registered at the conversion edge;
// `valid` is high for the one following cycle. `convert` clears the held
// value, ready for the next 8 samples. `clear` clears it without converting.
module tia_adc #(
  parameter int unsigned ADC_BITS = cim_pkg::ADC_BITS,
  parameter int unsigned ADC_FS   = 2560
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    sample,
  input  logic                    convert,
  input  logic [1:0]              gain,
  input  cim_pkg::current_t       i_in,
  output logic [ADC_BITS-1:0]     code,
  output logic                    valid,
  output logic                    sat
);
  import cim_pkg::*;

  localparam int unsigned ACC_W = I_BITS + 9;
  localparam int unsigned CMAX  = (1 << ADC_BITS) - 1;

  logic [ACC_W-1:0] acc_q;
  logic [ACC_W-1:0] quotient;

  assign quotient = acc_q / ACC_W'(ADC_FS >> gain);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      code  <= '0;
      valid <= 1'b0;
      sat   <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (convert) begin
        code  <= (quotient > ACC_W'(CMAX)) ? ADC_BITS'(CMAX) : ADC_BITS'(quotient);
        sat   <= quotient > ACC_W'(CMAX);
        valid <= 1'b1;
        acc_q <= '0;
      end else if (clear) begin
        acc_q <= '0;
      end else if (sample) begin
        acc_q <= (acc_q + {i_in, 8'b0}) >> 1;
      end
    end
  end

endmodule
