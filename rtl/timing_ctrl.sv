// timing_ctrl: local timing controller of one CIM tile.
//
// It runs the analog front end cycle by cycle, independently of the bus
// master, for four operations (cim_pkg::tile_op_e):
//   OP_MAC   all 64 rows are driven bit-serially; the 64 columns are read in
//            GROUP=8 phases because one TIA/ADC serves 8 bit lines. Each phase
//            is 8 sample cycles (one per input bit, LSB first) plus one
//            conversion cycle, so a full-array MAC takes 8 x 9 = 72 cycles.
//   OP_READ  one row is driven with an all-ones input for 8 cycles and the
//            selected column is converted (9 cycles): a conductance read.
//   OP_SET / OP_RESET  one program pulse of amplitude step `amp` on one cell,
//            PULSE_CYCLES long; the device changes at the last pulse cycle.
// The 8+1-cycle phase and the 8 phases follow the chip; the exact ordering and
// the pulse length are this design's choices.
//
// Timing: a command is accepted when cmd_valid && cmd_ready (ready only when
// idle). The DACs are loaded in the accept cycle. For MAC, each phase's 8 ADC
// codes are written through out_we/out_phase the cycle after its conversion;
// `done` pulses with the last write, 73 cycles after accept. READ finishes 10
// cycles after accept, with the code on rd_code during the `done` cycle. A
// program pulse ends PULSE_CYCLES cycles after accept: `done` coincides with
// `prog_strobe`, and the cell has its new level from the next cycle.
module timing_ctrl #(
  parameter int unsigned COLS         = cim_pkg::COLS,
  parameter int unsigned GROUP        = cim_pkg::GROUP,
  parameter int unsigned PULSE_CYCLES = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // command
  input  logic                                   cmd_valid,
  output logic                                   cmd_ready,
  input  cim_pkg::tile_cmd_t                     cmd,
  output logic                                   done,
  output logic [cim_pkg::ADC_BITS-1:0]           rd_code,
  // front-end control
  output cim_pkg::op_mode_e                      mode,
  output logic [5:0]                             row_sel,
  output logic [5:0]                             col_sel,
  output logic [$clog2(GROUP)-1:0]               phase,
  output logic                                   dac_load,
  output logic                                   dac_ones,
  output logic                                   dac_step,
  output logic                                   adc_sample,
  output logic                                   adc_convert,
  input  logic [COLS/GROUP-1:0][cim_pkg::ADC_BITS-1:0] adc_code,
  input  logic                                   adc_valid,
  output logic                                   out_we,
  output logic [$clog2(GROUP)-1:0]               out_phase,
  output logic                                   prog_strobe,
  output logic                                   prog_set,
  output logic [cim_pkg::AMP_BITS-1:0]           prog_amp
);
  import cim_pkg::*;

  localparam int unsigned PW = $clog2(GROUP);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_PROG, S_WAIT} state_e;

  state_e          state_q;
  tile_cmd_t       cmd_q;
  logic [3:0]      cyc_q;      // 0..7 sample, 8 convert
  logic [PW-1:0]   phase_q;
  logic [7:0]      pcnt_q;
  logic            last_phase;

  assign cmd_ready  = (state_q == S_IDLE);
  assign row_sel    = cmd_q.row;
  assign col_sel    = cmd_q.col;
  assign phase      = phase_q;
  assign prog_set   = (cmd_q.op == OP_SET);
  assign prog_amp   = cmd_q.amp;
  assign last_phase = (cmd_q.op == OP_READ) || (phase_q == PW'(GROUP-1));

  always_comb begin
    unique case (state_q)
      S_CONV, S_WAIT: mode = (cmd_q.op == OP_MAC) ? MODE_MAC : MODE_READ;
      S_PROG:         mode = MODE_PROG;
      default:        mode = MODE_IDLE;
    endcase
  end

  wire accept = cmd_valid && cmd_ready;

  // DAC load at accept (MAC/READ) and at every conversion cycle for the next phase
  assign dac_load    = (accept && (cmd.op == OP_MAC || cmd.op == OP_READ)) ||
                       (state_q == S_CONV && cyc_q == 4'd8);
  assign dac_ones    = accept ? (cmd.op == OP_READ) : (cmd_q.op == OP_READ);
  assign adc_sample  = (state_q == S_CONV) && (cyc_q < 4'd8);
  assign dac_step    = adc_sample;
  assign adc_convert = (state_q == S_CONV) && (cyc_q == 4'd8);
  assign prog_strobe = (state_q == S_PROG) && (pcnt_q == 8'(PULSE_CYCLES-1));
  assign out_we      = adc_valid && (cmd_q.op == OP_MAC) && (state_q != S_IDLE);
  // the last conversion is valid in S_WAIT; a program pulse ends with its strobe
  assign done        = (state_q == S_WAIT && adc_valid) || prog_strobe;
  assign rd_code     = adc_code[cmd_q.col[5:PW]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      cmd_q     <= '0;
      cyc_q     <= '0;
      phase_q   <= '0;
      pcnt_q    <= '0;
      out_phase <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (accept) begin
          cmd_q  <= cmd;
          cyc_q  <= '0;
          pcnt_q <= '0;
          phase_q <= (cmd.op == OP_READ) ? cmd.col[PW-1:0] : '0;
          state_q <= (cmd.op == OP_MAC || cmd.op == OP_READ) ? S_CONV : S_PROG;
        end
        S_CONV: begin
          if (cyc_q == 4'd8) begin
            cyc_q     <= '0;
            out_phase <= phase_q;
            if (last_phase) state_q <= S_WAIT;
            else            phase_q <= phase_q + 1'b1;
          end else begin
            cyc_q <= cyc_q + 1'b1;
          end
        end
        S_WAIT: if (adc_valid) state_q <= S_IDLE;
        S_PROG: begin
          pcnt_q <= pcnt_q + 1'b1;
          if (prog_strobe) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
