// write_verify: write-and-verify sequencer that programs one RRAM cell into a
// target conductance window using incremental step pulses.
//
// Flow (after the device programming scheme used for on-chip training):
//   1. read the cell; if it is already inside [lo, hi] the job is done.
//   2. SET phase: apply set pulses of increasing amplitude (1.5 V upward in
//      0.1 V steps, held at 3.0 V once reached), reading after each pulse,
//      until the read value reaches the set threshold (hi) or enters the window.
//   3. RESET phase: apply reset pulses of increasing amplitude, reading after
//      each, until the cell is no longer above hi. Inside the window: done.
//      Below lo (over-reset): this set-reset trial failed; start a new trial
//      from step 2 unless max_trials trials have been used, then give up.
// A cell found above the window at step 1 starts directly in the RESET phase.
// Reads are ADC codes of the selected cell with an all-ones input.
// The flow and the two-trial limit used during training follow the chip's
// programming scheme; the 0.1 V step, the first read, using hi as the set
// threshold and the cap of PULSE_LIMIT pulses per phase are this design's.
//
// Interface: `start` (one cycle, while !busy) latches row/col/lo/hi/max_trials.
// The sequencer then issues tile commands on cmd_valid/cmd_ready and waits for
// op_done (rd_code valid with it for reads). `ok` or `fail` is set when it
// ends and stays until the next start; `trials` is the number of set-reset
// trials used. `ev_over_reset` pulses on every over-reset.
module write_verify #(
  parameter int unsigned PULSE_LIMIT = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [5:0]                    row,
  input  logic [5:0]                    col,
  input  logic [7:0]                    lo,
  input  logic [7:0]                    hi,
  input  logic [2:0]                    max_trials,
  output logic                          busy,
  output logic                          ok,
  output logic                          fail,
  output logic [2:0]                    trials,
  output logic                          ev_over_reset,
  // tile command port
  output logic                          cmd_valid,
  input  logic                          cmd_ready,
  output cim_pkg::tile_cmd_t            cmd,
  input  logic                          op_done,
  input  logic [7:0]                    rd_code
);
  import cim_pkg::*;

  typedef enum logic [1:0] {P_INIT, P_SET, P_RESET} phase_e;
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;

  state_e              state_q;
  phase_e              phase_q;
  tile_op_e            op_q;
  logic [5:0]          row_q, col_q;
  logic [7:0]          lo_q, hi_q;
  logic [2:0]          max_q;
  logic [AMP_BITS-1:0] amp_q;
  logic [5:0]          npulse_q;

  localparam logic [AMP_BITS-1:0] AMP_MAX = '1;  // 1.5 V + 15 * 0.1 V = 3.0 V

  assign busy      = (state_q != S_IDLE);
  assign cmd_valid = (state_q == S_ISSUE);
  assign cmd       = '{op: op_q, row: row_q, col: col_q, amp: amp_q};

  wire in_window = (rd_code >= lo_q) && (rd_code <= hi_q);
  wire above     = (rd_code > hi_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;  phase_q <= P_INIT;  op_q <= OP_READ;
      row_q <= '0; col_q <= '0; lo_q <= '0; hi_q <= '0; max_q <= '0;
      amp_q <= '0; npulse_q <= '0;
      ok <= 1'b0; fail <= 1'b0; trials <= '0; ev_over_reset <= 1'b0;
    end else begin
      ev_over_reset <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          row_q <= row; col_q <= col; lo_q <= lo; hi_q <= hi; max_q <= max_trials;
          ok <= 1'b0; fail <= 1'b0; trials <= '0;
          phase_q <= P_INIT; op_q <= OP_READ; state_q <= S_ISSUE;
        end
        S_ISSUE: if (cmd_ready) state_q <= S_WAIT;
        S_WAIT: if (op_done) begin
          state_q <= S_ISSUE;
          if (op_q != OP_READ) begin
            op_q <= OP_READ;                       // verify after every pulse
          end else if (in_window) begin
            ok <= 1'b1; state_q <= S_IDLE;
          end else begin
            unique case (phase_q)
              P_INIT: begin
                trials <= 3'd1; amp_q <= '0; npulse_q <= '0;
                if (max_q == 3'd0) begin
                  fail <= 1'b1; state_q <= S_IDLE;
                end else if (above) begin
                  phase_q <= P_RESET; op_q <= OP_RESET;
                end else begin
                  phase_q <= P_SET; op_q <= OP_SET;
                end
              end
              P_SET: begin
                if (above) begin                   // set threshold reached
                  phase_q <= P_RESET; op_q <= OP_RESET; amp_q <= '0; npulse_q <= '0;
                end else if (npulse_q == 6'(PULSE_LIMIT)) begin
                  fail <= 1'b1; state_q <= S_IDLE;
                end else begin
                  op_q <= OP_SET;
                  if (npulse_q != '0 && amp_q != AMP_MAX) amp_q <= amp_q + 1'b1;
                end
              end
              default: begin                       // P_RESET
                if (above) begin
                  if (npulse_q == 6'(PULSE_LIMIT)) begin
                    fail <= 1'b1; state_q <= S_IDLE;
                  end else begin
                    op_q <= OP_RESET;
                    if (npulse_q != '0 && amp_q != AMP_MAX) amp_q <= amp_q + 1'b1;
                  end
                end else begin                     // over-reset
                  ev_over_reset <= 1'b1;
                  if (trials >= max_q) begin
                    fail <= 1'b1; state_q <= S_IDLE;
                  end else begin
                    trials <= trials + 1'b1;
                    phase_q <= P_SET; op_q <= OP_SET; amp_q <= '0; npulse_q <= '0;
                  end
                end
              end
            endcase
          end
        end
        default: state_q <= S_IDLE;
      endcase
      // count pulses of the current phase
      if (state_q == S_ISSUE && cmd_ready && op_q != OP_READ) npulse_q <= npulse_q + 1'b1;
    end
  end

endmodule
