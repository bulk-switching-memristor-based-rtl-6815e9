// tile_regs: digital register interface of one CIM tile.
//
// The bus master (the processor or the DMA engine) reaches the tile through
// an AXI4-Lite slave port. The tile keeps the 64-byte input vector for the
// drive-line DACs, the 64 ADC codes of the last MAC, and the signed
// differential results: each weight is stored as a pair of cells on adjacent
// columns (positive on the even column, negative on the odd one), and the
// negative column's code is subtracted from the positive one's after the ADCs.
// The register map below is this design's own.
//
//   0x000-0x03C  IN[w]     RW  input bytes for rows 4w..4w+3 (byte b -> row 4w+b)
//   0x040-0x07C  OUT[w]    RO  ADC codes of columns 4w..4w+3
//   0x080-0x0FC  DIFF[k]   RO  OUT[2k] - OUT[2k+1], sign-extended to 32 bits
//   0x100        CMD       WO  [2:0] op (0 MAC, 1 READ, 2 SET, 3 RESET),
//                              [13:8] row, [21:16] col, [27:24] pulse amplitude step
//   0x104        CFG       RW  [1:0] TIA gain, [25:16] word-line DAC code
//   0x108        WV        WO  write-and-verify: [5:0] row, [13:8] col, [23:16] lo, [31:24] hi
//   0x10C        WV_TRIALS RW  [2:0] maximum set-reset trials (reset value 2)
//   0x110        STATUS    RO  [0] busy, [1] write-verify busy, [2] ok, [3] fail,
//                              [6:4] trials used, [15:8] last READ code,
//                              [16] ADC clipped since last MAC start, [31:24] over-resets
//   0x114        COUNT     RO  [15:0] MACs completed, [31:16] program pulses applied
// Writing CMD, WV or IN while the tile is busy is refused with SLVERR, as is
// any unmapped address. Registers answer in the cycle of the request.
module tile_regs #(
  parameter int unsigned ROWS  = cim_pkg::ROWS,
  parameter int unsigned COLS  = cim_pkg::COLS,
  parameter int unsigned GROUP = cim_pkg::GROUP
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  cim_pkg::axil_req_t                     axi_req,
  output cim_pkg::axil_rsp_t                     axi_rsp,
  // command to the timing controller
  output logic                                   cmd_valid,
  input  logic                                   cmd_ready,
  output cim_pkg::tile_cmd_t                     cmd,
  output logic [ROWS-1:0][7:0]                   in_buf,
  output logic [1:0]                             tia_gain,
  output logic [cim_pkg::WLDAC_BITS-1:0]         wl_dac_code,
  // write-and-verify sequencer
  output logic                                   wv_start,
  output logic [5:0]                             wv_row,
  output logic [5:0]                             wv_col,
  output logic [7:0]                             wv_lo,
  output logic [7:0]                             wv_hi,
  output logic [2:0]                             wv_max,
  input  logic                                   wv_busy,
  input  logic                                   wv_ok,
  input  logic                                   wv_fail,
  input  logic [2:0]                             wv_trials,
  input  logic                                   ev_over_reset,
  // results
  input  logic                                   tc_busy,
  input  logic                                   op_done,
  input  logic                                   rd_done,
  input  logic [7:0]                             rd_code,
  input  logic                                   out_we,
  input  logic [$clog2(GROUP)-1:0]               out_phase,
  input  logic [COLS/GROUP-1:0][7:0]             adc_code,
  input  logic [COLS/GROUP-1:0]                  adc_sat,
  input  logic                                   prog_strobe,
  output logic                                   busy
);
  import cim_pkg::*;

  localparam int unsigned NGRP = COLS / GROUP;

  logic        req, we, ack, err;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  wstrb;

  axil_reg_adapter u_axi (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .req, .we, .addr, .wdata, .wstrb, .ack, .rdata, .err
  );

  logic [COLS-1:0][7:0] out_buf;
  logic [7:0]  last_rd_q, n_over_q;
  logic [15:0] n_mac_q, n_pulse_q;
  logic        sat_q;

  assign busy = cmd_valid || tc_busy || wv_busy;

  wire [9:0] widx   = addr[11:2];
  wire       is_in  = (widx < 10'd16);
  wire       is_out = (widx >= 10'd16) && (widx < 10'd32);
  wire       is_dif = (widx >= 10'd32) && (widx < 10'd64);

  always_comb begin
    ack   = req;
    err   = 1'b0;
    rdata = '0;
    if (req) begin
      if (is_in) begin
        rdata = {in_buf[widx*4+3], in_buf[widx*4+2], in_buf[widx*4+1], in_buf[widx*4]};
        err   = we && busy;
      end else if (is_out) begin
        rdata = {out_buf[(widx-16)*4+3], out_buf[(widx-16)*4+2],
                 out_buf[(widx-16)*4+1], out_buf[(widx-16)*4]};
        err   = we;
      end else if (is_dif) begin
        rdata = 32'(signed'({1'b0, out_buf[(widx-32)*2]}) - signed'({1'b0, out_buf[(widx-32)*2+1]}));
        err   = we;
      end else begin
        unique case (widx)
          10'h40: begin rdata = '0; err = !we || busy; end
          10'h41: rdata = {6'b0, wl_dac_code, 14'b0, tia_gain};
          10'h42: begin rdata = '0; err = !we || busy; end
          10'h43: rdata = {29'b0, wv_max};
          10'h44: begin
            rdata = {n_over_q, 7'b0, sat_q, last_rd_q, 1'b0, wv_trials, wv_fail, wv_ok, wv_busy, busy};
            err   = we;
          end
          10'h45: begin rdata = {n_pulse_q, n_mac_q}; err = we; end
          default: err = 1'b1;
        endcase
      end
    end
  end

  wire wr_ok = req && we && !err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_buf <= '0; out_buf <= '0; cmd_valid <= 1'b0; cmd <= '0;
      tia_gain <= '0; wl_dac_code <= '0;
      wv_start <= 1'b0; wv_row <= '0; wv_col <= '0; wv_lo <= '0; wv_hi <= '0; wv_max <= 3'd2;
      last_rd_q <= '0; n_over_q <= '0; n_mac_q <= '0; n_pulse_q <= '0; sat_q <= 1'b0;
    end else begin
      wv_start <= 1'b0;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (wr_ok) begin
        if (is_in) begin
          for (int b = 0; b < 4; b++)
            if (wstrb[b]) in_buf[widx*4+b] <= wdata[8*b +: 8];
        end else begin
          unique case (widx)
            10'h40: begin
              cmd_valid <= 1'b1;
              cmd       <= '{op: tile_op_e'(wdata[2:0]), row: wdata[13:8], col: wdata[21:16], amp: wdata[27:24]};
              if (tile_op_e'(wdata[2:0]) == OP_MAC) sat_q <= 1'b0;
            end
            10'h41: begin tia_gain <= wdata[1:0]; wl_dac_code <= wdata[25:16]; end
            10'h42: begin
              wv_start <= 1'b1;
              wv_row <= wdata[5:0]; wv_col <= wdata[13:8]; wv_lo <= wdata[23:16]; wv_hi <= wdata[31:24];
            end
            10'h43: wv_max <= wdata[2:0];
            default: ;
          endcase
        end
      end
      if (out_we)
        for (int g = 0; g < NGRP; g++) out_buf[g*GROUP + int'(out_phase)] <= adc_code[g];
      if (out_we && |adc_sat) sat_q <= 1'b1;
      if (rd_done) last_rd_q <= rd_code;
      if (ev_over_reset && n_over_q != 8'hFF) n_over_q <= n_over_q + 1'b1;
      if (op_done && !rd_done && !prog_strobe) n_mac_q <= n_mac_q + 1'b1;
      if (prog_strobe) n_pulse_q <= n_pulse_q + 1'b1;
    end
  end

endmodule
