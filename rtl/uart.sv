// uart: APB UART of the SoC (8 data bits, no parity, 1 stop bit).
//
// Transmit: writing DATA while the transmitter is idle sends the byte, LSB
// first, each bit DIV clock cycles long (start bit 0, stop bit 1); a write
// while busy answers pslverr. Receive: the synchronised rx line is watched for
// a falling edge; bits are sampled in their middle (DIV/2 after the edge, then
// every DIV), a valid stop bit stores the byte and sets rx_valid; a new byte
// while rx_valid is still set raises the overrun flag. Reading DATA returns
// the byte and clears rx_valid. Frame format and registers are this design's:
//   0x0 DATA  RW   0x4 STATUS RO [0] tx busy, [1] rx valid, [2] overrun
//   0x8 DIV   RW   [15:0], reset 868 (115200 baud at 100 MHz)
// Zero-wait-state APB slave.
module uart (
  input  logic               clk,
  input  logic               rst_n,
  input  cim_pkg::apb_req_t  apb_req,
  output cim_pkg::apb_rsp_t  apb_rsp,
  output logic               tx,
  input  logic               rx
);
  logic [15:0] div_q;
  // transmitter
  logic [9:0]  tx_sh_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;
  wire         tx_busy = (tx_bits_q != 0);
  // receiver
  logic        rx_s1_q, rx_s2_q, rx_prev_q;
  logic        rx_act_q, rx_valid_q, ovr_q;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [7:0]  rx_sh_q, rx_data_q;

  wire acc    = apb_req.psel && apb_req.penable;
  wire [9:0] a = apb_req.paddr[11:2];

  always_comb begin
    apb_rsp        = '0;
    apb_rsp.pready = 1'b1;
    unique case (a)
      10'd0: begin apb_rsp.prdata = 32'(rx_data_q); apb_rsp.pslverr = apb_req.pwrite && tx_busy; end
      10'd1: begin apb_rsp.prdata = {29'b0, ovr_q, rx_valid_q, tx_busy}; apb_rsp.pslverr = apb_req.pwrite; end
      10'd2: apb_rsp.prdata = 32'(div_q);
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end

  assign tx = tx_sh_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q <= 16'd868;
      tx_sh_q <= '1; tx_bits_q <= '0; tx_cnt_q <= '0;
      rx_s1_q <= 1'b1; rx_s2_q <= 1'b1; rx_prev_q <= 1'b1;
      rx_act_q <= 1'b0; rx_valid_q <= 1'b0; ovr_q <= 1'b0;
      rx_bits_q <= '0; rx_cnt_q <= '0; rx_sh_q <= '0; rx_data_q <= '0;
    end else begin
      // register writes / reads
      if (acc && apb_req.pwrite && a == 10'd2) div_q <= apb_req.pwdata[15:0];
      if (acc && apb_req.pwrite && a == 10'd0 && !tx_busy) begin
        tx_sh_q   <= {1'b1, apb_req.pwdata[7:0], 1'b0};
        tx_bits_q <= 4'd10;
        tx_cnt_q  <= div_q - 1'b1;
      end else if (tx_busy) begin
        if (tx_cnt_q == 0) begin
          tx_sh_q   <= {1'b1, tx_sh_q[9:1]};
          tx_bits_q <= tx_bits_q - 1'b1;
          tx_cnt_q  <= div_q - 1'b1;
        end else begin
          tx_cnt_q <= tx_cnt_q - 1'b1;
        end
      end
      if (acc && !apb_req.pwrite && a == 10'd0) rx_valid_q <= 1'b0;
      // receiver
      rx_s1_q   <= rx;
      rx_s2_q   <= rx_s1_q;
      rx_prev_q <= rx_s2_q;
      if (!rx_act_q) begin
        if (rx_prev_q && !rx_s2_q) begin          // start bit edge
          rx_act_q  <= 1'b1;
          rx_bits_q <= 4'd0;
          rx_cnt_q  <= (div_q >> 1) - 1'b1;
        end
      end else if (rx_cnt_q != 0) begin
        rx_cnt_q <= rx_cnt_q - 1'b1;
      end else begin
        rx_cnt_q  <= div_q - 1'b1;
        rx_bits_q <= rx_bits_q + 1'b1;
        if (rx_bits_q == 4'd0) begin
          if (rx_s2_q) rx_act_q <= 1'b0;          // false start
        end else if (rx_bits_q <= 4'd8) begin
          rx_sh_q <= {rx_s2_q, rx_sh_q[7:1]};
        end else begin
          rx_act_q <= 1'b0;
          if (rx_s2_q) begin                       // good stop bit
            rx_data_q  <= rx_sh_q;
            rx_valid_q <= 1'b1;
            if (rx_valid_q) ovr_q <= 1'b1;
          end
        end
      end
    end
  end

endmodule
