// spi_master: APB SPI master of the SoC, used to read the board's serial
// flash that holds the input data set.
//
// Mode 0 (clock idles low, data sampled on the rising edge, changed on the
// falling edge), MSB first, 8 bits per transfer. Writing DATA while idle
// starts a transfer; each SCLK half period lasts DIV clock cycles. The chip
// select is a register bit, so several bytes can be sent under one select.
// Role, mode and registers are this design's choices:
//   0x0 DATA   W: byte to send (pslverr while busy); R: last byte received
//   0x4 STATUS RO [0] busy     0x8 DIV RW [7:0], reset 4     0xC CS RW [0] (1 = selected)
// Zero-wait-state APB slave.
module spi_master (
  input  logic               clk,
  input  logic               rst_n,
  input  cim_pkg::apb_req_t  apb_req,
  output cim_pkg::apb_rsp_t  apb_rsp,
  output logic               sclk,
  output logic               mosi,
  input  logic               miso,
  output logic               cs_n
);
  logic [7:0] div_q, cnt_q, tx_q, rx_q;
  logic [3:0] bits_q;     // bits left
  logic       busy_q, cs_q;

  wire acc = apb_req.psel && apb_req.penable;
  wire [9:0] a = apb_req.paddr[11:2];

  always_comb begin
    apb_rsp        = '0;
    apb_rsp.pready = 1'b1;
    unique case (a)
      10'd0: begin apb_rsp.prdata = 32'(rx_q); apb_rsp.pslverr = apb_req.pwrite && busy_q; end
      10'd1: begin apb_rsp.prdata = 32'(busy_q); apb_rsp.pslverr = apb_req.pwrite; end
      10'd2: apb_rsp.prdata = 32'(div_q);
      10'd3: apb_rsp.prdata = 32'(cs_q);
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end

  assign cs_n = !cs_q;
  assign mosi = tx_q[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q <= 8'd4; cnt_q <= '0; tx_q <= '0; rx_q <= '0; bits_q <= '0;
      busy_q <= 1'b0; cs_q <= 1'b0; sclk <= 1'b0;
    end else begin
      if (acc && apb_req.pwrite) begin
        if (a == 10'd2) div_q <= apb_req.pwdata[7:0];
        if (a == 10'd3) cs_q  <= apb_req.pwdata[0];
        if (a == 10'd0 && !busy_q) begin
          tx_q <= apb_req.pwdata[7:0]; bits_q <= 4'd8; busy_q <= 1'b1; cnt_q <= div_q - 1'b1;
        end
      end
      if (busy_q) begin
        if (cnt_q != 0) begin
          cnt_q <= cnt_q - 1'b1;
        end else begin
          cnt_q <= div_q - 1'b1;
          if (!sclk) begin                       // rising edge: sample
            sclk <= 1'b1;
            rx_q <= {rx_q[6:0], miso};
          end else begin                         // falling edge: next bit
            sclk   <= 1'b0;
            tx_q   <= {tx_q[6:0], 1'b0};
            bits_q <= bits_q - 1'b1;
            if (bits_q == 4'd1) busy_q <= 1'b0;
          end
        end
      end
    end
  end

endmodule
