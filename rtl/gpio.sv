// gpio: APB general-purpose I/O port of the SoC.
//
// WIDTH pins, each with an output value and an output enable; pin inputs pass
// a two-flop synchroniser before they can be read. Registers (this design's):
//   0x0 OUT RW, 0x4 OE RW, 0x8 IN RO; other addresses answer pslverr.
// Zero-wait-state APB slave (pready always high); reset clears OUT and OE.
module gpio #(
  parameter int unsigned WIDTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cim_pkg::apb_req_t  apb_req,
  output cim_pkg::apb_rsp_t  apb_rsp,
  output logic [WIDTH-1:0]   gpio_o,
  output logic [WIDTH-1:0]   gpio_oe,
  input  logic [WIDTH-1:0]   gpio_i
);
  logic [WIDTH-1:0] sync1_q, sync2_q;
  wire  acc = apb_req.psel && apb_req.penable;

  always_comb begin
    apb_rsp         = '0;
    apb_rsp.pready  = 1'b1;
    unique case (apb_req.paddr[11:2])
      10'd0:   apb_rsp.prdata = 32'(gpio_o);
      10'd1:   apb_rsp.prdata = 32'(gpio_oe);
      10'd2:   begin apb_rsp.prdata = 32'(sync2_q); apb_rsp.pslverr = apb_req.pwrite; end
      default: apb_rsp.pslverr = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_o <= '0; gpio_oe <= '0; sync1_q <= '0; sync2_q <= '0;
    end else begin
      sync1_q <= gpio_i;
      sync2_q <= sync1_q;
      if (acc && apb_req.pwrite) begin
        if (apb_req.paddr[11:2] == 10'd0) gpio_o  <= apb_req.pwdata[WIDTH-1:0];
        if (apb_req.paddr[11:2] == 10'd1) gpio_oe <= apb_req.pwdata[WIDTH-1:0];
      end
    end
  end

endmodule
