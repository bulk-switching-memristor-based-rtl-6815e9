// config_reg: chip configuration registers on the AXI bus.
//
// Holds the settings the SoC's fixed-function parts need: the PLL setting
// word (brought out to the analog PLL) and one enable bit per CIM tile (a
// disabled tile is held in reset), plus a read-only identification word.
// The block appears in the SoC as "Config Reg"; its fields are this design's.
//
//   0x00 PLL_CFG  RW  reset 0x0000_0001
//   0x04 TILE_EN  RW  [N_TILES-1:0], reset all ones
//   0x08 ID       RO  0x4349_4D34 ("CIM4")
// Other addresses and writes to ID answer SLVERR. Answers in the request cycle.
module config_reg #(
  parameter int unsigned N_TILES = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cim_pkg::axil_req_t   axi_req,
  output cim_pkg::axil_rsp_t   axi_rsp,
  output logic [31:0]          pll_cfg,
  output logic [N_TILES-1:0]   tile_en
);
  logic        req, we, err;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  wstrb;

  axil_reg_adapter u_axi (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .req, .we, .addr, .wdata, .wstrb, .ack(req), .rdata, .err
  );

  always_comb begin
    rdata = '0;
    err   = 1'b0;
    unique case (addr[11:2])
      10'd0:   rdata = pll_cfg;
      10'd1:   rdata = 32'(tile_en);
      10'd2:   begin rdata = 32'h4349_4D34; err = we; end
      default: err = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pll_cfg <= 32'h0000_0001;
      tile_en <= '1;
    end else if (req && we && !err) begin
      if (addr[11:2] == 10'd0) begin
        for (int b = 0; b < 4; b++) if (wstrb[b]) pll_cfg[8*b +: 8] <= wdata[8*b +: 8];
      end else if (wstrb[0]) begin
        tile_en <= wdata[N_TILES-1:0];
      end
    end
  end

endmodule
