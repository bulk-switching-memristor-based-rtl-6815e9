// sram: on-chip SRAM with an AXI4-Lite slave port, used for the 32 kB
// instruction memory and the 512 kB data memory of the SoC.
//
// The memory is a word array with byte write strobes; an access answers one
// cycle after the request (registered read). The low log2(BYTES) address bits
// select the byte address; the interconnect has already decoded the rest.
// Sizes follow the SoC's memories; the array stands in for a foundry SRAM
// macro and the one-cycle latency is this design's choice.
module sram #(
  parameter int unsigned BYTES = 32768
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cim_pkg::axil_req_t  axi_req,
  output cim_pkg::axil_rsp_t  axi_rsp
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic        req, we, ack_q;
  logic [31:0] addr, wdata, rdata_q;
  logic [3:0]  wstrb;

  axil_reg_adapter u_axi (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .req, .we, .addr, .wdata, .wstrb, .ack(ack_q), .rdata(rdata_q), .err(1'b0)
  );

  logic [31:0] mem [WORDS];
  wire  [AW-1:0] widx = addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req && !ack_q) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (wstrb[b]) mem[widx][8*b +: 8] <= wdata[8*b +: 8];
      end
      rdata_q <= mem[widx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_q <= 1'b0;
    else        ack_q <= req && !ack_q;
  end

endmodule
