// cim_soc: top level of the compute-in-memory system-on-chip.
//
// Four self-contained CIM tiles, each a 64x64 bulk-RRAM crossbar with its own
// DACs, ADCs, timing controller and write-and-verify sequencer, sit on an AXI
// bus together with the 32 kB instruction memory, the 512 kB data memory, the
// configuration registers and a DMA engine; an APB bridge below the AXI bus
// serves the UART, GPIO and SPI controllers. The processor that runs the
// system (a RISC-V core in the chip) is not part of this RTL: its data port is
// the `cpu_req`/`cpu_rsp` AXI4-Lite master port of this module. Likewise the
// PLL (clock input, `pll_cfg` output) and the per-tile word-line DACs
// (`wl_dac_code` outputs) are analog parts outside it.
// The block list follows the chip; the address map (cim_pkg) is this design's:
//   IMEM 0x0000_0000  DMEM 0x1000_0000  CFG 0x2000_0000  DMA 0x2000_1000
//   UART 0x3000_0000  GPIO 0x3000_1000  SPI 0x3000_2000  tile t 0x4000_0000+t*0x1000
// A tile whose TILE_EN bit is clear is held in reset.
module cim_soc #(
  parameter int unsigned N_TILES    = 4,
  parameter int unsigned IMEM_BYTES = 32 * 1024,
  parameter int unsigned DMEM_BYTES = 512 * 1024,
  parameter int unsigned GPIO_W     = 16
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  cim_pkg::axil_req_t                    cpu_req,
  output cim_pkg::axil_rsp_t                    cpu_rsp,
  output logic                                  uart_tx,
  input  logic                                  uart_rx,
  output logic [GPIO_W-1:0]                     gpio_o,
  output logic [GPIO_W-1:0]                     gpio_oe,
  input  logic [GPIO_W-1:0]                     gpio_i,
  output logic                                  spi_sclk,
  output logic                                  spi_mosi,
  input  logic                                  spi_miso,
  output logic                                  spi_cs_n,
  output logic [31:0]                           pll_cfg,
  output logic [N_TILES-1:0][cim_pkg::WLDAC_BITS-1:0] wl_dac_code,
  output logic [N_TILES-1:0]                    tile_busy,
  output logic                                  bus_conflict
);
  import cim_pkg::*;

  axil_req_t [1:0]          m_req;
  axil_rsp_t [1:0]          m_rsp;
  axil_req_t [N_SLAVES-1:0] s_req;
  axil_rsp_t [N_SLAVES-1:0] s_rsp;
  apb_req_t  [2:0]          apb_req;
  apb_rsp_t  [2:0]          apb_rsp;
  logic      [N_TILES-1:0]  tile_en;

  // Tiles that are absent or switched off answer DECERR instead of stalling.
  logic [N_SLAVES-1:0] slave_en;
  always_comb begin
    slave_en = '1;
    for (int t = 0; t < 4; t++) slave_en[S_TILE + t] = (t < N_TILES) && tile_en[t % N_TILES];
  end

  assign m_req[0] = cpu_req;
  assign cpu_rsp  = m_rsp[0];

  axil_xbar #(.N_MASTERS(2), .N_SLAVES(N_SLAVES)) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp,
    .slave_en, .conflict(bus_conflict)
  );

  sram #(.BYTES(IMEM_BYTES)) u_imem (.clk, .rst_n, .axi_req(s_req[S_IMEM]), .axi_rsp(s_rsp[S_IMEM]));
  sram #(.BYTES(DMEM_BYTES)) u_dmem (.clk, .rst_n, .axi_req(s_req[S_DMEM]), .axi_rsp(s_rsp[S_DMEM]));

  config_reg #(.N_TILES(N_TILES)) u_cfg (
    .clk, .rst_n, .axi_req(s_req[S_CFG]), .axi_rsp(s_rsp[S_CFG]), .pll_cfg, .tile_en
  );

  dma u_dma (
    .clk, .rst_n, .s_req(s_req[S_DMA]), .s_rsp(s_rsp[S_DMA]), .m_req(m_req[1]), .m_rsp(m_rsp[1])
  );

  apb_bridge #(.N_PERIPH(3)) u_apb (
    .clk, .rst_n, .axi_req(s_req[S_APB]), .axi_rsp(s_rsp[S_APB]), .apb_req, .apb_rsp
  );
  uart u_uart (.clk, .rst_n, .apb_req(apb_req[0]), .apb_rsp(apb_rsp[0]), .tx(uart_tx), .rx(uart_rx));
  gpio #(.WIDTH(GPIO_W)) u_gpio (
    .clk, .rst_n, .apb_req(apb_req[1]), .apb_rsp(apb_rsp[1]), .gpio_o, .gpio_oe, .gpio_i
  );
  spi_master u_spi (
    .clk, .rst_n, .apb_req(apb_req[2]), .apb_rsp(apb_rsp[2]),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  for (genvar t = 0; t < 4; t++) begin : g_tile
    if (t < N_TILES) begin : g_on
      logic tile_rst_n;
      assign tile_rst_n = rst_n && tile_en[t];
      cim_tile u_tile (
        .clk, .rst_n(tile_rst_n), .axi_req(s_req[S_TILE + t]), .axi_rsp(s_rsp[S_TILE + t]),
        .wl_dac_code(wl_dac_code[t]), .busy(tile_busy[t])
      );
    end else begin : g_off
      assign s_rsp[S_TILE + t] = '0;
    end
  end

endmodule
