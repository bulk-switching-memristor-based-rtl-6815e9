// apb_bridge: AXI4-Lite to APB bridge for the SoC's slow peripherals.
//
// The SoC hangs its UART, GPIO and SPI controllers on an APB bus below the
// AXI bus. Each AXI access becomes one APB transfer: a SETUP cycle (psel high,
// penable low) and ACCESS cycles (penable high) until the peripheral raises
// pready; prdata and pslverr are returned as AXI read data and SLVERR.
// Address bits [13:12] select the peripheral (0 UART, 1 GPIO, 2 SPI) and bits
// [11:0] go out as paddr; index 3 answers SLVERR without an APB transfer.
// The APB level follows the SoC; the 4 kB windows are this design's choice.
module apb_bridge #(
  parameter int unsigned N_PERIPH = 3
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  cim_pkg::axil_req_t                  axi_req,
  output cim_pkg::axil_rsp_t                  axi_rsp,
  output cim_pkg::apb_req_t [N_PERIPH-1:0]    apb_req,
  input  cim_pkg::apb_rsp_t [N_PERIPH-1:0]    apb_rsp
);
  import cim_pkg::*;

  logic        req, we, ack, err;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  wstrb;

  axil_reg_adapter u_axi (
    .clk, .rst_n, .axi_req, .axi_rsp,
    .req, .we, .addr, .wdata, .wstrb, .ack, .rdata, .err
  );

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_ACCESS} state_e;
  state_e state_q;

  wire [1:0] idx   = addr[13:12];
  wire       valid = (int'(idx) < N_PERIPH);

  always_comb begin
    for (int p = 0; p < N_PERIPH; p++) begin
      apb_req[p]         = '0;
      apb_req[p].pwrite  = we;
      apb_req[p].paddr   = addr[11:0];
      apb_req[p].pwdata  = wdata;
      apb_req[p].psel    = (state_q != S_IDLE) && (int'(idx) == p);
      apb_req[p].penable = (state_q == S_ACCESS) && (int'(idx) == p);
    end
    ack   = 1'b0;
    err   = 1'b0;
    rdata = '0;
    if (req && !valid) begin
      ack = 1'b1; err = 1'b1;
    end else if (state_q == S_ACCESS) begin
      for (int p = 0; p < N_PERIPH; p++)
        if (int'(idx) == p && apb_rsp[p].pready) begin
          ack = 1'b1; err = apb_rsp[p].pslverr; rdata = apb_rsp[p].prdata;
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= S_IDLE;
    else unique case (state_q)
      S_IDLE:   if (req && valid) state_q <= S_SETUP;
      S_SETUP:  state_q <= S_ACCESS;
      S_ACCESS: if (ack) state_q <= S_IDLE;
      default:  state_q <= S_IDLE;
    endcase
  end

endmodule
