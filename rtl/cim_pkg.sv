// cim_pkg: types and constants shared by the compute-in-memory SoC.
//
// The array geometry (64x64 cells, 8-bit inputs, 8-bit ADC, one ADC per
// group of 8 bit lines) follows the tile described for the chip. Current
// units, the AXI4-Lite/APB bundles, the tile operation encoding and the
// address map are choices of this design.
package cim_pkg;

  // ---- tile geometry -----------------------------------------------------
  localparam int unsigned ROWS       = 64;  // drive lines
  localparam int unsigned COLS       = 64;  // bit lines
  localparam int unsigned IN_BITS    = 8;   // DAC input precision (bit-serial pulses)
  localparam int unsigned ADC_BITS   = 8;   // ADC output precision
  localparam int unsigned GROUP      = 8;   // bit lines sharing one TIA/ADC
  localparam int unsigned LEVEL_BITS = 7;   // 128 conductance levels per cell
  localparam int unsigned AMP_BITS   = 4;   // program pulse amplitude step (1.5 V + 0.1 V * amp)
  localparam int unsigned WLDAC_BITS = 10;  // word-line DAC resolution
  localparam int unsigned I_BITS     = 14;  // column current, in units of one conductance step

  typedef logic [I_BITS-1:0] current_t;

  // ---- tile operations -----------------------------------------------------
  typedef enum logic [1:0] {
    MODE_IDLE = 2'd0,
    MODE_MAC  = 2'd1,  // all rows driven bit-serially, all columns read
    MODE_READ = 2'd2,  // one row driven with an all-ones input, one column read
    MODE_PROG = 2'd3   // one set or reset pulse on one cell
  } op_mode_e;

  typedef enum logic [2:0] {
    OP_MAC   = 3'd0,
    OP_READ  = 3'd1,
    OP_SET   = 3'd2,
    OP_RESET = 3'd3
  } tile_op_e;

  typedef struct packed {
    tile_op_e              op;
    logic [5:0]            row;
    logic [5:0]            col;
    logic [AMP_BITS-1:0]   amp;
  } tile_cmd_t;

  // ---- AXI4-Lite ------------------------------------------------------------
  typedef struct packed {
    logic        aw_valid;
    logic [31:0] aw_addr;
    logic        w_valid;
    logic [31:0] w_data;
    logic [3:0]  w_strb;
    logic        b_ready;
    logic        ar_valid;
    logic [31:0] ar_addr;
    logic        r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic        b_valid;
    logic [1:0]  b_resp;
    logic        ar_ready;
    logic        r_valid;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
  } axil_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  // ---- APB --------------------------------------------------------------------
  typedef struct packed {
    logic        psel;
    logic        penable;
    logic        pwrite;
    logic [11:0] paddr;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic        pready;
    logic [31:0] prdata;
    logic        pslverr;
  } apb_rsp_t;

  // ---- address map (bits 31:12 select a 4 kB page unless noted) -----------------
  localparam logic [31:0] IMEM_BASE = 32'h0000_0000;  // 32 kB
  localparam logic [31:0] DMEM_BASE = 32'h1000_0000;  // 512 kB
  localparam logic [31:0] CFG_BASE  = 32'h2000_0000;
  localparam logic [31:0] DMA_BASE  = 32'h2000_1000;
  localparam logic [31:0] APB_BASE  = 32'h3000_0000;  // UART +0x0000, GPIO +0x1000, SPI +0x2000
  localparam logic [31:0] TILE_BASE = 32'h4000_0000;  // tile t at +t*0x1000

  // slave indices on the interconnect
  localparam int unsigned S_IMEM = 0;
  localparam int unsigned S_DMEM = 1;
  localparam int unsigned S_CFG  = 2;
  localparam int unsigned S_DMA  = 3;
  localparam int unsigned S_APB  = 4;
  localparam int unsigned S_TILE = 5;  // 5..8 for tiles 0..3
  localparam int unsigned N_SLAVES = 9;

endpackage
