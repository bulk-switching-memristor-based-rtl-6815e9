// axil_reg_adapter: AXI4-Lite slave front end shared by every bus slave.
//
// It accepts one transaction at a time (a write needs AW and W together;
// writes win over reads) and turns it into a simple register-bus request:
// `req` stays high with we/addr/wdata/wstrb until the slave answers with
// `ack` (in the same cycle or later), returning rdata and err. The write
// response or read data is then offered on B or R until taken. err maps to
// SLVERR. This adapter is this design's own; the chip description names the
// AXI bus but not its slaves' internals.
module axil_reg_adapter (
  input  logic                clk,
  input  logic                rst_n,
  input  cim_pkg::axil_req_t  axi_req,
  output cim_pkg::axil_rsp_t  axi_rsp,
  output logic                req,
  output logic                we,
  output logic [31:0]         addr,
  output logic [31:0]         wdata,
  output logic [3:0]          wstrb,
  input  logic                ack,
  input  logic [31:0]         rdata,
  input  logic                err
);
  import cim_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_WREQ, S_RREQ, S_B, S_R} state_e;
  state_e      state_q;
  logic [31:0] rdata_q;
  logic        err_q;

  wire take_w = (state_q == S_IDLE) && axi_req.aw_valid && axi_req.w_valid;
  wire take_r = (state_q == S_IDLE) && !take_w && axi_req.ar_valid;

  always_comb begin
    axi_rsp          = '0;
    axi_rsp.aw_ready = take_w;
    axi_rsp.w_ready  = take_w;
    axi_rsp.ar_ready = take_r;
    axi_rsp.b_valid  = (state_q == S_B);
    axi_rsp.b_resp   = err_q ? RESP_SLVERR : RESP_OKAY;
    axi_rsp.r_valid  = (state_q == S_R);
    axi_rsp.r_data   = rdata_q;
    axi_rsp.r_resp   = err_q ? RESP_SLVERR : RESP_OKAY;
  end

  assign req = (state_q == S_WREQ) || (state_q == S_RREQ);
  assign we  = (state_q == S_WREQ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      addr <= '0; wdata <= '0; wstrb <= '0; rdata_q <= '0; err_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (take_w) begin
            addr <= axi_req.aw_addr; wdata <= axi_req.w_data; wstrb <= axi_req.w_strb;
            state_q <= S_WREQ;
          end else if (take_r) begin
            addr <= axi_req.ar_addr;
            state_q <= S_RREQ;
          end
        end
        S_WREQ: if (ack) begin err_q <= err; state_q <= S_B; end
        S_RREQ: if (ack) begin err_q <= err; rdata_q <= rdata; state_q <= S_R; end
        S_B:    if (axi_req.b_ready) state_q <= S_IDLE;
        S_R:    if (axi_req.r_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a response, once offered, stays (with its data) until taken
  logic        b_hold_q, r_hold_q;
  logic [31:0] r_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_hold_q <= 1'b0; r_hold_q <= 1'b0; r_data_q <= '0;
    end else begin
      b_hold_q <= axi_rsp.b_valid && !axi_req.b_ready;
      r_hold_q <= axi_rsp.r_valid && !axi_req.r_ready;
      r_data_q <= axi_rsp.r_data;
      a_b_stable: assert (!b_hold_q || axi_rsp.b_valid);
      a_r_stable: assert (!r_hold_q || (axi_rsp.r_valid && axi_rsp.r_data == r_data_q));
    end
  end

endmodule
