// dma: single-channel word-copy DMA engine on the SoC's AXI bus.
//
// The processor hands bulk transfers (input vectors into a tile's buffer,
// MAC results back to data memory) to this engine. It has an AXI4-Lite slave
// port for its registers and an AXI4-Lite master port; once started it copies
// LEN 32-bit words from SRC to DST, one read followed by one write per word,
// addresses advancing by 4. An error response stops the copy and sets ERR.
// The chip description names DMA as the path by which the processor drives the
// tiles; its internals here are this design's. Registers:
//   0x00 SRC RW   0x04 DST RW   0x08 LEN RW (words)
//   0x0C CTRL W: [0] start (SLVERR while busy)
//   0x10 STATUS RO: [0] busy, [1] done, [2] error;  0x14 COUNT RO: words copied
module dma (
  input  logic                clk,
  input  logic                rst_n,
  input  cim_pkg::axil_req_t  s_req,
  output cim_pkg::axil_rsp_t  s_rsp,
  output cim_pkg::axil_req_t  m_req,
  input  cim_pkg::axil_rsp_t  m_rsp
);
  import cim_pkg::*;

  logic        req, we, err;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  wstrb;

  axil_reg_adapter u_axi (
    .clk, .rst_n, .axi_req(s_req), .axi_rsp(s_rsp),
    .req, .we, .addr, .wdata, .wstrb, .ack(req), .rdata, .err
  );

  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_B} state_e;
  state_e      state_q;
  logic [31:0] src_q, dst_q, len_q, cnt_q, data_q;
  logic        done_q, err_q;
  wire         busy = (state_q != S_IDLE);

  always_comb begin
    rdata = '0;
    err   = 1'b0;
    unique case (addr[11:2])
      10'd0: rdata = src_q;
      10'd1: rdata = dst_q;
      10'd2: rdata = len_q;
      10'd3: err   = !we || busy;
      10'd4: begin rdata = {29'b0, err_q, done_q, busy}; err = we; end
      10'd5: begin rdata = cnt_q; err = we; end
      default: err = 1'b1;
    endcase
    if (we && busy && addr[11:2] < 10'd3) err = 1'b1;
  end

  always_comb begin
    m_req          = '0;
    m_req.ar_valid = (state_q == S_AR);
    m_req.ar_addr  = src_q + (cnt_q << 2);
    m_req.r_ready  = (state_q == S_R);
    m_req.aw_valid = (state_q == S_AW);
    m_req.aw_addr  = dst_q + (cnt_q << 2);
    m_req.w_valid  = (state_q == S_AW);
    m_req.w_data   = data_q;
    m_req.w_strb   = 4'hF;
    m_req.b_ready  = (state_q == S_B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; src_q <= '0; dst_q <= '0; len_q <= '0; cnt_q <= '0; data_q <= '0;
      done_q <= 1'b0; err_q <= 1'b0;
    end else begin
      if (req && we && !err) begin
        unique case (addr[11:2])
          10'd0: src_q <= wdata;
          10'd1: dst_q <= wdata;
          10'd2: len_q <= wdata;
          10'd3: if (wdata[0]) begin
            cnt_q <= '0; done_q <= 1'b0; err_q <= 1'b0;
            state_q <= (len_q == 0) ? S_IDLE : S_AR;
            if (len_q == 0) done_q <= 1'b1;
          end
          default: ;
        endcase
      end
      unique case (state_q)
        S_AR: if (m_rsp.ar_ready) state_q <= S_R;
        S_R:  if (m_rsp.r_valid) begin
          data_q <= m_rsp.r_data;
          if (m_rsp.r_resp != RESP_OKAY) begin
            err_q <= 1'b1; done_q <= 1'b1; state_q <= S_IDLE;
          end else begin
            state_q <= S_AW;
          end
        end
        S_AW: if (m_rsp.aw_ready && m_rsp.w_ready) state_q <= S_B;
        S_B:  if (m_rsp.b_valid) begin
          if (m_rsp.b_resp != RESP_OKAY) begin
            err_q <= 1'b1; done_q <= 1'b1; state_q <= S_IDLE;
          end else if (cnt_q + 1 == len_q) begin
            cnt_q <= cnt_q + 1; done_q <= 1'b1; state_q <= S_IDLE;
          end else begin
            cnt_q <= cnt_q + 1; state_q <= S_AR;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
