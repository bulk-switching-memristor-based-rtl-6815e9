// tb_dma: the DMA's register port is driven by the AXI bus tasks; its master
// port talks to a memory slave emulated here with random ready and response
// delays. Copies of several lengths are checked word for word against the
// memory, including back-to-back starts and LEN = 0. A copy whose source
// reaches the slave's error address must stop with ERR set, leave COUNT at
// the words already moved, and a start while busy must return SLVERR.
module tb_dma;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t m_req, d_req;
  axil_rsp_t m_rsp, d_rsp;
  int checks = 0, failures = 0;
  logic [31:0] mem [4096];
  localparam logic [31:0] ERR_ADDR = 32'h0000_3F00;

  dma dut (.clk, .rst_n, .s_req(m_req), .s_rsp(m_rsp), .m_req(d_req), .m_rsp(d_rsp));
  always #5 clk = ~clk;
  `include "axil_bfm.svh"

  // Emulated memory slave: one read and one write handled independently.
  logic        r_pend, b_pend;
  logic [31:0] r_addr;
  logic [1:0]  b_resp_q;
  always @(posedge clk) begin
    if (!rst_n) begin
      d_rsp <= '0; r_pend <= 0; b_pend <= 0;
    end else begin
      d_rsp.ar_ready <= 0; d_rsp.aw_ready <= 0; d_rsp.w_ready <= 0;
      if (d_req.ar_valid && !d_rsp.ar_ready && !r_pend && !d_rsp.r_valid && ($urandom % 3 == 0)) begin
        d_rsp.ar_ready <= 1; r_pend <= 1; r_addr <= d_req.ar_addr;
      end
      if (r_pend && ($urandom % 2 == 0)) begin
        r_pend <= 0; d_rsp.r_valid <= 1;
        d_rsp.r_data <= mem[r_addr[13:2]];
        d_rsp.r_resp <= (r_addr == ERR_ADDR) ? RESP_SLVERR : RESP_OKAY;
      end
      if (d_rsp.r_valid && d_req.r_ready) d_rsp.r_valid <= 0;
      if (d_req.aw_valid && d_req.w_valid && !d_rsp.aw_ready && !b_pend && !d_rsp.b_valid && ($urandom % 3 == 0)) begin
        d_rsp.aw_ready <= 1; d_rsp.w_ready <= 1; b_pend <= 1;
        mem[d_req.aw_addr[13:2]] <= d_req.w_data;
        b_resp_q <= (d_req.aw_addr >= 32'h4000) ? RESP_SLVERR : RESP_OKAY;
      end
      if (b_pend && ($urandom % 2 == 0)) begin
        b_pend <= 0; d_rsp.b_valid <= 1; d_rsp.b_resp <= b_resp_q;
      end
      if (d_rsp.b_valid && d_req.b_ready) d_rsp.b_valid <= 0;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_idle(output logic [31:0] st);
    logic [1:0] rsp;
    do axil_read(DMA_BASE + 32'h10, st, rsp); while (st[0]);
  endtask

  initial begin
    logic [1:0] rsp; logic [31:0] st, cnt, d;
    int src, dst, len;
    axil_idle();
    foreach (mem[i]) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      len = (t == 0) ? 0 : 1 + $urandom % 40;
      src = 4 * ($urandom % 1000);
      dst = 4 * (2000 + $urandom % 1000);
      axil_write(DMA_BASE + 32'h0, src, rsp);
      axil_write(DMA_BASE + 32'h4, dst, rsp);
      axil_write(DMA_BASE + 32'h8, len, rsp);
      axil_write(DMA_BASE + 32'hC, 1, rsp);
      checks++; if (rsp != RESP_OKAY) failures++;
      if (len > 2) begin
        axil_write(DMA_BASE + 32'hC, 1, rsp);
        checks++; if (rsp != RESP_SLVERR) failures++;
      end
      wait_idle(st);
      checks++; if (st[2:1] != 2'b01) failures++;
      axil_read(DMA_BASE + 32'h14, cnt, rsp);
      checks++; if (cnt != len) failures++;
      for (int k = 0; k < len; k++) begin
        checks++;
        if (mem[(dst / 4) + k] != mem[(src / 4) + k]) failures++;
      end
    end
    // Read error part-way through: 5 words copied, then stop.
    mem[(32'h3000 / 4) + 200] = 32'hDEAD_BEEF;
    axil_write(DMA_BASE + 32'h0, ERR_ADDR - 20, rsp);
    axil_write(DMA_BASE + 32'h4, 32'h3000, rsp);
    axil_write(DMA_BASE + 32'h8, 10, rsp);
    axil_write(DMA_BASE + 32'hC, 1, rsp);
    wait_idle(st);
    checks++; if (!st[2]) failures++;
    axil_read(DMA_BASE + 32'h14, cnt, rsp);
    checks++; if (cnt != 5) failures++;
    checks++; if (mem[(32'h3000 / 4) + 5] == mem[ERR_ADDR / 4]) failures++;
    // Write error on the first word.
    axil_write(DMA_BASE + 32'h4, 32'h4000, rsp);
    axil_write(DMA_BASE + 32'h0, 0, rsp);
    axil_write(DMA_BASE + 32'hC, 1, rsp);
    wait_idle(st);
    checks++; if (!st[2]) failures++;
    axil_read(DMA_BASE + 32'h14, cnt, rsp);
    checks++; if (cnt != 0) failures++;
    // Register read-back.
    axil_read(DMA_BASE + 32'h8, d, rsp);
    checks++; if (d != 10 || rsp != RESP_OKAY) failures++;
    axil_read(DMA_BASE + 32'h40, d, rsp);
    checks++; if (rsp != RESP_SLVERR) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
