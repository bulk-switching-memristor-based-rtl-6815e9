// tb_axil_xbar: two masters drive the interconnect at the same time; every
// slave port is backed by a small SRAM. Each master writes a value that
// encodes (master, slave, offset) into every slave's window and reads all of
// them back, so a wrong decode or a crossed response shows up as a wrong
// value. Also checks DECERR for unmapped addresses and for a
// slave whose enable is low, and that arbitration
// conflicts really occurred and both masters were served.
module tb_axil_xbar;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t [1:0] m_req;
  axil_rsp_t [1:0] m_rsp;
  axil_req_t [N_SLAVES-1:0] s_req;
  axil_rsp_t [N_SLAVES-1:0] s_rsp;
  logic conflict;
  logic [N_SLAVES-1:0] slave_en = '1;
  int checks = 0, failures = 0, n_conflict = 0;

  axil_xbar dut (.*);
  for (genvar s = 0; s < N_SLAVES; s++) begin : g_s
    sram #(.BYTES(4096)) u_mem (.clk, .rst_n, .axi_req(s_req[s]), .axi_rsp(s_rsp[s]));
  end
  always #5 clk = ~clk;
  always @(posedge clk) if (conflict) n_conflict++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mw(input int m, input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    m_req[m].aw_valid = 1; m_req[m].aw_addr = a; m_req[m].w_valid = 1; m_req[m].w_data = d;
    m_req[m].w_strb = 4'hF; m_req[m].b_ready = 1;
    #1;
    while (!(m_rsp[m].aw_ready && m_rsp[m].w_ready)) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    m_req[m].aw_valid = 0; m_req[m].w_valid = 0;
    while (!m_rsp[m].b_valid) begin @(negedge clk); #1; end
    resp = m_rsp[m].b_resp;
    @(posedge clk); #1;
    m_req[m].b_ready = 0;
  endtask

  task automatic mr(input int m, input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    m_req[m].ar_valid = 1; m_req[m].ar_addr = a; m_req[m].r_ready = 1;
    #1;
    while (!m_rsp[m].ar_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    m_req[m].ar_valid = 0;
    while (!m_rsp[m].r_valid) begin @(negedge clk); #1; end
    d = m_rsp[m].r_data; resp = m_rsp[m].r_resp;
    @(posedge clk); #1;
    m_req[m].r_ready = 0;
  endtask

  function automatic logic [31:0] base(int s);
    case (s)
      S_IMEM: return IMEM_BASE;
      S_DMEM: return DMEM_BASE;
      S_CFG:  return CFG_BASE;
      S_DMA:  return DMA_BASE;
      S_APB:  return APB_BASE;
      default: return TILE_BASE + 32'((s - S_TILE) * 32'h1000);
    endcase
  endfunction

  task automatic master_run(input int m);
    logic [1:0] rsp; logic [31:0] d;
    for (int s = 0; s < N_SLAVES; s++)
      for (int k = 0; k < 4; k++) begin
        mw(m, base(s) + 32'(m * 64 + k * 4), {8'(m), 8'(s), 16'(k)}, rsp);
        checks++; if (rsp != RESP_OKAY) failures++;
      end
    for (int s = 0; s < N_SLAVES; s++)
      for (int k = 0; k < 4; k++) begin
        mr(m, base(s) + 32'(m * 64 + k * 4), d, rsp);
        checks++;
        if (d != {8'(m), 8'(s), 16'(k)} || rsp != RESP_OKAY) begin
          failures++;
          if (failures < 10) $display("m%0d s%0d k%0d: got %h", m, s, k, d);
        end
      end
  endtask

  initial begin
    logic [1:0] rsp; logic [31:0] d;
    m_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      master_run(0);
      master_run(1);
    join
    mw(0, 32'h5000_0000, 32'h1, rsp);  checks++; if (rsp != RESP_DECERR) failures++;
    mr(1, 32'h3000_3000, d, rsp);      checks++; if (rsp != RESP_DECERR) failures++;
    mr(0, 32'h4000_4000, d, rsp);      checks++; if (rsp != RESP_DECERR) failures++;
    slave_en[S_TILE + 1] = 0;
    mr(0, base(S_TILE + 1), d, rsp);    checks++; if (rsp != RESP_DECERR) failures++;
    slave_en[S_TILE + 1] = 1;
    mr(1, base(S_TILE + 1) + 64, d, rsp); checks++; if (rsp != RESP_OKAY || d != {8'd1, 8'(S_TILE + 1), 16'd0}) failures++;
    mr(0, base(S_DMEM), d, rsp);       checks++; if (d != {8'd0, 8'(S_DMEM), 16'd0}) failures++;
    checks++; if (n_conflict == 0) failures++;
    $display("conflicts=%0d", n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
