// axil_xbar: the SoC's AXI bus, an AXI4-Lite interconnect with N_MASTERS
// masters (the processor and the DMA engine) and N_SLAVES slaves.
//
// It carries one transaction at a time. When idle it grants a master that
// has a complete write (AW and W valid) or a read (AR valid) pending,
// round-robin among masters; the winner keeps the bus until its B or R
// handshake completes. At grant the address is decoded into a slave index
// (map in cim_pkg); the master's write or read channels are then connected
// to that slave only, and the other channel type is held off. An address
// that hits no slave, or a slave whose `slave_en` bit is low (a tile switched
// off and held in reset), is answered with DECERR by the interconnect itself.
// The bus is named by the chip description; this arbitration and decoding
// are this design's own. `conflict` pulses when a grant is made while
// another master is also waiting.
module axil_xbar #(
  parameter int unsigned N_MASTERS = 2,
  parameter int unsigned N_SLAVES  = cim_pkg::N_SLAVES
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  cim_pkg::axil_req_t [N_MASTERS-1:0]  m_req,
  output cim_pkg::axil_rsp_t [N_MASTERS-1:0]  m_rsp,
  output cim_pkg::axil_req_t [N_SLAVES-1:0]   s_req,
  input  cim_pkg::axil_rsp_t [N_SLAVES-1:0]   s_rsp,
  input  logic [N_SLAVES-1:0]                 slave_en,
  output logic                                conflict
);
  import cim_pkg::*;

  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;
  localparam int unsigned SW = $clog2(N_SLAVES + 1);
  localparam logic [SW-1:0] NO_SLAVE = SW'(N_SLAVES);

  function automatic logic [SW-1:0] decode(logic [31:0] a);
    logic [SW-1:0] s = NO_SLAVE;
    if (a[31:15] == IMEM_BASE[31:15])                 s = SW'(S_IMEM);
    else if (a[31:19] == DMEM_BASE[31:19])            s = SW'(S_DMEM);
    else if (a[31:12] == CFG_BASE[31:12])             s = SW'(S_CFG);
    else if (a[31:12] == DMA_BASE[31:12])             s = SW'(S_DMA);
    else if (a[31:14] == APB_BASE[31:14] && a[13:12] != 2'b11) s = SW'(S_APB);
    else if (a[31:14] == TILE_BASE[31:14])            s = SW'(S_TILE + int'(a[13:12]));
    if (int'(s) > N_SLAVES) s = NO_SLAVE;
    return s;
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_ERR_B, S_ERR_R} state_e;

  state_e          state_q;
  logic [MW-1:0]   gnt_q, last_q;
  logic            is_wr_q;
  logic [SW-1:0]   sel_q;

  logic [N_MASTERS-1:0] pend;
  always_comb
    for (int m = 0; m < N_MASTERS; m++)
      pend[m] = (m_req[m].aw_valid && m_req[m].w_valid) || m_req[m].ar_valid;

  // round-robin pick, starting after the last granted master
  logic [MW-1:0] pick;
  logic          any;
  always_comb begin
    pick = '0;
    any  = 1'b0;
    for (int k = 1; k <= N_MASTERS; k++) begin
      automatic int m = (int'(last_q) + k) % N_MASTERS;
      if (!any && pend[m]) begin
        pick = MW'(m);
        any  = 1'b1;
      end
    end
  end

  wire pick_wr = m_req[pick].aw_valid && m_req[pick].w_valid;
  wire [SW-1:0] pick_dec = decode(pick_wr ? m_req[pick].aw_addr : m_req[pick].ar_addr);
  wire [N_SLAVES:0] en_ext = {1'b0, slave_en};
  wire [SW-1:0] pick_sel = en_ext[pick_dec] ? pick_dec : NO_SLAVE;

  assign conflict = (state_q == S_IDLE) && any && ($countones(pend) > 1);

  // routing
  always_comb begin
    for (int s = 0; s < N_SLAVES; s++) s_req[s] = '0;
    for (int m = 0; m < N_MASTERS; m++) m_rsp[m] = '0;
    if (state_q == S_BUSY) begin
      automatic axil_req_t r = m_req[gnt_q];
      if (is_wr_q) begin
        r.ar_valid = 1'b0; r.r_ready = 1'b0;
      end else begin
        r.aw_valid = 1'b0; r.w_valid = 1'b0; r.b_ready = 1'b0;
      end
      s_req[sel_q] = r;
      m_rsp[gnt_q] = s_rsp[sel_q];
      if (is_wr_q) begin
        m_rsp[gnt_q].ar_ready = 1'b0; m_rsp[gnt_q].r_valid = 1'b0;
      end else begin
        m_rsp[gnt_q].aw_ready = 1'b0; m_rsp[gnt_q].w_ready = 1'b0; m_rsp[gnt_q].b_valid = 1'b0;
      end
    end else if (state_q == S_IDLE && any && pick_sel == NO_SLAVE) begin
      // decode error: accept the address here
      if (pick_wr) begin
        m_rsp[pick].aw_ready = 1'b1; m_rsp[pick].w_ready = 1'b1;
      end else begin
        m_rsp[pick].ar_ready = 1'b1;
      end
    end else if (state_q == S_ERR_B) begin
      m_rsp[gnt_q].b_valid = 1'b1; m_rsp[gnt_q].b_resp = RESP_DECERR;
    end else if (state_q == S_ERR_R) begin
      m_rsp[gnt_q].r_valid = 1'b1; m_rsp[gnt_q].r_resp = RESP_DECERR; m_rsp[gnt_q].r_data = '1;
    end
  end

  wire done_b = s_rsp[sel_q].b_valid && m_req[gnt_q].b_ready;
  wire done_r = s_rsp[sel_q].r_valid && m_req[gnt_q].r_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; gnt_q <= '0; last_q <= MW'(N_MASTERS - 1); is_wr_q <= 1'b0; sel_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (any) begin
          gnt_q   <= pick;
          last_q  <= pick;
          is_wr_q <= pick_wr;
          sel_q   <= pick_sel;
          if (pick_sel == NO_SLAVE) state_q <= pick_wr ? S_ERR_B : S_ERR_R;
          else                      state_q <= S_BUSY;
        end
        S_BUSY:  if (is_wr_q ? done_b : done_r) state_q <= S_IDLE;
        S_ERR_B: if (m_req[gnt_q].b_ready) state_q <= S_IDLE;
        S_ERR_R: if (m_req[gnt_q].r_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a granted slave index is always a real slave
  always_ff @(posedge clk) begin
    if (rst_n && state_q == S_BUSY) a_sel_valid: assert (sel_q < NO_SLAVE);
  end

endmodule
