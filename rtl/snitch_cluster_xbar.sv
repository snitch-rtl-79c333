// Cluster crossbar: connects NrMasters initiators (cores' accesses outside
// the TCDM, the instruction-cache refill ports of the Hives and the cluster's
// slave port from the rest of the system) with NrSlaves targets (here: the
// cluster peripherals, the TCDM and the cluster's master port towards the
// system).
//
// The target is chosen by address through slave_sel(). Every target has a
// round-robin arbiter and a queue of the masters it has granted (IdDepth), so
// its in-order responses are routed back without tags. A master only changes
// target when none of its requests is outstanding, which keeps each master's
// responses in order. The paper's cluster crossbar is an AXI crossbar with
// burst support; here it carries the simpler memory link of this design (one
// 64-bit beat per request), and bursts are issued as consecutive requests.
module snitch_cluster_xbar import snitch_pkg::*; #(
  parameter int unsigned NrMasters = 10,
  parameter int unsigned NrSlaves  = 3,
  parameter int unsigned IdDepth   = 4,
  parameter logic [31:0] TcdmBase  = snitch_pkg::TCDM_BASE,
  parameter int unsigned TcdmSize  = 128 * 1024
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  mem_req_t [NrMasters-1:0] m_req_i,
  input  logic [NrMasters-1:0]     m_valid_i,
  output logic [NrMasters-1:0]     m_ready_o,
  output mem_rsp_t [NrMasters-1:0] m_rsp_o,
  output logic [NrMasters-1:0]     m_rsp_valid_o,
  output mem_req_t [NrSlaves-1:0]  s_req_o,
  output logic [NrSlaves-1:0]      s_valid_o,
  input  logic [NrSlaves-1:0]      s_ready_i,
  input  mem_rsp_t [NrSlaves-1:0]  s_rsp_i,
  input  logic [NrSlaves-1:0]      s_rsp_valid_i
);
  localparam int unsigned MW = (NrMasters > 1) ? $clog2(NrMasters) : 1;
  localparam int unsigned SW = (NrSlaves > 1) ? $clog2(NrSlaves) : 1;
  localparam int unsigned QW = (IdDepth > 1) ? $clog2(IdDepth) : 1;
  localparam int unsigned CW = 4;

  // 0: peripherals, 1: TCDM, 2: system (everything else)
  function automatic logic [SW-1:0] slave_sel(input logic [31:0] a);
    if ((a & PERIPH_MASK) == PERIPH_BASE) return SW'(0);
    if (a >= TcdmBase && a < TcdmBase + TcdmSize) return SW'(1);
    return SW'(NrSlaves - 1);
  endfunction

  logic [NrMasters-1:0][SW-1:0] tgt, last_q;
  logic [NrMasters-1:0][CW-1:0] out_q;
  logic [NrMasters-1:0]         allowed;
  for (genvar m = 0; m < NrMasters; m++) begin : gen_m
    assign tgt[m]     = slave_sel(m_req_i[m].addr);
    assign allowed[m] = (out_q[m] == '0) || (last_q[m] == tgt[m] && out_q[m] < CW'(15));
  end

  logic [NrSlaves-1:0][MW-1:0] rr_q, win;
  logic [NrSlaves-1:0]         any, full, grant;
  logic [MW-1:0] ids_q [NrSlaves][IdDepth];
  logic [NrSlaves-1:0][QW-1:0] w_q, r_q;
  logic [NrSlaves-1:0][QW:0]   n_q;

  // arbitration (independent of the slaves' ready signals)
  always_comb begin
    for (int s = 0; s < NrSlaves; s++) begin
      any[s] = 1'b0; win[s] = rr_q[s];
      for (int k = 0; k < NrMasters; k++) begin
        logic [MW-1:0] m;
        m = MW'((int'(rr_q[s]) + k) % NrMasters);
        if (!any[s] && m_valid_i[m] && allowed[m] && tgt[m] == SW'(s)) begin
          any[s] = 1'b1; win[s] = m;
        end
      end
      full[s]      = (n_q[s] == (QW+1)'(IdDepth));
      s_valid_o[s] = any[s] && !full[s];
      s_req_o[s]   = m_req_i[win[s]];
    end
  end

  // handshake
  always_comb begin
    m_ready_o = '0;
    for (int s = 0; s < NrSlaves; s++) begin
      grant[s] = s_valid_o[s] && s_ready_i[s];
      if (grant[s]) m_ready_o[win[s]] = 1'b1;
    end
  end

  always_comb begin
    m_rsp_valid_o = '0;
    for (int m = 0; m < NrMasters; m++) m_rsp_o[m] = '0;
    for (int s = 0; s < NrSlaves; s++) begin
      if (s_rsp_valid_i[s]) begin
        m_rsp_valid_o[ids_q[s][r_q[s]]] = 1'b1;
        m_rsp_o[ids_q[s][r_q[s]]]       = s_rsp_i[s];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q <= '0; w_q <= '0; r_q <= '0; n_q <= '0; last_q <= '0; out_q <= '0;
      for (int s = 0; s < NrSlaves; s++)
        for (int i = 0; i < IdDepth; i++) ids_q[s][i] <= '0;
    end else begin
      for (int s = 0; s < NrSlaves; s++) begin
        if (grant[s]) begin
          rr_q[s] <= MW'((int'(win[s]) + 1) % NrMasters);
          ids_q[s][w_q[s]] <= win[s];
          w_q[s] <= QW'((int'(w_q[s]) + 1) % IdDepth);
        end
        if (s_rsp_valid_i[s]) r_q[s] <= QW'((int'(r_q[s]) + 1) % IdDepth);
        n_q[s] <= n_q[s] + (QW+1)'(grant[s]) - (QW+1)'(s_rsp_valid_i[s]);
      end
      for (int m = 0; m < NrMasters; m++) begin
        if (m_valid_i[m] && m_ready_o[m]) last_q[m] <= tgt[m];
        out_q[m] <= out_q[m] + CW'(m_valid_i[m] && m_ready_o[m]) - CW'(m_rsp_valid_o[m]);
      end
    end
  end
endmodule
