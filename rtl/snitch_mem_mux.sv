// Helper: merges NrInputs memory links onto one, with fixed priority (input 0
// first). The index of every granted request is queued (IdDepth entries), so
// the in-order responses of the target are routed back to their initiators. A
// request is only granted while the queue has room.
module snitch_mem_mux import snitch_pkg::*; #(
  parameter int unsigned NrInputs = 2,
  parameter int unsigned IdDepth  = 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  mem_req_t [NrInputs-1:0] in_req_i,
  input  logic [NrInputs-1:0]     in_valid_i,
  output logic [NrInputs-1:0]     in_ready_o,
  output mem_rsp_t                in_rsp_o,
  output logic [NrInputs-1:0]     in_rsp_valid_o,
  output mem_req_t                out_req_o,
  output logic                    out_valid_o,
  input  logic                    out_ready_i,
  input  mem_rsp_t                out_rsp_i,
  input  logic                    out_rsp_valid_i
);
  localparam int unsigned IW = (NrInputs > 1) ? $clog2(NrInputs) : 1;
  localparam int unsigned QW = (IdDepth > 1) ? $clog2(IdDepth) : 1;

  logic [IW-1:0] ids_q [IdDepth];
  logic [QW-1:0] w_q, r_q;
  logic [QW:0]   n_q;
  logic [IW-1:0] sel;
  logic          any, full, push;

  always_comb begin
    sel = '0; any = 1'b0;
    for (int i = NrInputs - 1; i >= 0; i--) if (in_valid_i[i]) begin sel = IW'(i); any = 1'b1; end
  end
  assign full        = (n_q == (QW+1)'(IdDepth));
  assign out_valid_o = any && !full;
  assign out_req_o   = in_req_i[sel];
  assign push        = out_valid_o && out_ready_i;
  always_comb begin
    in_ready_o = '0;
    in_ready_o[sel] = out_ready_i && !full;
  end

  assign in_rsp_o = out_rsp_i;
  always_comb begin
    in_rsp_valid_o = '0;
    in_rsp_valid_o[ids_q[r_q]] = out_rsp_valid_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_q <= '0; r_q <= '0; n_q <= '0;
      for (int i = 0; i < IdDepth; i++) ids_q[i] <= '0;
    end else begin
      if (push) begin
        ids_q[w_q] <= sel;
        w_q <= QW'((int'(w_q) + 1) % IdDepth);
      end
      if (out_rsp_valid_i) r_q <= QW'((int'(r_q) + 1) % IdDepth);
      n_q <= n_q + (QW+1)'(push) - (QW+1)'(out_rsp_valid_i);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) out_rsp_valid_i |-> n_q != '0);
endmodule
