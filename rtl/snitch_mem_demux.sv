// Helper: steers one memory link to one of NrOutputs targets chosen by
// select_i. The initiator expects its responses in order, and targets may
// answer with different latencies, so the demux only lets requests change
// target when none is outstanding; up to MaxOutstanding requests may be in
// flight to the same target.
module snitch_mem_demux import snitch_pkg::*; #(
  parameter int unsigned NrOutputs      = 2,
  parameter int unsigned MaxOutstanding = 4,
  localparam int unsigned SW = (NrOutputs > 1) ? $clog2(NrOutputs) : 1
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  mem_req_t                 in_req_i,
  input  logic [SW-1:0]            select_i,
  input  logic                     in_valid_i,
  output logic                     in_ready_o,
  output mem_rsp_t                 in_rsp_o,
  output logic                     in_rsp_valid_o,
  output mem_req_t [NrOutputs-1:0] out_req_o,
  output logic [NrOutputs-1:0]     out_valid_o,
  input  logic [NrOutputs-1:0]     out_ready_i,
  input  mem_rsp_t [NrOutputs-1:0] out_rsp_i,
  input  logic [NrOutputs-1:0]     out_rsp_valid_i
);
  localparam int unsigned CW = $clog2(MaxOutstanding + 1);
  logic [SW-1:0] last_q;
  logic [CW-1:0] cnt_q;
  logic          allowed, fire, back;

  assign allowed = (cnt_q == '0) || (select_i == last_q && cnt_q < CW'(MaxOutstanding));
  always_comb begin
    out_valid_o = '0;
    out_valid_o[select_i] = in_valid_i && allowed;
    for (int o = 0; o < NrOutputs; o++) out_req_o[o] = in_req_i;
  end
  assign in_ready_o = allowed && out_ready_i[select_i];
  assign fire       = in_valid_i && in_ready_o;

  always_comb begin
    in_rsp_o = '0;
    back     = 1'b0;
    for (int o = 0; o < NrOutputs; o++)
      if (out_rsp_valid_i[o]) begin in_rsp_o = out_rsp_i[o]; back = 1'b1; end
  end
  assign in_rsp_valid_o = back;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q <= '0; cnt_q <= '0;
    end else begin
      if (fire) last_q <= select_i;
      cnt_q <= cnt_q + CW'(fire) - CW'(back);
    end
  end
endmodule
