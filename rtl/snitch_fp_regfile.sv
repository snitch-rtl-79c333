// FP register file of the FP subsystem: 32 x 64 bit, flip-flop based, three
// combinational read ports (rs1, rs2, rs3 of a fused multiply-add) and two
// write ports (FPU results and FP load results, so the two never contend).
// Port 0 wins if both write the same register in the same cycle. The size is
// the paper's; the two write ports are this design's choice.
module snitch_fp_regfile #(
  parameter int unsigned NrRegs = 32,
  parameter int unsigned Width  = 64,
  localparam int unsigned AW    = $clog2(NrRegs)
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [2:0][AW-1:0]  raddr_i,
  output logic [2:0][Width-1:0] rdata_o,
  input  logic [1:0]          we_i,
  input  logic [1:0][AW-1:0]  waddr_i,
  input  logic [1:0][Width-1:0] wdata_i
);
  logic [Width-1:0] mem_q [NrRegs];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NrRegs; i++) mem_q[i] <= '0;
    end else begin
      if (we_i[1]) mem_q[waddr_i[1]] <= wdata_i[1];
      if (we_i[0]) mem_q[waddr_i[0]] <= wdata_i[0];
    end
  end

  for (genvar p = 0; p < 3; p++) begin : gen_read
    assign rdata_o[p] = mem_q[raddr_i[p]];
  end
endmodule
