// Integer register file of the Snitch core.
//
// Two combinational read ports and one write port, flip-flop based (the
// FF-based variant the area results are given for). NrRegs selects between the
// base integer profile (32 registers, RV32I) and the embedded profile (16,
// RV32E). Register 0 reads as zero and is never written. A write becomes
// visible to the reads in the cycle after it is presented. Only the FF-based
// variant is written here; the latch-based one is a standard-cell choice.
module snitch_regfile #(
  parameter int unsigned NrRegs = 32,
  parameter int unsigned Width  = 32,
  localparam int unsigned AW    = $clog2(NrRegs)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [AW-1:0]    raddr_a_i,
  output logic [Width-1:0] rdata_a_o,
  input  logic [AW-1:0]    raddr_b_i,
  output logic [Width-1:0] rdata_b_o,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [Width-1:0] wdata_i
);
  logic [Width-1:0] mem_q [NrRegs];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NrRegs; i++) mem_q[i] <= '0;
    end else if (we_i && waddr_i != '0) begin
      mem_q[waddr_i] <= wdata_i;
    end
  end

  assign rdata_a_o = (raddr_a_i == '0) ? '0 : mem_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0) ? '0 : mem_q[raddr_b_i];
endmodule
