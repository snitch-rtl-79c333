// Cluster peripherals: a small register file on the memory link that software
// uses to learn about the hardware and to wake cores.
//
// 64-bit registers, byte offset from the peripheral base:
//   0x00 TCDM start address (read only)    0x08 TCDM end address (read only)
//   0x10 number of cores (read only)       0x18 cycle counter (PMC)
//   0x20 FPU operations, all cores (PMC)   0x28 TCDM bank conflicts (PMC)
//   0x30 retired integer instructions, all cores (PMC)
//   0x38, 0x40 scratch registers (read/write)
//   0x48 wake-up: writing a bit mask raises the wake-up (inter-processor
//        interrupt) line of each selected core for one cycle; reads return 0.
// Writes to read-only registers are ignored. Every request is answered one
// cycle later. The register set follows the paper's list; offsets and widths
// are this design's choices.
module snitch_cluster_periph import snitch_pkg::*; #(
  parameter int unsigned NrCores  = 8,
  parameter logic [31:0] TcdmBase = snitch_pkg::TCDM_BASE,
  parameter int unsigned TcdmSize = 128 * 1024,
  parameter int unsigned CW       = 6     // width of the per-cycle conflict count
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  mem_req_t           req_i,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  output mem_rsp_t           rsp_o,
  output logic               rsp_valid_o,
  input  logic [NrCores-1:0] fpu_op_i,
  input  logic [NrCores-1:0] retire_i,
  input  logic [CW-1:0]      conflicts_i,
  output logic [NrCores-1:0] wake_up_o
);
  logic [63:0] cycle_q, fpu_q, confl_q, instr_q;
  logic [1:0][63:0] scratch_q;
  logic [NrCores-1:0] wake_q;
  logic [63:0] rdata_q;
  logic        rvalid_q;

  logic [3:0] reg_idx;
  assign reg_idx     = req_i.addr[6:3];
  assign req_ready_o = 1'b1;

  logic [63:0] rdata;
  always_comb begin
    unique case (reg_idx)
      4'd0:    rdata = 64'(TcdmBase);
      4'd1:    rdata = 64'(TcdmBase) + 64'(TcdmSize);
      4'd2:    rdata = 64'(NrCores);
      4'd3:    rdata = cycle_q;
      4'd4:    rdata = fpu_q;
      4'd5:    rdata = confl_q;
      4'd6:    rdata = instr_q;
      4'd7:    rdata = scratch_q[0];
      4'd8:    rdata = scratch_q[1];
      default: rdata = '0;
    endcase
  end

  function automatic logic [63:0] popcount(input logic [NrCores-1:0] v);
    popcount = '0;
    for (int i = 0; i < NrCores; i++) popcount = popcount + 64'(v[i]);
  endfunction

  function automatic logic [63:0] merge(input logic [63:0] old, input logic [63:0] d,
                                        input logic [7:0] s);
    for (int b = 0; b < 8; b++) if (s[b]) old[b*8 +: 8] = d[b*8 +: 8];
    return old;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cycle_q <= '0; fpu_q <= '0; confl_q <= '0; instr_q <= '0;
      scratch_q <= '0; wake_q <= '0; rdata_q <= '0; rvalid_q <= 1'b0;
    end else begin
      cycle_q  <= cycle_q + 64'd1;
      fpu_q    <= fpu_q + popcount(fpu_op_i);
      instr_q  <= instr_q + popcount(retire_i);
      confl_q  <= confl_q + 64'(conflicts_i);
      wake_q   <= '0;
      rvalid_q <= req_valid_i;
      rdata_q  <= rdata;
      if (req_valid_i && req_i.write) begin
        if (reg_idx == 4'd7) scratch_q[0] <= merge(scratch_q[0], req_i.data, req_i.strb);
        if (reg_idx == 4'd8) scratch_q[1] <= merge(scratch_q[1], req_i.data, req_i.strb);
        if (reg_idx == 4'd9) wake_q <= req_i.data[NrCores-1:0];
      end
      if (req_valid_i && req_i.write) rdata_q <= '0;
    end
  end

  assign rsp_o.data  = rdata_q;
  assign rsp_valid_o = rvalid_q;
  assign wake_up_o   = wake_q;
endmodule
