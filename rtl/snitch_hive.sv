// Snitch Hive: NrCores core complexes that share one L1 instruction cache and
// one multiply/divide unit.
//
// Each CC's L0 refill port connects to a port of the shared instruction cache,
// whose own refill link leaves the Hive towards the cluster crossbar. The
// CCs' accelerator ports for the M extension meet in the shared unit; the
// hart field of a request is replaced by the CC's index inside the Hive, and
// the unit's single response is steered back by that index. TCDM, crossbar
// and FPU links of the CCs are brought out unchanged. The hart id of CC i is
// HartBase + i.
module snitch_hive import snitch_pkg::*; #(
  parameter int unsigned NrCores   = 8,
  parameter int unsigned HartBase  = 0,
  parameter logic [31:0] BootAddr  = snitch_pkg::BOOT_ADDR,
  parameter logic [31:0] TcdmBase  = snitch_pkg::TCDM_BASE,
  parameter int unsigned TcdmSize  = 128 * 1024,
  parameter int unsigned ICacheSize = 8192,
  parameter int unsigned SeqDepth  = 16,
  parameter int unsigned SsrLoops  = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [NrCores-1:0] wake_up_i,
  // TCDM ports, two per core (core i uses 2i and 2i+1)
  output mem_req_t [2*NrCores-1:0] tcdm_req_o,
  output logic [2*NrCores-1:0]     tcdm_valid_o,
  input  logic [2*NrCores-1:0]     tcdm_ready_i,
  input  mem_rsp_t [2*NrCores-1:0] tcdm_rsp_i,
  input  logic [2*NrCores-1:0]     tcdm_rsp_valid_i,
  // crossbar ports of the cores
  output mem_req_t [NrCores-1:0]   ext_req_o,
  output logic [NrCores-1:0]       ext_valid_o,
  input  logic [NrCores-1:0]       ext_ready_i,
  input  mem_rsp_t [NrCores-1:0]   ext_rsp_i,
  input  logic [NrCores-1:0]       ext_rsp_valid_i,
  // instruction refill of the shared cache
  output mem_req_t    refill_req_o,
  output logic        refill_valid_o,
  input  logic        refill_ready_i,
  input  mem_rsp_t    refill_rsp_i,
  input  logic        refill_rsp_valid_i,
  // FPU links
  output fpu_req_t [NrCores-1:0] fpu_req_o,
  output logic [NrCores-1:0]     fpu_req_valid_o,
  input  logic [NrCores-1:0]     fpu_req_ready_i,
  input  fpu_rsp_t [NrCores-1:0] fpu_rsp_i,
  input  logic [NrCores-1:0]     fpu_rsp_valid_i,
  output logic [NrCores-1:0]     fpu_rsp_ready_o,
  // activity
  output logic [NrCores-1:0] retire_o,
  output logic [NrCores-1:0] fpu_op_o,
  output logic [NrCores-1:0] fpss_issue_o,
  output logic [NrCores-1:0] seq_issue_o,
  output logic [NrCores-1:0] core_stall_o,
  output logic               icache_miss_o,
  output logic               div_busy_o
);
  localparam int unsigned LineWidth = 128;

  logic [NrCores-1:0][31:0] l0_addr;
  logic [NrCores-1:0]       l0_valid, l0_ready, l1_rsp_valid;
  logic [LineWidth-1:0]     l1_rsp_data;

  acc_req_t [NrCores-1:0] md_req;
  logic [NrCores-1:0]     md_req_valid, md_req_ready, md_rsp_ready;
  acc_rsp_t               md_rsp;
  logic                   md_rsp_valid;

  for (genvar c = 0; c < NrCores; c++) begin : gen_cc
    acc_req_t req;
    snitch_cc #(.BootAddr(BootAddr), .TcdmBase(TcdmBase), .TcdmSize(TcdmSize),
                .SeqDepth(SeqDepth), .SsrLoops(SsrLoops), .LineWidth(LineWidth)) i_cc (
      .clk_i, .rst_ni,
      .hart_id_i (32'(HartBase + c)), .wake_up_i (wake_up_i[c]),
      .refill_addr_o (l0_addr[c]), .refill_valid_o (l0_valid[c]), .refill_ready_i (l0_ready[c]),
      .refill_data_i (l1_rsp_data), .refill_rsp_valid_i (l1_rsp_valid[c]),
      .muldiv_req_o (req), .muldiv_req_valid_o (md_req_valid[c]),
      .muldiv_req_ready_i (md_req_ready[c]),
      .muldiv_rsp_i (md_rsp), .muldiv_rsp_valid_i (md_rsp_valid && md_rsp.hart == 4'(c)),
      .muldiv_rsp_ready_o (md_rsp_ready[c]),
      .tcdm_req_o (tcdm_req_o[2*c +: 2]), .tcdm_valid_o (tcdm_valid_o[2*c +: 2]),
      .tcdm_ready_i (tcdm_ready_i[2*c +: 2]), .tcdm_rsp_i (tcdm_rsp_i[2*c +: 2]),
      .tcdm_rsp_valid_i (tcdm_rsp_valid_i[2*c +: 2]),
      .ext_req_o (ext_req_o[c]), .ext_valid_o (ext_valid_o[c]), .ext_ready_i (ext_ready_i[c]),
      .ext_rsp_i (ext_rsp_i[c]), .ext_rsp_valid_i (ext_rsp_valid_i[c]),
      .fpu_req_o (fpu_req_o[c]), .fpu_req_valid_o (fpu_req_valid_o[c]),
      .fpu_req_ready_i (fpu_req_ready_i[c]), .fpu_rsp_i (fpu_rsp_i[c]),
      .fpu_rsp_valid_i (fpu_rsp_valid_i[c]), .fpu_rsp_ready_o (fpu_rsp_ready_o[c]),
      .retire_o (retire_o[c]), .fpu_op_o (fpu_op_o[c]), .fpss_issue_o (fpss_issue_o[c]),
      .seq_issue_o (seq_issue_o[c]), .core_stall_o (core_stall_o[c])
    );
    always_comb begin
      md_req[c]      = req;
      md_req[c].hart = 4'(c);
    end
  end

  snitch_icache_l1 #(.NrPorts(NrCores), .Size(ICacheSize), .LineWidth(LineWidth)) i_l1 (
    .clk_i, .rst_ni,
    .req_addr_i (l0_addr), .req_valid_i (l0_valid), .req_ready_o (l0_ready),
    .rsp_data_o (l1_rsp_data), .rsp_valid_o (l1_rsp_valid),
    .refill_req_o, .refill_req_valid_o (refill_valid_o), .refill_req_ready_i (refill_ready_i),
    .refill_rsp_i, .refill_rsp_valid_i, .miss_o (icache_miss_o)
  );

  localparam int unsigned CIW = (NrCores > 1) ? $clog2(NrCores) : 1;
  logic [CIW-1:0] md_rsp_idx;
  assign md_rsp_idx = CIW'(md_rsp.hart);

  snitch_muldiv #(.NrPorts(NrCores)) i_muldiv (
    .clk_i, .rst_ni,
    .req_i (md_req), .req_valid_i (md_req_valid), .req_ready_o (md_req_ready),
    .rsp_o (md_rsp), .rsp_valid_o (md_rsp_valid), .rsp_ready_i (md_rsp_ready[md_rsp_idx]),
    .div_busy_o
  );
endmodule
