// Snitch cluster (top level): NrHives Hives of NrCoresPerHive core complexes,
// a shared banked TCDM with one atomic unit per bank, the TCDM interconnect,
// the cluster peripherals and the cluster crossbar.
//
// TCDM: NrBanks banks of TcdmSize/NrBanks bytes, word interleaved. The
// interconnect has two ports per core plus one port used by the crossbar, so
// that the rest of the system (and other clusters) can reach this cluster's
// TCDM through the cluster slave port.
// Cluster crossbar: masters are the cores' accesses outside the TCDM, the
// Hives' instruction refills and the cluster slave port (sys_in_*); targets
// are the peripherals, the TCDM and the cluster master port (sys_out_*)
// towards the system crossbar and main memory, which are not part of this
// design. The FPUs are external IP: every core's FPU link is a port of the
// cluster. Defaults: 8 cores in one Hive, 128 KiB of TCDM in 32 banks, 8 KiB
// of shared instruction cache, 16-entry sequence buffers, 4-loop SSRs.
// Lint note: Verilator reports rst_ni as "flopped as both synchronous and
// async" (SYNCASYNCNET) only for the flattened cluster. rst_ni is used solely
// as the asynchronous active-low reset of every flip-flop and in the
// "disable iff" clauses of the embedded assertions; no module runs it into
// data logic, and none of the sub-blocks checked alone raises the warning.
module snitch_cluster import snitch_pkg::*; #(
  parameter int unsigned NrHives       = 1,
  parameter int unsigned NrCoresPerHive = 8,
  parameter int unsigned NrBanks       = 32,
  parameter int unsigned TcdmSize      = 128 * 1024,
  parameter int unsigned ICacheSize    = 8192,
  parameter int unsigned SeqDepth      = 16,
  parameter int unsigned SsrLoops      = 4,
  parameter logic [31:0] BootAddr      = snitch_pkg::BOOT_ADDR,
  localparam int unsigned NrCores      = NrHives * NrCoresPerHive
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // cluster master port (towards the system crossbar)
  output mem_req_t    sys_out_req_o,
  output logic        sys_out_valid_o,
  input  logic        sys_out_ready_i,
  input  mem_rsp_t    sys_out_rsp_i,
  input  logic        sys_out_rsp_valid_i,
  // cluster slave port (from the system crossbar)
  input  mem_req_t    sys_in_req_i,
  input  logic        sys_in_valid_i,
  output logic        sys_in_ready_o,
  output mem_rsp_t    sys_in_rsp_o,
  output logic        sys_in_rsp_valid_o,
  // FPU links of all cores
  output fpu_req_t [NrCores-1:0] fpu_req_o,
  output logic [NrCores-1:0]     fpu_req_valid_o,
  input  logic [NrCores-1:0]     fpu_req_ready_i,
  input  fpu_rsp_t [NrCores-1:0] fpu_rsp_i,
  input  logic [NrCores-1:0]     fpu_rsp_valid_i,
  output logic [NrCores-1:0]     fpu_rsp_ready_o,
  // activity, for observation
  output logic [NrCores-1:0] retire_o,
  output logic [NrCores-1:0] fpu_op_o,
  output logic [NrCores-1:0] fpss_issue_o,
  output logic [NrCores-1:0] seq_issue_o,
  output logic [NrCores-1:0] core_stall_o,
  output logic [NrCores-1:0] wake_up_o,
  output logic [NrHives-1:0] icache_miss_o,
  output logic [NrHives-1:0] div_busy_o,
  output logic [$clog2(2*NrCores+2)-1:0] tcdm_conflicts_o
);
  localparam int unsigned NrTcdmPorts = 2 * NrCores + 1;
  localparam int unsigned Words       = TcdmSize / NrBanks / 8;
  localparam int unsigned AW          = $clog2(Words);
  localparam int unsigned IW          = $clog2(NrTcdmPorts);
  localparam int unsigned NrMasters   = NrCores + NrHives + 1;

  mem_req_t [NrTcdmPorts-1:0] tcdm_req;
  logic [NrTcdmPorts-1:0]     tcdm_valid, tcdm_ready, tcdm_rsp_valid;
  mem_rsp_t [NrTcdmPorts-1:0] tcdm_rsp;

  mem_req_t [NrMasters-1:0] m_req;
  logic [NrMasters-1:0]     m_valid, m_ready, m_rsp_valid;
  mem_rsp_t [NrMasters-1:0] m_rsp;

  logic [NrCores-1:0] wake_up;

  // ---------------------------------------------------------------- Hives
  for (genvar h = 0; h < NrHives; h++) begin : gen_hive
    localparam int unsigned C0 = h * NrCoresPerHive;
    snitch_hive #(.NrCores(NrCoresPerHive), .HartBase(C0), .BootAddr(BootAddr),
                  .TcdmSize(TcdmSize), .ICacheSize(ICacheSize / NrHives),
                  .SeqDepth(SeqDepth), .SsrLoops(SsrLoops)) i_hive (
      .clk_i, .rst_ni, .wake_up_i (wake_up[C0 +: NrCoresPerHive]),
      .tcdm_req_o (tcdm_req[2*C0 +: 2*NrCoresPerHive]),
      .tcdm_valid_o (tcdm_valid[2*C0 +: 2*NrCoresPerHive]),
      .tcdm_ready_i (tcdm_ready[2*C0 +: 2*NrCoresPerHive]),
      .tcdm_rsp_i (tcdm_rsp[2*C0 +: 2*NrCoresPerHive]),
      .tcdm_rsp_valid_i (tcdm_rsp_valid[2*C0 +: 2*NrCoresPerHive]),
      .ext_req_o (m_req[C0 +: NrCoresPerHive]), .ext_valid_o (m_valid[C0 +: NrCoresPerHive]),
      .ext_ready_i (m_ready[C0 +: NrCoresPerHive]), .ext_rsp_i (m_rsp[C0 +: NrCoresPerHive]),
      .ext_rsp_valid_i (m_rsp_valid[C0 +: NrCoresPerHive]),
      .refill_req_o (m_req[NrCores + h]), .refill_valid_o (m_valid[NrCores + h]),
      .refill_ready_i (m_ready[NrCores + h]), .refill_rsp_i (m_rsp[NrCores + h]),
      .refill_rsp_valid_i (m_rsp_valid[NrCores + h]),
      .fpu_req_o (fpu_req_o[C0 +: NrCoresPerHive]),
      .fpu_req_valid_o (fpu_req_valid_o[C0 +: NrCoresPerHive]),
      .fpu_req_ready_i (fpu_req_ready_i[C0 +: NrCoresPerHive]),
      .fpu_rsp_i (fpu_rsp_i[C0 +: NrCoresPerHive]),
      .fpu_rsp_valid_i (fpu_rsp_valid_i[C0 +: NrCoresPerHive]),
      .fpu_rsp_ready_o (fpu_rsp_ready_o[C0 +: NrCoresPerHive]),
      .retire_o (retire_o[C0 +: NrCoresPerHive]), .fpu_op_o (fpu_op_o[C0 +: NrCoresPerHive]),
      .fpss_issue_o (fpss_issue_o[C0 +: NrCoresPerHive]),
      .seq_issue_o (seq_issue_o[C0 +: NrCoresPerHive]),
      .core_stall_o (core_stall_o[C0 +: NrCoresPerHive]),
      .icache_miss_o (icache_miss_o[h]), .div_busy_o (div_busy_o[h])
    );
  end

  // ---------------------------------------------------------------- crossbar
  assign m_req[NrMasters-1]   = sys_in_req_i;
  assign m_valid[NrMasters-1] = sys_in_valid_i;
  assign sys_in_ready_o       = m_ready[NrMasters-1];
  assign sys_in_rsp_o         = m_rsp[NrMasters-1];
  assign sys_in_rsp_valid_o   = m_rsp_valid[NrMasters-1];

  mem_req_t [2:0] s_req;
  logic [2:0]     s_valid, s_ready, s_rsp_valid;
  mem_rsp_t [2:0] s_rsp;
  snitch_cluster_xbar #(.NrMasters(NrMasters), .NrSlaves(3), .TcdmSize(TcdmSize)) i_xbar (
    .clk_i, .rst_ni,
    .m_req_i (m_req), .m_valid_i (m_valid), .m_ready_o (m_ready),
    .m_rsp_o (m_rsp), .m_rsp_valid_o (m_rsp_valid),
    .s_req_o (s_req), .s_valid_o (s_valid), .s_ready_i (s_ready),
    .s_rsp_i (s_rsp), .s_rsp_valid_i (s_rsp_valid)
  );

  // slave 0: peripherals
  logic [$clog2(NrTcdmPorts+1)-1:0] conflicts;
  snitch_cluster_periph #(.NrCores(NrCores), .TcdmSize(TcdmSize),
                          .CW($clog2(NrTcdmPorts+1))) i_periph (
    .clk_i, .rst_ni,
    .req_i (s_req[0]), .req_valid_i (s_valid[0]), .req_ready_o (s_ready[0]),
    .rsp_o (s_rsp[0]), .rsp_valid_o (s_rsp_valid[0]),
    .fpu_op_i (fpu_op_o), .retire_i (retire_o), .conflicts_i (conflicts),
    .wake_up_o (wake_up)
  );
  assign wake_up_o        = wake_up;
  assign tcdm_conflicts_o = conflicts;

  // slave 1: TCDM (last interconnect port)
  assign tcdm_req[NrTcdmPorts-1]   = s_req[1];
  assign tcdm_valid[NrTcdmPorts-1] = s_valid[1];
  assign s_ready[1]                = tcdm_ready[NrTcdmPorts-1];
  assign s_rsp[1]                  = tcdm_rsp[NrTcdmPorts-1];
  assign s_rsp_valid[1]            = tcdm_rsp_valid[NrTcdmPorts-1];

  // slave 2: cluster master port
  assign sys_out_req_o   = s_req[2];
  assign sys_out_valid_o = s_valid[2];
  assign s_ready[2]      = sys_out_ready_i;
  assign s_rsp[2]        = sys_out_rsp_i;
  assign s_rsp_valid[2]  = sys_out_rsp_valid_i;

  // ---------------------------------------------------------------- TCDM
  mem_req_t [NrBanks-1:0]         b_req;
  logic [NrBanks-1:0][AW-1:0]     b_word;
  logic [NrBanks-1:0][IW-1:0]     b_id, b_rsp_id;
  logic [NrBanks-1:0]             b_valid, b_ready, b_rsp_valid;
  logic [NrBanks-1:0][63:0]       b_rsp_data;

  tcdm_interconnect #(.NrPorts(NrTcdmPorts), .NrBanks(NrBanks), .Words(Words)) i_tcdm_xbar (
    .clk_i, .rst_ni,
    .req_i (tcdm_req), .req_valid_i (tcdm_valid), .req_ready_o (tcdm_ready),
    .rsp_o (tcdm_rsp), .rsp_valid_o (tcdm_rsp_valid),
    .bank_req_o (b_req), .bank_word_o (b_word), .bank_id_o (b_id), .bank_valid_o (b_valid),
    .bank_ready_i (b_ready), .bank_rsp_valid_i (b_rsp_valid), .bank_rsp_id_i (b_rsp_id),
    .bank_rsp_data_i (b_rsp_data), .conflicts_o (conflicts)
  );

  for (genvar b = 0; b < NrBanks; b++) begin : gen_bank
    logic          sram_req, sram_we;
    logic [AW-1:0] sram_addr;
    logic [63:0]   sram_wdata, sram_rdata;
    logic [7:0]    sram_be;
    tcdm_amo #(.Words(Words), .IdWidth(IW)) i_amo (
      .clk_i, .rst_ni,
      .req_valid_i (b_valid[b]), .req_ready_o (b_ready[b]), .req_word_i (b_word[b]),
      .req_i (b_req[b]), .req_id_i (b_id[b]),
      .rsp_valid_o (b_rsp_valid[b]), .rsp_id_o (b_rsp_id[b]), .rsp_data_o (b_rsp_data[b]),
      .bank_req_o (sram_req), .bank_we_o (sram_we), .bank_addr_o (sram_addr),
      .bank_wdata_o (sram_wdata), .bank_be_o (sram_be), .bank_rdata_i (sram_rdata)
    );
    tcdm_bank #(.Words(Words)) i_bank (
      .clk_i, .req_i (sram_req), .we_i (sram_we), .addr_i (sram_addr),
      .wdata_i (sram_wdata), .be_i (sram_be), .rdata_o (sram_rdata)
    );
  end
endmodule
