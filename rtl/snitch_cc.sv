// Snitch core complex (CC): the integer core, its L0 instruction cache, the
// FPU sequencer (FREP), the FP subsystem and its two SSR lanes.
//
// Offload path: instructions of the M extension leave the CC on the
// accelerator port towards the Hive's shared multiply/divide unit; all FP
// instructions (and FREP) go to the FPU sequencer and from there to the FP
// subsystem. Integer results come back either from the FP subsystem (which
// has priority) or from the shared unit.
//
// Memory: the CC has two TCDM ports and one port towards the cluster
// crossbar. Accesses of the integer LSU and of the FP LSU are decoded by
// address: the core-private SSR configuration window (SSR_CFG_BASE, only for
// the integer core), the TCDM (TCDM_BASE, TcdmSize bytes) or everything else
// (cluster crossbar). TCDM port 0 is shared by the integer LSU, the FP LSU and
// SSR lane 0; TCDM port 1 belongs to SSR lane 1. The crossbar port is shared
// by the two LSUs. Sharing uses fixed priority in that order.
// The FPU is external: its link is brought out of the CC.
module snitch_cc import snitch_pkg::*; #(
  parameter logic [31:0] BootAddr  = snitch_pkg::BOOT_ADDR,
  parameter logic [31:0] TcdmBase  = snitch_pkg::TCDM_BASE,
  parameter int unsigned TcdmSize  = 128 * 1024,
  parameter bit          RVE       = 1'b0,
  parameter int unsigned SeqDepth  = 16,
  parameter int unsigned SsrLoops  = 4,
  parameter int unsigned L0Lines   = 4,
  parameter int unsigned LineWidth = 128
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] hart_id_i,
  input  logic        wake_up_i,
  // instruction refill towards the shared L1 cache
  output logic [31:0] refill_addr_o,
  output logic        refill_valid_o,
  input  logic        refill_ready_i,
  input  logic [LineWidth-1:0] refill_data_i,
  input  logic        refill_rsp_valid_i,
  // shared multiply/divide
  output acc_req_t    muldiv_req_o,
  output logic        muldiv_req_valid_o,
  input  logic        muldiv_req_ready_i,
  input  acc_rsp_t    muldiv_rsp_i,
  input  logic        muldiv_rsp_valid_i,
  output logic        muldiv_rsp_ready_o,
  // TCDM ports
  output mem_req_t [1:0] tcdm_req_o,
  output logic [1:0]  tcdm_valid_o,
  input  logic [1:0]  tcdm_ready_i,
  input  mem_rsp_t [1:0] tcdm_rsp_i,
  input  logic [1:0]  tcdm_rsp_valid_i,
  // cluster crossbar port
  output mem_req_t    ext_req_o,
  output logic        ext_valid_o,
  input  logic        ext_ready_i,
  input  mem_rsp_t    ext_rsp_i,
  input  logic        ext_rsp_valid_i,
  // FPU link
  output fpu_req_t    fpu_req_o,
  output logic        fpu_req_valid_o,
  input  logic        fpu_req_ready_i,
  input  fpu_rsp_t    fpu_rsp_i,
  input  logic        fpu_rsp_valid_i,
  output logic        fpu_rsp_ready_o,
  // activity
  output logic        retire_o,
  output logic        fpu_op_o,
  output logic        fpss_issue_o,
  output logic        seq_issue_o,
  output logic        core_stall_o
);
  // ---------------------------------------------------------------- core
  logic [31:0] inst_addr, inst_data;
  logic        inst_valid, inst_ready;
  mem_req_t    core_req;
  logic        core_req_valid, core_req_ready, core_rsp_valid;
  mem_rsp_t    core_rsp;
  acc_req_t    acc_req;
  logic        acc_req_valid, acc_req_ready;
  acc_rsp_t    acc_rsp;
  logic        acc_rsp_valid, acc_rsp_ready;
  logic        ssr_en;

  snitch #(.BootAddr(BootAddr), .RVE(RVE)) i_snitch (
    .clk_i, .rst_ni, .hart_id_i, .wake_up_i,
    .inst_addr_o (inst_addr), .inst_valid_o (inst_valid),
    .inst_data_i (inst_data), .inst_ready_i (inst_ready),
    .data_req_o (core_req), .data_req_valid_o (core_req_valid),
    .data_req_ready_i (core_req_ready), .data_rsp_i (core_rsp),
    .data_rsp_valid_i (core_rsp_valid),
    .acc_req_o (acc_req), .acc_req_valid_o (acc_req_valid), .acc_req_ready_i (acc_req_ready),
    .acc_rsp_i (acc_rsp), .acc_rsp_valid_i (acc_rsp_valid), .acc_rsp_ready_o (acc_rsp_ready),
    .ssr_en_o (ssr_en), .retire_o, .stall_o (core_stall_o)
  );

  logic l0_miss;
  snitch_icache_l0 #(.NrLines(L0Lines), .LineWidth(LineWidth)) i_l0 (
    .clk_i, .rst_ni,
    .fetch_addr_i (inst_addr), .fetch_valid_i (inst_valid),
    .fetch_data_o (inst_data), .fetch_ready_o (inst_ready),
    .refill_addr_o, .refill_valid_o, .refill_ready_i, .refill_data_i, .refill_rsp_valid_i,
    .miss_o (l0_miss)
  );

  // ---------------------------------------------------------------- offload demux
  logic to_muldiv;
  acc_req_t seq_in, seq_out;
  logic     seq_in_valid, seq_in_ready, seq_out_valid, seq_out_ready, seq_busy;
  acc_rsp_t fpss_rsp;
  logic     fpss_rsp_valid, fpss_rsp_ready;

  assign to_muldiv          = (acc_req.instr[6:0] == OP_OP);
  assign muldiv_req_o       = acc_req;
  assign muldiv_req_valid_o = acc_req_valid && to_muldiv;
  assign seq_in             = acc_req;
  assign seq_in_valid       = acc_req_valid && !to_muldiv;
  assign acc_req_ready      = to_muldiv ? muldiv_req_ready_i : seq_in_ready;

  assign acc_rsp_valid      = fpss_rsp_valid || muldiv_rsp_valid_i;
  assign acc_rsp            = fpss_rsp_valid ? fpss_rsp : muldiv_rsp_i;
  assign fpss_rsp_ready     = acc_rsp_ready;
  assign muldiv_rsp_ready_o = acc_rsp_ready && !fpss_rsp_valid;

  snitch_sequencer #(.Depth(SeqDepth)) i_seq (
    .clk_i, .rst_ni,
    .inp_i (seq_in), .inp_valid_i (seq_in_valid), .inp_ready_o (seq_in_ready),
    .oup_o (seq_out), .oup_valid_o (seq_out_valid), .oup_ready_i (seq_out_ready),
    .busy_o (seq_busy), .seq_issue_o
  );

  // ---------------------------------------------------------------- FP subsystem
  logic [1:0][63:0] ssr_rdata, ssr_wdata;
  logic [1:0] ssr_rvalid, ssr_rdone, ssr_wvalid, ssr_wready;
  mem_req_t   fp_req;
  logic       fp_req_valid, fp_req_ready, fp_rsp_valid, fpss_busy;
  mem_rsp_t   fp_rsp;

  snitch_fpss i_fpss (
    .clk_i, .rst_ni, .ssr_en_i (ssr_en),
    .acc_req_i (seq_out), .acc_req_valid_i (seq_out_valid), .acc_req_ready_o (seq_out_ready),
    .acc_rsp_o (fpss_rsp), .acc_rsp_valid_o (fpss_rsp_valid), .acc_rsp_ready_i (fpss_rsp_ready),
    .fpu_req_o, .fpu_req_valid_o, .fpu_req_ready_i, .fpu_rsp_i, .fpu_rsp_valid_i, .fpu_rsp_ready_o,
    .ssr_rdata_i (ssr_rdata), .ssr_rvalid_i (ssr_rvalid), .ssr_rdone_o (ssr_rdone),
    .ssr_wdata_o (ssr_wdata), .ssr_wvalid_o (ssr_wvalid), .ssr_wready_i (ssr_wready),
    .data_req_o (fp_req), .data_req_valid_o (fp_req_valid), .data_req_ready_i (fp_req_ready),
    .data_rsp_i (fp_rsp), .data_rsp_valid_i (fp_rsp_valid),
    .fpu_op_o, .issue_o (fpss_issue_o), .busy_o (fpss_busy)
  );

  // ---------------------------------------------------------------- address decode
  // core: 0 TCDM, 1 crossbar, 2 SSR configuration
  function automatic logic [1:0] decode(input logic [31:0] a);
    if ((a & SSR_CFG_MASK) == SSR_CFG_BASE) return 2'd2;
    if (a >= TcdmBase && a < TcdmBase + TcdmSize) return 2'd0;
    return 2'd1;
  endfunction

  mem_req_t [2:0] core_out;
  logic [2:0]     core_out_valid, core_out_ready, core_out_rsp_valid;
  mem_rsp_t [2:0] core_out_rsp;
  snitch_mem_demux #(.NrOutputs(3)) i_core_demux (
    .clk_i, .rst_ni,
    .in_req_i (core_req), .select_i (decode(core_req.addr)), .in_valid_i (core_req_valid),
    .in_ready_o (core_req_ready), .in_rsp_o (core_rsp), .in_rsp_valid_o (core_rsp_valid),
    .out_req_o (core_out), .out_valid_o (core_out_valid), .out_ready_i (core_out_ready),
    .out_rsp_i (core_out_rsp), .out_rsp_valid_i (core_out_rsp_valid)
  );

  mem_req_t [1:0] fp_out;
  logic [1:0]     fp_out_valid, fp_out_ready, fp_out_rsp_valid;
  mem_rsp_t [1:0] fp_out_rsp;
  snitch_mem_demux #(.NrOutputs(2)) i_fp_demux (
    .clk_i, .rst_ni,
    .in_req_i (fp_req), .select_i (decode(fp_req.addr) == 2'd0 ? 1'b0 : 1'b1),
    .in_valid_i (fp_req_valid),
    .in_ready_o (fp_req_ready), .in_rsp_o (fp_rsp), .in_rsp_valid_o (fp_rsp_valid),
    .out_req_o (fp_out), .out_valid_o (fp_out_valid), .out_ready_i (fp_out_ready),
    .out_rsp_i (fp_out_rsp), .out_rsp_valid_i (fp_out_rsp_valid)
  );

  // ---------------------------------------------------------------- SSR lanes
  mem_req_t [1:0] ssr_req;
  logic [1:0]     ssr_req_valid, ssr_req_ready, ssr_rsp_valid, ssr_active;
  mem_rsp_t [1:0] ssr_rsp;
  logic [1:0][31:0] cfg_rdata;
  logic [1:0]     cfg_ready;
  logic           cfg_lane;
  logic           cfg_rsp_valid_q;
  logic [31:0]    cfg_rdata_q;
  logic           cfg_hi_q;
  assign cfg_lane = core_out[2].addr[7];

  for (genvar l = 0; l < 2; l++) begin : gen_ssr
    snitch_ssr #(.NumLoops(SsrLoops)) i_ssr (
      .clk_i, .rst_ni,
      .cfg_valid_i (core_out_valid[2] && cfg_lane == l), .cfg_write_i (core_out[2].write),
      .cfg_word_i (core_out[2].addr[6:2]),
      .cfg_wdata_i (core_out[2].addr[2] ? core_out[2].data[63:32] : core_out[2].data[31:0]),
      .cfg_rdata_o (cfg_rdata[l]), .cfg_ready_o (cfg_ready[l]),
      .rdata_o (ssr_rdata[l]), .rvalid_o (ssr_rvalid[l]), .rdone_i (ssr_rdone[l]),
      .wdata_i (ssr_wdata[l]), .wvalid_i (ssr_wvalid[l]), .wready_o (ssr_wready[l]),
      .mem_req_o (ssr_req[l]), .mem_req_valid_o (ssr_req_valid[l]),
      .mem_req_ready_i (ssr_req_ready[l]), .mem_rsp_i (ssr_rsp[l]),
      .mem_rsp_valid_i (ssr_rsp_valid[l]), .active_o (ssr_active[l])
    );
  end

  assign core_out_ready[2]     = cfg_ready[cfg_lane];
  assign core_out_rsp_valid[2] = cfg_rsp_valid_q;
  assign core_out_rsp[2].data  = cfg_hi_q ? {cfg_rdata_q, 32'b0} : {32'b0, cfg_rdata_q};
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_rsp_valid_q <= 1'b0; cfg_rdata_q <= '0; cfg_hi_q <= 1'b0;
    end else begin
      cfg_rsp_valid_q <= core_out_valid[2] && core_out_ready[2];
      cfg_rdata_q     <= cfg_rdata[cfg_lane];
      cfg_hi_q        <= core_out[2].addr[2];
    end
  end

  // ---------------------------------------------------------------- TCDM port 0
  logic [2:0] p0_rsp_valid;
  mem_rsp_t   p0_rsp;
  snitch_mem_mux #(.NrInputs(3), .IdDepth(4)) i_p0_mux (
    .clk_i, .rst_ni,
    .in_req_i ({ssr_req[0], fp_out[0], core_out[0]}),
    .in_valid_i ({ssr_req_valid[0], fp_out_valid[0], core_out_valid[0]}),
    .in_ready_o ({ssr_req_ready[0], fp_out_ready[0], core_out_ready[0]}),
    .in_rsp_o (p0_rsp), .in_rsp_valid_o (p0_rsp_valid),
    .out_req_o (tcdm_req_o[0]), .out_valid_o (tcdm_valid_o[0]), .out_ready_i (tcdm_ready_i[0]),
    .out_rsp_i (tcdm_rsp_i[0]), .out_rsp_valid_i (tcdm_rsp_valid_i[0])
  );
  assign core_out_rsp[0] = p0_rsp;  assign core_out_rsp_valid[0] = p0_rsp_valid[0];
  assign fp_out_rsp[0]   = p0_rsp;  assign fp_out_rsp_valid[0]   = p0_rsp_valid[1];
  assign ssr_rsp[0]      = p0_rsp;  assign ssr_rsp_valid[0]      = p0_rsp_valid[2];

  // ---------------------------------------------------------------- TCDM port 1
  assign tcdm_req_o[1]    = ssr_req[1];
  assign tcdm_valid_o[1]  = ssr_req_valid[1];
  assign ssr_req_ready[1] = tcdm_ready_i[1];
  assign ssr_rsp[1]       = tcdm_rsp_i[1];
  assign ssr_rsp_valid[1] = tcdm_rsp_valid_i[1];

  // ---------------------------------------------------------------- crossbar port
  logic [1:0] ext_rsp_valid;
  mem_rsp_t   ext_rsp;
  snitch_mem_mux #(.NrInputs(2), .IdDepth(4)) i_ext_mux (
    .clk_i, .rst_ni,
    .in_req_i ({fp_out[1], core_out[1]}), .in_valid_i ({fp_out_valid[1], core_out_valid[1]}),
    .in_ready_o ({fp_out_ready[1], core_out_ready[1]}),
    .in_rsp_o (ext_rsp), .in_rsp_valid_o (ext_rsp_valid),
    .out_req_o (ext_req_o), .out_valid_o (ext_valid_o), .out_ready_i (ext_ready_i),
    .out_rsp_i (ext_rsp_i), .out_rsp_valid_i (ext_rsp_valid_i)
  );
  assign core_out_rsp[1] = ext_rsp;  assign core_out_rsp_valid[1] = ext_rsp_valid[0];
  assign fp_out_rsp[1]   = ext_rsp;  assign fp_out_rsp_valid[1]   = ext_rsp_valid[1];

  logic unused;
  assign unused = l0_miss ^ seq_busy ^ fpss_busy ^ ^ssr_active;
endmodule
