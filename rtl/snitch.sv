// Snitch integer core: a single-stage, single-issue, in-order RV32I core.
//
// An instruction whose operands are ready is fetched, decoded, executed and
// written back in the same cycle. One scoreboard bit per register tracks the
// destinations of instructions that complete later: loads and atomics (in the
// LSU) and offloaded instructions that write the integer register file
// (multiply/divide, FP compares, moves and conversions to integer). An
// instruction stalls while one of its integer sources or its destination is
// marked busy.
//
// Instructions of the M extension and all FP instructions (including FREP) are
// sent whole over the accelerator link together with up to three operands.
// For FP loads and stores the core computes the address (rs1 + imm) and sends
// it as operand a, so the FP LSU needs no adder. Atomic memory operations and
// LR/SC leave through the data port with an atomic code next to address and
// data.
//
// The register file has a single write port. Single-cycle results have
// priority over LSU results, which have priority over accelerator results.
// CSRs: mcycle, minstret, mhartid and an SSR enable register (0x7C0) whose bit
// 0 is brought out to the FP subsystem. WFI stops fetching until the wake-up
// input (inter-processor interrupt) pulses; a wake-up that arrives before the
// WFI is remembered. ECALL/EBREAK, exceptions and interrupts other than the
// wake-up are not modelled. Fetch: inst_valid_o/inst_addr_o are asserted
// every cycle the core wants an instruction; inst_ready_i qualifies
// inst_data_i in the same cycle (single-cycle L0 hit).
module snitch import snitch_pkg::*; #(
  parameter logic [31:0] BootAddr       = snitch_pkg::BOOT_ADDR,
  parameter bit          RVE            = 1'b0,  // embedded profile: 16 registers
  parameter int unsigned NumOutstanding = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] hart_id_i,
  input  logic        wake_up_i,
  // instruction fetch
  output logic [31:0] inst_addr_o,
  output logic        inst_valid_o,
  input  logic [31:0] inst_data_i,
  input  logic        inst_ready_i,
  // data port
  output mem_req_t    data_req_o,
  output logic        data_req_valid_o,
  input  logic        data_req_ready_i,
  input  mem_rsp_t    data_rsp_i,
  input  logic        data_rsp_valid_i,
  // accelerator (offload) port
  output acc_req_t    acc_req_o,
  output logic        acc_req_valid_o,
  input  logic        acc_req_ready_i,
  input  acc_rsp_t    acc_rsp_i,
  input  logic        acc_rsp_valid_i,
  output logic        acc_rsp_ready_o,
  // status
  output logic        ssr_en_o,
  output logic        retire_o,     // one instruction retired this cycle
  output logic        stall_o       // an instruction is present but stalls
);
  localparam int unsigned NrRegs = RVE ? 16 : 32;
  localparam int unsigned AW     = $clog2(NrRegs);

  logic [31:0] pc_q, pc_d;
  logic        wfi_q, wake_pending_q;
  logic [31:0] sb_q;            // scoreboard
  logic [63:0] mcycle_q, minstret_q;
  logic        ssr_en_q;

  logic [31:0] instr;
  logic [6:0]  opcode;
  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  funct3;
  logic [6:0]  funct7;
  assign instr  = inst_data_i;
  assign opcode = instr[6:0];
  assign rd     = instr[11:7];
  assign funct3 = instr[14:12];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];
  assign funct7 = instr[31:25];

  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'b0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  // ---------------------------------------------------------------- register file
  logic [31:0] rs1_val, rs2_val, wdata;
  logic [4:0]  waddr;
  logic        we;
  snitch_regfile #(.NrRegs(NrRegs), .Width(32)) i_rf (
    .clk_i, .rst_ni,
    .raddr_a_i (rs1[AW-1:0]), .rdata_a_o (rs1_val),
    .raddr_b_i (rs2[AW-1:0]), .rdata_b_o (rs2_val),
    .we_i (we), .waddr_i (waddr[AW-1:0]), .wdata_i (wdata)
  );

  // ---------------------------------------------------------------- decode
  logic uses_rs1, uses_rs2, writes_rd;      // integer register usage
  logic is_alu_wb, is_load, is_store, is_amo, is_offload, offload_sb;
  logic is_branch, is_jal, is_jalr, is_csr, is_wfi, illegal;
  amo_op_e amo_op;

  always_comb begin
    uses_rs1 = 1'b0; uses_rs2 = 1'b0; writes_rd = 1'b0;
    is_alu_wb = 1'b0; is_load = 1'b0; is_store = 1'b0; is_amo = 1'b0;
    is_offload = 1'b0; offload_sb = 1'b0;
    is_branch = 1'b0; is_jal = 1'b0; is_jalr = 1'b0; is_csr = 1'b0;
    is_wfi = 1'b0; illegal = 1'b0;
    amo_op = AMO_NONE;
    unique case (opcode)
      OP_LUI, OP_AUIPC: begin writes_rd = 1'b1; is_alu_wb = 1'b1; end
      OP_JAL:    begin writes_rd = 1'b1; is_alu_wb = 1'b1; is_jal = 1'b1; end
      OP_JALR:   begin writes_rd = 1'b1; is_alu_wb = 1'b1; is_jalr = 1'b1; uses_rs1 = 1'b1; end
      OP_BRANCH: begin uses_rs1 = 1'b1; uses_rs2 = 1'b1; is_branch = 1'b1; end
      OP_LOAD:   begin uses_rs1 = 1'b1; writes_rd = 1'b1; is_load = 1'b1; end
      OP_STORE:  begin uses_rs1 = 1'b1; uses_rs2 = 1'b1; is_store = 1'b1; end
      OP_IMM:    begin uses_rs1 = 1'b1; writes_rd = 1'b1; is_alu_wb = 1'b1; end
      OP_OP: begin
        uses_rs1 = 1'b1; uses_rs2 = 1'b1; writes_rd = 1'b1;
        if (funct7 == 7'b0000001) begin is_offload = 1'b1; offload_sb = 1'b1; end
        else is_alu_wb = 1'b1;
      end
      OP_FENCE: ;
      OP_SYSTEM: begin
        if (funct3 != 3'b000) begin
          is_csr = 1'b1; writes_rd = 1'b1; is_alu_wb = 1'b1;
          uses_rs1 = !funct3[2];
        end else if (instr[31:20] == 12'h105) is_wfi = 1'b1;
      end
      OP_AMO: begin
        uses_rs1 = 1'b1; uses_rs2 = 1'b1; writes_rd = 1'b1; is_amo = 1'b1;
        unique case (instr[31:27])
          5'b00010: amo_op = AMO_LR;
          5'b00011: amo_op = AMO_SC;
          5'b00001: amo_op = AMO_SWAP;
          5'b00000: amo_op = AMO_ADD;
          5'b00100: amo_op = AMO_XOR;
          5'b01100: amo_op = AMO_AND;
          5'b01000: amo_op = AMO_OR;
          5'b10000: amo_op = AMO_MIN;
          5'b10100: amo_op = AMO_MAX;
          5'b11000: amo_op = AMO_MINU;
          5'b11100: amo_op = AMO_MAXU;
          default:  illegal = 1'b1;
        endcase
      end
      default: begin
        if (is_fp_op(instr)) begin
          is_offload = 1'b1;
          if (opcode inside {OP_LOADFP, OP_STOREFP, OP_FREP} || fp_reads_int(instr))
            uses_rs1 = 1'b1;
          if (fp_writes_int(instr)) begin writes_rd = 1'b1; offload_sb = 1'b1; end
        end else illegal = 1'b1;
      end
    endcase
  end

  // ---------------------------------------------------------------- ALU
  logic [31:0] op_b, alu_res, alu_add;
  logic        br_taken;
  assign op_b    = (opcode == OP_OP) ? rs2_val : imm_i;
  assign alu_add = rs1_val + op_b;

  always_comb begin
    unique case (funct3)
      3'b000:  alu_res = (opcode == OP_OP && funct7[5]) ? rs1_val - rs2_val : alu_add;
      3'b001:  alu_res = rs1_val << op_b[4:0];
      3'b010:  alu_res = {31'b0, $signed(rs1_val) < $signed(op_b)};
      3'b011:  alu_res = {31'b0, rs1_val < op_b};
      3'b100:  alu_res = rs1_val ^ op_b;
      3'b101:  alu_res = funct7[5] ? 32'($signed(rs1_val) >>> op_b[4:0]) : rs1_val >> op_b[4:0];
      3'b110:  alu_res = rs1_val | op_b;
      default: alu_res = rs1_val & op_b;
    endcase
    unique case (funct3)
      3'b000:  br_taken = rs1_val == rs2_val;
      3'b001:  br_taken = rs1_val != rs2_val;
      3'b100:  br_taken = $signed(rs1_val) <  $signed(rs2_val);
      3'b101:  br_taken = $signed(rs1_val) >= $signed(rs2_val);
      3'b110:  br_taken = rs1_val <  rs2_val;
      3'b111:  br_taken = rs1_val >= rs2_val;
      default: br_taken = 1'b0;
    endcase
  end

  // ---------------------------------------------------------------- CSRs
  logic [31:0] csr_rdata, csr_wdata, csr_src;
  logic        csr_known;
  assign csr_src = funct3[2] ? {27'b0, rs1} : rs1_val;
  always_comb begin
    csr_known = 1'b1;
    unique case (instr[31:20])
      CSR_SSR:             csr_rdata = {31'b0, ssr_en_q};
      CSR_MCYCLE:          csr_rdata = mcycle_q[31:0];
      12'hB80:             csr_rdata = mcycle_q[63:32];
      CSR_MINSTRET:        csr_rdata = minstret_q[31:0];
      12'hB82:             csr_rdata = minstret_q[63:32];
      CSR_MHARTID:         csr_rdata = hart_id_i;
      default: begin       csr_rdata = '0; csr_known = 1'b0; end
    endcase
    unique case (funct3[1:0])
      2'b01:   csr_wdata = csr_src;
      2'b10:   csr_wdata = csr_rdata | csr_src;
      default: csr_wdata = csr_rdata & ~csr_src;
    endcase
  end

  // ---------------------------------------------------------------- LSU
  logic [31:0] alu_add_ls;
  assign alu_add_ls = rs1_val + (is_store ? imm_s : imm_i);
  logic        lsu_valid, lsu_ready, lsu_res_valid, lsu_res_ready, lsu_busy;
  logic [4:0]  lsu_res_tag;
  logic [63:0] lsu_res_data;
  snitch_lsu #(.NumOutstanding(NumOutstanding), .FpMode(1'b0), .TagWidth(5)) i_lsu (
    .clk_i, .rst_ni,
    .valid_i (lsu_valid), .ready_o (lsu_ready),
    .addr_i  (is_amo ? rs1_val : alu_add_ls),
    .wdata_i ({32'b0, rs2_val}),
    .size_i  (is_amo ? 2'd2 : funct3[1:0]),
    .signed_i(!funct3[2]),
    .write_i (is_store),
    .amo_i   (amo_op),
    .tag_i   (rd),
    .res_valid_o (lsu_res_valid), .res_ready_i (lsu_res_ready),
    .res_tag_o (lsu_res_tag), .res_data_o (lsu_res_data), .busy_o (lsu_busy),
    .data_req_o, .data_req_valid_o, .data_req_ready_i, .data_rsp_i, .data_rsp_valid_i
  );

  // ---------------------------------------------------------------- issue
  logic operands_ready, can_retire, retire;
  assign operands_ready = !(uses_rs1 && sb_q[rs1]) && !(uses_rs2 && sb_q[rs2])
                        && !(writes_rd && sb_q[rd]);

  assign inst_valid_o = !wfi_q;
  assign inst_addr_o  = pc_q;

  always_comb begin
    can_retire = inst_ready_i && !wfi_q && operands_ready;
    if (is_load || is_store || is_amo) can_retire = can_retire && lsu_ready;
    if (is_offload)                    can_retire = can_retire && acc_req_ready_i;
  end
  assign retire   = can_retire;
  assign retire_o = retire;
  assign stall_o  = inst_ready_i && !wfi_q && !can_retire;

  assign lsu_valid = inst_ready_i && !wfi_q && operands_ready && (is_load || is_store || is_amo);

  assign acc_req_valid_o = inst_ready_i && !wfi_q && operands_ready && is_offload;
  assign acc_req_o.instr = instr;
  assign acc_req_o.op_a  = (opcode == OP_LOADFP)  ? rs1_val + imm_i :
                           (opcode == OP_STOREFP) ? rs1_val + imm_s : rs1_val;
  assign acc_req_o.op_b  = rs2_val;
  assign acc_req_o.op_c  = '0;
  assign acc_req_o.hart  = hart_id_i[3:0];

  // ---------------------------------------------------------------- write-back
  logic [31:0] alu_wb;
  always_comb begin
    unique case (opcode)
      OP_LUI:         alu_wb = imm_u;
      OP_AUIPC:       alu_wb = pc_q + imm_u;
      OP_JAL, OP_JALR: alu_wb = pc_q + 32'd4;
      OP_SYSTEM:      alu_wb = csr_rdata;
      default:        alu_wb = alu_res;
    endcase
  end

  logic alu_we;
  // Same as retire && is_alu_wb, written without the offload and LSU
  // handshakes (which single-cycle instructions never wait for) so that the
  // write-port arbitration does not depend on them.
  assign alu_we        = inst_ready_i && !wfi_q && operands_ready && is_alu_wb && (rd != 5'd0);
  assign lsu_res_ready = !alu_we;
  assign acc_rsp_ready_o = !alu_we && !lsu_res_valid;

  always_comb begin
    we = 1'b0; waddr = '0; wdata = '0;
    if (alu_we) begin
      we = 1'b1; waddr = rd; wdata = alu_wb;
    end else if (lsu_res_valid) begin
      we = 1'b1; waddr = lsu_res_tag; wdata = lsu_res_data[31:0];
    end else if (acc_rsp_valid_i) begin
      we = 1'b1; waddr = acc_rsp_i.rd; wdata = acc_rsp_i.data;
    end
  end

  // ---------------------------------------------------------------- next PC
  always_comb begin
    pc_d = pc_q;
    if (retire) begin
      if (is_jal)                        pc_d = pc_q + imm_j;
      else if (is_jalr)                  pc_d = (rs1_val + imm_i) & ~32'd1;
      else if (is_branch && br_taken)    pc_d = pc_q + imm_b;
      else                               pc_d = pc_q + 32'd4;
    end
  end

  // ---------------------------------------------------------------- state
  logic [31:0] sb_set, sb_clr;
  always_comb begin
    sb_set = '0; sb_clr = '0;
    if (retire && rd != 5'd0 && ((is_load || is_amo) || (is_offload && offload_sb)))
      sb_set[rd] = 1'b1;
    if (lsu_res_valid && lsu_res_ready) sb_clr[lsu_res_tag] = 1'b1;
    if (acc_rsp_valid_i && acc_rsp_ready_o) sb_clr[acc_rsp_i.rd] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q           <= BootAddr;
      wfi_q          <= 1'b0;
      wake_pending_q <= 1'b0;
      sb_q           <= '0;
      mcycle_q       <= '0;
      minstret_q     <= '0;
      ssr_en_q       <= 1'b0;
    end else begin
      pc_q     <= pc_d;
      sb_q     <= (sb_q & ~sb_clr) | sb_set;
      mcycle_q <= mcycle_q + 64'd1;
      if (retire) minstret_q <= minstret_q + 64'd1;
      // WFI: sleep until a wake-up; a wake-up that came earlier is consumed.
      if (wfi_q) begin
        if (wake_up_i) wfi_q <= 1'b0;
      end else if (retire && is_wfi) begin
        if (wake_pending_q || wake_up_i) wake_pending_q <= 1'b0;
        else wfi_q <= 1'b1;
      end else if (wake_up_i) begin
        wake_pending_q <= 1'b1;
      end
      if (retire && is_csr && instr[31:20] == CSR_SSR && !(funct3[1] && rs1 == 5'd0))
        ssr_en_q <= csr_wdata[0];
    end
  end

  assign ssr_en_o = ssr_en_q;

  // Illegal instructions and unknown CSRs are executed as no-ops / read zero.
  logic unused;
  assign unused = illegal ^ csr_known ^ lsu_busy ^ ^lsu_res_data[63:32] ^ ^funct7[4:0];

  // The same register is never both set and cleared in the scoreboard.
  assert property (@(posedge clk_i) disable iff (!rst_ni) (sb_set & sb_clr) == '0);
endmodule
