// FP subsystem (FPSS): FP register file, scoreboard, FP load/store unit, the
// two SSR lanes' register interception and the link to the FPU.
//
// Instructions arrive from the FPU sequencer. An instruction issues when its
// FP source and destination registers are not marked busy in the FP
// scoreboard, when every source that is mapped to an SSR lane has data, and
// when its unit (FPU or FP LSU) accepts it; independent instructions issue
// back to back. With stream semantics enabled (ssr_en_i, the core's SSR CSR),
// registers ft0 and ft1 stand for SSR lanes 0 and 1: reading them pops the
// lane's data queue (once per instruction, even if the register appears in
// several operand slots), writing them pushes the result into the lane.
// FP loads and stores take the address already computed by the integer core
// (operand a) and go through the FP LSU; FLW results are NaN-boxed. FPU results
// with an integer destination (compares, classify, moves and conversions to
// integer) go back to the integer core over the accelerator response link.
//
// The FPU itself is not part of this design: its request/response link is a
// port (fpu_req_o / fpu_rsp_i) and it must return results in issue order with
// the tag it was given. Interface timing: issue is combinational from the
// sequencer to the FPU; write-back to the register file takes effect at the
// clock edge after the FPU or LSU presents the result.
module snitch_fpss import snitch_pkg::*; #(
  parameter int unsigned NumOutstanding = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        ssr_en_i,
  // from the sequencer
  input  acc_req_t    acc_req_i,
  input  logic        acc_req_valid_i,
  output logic        acc_req_ready_o,
  // integer results back to the core
  output acc_rsp_t    acc_rsp_o,
  output logic        acc_rsp_valid_o,
  input  logic        acc_rsp_ready_i,
  // FPU link
  output fpu_req_t    fpu_req_o,
  output logic        fpu_req_valid_o,
  input  logic        fpu_req_ready_i,
  input  fpu_rsp_t    fpu_rsp_i,
  input  logic        fpu_rsp_valid_i,
  output logic        fpu_rsp_ready_o,
  // SSR lanes
  input  logic [1:0][63:0] ssr_rdata_i,
  input  logic [1:0]  ssr_rvalid_i,
  output logic [1:0]  ssr_rdone_o,
  output logic [1:0][63:0] ssr_wdata_o,
  output logic [1:0]  ssr_wvalid_o,
  input  logic [1:0]  ssr_wready_i,
  // FP LSU memory link
  output mem_req_t    data_req_o,
  output logic        data_req_valid_o,
  input  logic        data_req_ready_i,
  input  mem_rsp_t    data_rsp_i,
  input  logic        data_rsp_valid_i,
  // activity
  output logic        fpu_op_o,     // an arithmetic FP operation issued
  output logic        issue_o,      // any instruction issued
  output logic        busy_o
);
  logic [31:0] instr;
  logic [4:0]  rs1, rs2, rs3, rd;
  assign instr = acc_req_i.instr;
  assign rs1 = instr[19:15];
  assign rs2 = instr[24:20];
  assign rs3 = instr[31:27];
  assign rd  = instr[11:7];

  logic has_rs1, has_rs2, has_rs3, has_rd, int_dest, is_load, is_store, is_mem;
  assign has_rs1  = fp_has_rs1(instr);
  assign has_rs2  = fp_has_rs2(instr);
  assign has_rs3  = fp_has_rs3(instr);
  assign has_rd   = fp_has_rd(instr);
  assign int_dest = fp_writes_int(instr);
  assign is_load  = (instr[6:0] == OP_LOADFP);
  assign is_store = (instr[6:0] == OP_STOREFP);
  assign is_mem   = is_load || is_store;

  // SSR mapping of each operand slot
  function automatic logic is_ssr(input logic [4:0] r, input logic en);
    return en && (r == 5'd0 || r == 5'd1);
  endfunction
  logic s1, s2, s3, sd;
  assign s1 = has_rs1 && is_ssr(rs1, ssr_en_i);
  assign s2 = has_rs2 && is_ssr(rs2, ssr_en_i);
  assign s3 = has_rs3 && is_ssr(rs3, ssr_en_i);
  assign sd = has_rd && !is_load && is_ssr(rd, ssr_en_i);

  logic [1:0] lane_rd;   // lanes read by this instruction
  always_comb begin
    lane_rd = '0;
    if (s1) lane_rd[rs1[0]] = 1'b1;
    if (s2) lane_rd[rs2[0]] = 1'b1;
    if (s3) lane_rd[rs3[0]] = 1'b1;
  end

  // ---------------------------------------------------------------- register file
  logic [2:0][63:0] rf_rdata;
  logic [1:0]       rf_we;
  logic [1:0][4:0]  rf_waddr;
  logic [1:0][63:0] rf_wdata;
  snitch_fp_regfile i_rf (
    .clk_i, .rst_ni,
    .raddr_i ({rs3, rs2, rs1}), .rdata_o (rf_rdata),
    .we_i (rf_we), .waddr_i (rf_waddr), .wdata_i (rf_wdata)
  );

  logic [63:0] op_a, op_b, op_c;
  assign op_a = s1 ? ssr_rdata_i[rs1[0]] : rf_rdata[0];
  assign op_b = s2 ? ssr_rdata_i[rs2[0]] : rf_rdata[1];
  assign op_c = s3 ? ssr_rdata_i[rs3[0]] : rf_rdata[2];

  // ---------------------------------------------------------------- scoreboard
  logic [31:0] sb_q, sb_set, sb_clr;
  logic hazard, ssr_ok, unit_ready, issue;
  assign hazard = (has_rs1 && !s1 && sb_q[rs1]) || (has_rs2 && !s2 && sb_q[rs2]) ||
                  (has_rs3 && !s3 && sb_q[rs3]) || (has_rd && !sd && sb_q[rd]);
  assign ssr_ok = ((lane_rd & ~ssr_rvalid_i) == '0);

  logic lsu_ready;
  assign unit_ready = is_mem ? lsu_ready : fpu_req_ready_i;
  assign issue      = acc_req_valid_i && !hazard && ssr_ok && unit_ready;
  assign acc_req_ready_o = issue;
  assign ssr_rdone_o     = issue ? lane_rd : 2'b00;

  // ---------------------------------------------------------------- FPU link
  assign fpu_req_valid_o  = acc_req_valid_i && !is_mem && !hazard && ssr_ok;
  assign fpu_req_o.instr  = instr;
  assign fpu_req_o.op_a   = op_a;
  assign fpu_req_o.op_b   = op_b;
  assign fpu_req_o.op_c   = op_c;
  assign fpu_req_o.int_op = acc_req_i.op_a;
  assign fpu_req_o.tag    = {int_dest, sd, 1'b0, rd};

  logic [3:0] hart_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) hart_q <= '0;
    else if (issue) hart_q <= acc_req_i.hart;
  end

  logic rsp_int, rsp_ssr;
  assign rsp_int = fpu_rsp_i.tag[7];
  assign rsp_ssr = fpu_rsp_i.tag[6];
  assign fpu_rsp_ready_o = rsp_int ? acc_rsp_ready_i :
                           rsp_ssr ? ssr_wready_i[fpu_rsp_i.tag[0]] : 1'b1;
  assign acc_rsp_valid_o = fpu_rsp_valid_i && rsp_int;
  assign acc_rsp_o       = '{rd: fpu_rsp_i.tag[4:0], data: fpu_rsp_i.result[31:0], hart: hart_q};
  always_comb begin
    ssr_wvalid_o = '0;
    ssr_wdata_o  = {fpu_rsp_i.result, fpu_rsp_i.result};
    if (fpu_rsp_valid_i && rsp_ssr && !rsp_int) ssr_wvalid_o[fpu_rsp_i.tag[0]] = 1'b1;
  end

  // ---------------------------------------------------------------- FP LSU
  logic        lsu_res_valid;
  logic [4:0]  lsu_res_tag;
  logic [63:0] lsu_res_data;
  logic        lsu_busy;
  snitch_lsu #(.NumOutstanding(NumOutstanding), .FpMode(1'b1), .TagWidth(5)) i_lsu (
    .clk_i, .rst_ni,
    .valid_i (acc_req_valid_i && is_mem && !hazard && ssr_ok),
    .ready_o (lsu_ready),
    .addr_i  (acc_req_i.op_a),
    .wdata_i (op_b),
    .size_i  (instr[13:12]),
    .signed_i(1'b0),
    .write_i (is_store),
    .amo_i   (AMO_NONE),
    .tag_i   (rd),
    .res_valid_o (lsu_res_valid), .res_ready_i (1'b1),
    .res_tag_o (lsu_res_tag), .res_data_o (lsu_res_data), .busy_o (lsu_busy),
    .data_req_o, .data_req_valid_o, .data_req_ready_i, .data_rsp_i, .data_rsp_valid_i
  );

  // ---------------------------------------------------------------- write-back
  logic fpu_wb;
  assign fpu_wb = fpu_rsp_valid_i && !rsp_int && !rsp_ssr;
  assign rf_we    = {lsu_res_valid, fpu_wb};
  assign rf_waddr = {lsu_res_tag, fpu_rsp_i.tag[4:0]};
  assign rf_wdata = {lsu_res_data, fpu_rsp_i.result};

  always_comb begin
    sb_set = '0; sb_clr = '0;
    if (issue && has_rd && !sd) sb_set[rd] = 1'b1;
    if (fpu_wb) sb_clr[fpu_rsp_i.tag[4:0]] = 1'b1;
    if (lsu_res_valid) sb_clr[lsu_res_tag] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sb_q <= '0;
    else         sb_q <= (sb_q & ~sb_clr) | sb_set;
  end

  assign fpu_op_o = issue && !is_mem && !(instr[6:0] == OP_FP &&
                    instr[31:27] inside {5'b11100, 5'b11110, 5'b00100});
  assign issue_o  = issue;
  assign busy_o   = (sb_q != '0) || lsu_busy;
endmodule
