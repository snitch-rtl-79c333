// Test of a Hive of 8 core complexes sharing the L1 instruction cache and
// the multiply/divide unit. All cores start together on the same code in
// main memory (behavioural model on the refill link) and each computes
// hart*hart+5 (MUL) and its quotient and remainder by 3 (DIVU/REM) through
// the shared unit, then stores the results into a single-cycle TCDM model.
// Checks the results of every core, that the shared unit's divider was busy,
// and that the eight cores' simultaneous cold misses were coalesced: the
// code (4 lines) is fetched from main memory at most 2 times per line.
module tb_snitch_hive;
  import snitch_pkg::*;
  import rv_asm_pkg::*;
  localparam int WatchdogCycles = 20000;
  localparam int C = 8;
  `include "tb_common.svh"
  mem_req_t [2*C-1:0] treq; logic [2*C-1:0] tvalid, tready, trvalid; mem_rsp_t [2*C-1:0] trsp;
  mem_req_t [C-1:0] ereq; logic [C-1:0] evalid, eready, ervalid; mem_rsp_t [C-1:0] ersp;
  mem_req_t rreq; logic rvalid, rready, rrvalid; mem_rsp_t rrsp;
  fpu_req_t [C-1:0] freq; logic [C-1:0] fvalid, fready, frvalid, frready; fpu_rsp_t [C-1:0] frsp;
  logic [C-1:0] retire, fpu_op, fpss_issue, seq_issue, stall; logic miss, div_busy;
  snitch_hive dut (.clk_i (clk), .rst_ni (rst_n), .wake_up_i ('0),
    .tcdm_req_o (treq), .tcdm_valid_o (tvalid), .tcdm_ready_i (tready), .tcdm_rsp_i (trsp),
    .tcdm_rsp_valid_i (trvalid), .ext_req_o (ereq), .ext_valid_o (evalid), .ext_ready_i (eready),
    .ext_rsp_i (ersp), .ext_rsp_valid_i (ervalid), .refill_req_o (rreq), .refill_valid_o (rvalid),
    .refill_ready_i (rready), .refill_rsp_i (rrsp), .refill_rsp_valid_i (rrvalid),
    .fpu_req_o (freq), .fpu_req_valid_o (fvalid), .fpu_req_ready_i (fready), .fpu_rsp_i (frsp),
    .fpu_rsp_valid_i (frvalid), .fpu_rsp_ready_o (frready), .retire_o (retire), .fpu_op_o (fpu_op),
    .fpss_issue_o (fpss_issue), .seq_issue_o (seq_issue), .core_stall_o (stall),
    .icache_miss_o (miss), .div_busy_o (div_busy));
  mem_model #(.Latency (3)) i_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (rreq), .valid_i (rvalid),
    .ready_o (rready), .rsp_o (rrsp), .rsp_valid_o (rrvalid));
  for (genvar c = 0; c < C; c++) begin : gen_fpu
    fpu_model i_fpu (.clk_i (clk), .rst_ni (rst_n), .req_i (freq[c]), .req_valid_i (fvalid[c]),
      .req_ready_o (fready[c]), .rsp_o (frsp[c]), .rsp_valid_o (frvalid[c]), .rsp_ready_i (frready[c]));
  end
  logic [63:0] tcdm [64];
  assign tready = '1;
  assign eready = '1;
  always @(posedge clk) for (int p = 0; p < 2 * C; p++) begin
    trvalid[p] <= rst_n && tvalid[p];
    trsp[p].data <= tcdm[treq[p].addr[8:3]];
    if (rst_n && tvalid[p] && treq[p].write)
      for (int b = 0; b < 8; b++) if (treq[p].strb[b]) tcdm[treq[p].addr[8:3]][b*8 +: 8] = treq[p].data[b*8 +: 8];
  end
  always @(posedge clk) for (int c = 0; c < C; c++) begin ervalid[c] <= rst_n && evalid[c]; ersp[c].data <= '0; end
  int n_refill = 0, n_div = 0;
  always @(posedge clk) if (rst_n) begin n_refill += int'(rvalid && rready); n_div += int'(div_busy); end

  localparam logic [4:0] T0=5, T1=6, T2=7, S0=8, A0=10, A1=11, A2=12;
  initial begin
    logic [31:0] p [$];
    for (int i = 0; i < 64; i++) tcdm[i] = '0;
    p.push_back(csrr(T0, CSR_MHARTID));
    p.push_back(lui(S0, 20'h10000));
    p.push_back(slli(T1, T0, 3));
    p.push_back(add(S0, S0, T1));
    p.push_back(mul(A0, T0, T0));
    p.push_back(addi(A0, A0, 5));
    p.push_back(addi(T2, 0, 3));
    p.push_back(divu(A1, A0, T2));
    p.push_back(rem(A2, A0, T2));
    p.push_back(sw(A1, S0, 0));
    p.push_back(sw(A2, S0, 4));
    p.push_back(wfi());
    p.push_back(jal(0, -4));
    foreach (p[i]) i_mem.write_word(BOOT_ADDR + 32'(4 * i), p[i]);
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (800) @(posedge clk);
    for (int c = 0; c < C; c++) begin
      check(tcdm[c][31:0] == (c * c + 5) / 3, $sformatf("core %0d quotient %0d", c, tcdm[c][31:0]));
      check(tcdm[c][63:32] == (c * c + 5) % 3, $sformatf("core %0d remainder", c));
    end
    check(n_div > 0, "shared divider used");
    $display("refill beats: %0d", n_refill);
    check(n_refill <= 4 * 2 * 2, $sformatf("coalesced refills: %0d beats for 4 lines", n_refill));
    finish();
  end
endmodule
