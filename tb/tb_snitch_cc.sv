// Test of one core complex (core, L0 cache, sequencer, FP subsystem, two SSR
// lanes, private SSR configuration space) with behavioural models around it:
// a line memory for L0 refills, a single-cycle TCDM on both TCDM ports, the
// shared multiply/divide unit with one port, and the FPU model. The program
// streams two 24-element vectors through both SSRs into an FREP FMADD loop
// staggered over four accumulators (hiding the FPU latency) while the integer core multiplies and divides, stores the dot
// product with FSD, and synchronises on an FP compare. Checks the results,
// that the sequencer issued while the core retired (pseudo dual-issue), and
// the FREP issue rate (24 FMADDs within 24+12 cycles).
module tb_snitch_cc;
  import snitch_pkg::*;
  import rv_asm_pkg::*;
  localparam int WatchdogCycles = 50000;
  localparam int N = 24;
  `include "tb_common.svh"
  logic [31:0] raddr; logic rvalid, rready, rrsp; logic [127:0] rdata;
  acc_req_t mdq; logic mdq_v, mdq_r, mds_v, mds_r, div_busy; acc_rsp_t mds;
  mem_req_t [1:0] treq; logic [1:0] tvalid, tready, trvalid; mem_rsp_t [1:0] trsp;
  mem_req_t ereq; logic evalid, eready, ervalid; mem_rsp_t ersp;
  fpu_req_t freq; logic fvalid, fready, frvalid, frready; fpu_rsp_t frsp;
  logic retire, fpu_op, fpss_issue, seq_issue, stall;
  snitch_cc dut (.clk_i (clk), .rst_ni (rst_n), .hart_id_i (32'd0), .wake_up_i (1'b0),
    .refill_addr_o (raddr), .refill_valid_o (rvalid), .refill_ready_i (rready),
    .refill_data_i (rdata), .refill_rsp_valid_i (rrsp),
    .muldiv_req_o (mdq), .muldiv_req_valid_o (mdq_v), .muldiv_req_ready_i (mdq_r),
    .muldiv_rsp_i (mds), .muldiv_rsp_valid_i (mds_v), .muldiv_rsp_ready_o (mds_r),
    .tcdm_req_o (treq), .tcdm_valid_o (tvalid), .tcdm_ready_i (tready), .tcdm_rsp_i (trsp),
    .tcdm_rsp_valid_i (trvalid), .ext_req_o (ereq), .ext_valid_o (evalid), .ext_ready_i (eready),
    .ext_rsp_i (ersp), .ext_rsp_valid_i (ervalid),
    .fpu_req_o (freq), .fpu_req_valid_o (fvalid), .fpu_req_ready_i (fready),
    .fpu_rsp_i (frsp), .fpu_rsp_valid_i (frvalid), .fpu_rsp_ready_o (frready),
    .retire_o (retire), .fpu_op_o (fpu_op), .fpss_issue_o (fpss_issue),
    .seq_issue_o (seq_issue), .core_stall_o (stall));
  snitch_muldiv #(.NrPorts (1)) i_md (.clk_i (clk), .rst_ni (rst_n), .req_i (mdq),
    .req_valid_i (mdq_v), .req_ready_o (mdq_r), .rsp_o (mds), .rsp_valid_o (mds_v),
    .rsp_ready_i (mds_r), .div_busy_o (div_busy));
  fpu_model i_fpu (.clk_i (clk), .rst_ni (rst_n), .req_i (freq), .req_valid_i (fvalid),
    .req_ready_o (fready), .rsp_o (frsp), .rsp_valid_o (frvalid), .rsp_ready_i (frready));

  logic [31:0] imem [256];
  logic [63:0] tcdm [1024];
  // L0 refill: line after 2 cycles
  int r_cnt = 0; logic [31:0] r_addr;
  assign rready = (r_cnt == 0);
  always @(posedge clk) begin
    rrsp <= 1'b0;
    if (r_cnt == 1) begin
      rrsp <= 1'b1;
      for (int i = 0; i < 4; i++) rdata[32*i +: 32] <= imem[{r_addr[9:4], 2'(i)}];
    end
    if (r_cnt > 0) r_cnt--;
    if (rst_n && rvalid && rready) begin r_cnt = 2; r_addr = raddr; end
  end
  // single-cycle TCDM on both ports
  assign tready = 2'b11;
  always @(posedge clk) for (int p = 0; p < 2; p++) begin
    trvalid[p] <= rst_n && tvalid[p];
    trsp[p].data <= tcdm[treq[p].addr[12:3]];
    if (rst_n && tvalid[p] && treq[p].write)
      for (int b = 0; b < 8; b++) if (treq[p].strb[b]) tcdm[treq[p].addr[12:3]][b*8 +: 8] = treq[p].data[b*8 +: 8];
  end
  assign eready = 1'b1;
  always @(posedge clk) begin ervalid <= rst_n && evalid; ersp.data <= '0; end

  int n_dual = 0, n_seq = 0;
  longint first_seq = -1, last_seq = -1;
  always @(posedge clk) if (rst_n) begin
    n_dual += int'(retire && seq_issue);
    n_seq  += int'(seq_issue);
    if (seq_issue) begin if (first_seq < 0) first_seq = cyc; last_seq = cyc; end
  end

  localparam logic [4:0] T0=5, T1=6, T2=7, S0=8, S1=9, A0=10, A1=11, A2=12, S2=18, S3=19,
                         T3=28, T4=29, T5=30, T6=31, FT0=0, FT1=1, FA0=10, FA1=11;
  real a [N], b [N];
  initial begin
    int pc;
    real exp;
    for (int i = 0; i < 256; i++) imem[i] = 32'h0000_0013;
    for (int i = 0; i < 1024; i++) tcdm[i] = '0;
    for (int i = 0; i < N; i++) begin
      a[i] = real'(int'($urandom_range(0, 30)) - 15); b[i] = real'(int'($urandom_range(0, 30)) - 15);
      tcdm[i] = $realtobits(a[i]); tcdm[64 + i] = $realtobits(b[i]);
    end
    pc = 0;
    imem[pc++] = lui(S0, 20'h10000);
    imem[pc++] = lui(S1, 20'h10030);
    imem[pc++] = addi(T2, 0, N - 1);
    imem[pc++] = addi(T3, 0, 8);
    imem[pc++] = sw(T2, S1, 8);
    imem[pc++] = sw(T3, S1, 24);
    imem[pc++] = sw(S0, S1, 96);
    imem[pc++] = addi(A1, S0, 512);
    imem[pc++] = sw(T2, S1, 128 + 8);
    imem[pc++] = sw(T3, S1, 128 + 24);
    imem[pc++] = sw(A1, S1, 128 + 96);
    imem[pc++] = csrsi(CSR_SSR, 1);
    imem[pc++] = fcvt_d_w(FA0, 0);
    imem[pc++] = fcvt_d_w(FA1, 0);
    imem[pc++] = fcvt_d_w(12, 0);
    imem[pc++] = fcvt_d_w(13, 0);
    imem[pc++] = addi(T4, 0, N);
    imem[pc++] = frep(1'b1, T4, 1, 3'd3, 4'b1001);  // four accumulators fa0..fa3
    imem[pc++] = fmadd_d(FA0, FT0, FT1, FA0);
    imem[pc++] = addi(T0, 0, 123);
    imem[pc++] = addi(T1, 0, 7);
    imem[pc++] = mul(S2, T0, T1);
    imem[pc++] = divu(S3, S2, T1);
    imem[pc++] = rem(T6, T0, T1);
    imem[pc++] = fadd_d(FA0, FA0, FA1);
    imem[pc++] = fadd_d(12, 12, 13);
    imem[pc++] = fadd_d(FA0, FA0, 12);
    imem[pc++] = fsd(FA0, S0, 1024);
    imem[pc++] = feq_d(T5, FA0, FA0);
    imem[pc++] = add(T5, T5, T5);
    imem[pc++] = csrci(CSR_SSR, 1);
    imem[pc++] = sw(S2, S0, 1032);
    imem[pc++] = sw(S3, S0, 1036);
    imem[pc++] = sw(T6, S0, 1040);
    imem[pc++] = sw(T5, S0, 1044);
    imem[pc++] = wfi();
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (600) @(posedge clk);
    exp = 0.0;
    for (int i = 0; i < N; i++) exp += a[i] * b[i];
    check($bitstoreal(tcdm[128]) == exp, $sformatf("dot product %f expected %f", $bitstoreal(tcdm[128]), exp));
    check(tcdm[129][31:0] == 861, "multiply");
    check(tcdm[129][63:32] == 123, "divide");
    check(tcdm[130][31:0] == 4, "remainder");
    check(tcdm[130][63:32] == 2, "FP compare result reached the integer core");
    check(n_seq == N, $sformatf("sequencer issued %0d", n_seq));
    check(n_dual > 0, "pseudo dual-issue happened");
    check(last_seq - first_seq + 1 <= N + 12, $sformatf("FREP span %0d cycles", last_seq - first_seq + 1));
    finish();
  end
endmodule
