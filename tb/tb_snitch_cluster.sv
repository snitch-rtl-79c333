// End-to-end test of the Snitch cluster at its default size (one hive of
// eight cores, 32 TCDM banks, 8 KiB shared instruction cache).
// Every core runs the same program from main memory (behavioural model behind
// the master port): it sleeps in WFI until the testbench has put two vectors
// per core into the TCDM through the slave port and written the wake-up mask,
// configures both SSR lanes to stream its vectors, runs a dot product as a
// single-instruction FREP loop with a staggered accumulator while the integer
// core does multiply/divide work in parallel, stores the result with FSD,
// synchronises on an FP compare result, and finally increments two shared
// counters, one with LR/SC and one with AMOADD.
// The testbench checks all results through the slave port and counts each
// mechanism the program must provoke (instruction-cache misses, WFI wake-ups,
// core stalls, FREP sequencer issues, pseudo dual-issue cycles, FPU ops,
// divider activity, TCDM bank conflicts); any mechanism that never happened
// is a failure. It also checks the FREP issue rate: the 16 sequenced FMADDs of
// core 0 must go out within 40 cycles.
module tb_snitch_cluster;
  import snitch_pkg::*;
  import rv_asm_pkg::*;

  localparam int unsigned NrCores = 8;
  localparam int unsigned N       = 16;  // vector length per core

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  mem_req_t sys_out_req;  logic sys_out_valid, sys_out_ready;
  mem_rsp_t sys_out_rsp;  logic sys_out_rsp_valid;
  mem_req_t sys_in_req = '0; logic sys_in_valid = 1'b0, sys_in_ready;
  mem_rsp_t sys_in_rsp;   logic sys_in_rsp_valid;
  fpu_req_t [NrCores-1:0] fpu_req;  logic [NrCores-1:0] fpu_req_valid, fpu_req_ready;
  fpu_rsp_t [NrCores-1:0] fpu_rsp;  logic [NrCores-1:0] fpu_rsp_valid, fpu_rsp_ready;
  logic [NrCores-1:0] retire, fpu_op, fpss_issue, seq_issue, core_stall, wake_up;
  logic [0:0] icache_miss, div_busy;
  logic [$clog2(2*NrCores+2)-1:0] conflicts;

  snitch_cluster dut (
    .clk_i (clk), .rst_ni (rst_n),
    .sys_out_req_o (sys_out_req), .sys_out_valid_o (sys_out_valid),
    .sys_out_ready_i (sys_out_ready), .sys_out_rsp_i (sys_out_rsp),
    .sys_out_rsp_valid_i (sys_out_rsp_valid),
    .sys_in_req_i (sys_in_req), .sys_in_valid_i (sys_in_valid), .sys_in_ready_o (sys_in_ready),
    .sys_in_rsp_o (sys_in_rsp), .sys_in_rsp_valid_o (sys_in_rsp_valid),
    .fpu_req_o (fpu_req), .fpu_req_valid_o (fpu_req_valid), .fpu_req_ready_i (fpu_req_ready),
    .fpu_rsp_i (fpu_rsp), .fpu_rsp_valid_i (fpu_rsp_valid), .fpu_rsp_ready_o (fpu_rsp_ready),
    .retire_o (retire), .fpu_op_o (fpu_op), .fpss_issue_o (fpss_issue),
    .seq_issue_o (seq_issue), .core_stall_o (core_stall), .wake_up_o (wake_up),
    .icache_miss_o (icache_miss), .div_busy_o (div_busy), .tcdm_conflicts_o (conflicts)
  );

  mem_model #(.Latency (4)) i_mem (
    .clk_i (clk), .rst_ni (rst_n), .req_i (sys_out_req), .valid_i (sys_out_valid),
    .ready_o (sys_out_ready), .rsp_o (sys_out_rsp), .rsp_valid_o (sys_out_rsp_valid)
  );

  for (genvar c = 0; c < NrCores; c++) begin : gen_fpu
    fpu_model #(.Latency (3)) i_fpu (
      .clk_i (clk), .rst_ni (rst_n),
      .req_i (fpu_req[c]), .req_valid_i (fpu_req_valid[c]), .req_ready_o (fpu_req_ready[c]),
      .rsp_o (fpu_rsp[c]), .rsp_valid_o (fpu_rsp_valid[c]), .rsp_ready_i (fpu_rsp_ready[c])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // register names
  localparam logic [4:0] T0=5, T1=6, T2=7, S0=8, S1=9, A0=10, A1=11, A2=12, A3=13,
                         A4=14, A5=15, A6=16, A7=17, S2=18, S3=19, T3=28, T4=29,
                         T5=30, T6=31, FT0=0, FT1=1, FA0=10, FA1=11;

  logic [31:0] prog [$];
  task automatic build_program();
    prog = {};
    prog.push_back(wfi());
    prog.push_back(csrr(T0, CSR_MHARTID));
    prog.push_back(lui(S0, 20'h10000));
    prog.push_back(slli(T1, T0, 8));
    prog.push_back(add(A0, S0, T1));           // a = TCDM + hart*256
    prog.push_back(addi(A1, A0, 128));         // b = a + 128
    prog.push_back(lui(S1, 20'h10030));        // SSR configuration space
    prog.push_back(addi(T2, 0, N - 1));
    prog.push_back(sw(T2, S1, 8));             // lane 0 bound 0
    prog.push_back(addi(T3, 0, 8));
    prog.push_back(sw(T3, S1, 24));            // lane 0 stride 0
    prog.push_back(sw(A0, S1, 96));            // lane 0 read pointer (1-D)
    prog.push_back(sw(T2, S1, 128 + 8));       // lane 1 bound 0
    prog.push_back(sw(T3, S1, 128 + 24));      // lane 1 stride 0
    prog.push_back(sw(A1, S1, 128 + 96));      // lane 1 read pointer (1-D)
    prog.push_back(csrsi(CSR_SSR, 1));
    prog.push_back(fcvt_d_w(FA0, 0));
    prog.push_back(fcvt_d_w(FA1, 0));
    prog.push_back(addi(T4, 0, N));
    prog.push_back(frep(1'b1, T4, 1, 3'd1, 4'b1001));  // stagger rd and rs3
    prog.push_back(fmadd_d(FA0, FT0, FT1, FA0));
    prog.push_back(mul(S2, T0, T0));           // integer work during the loop
    prog.push_back(addi(T6, 0, 3));
    prog.push_back(addi(S2, S2, 100));
    prog.push_back(divu(S3, S2, T6));
    prog.push_back(rem(T6, S2, T6));
    prog.push_back(fadd_d(FA0, FA0, FA1));
    prog.push_back(lui(A2, 20'h10001));
    prog.push_back(slli(T1, T0, 3));
    prog.push_back(add(A2, A2, T1));
    prog.push_back(fsd(FA0, A2, 0));
    prog.push_back(feq_d(T5, FA0, FA0));
    prog.push_back(add(T5, T5, T5));           // waits for the FP subsystem
    prog.push_back(csrci(CSR_SSR, 1));
    prog.push_back(lui(A3, 20'h10002));
    prog.push_back(slli(T1, T0, 4));
    prog.push_back(add(A3, A3, T1));
    prog.push_back(sw(S3, A3, 0));
    prog.push_back(sw(T6, A3, 4));
    prog.push_back(sw(T5, A3, 8));
    prog.push_back(lui(A5, 20'h10003));
    prog.push_back(lr_w(A4, A5));              // LR/SC increment
    prog.push_back(addi(A4, A4, 1));
    prog.push_back(sc_w(A6, A5, A4));
    prog.push_back(bne(A6, 0, -12));
    prog.push_back(addi(A5, A5, 8));
    prog.push_back(addi(A7, 0, 1));
    prog.push_back(amoadd_w(A4, A5, A7));      // AMO increment
    prog.push_back(wfi());
    prog.push_back(jal(0, -4));
  endtask

  // one request through the cluster slave port, waiting for its response
  task automatic sys_access(input logic [31:0] addr, input logic write,
                            input logic [63:0] wdata, output logic [63:0] rdata);
    @(negedge clk);
    sys_in_req   = '{addr: addr, write: write, data: wdata, strb: 8'hFF, amo: AMO_NONE};
    sys_in_valid = 1'b1;
    do @(posedge clk); while (!sys_in_ready);
    @(negedge clk);
    sys_in_valid = 1'b0;
    while (!sys_in_rsp_valid) @(negedge clk);
    rdata = sys_in_rsp.data;
  endtask

  // mechanism counters
  longint cyc = 0;
  int n_miss = 0, n_wake = 0, n_stall = 0, n_seq = 0, n_dual = 0, n_fpu = 0,
      n_div = 0, n_conf = 0;
  longint first_seq = -1, last_seq = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_miss  += int'(icache_miss[0]);
    n_wake  += $countones(wake_up);
    n_stall += $countones(core_stall);
    n_seq   += $countones(seq_issue);
    n_dual  += $countones(seq_issue & retire);
    n_fpu   += $countones(fpu_op);
    n_div   += int'(div_busy[0]);
    n_conf  += int'(conflicts);
    if (seq_issue[0]) begin
      if (first_seq < 0) first_seq = cyc;
      last_seq = cyc;
    end
  end

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  real a [NrCores][N], b [NrCores][N];
  initial begin : main
    logic [63:0] rd;
    build_program();
    foreach (prog[i]) i_mem.write_word(BOOT_ADDR + 32'(4 * i), prog[i]);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // operands: small integers so that every sum is exact
    for (int c = 0; c < NrCores; c++)
      for (int i = 0; i < N; i++) begin
        a[c][i] = real'(int'($urandom_range(0, 40)) - 20);
        b[c][i] = real'(int'($urandom_range(0, 40)) - 20);
        sys_access(TCDM_BASE + 32'(c * 256 + i * 8), 1'b1, $realtobits(a[c][i]), rd);
        sys_access(TCDM_BASE + 32'(c * 256 + 128 + i * 8), 1'b1, $realtobits(b[c][i]), rd);
      end
    sys_access(TCDM_BASE + 32'h3000, 1'b1, 64'd0, rd);
    sys_access(TCDM_BASE + 32'h3008, 1'b1, 64'd0, rd);
    for (int c = 0; c < NrCores; c++) sys_access(TCDM_BASE + 32'h2000 + 32'(16 * c), 1'b1, '0, rd);
    sys_access(TCDM_BASE + 32'h2000 + 32'(16 * NrCores), 1'b1, '0, rd);
    // read back one word through the slave port
    sys_access(TCDM_BASE + 32'd8, 1'b0, '0, rd);
    check(rd == $realtobits(a[0][1]), "slave-port read-back of TCDM");
    sys_access(PERIPH_BASE + 32'h10, 1'b0, '0, rd);
    check(rd == 64'(NrCores), "peripheral reports the number of cores");
    // wake all cores
    sys_access(PERIPH_BASE + 32'h48, 1'b1, 64'((1 << NrCores) - 1), rd);
    // wait for both shared counters
    do begin
      repeat (50) @(posedge clk);
      sys_access(TCDM_BASE + 32'h3008, 1'b0, '0, rd);
    end while (rd[31:0] != NrCores);
    repeat (20) @(posedge clk);
    sys_access(TCDM_BASE + 32'h3000, 1'b0, '0, rd);
    check(rd[31:0] == NrCores, $sformatf("LR/SC counter %0d", rd[31:0]));
    for (int c = 0; c < NrCores; c++) begin
      real exp;
      int unsigned s2;
      exp = 0.0;
      for (int i = 0; i < N; i++) exp += a[c][i] * b[c][i];
      sys_access(TCDM_BASE + 32'h1000 + 32'(8 * c), 1'b0, '0, rd);
      check($bitstoreal(rd) == exp,
            $sformatf("core %0d dot product %f, expected %f", c, $bitstoreal(rd), exp));
      s2 = c * c + 100;
      sys_access(TCDM_BASE + 32'h2000 + 32'(16 * c), 1'b0, '0, rd);
      check(rd[31:0] == s2 / 3, $sformatf("core %0d divu %0d", c, rd[31:0]));
      check(rd[63:32] == s2 % 3, $sformatf("core %0d rem %0d", c, rd[63:32]));
      sys_access(TCDM_BASE + 32'h2008 + 32'(16 * c), 1'b0, '0, rd);
      check(rd[31:0] == 2, $sformatf("core %0d feq result %0d", c, rd[31:0]));
    end
    sys_access(PERIPH_BASE + 32'h18, 1'b0, '0, rd);
    check(rd > 64'd100, "cycle counter runs");
    sys_access(PERIPH_BASE + 32'h20, 1'b0, '0, rd);
    check(rd >= 64'(NrCores * (N + 4)), $sformatf("FPU-op counter %0d", rd));
    $display("mechanisms: icache_miss=%0d wake=%0d stall=%0d seq_issue=%0d dual_issue=%0d fpu_op=%0d div_busy=%0d conflicts=%0d",
             n_miss, n_wake, n_stall, n_seq, n_dual, n_fpu, n_div, n_conf);
    check(n_miss > 0, "instruction-cache misses happened");
    check(n_wake >= NrCores, "wake-up pulses happened");
    check(n_stall > 0, "core stalls happened");
    check(n_seq >= NrCores * N, "FREP sequencer issued the loop body");
    check(n_dual > 0, "pseudo dual-issue cycles happened");
    check(n_fpu >= NrCores * (N + 4), "FPU operations happened");
    check(n_div > 0, "divider was used");
    check(n_conf > 0, "TCDM bank conflicts happened");
    $display("core 0 FREP issue span: %0d cycles", last_seq - first_seq + 1);
    check(last_seq - first_seq + 1 <= 40, "FREP issue rate of core 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
