// Test of the integer core on its own: instruction memory answers in the
// same cycle, data memory one cycle after a request, and a behavioural
// accelerator answers offloaded MUL instructions after 3 cycles. The program
// sums 1..20 in a loop, stores and reloads bytes and words (signed and
// unsigned), multiplies through the offload port, uses JAL/JALR, reads
// mcycle/minstret/mhartid and ends in WFI; the memory contents are checked.
// Timing checks: straight-line ALU code retires one instruction per cycle
// (single-stage core), a load-use dependency stalls the core, and a wake-up
// pulse ends WFI.
module tb_snitch;
  import snitch_pkg::*;
  import rv_asm_pkg::*;
  localparam int WatchdogCycles = 20000;
  `include "tb_common.svh"
  logic [31:0] iaddr, idata; logic ivalid, iready, wake, ssr_en, retire, stall;
  mem_req_t dreq; logic dvalid, dready, drvalid; mem_rsp_t drsp;
  acc_req_t areq; logic avalid, aready, arvalid, arready; acc_rsp_t arsp;
  snitch #(.BootAddr (32'h0000_1000)) dut (
    .clk_i (clk), .rst_ni (rst_n), .hart_id_i (32'd3), .wake_up_i (wake),
    .inst_addr_o (iaddr), .inst_valid_o (ivalid), .inst_data_i (idata), .inst_ready_i (iready),
    .data_req_o (dreq), .data_req_valid_o (dvalid), .data_req_ready_i (dready),
    .data_rsp_i (drsp), .data_rsp_valid_i (drvalid),
    .acc_req_o (areq), .acc_req_valid_o (avalid), .acc_req_ready_i (aready),
    .acc_rsp_i (arsp), .acc_rsp_valid_i (arvalid), .acc_rsp_ready_o (arready),
    .ssr_en_o (ssr_en), .retire_o (retire), .stall_o (stall));

  logic [31:0] imem [256];
  logic [63:0] dmem [64];
  assign idata  = imem[iaddr[9:2]];
  assign iready = ivalid;
  assign dready = 1'b1;
  always @(posedge clk) begin
    drvalid <= rst_n && dvalid;
    drsp.data <= dmem[dreq.addr[8:3]];
    if (rst_n && dvalid && dreq.write)
      for (int b = 0; b < 8; b++) if (dreq.strb[b]) dmem[dreq.addr[8:3]][b*8 +: 8] = dreq.data[b*8 +: 8];
  end
  // accelerator model: MUL after 3 cycles, one at a time
  int a_cnt = 0; acc_rsp_t a_pend;
  assign aready = (a_cnt == 0);
  always @(posedge clk) begin
    if (arvalid && arready) a_cnt = 0;
    if (a_cnt > 1) a_cnt--;
    if (rst_n && avalid && aready) begin
      a_pend = '{rd: areq.instr[11:7], data: areq.op_a * areq.op_b, hart: areq.hart};
      a_cnt = 3;
    end
  end
  assign arvalid = (a_cnt == 1);
  assign arsp = a_pend;

  int n_ret = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin n_ret += int'(retire); n_stall += int'(stall); end

  localparam logic [4:0] T0=5, T1=6, T2=7, S0=8, A0=10, A1=11, A2=12, A3=13;
  initial begin
    int pc;
    longint t0; int r0;
    for (int i = 0; i < 256; i++) imem[i] = 32'h0000_0013;  // nop
    for (int i = 0; i < 64; i++) dmem[i] = '0;
    pc = 32'h1000 / 4 % 256;
    // sum 1..20
    imem[pc++] = addi(T0, 0, 0);
    imem[pc++] = addi(T1, 0, 20);
    imem[pc++] = add(T0, T0, T1);        // loop:
    imem[pc++] = addi(T1, T1, -1);
    imem[pc++] = bne(T1, 0, -8);
    imem[pc++] = sw(T0, 0, 16);          // dmem word at 16 = 210
    imem[pc++] = addi(T2, 0, -100);
    imem[pc++] = sb(T2, 0, 25);
    imem[pc++] = lb(A0, 0, 25);          // sign-extended -100
    imem[pc++] = add(A1, A0, A0);        // load-use: stalls
    imem[pc++] = sw(A1, 0, 20);          // -200
    imem[pc++] = mul(A2, T0, T1);        // 210 * 0
    imem[pc++] = addi(T1, 0, 7);
    imem[pc++] = mul(A2, T0, T1);        // 1470 (offloaded)
    imem[pc++] = sw(A2, 0, 24);
    imem[pc++] = csrr(A3, CSR_MHARTID);
    imem[pc++] = sw(A3, 0, 28);
    imem[pc++] = jal(1, 12);             // call +12
    imem[pc++] = sw(0, 0, 32);           // skipped
    imem[pc++] = jal(0, 16);             // after return: to the end
    imem[pc++] = addi(S0, 0, 55);        // callee
    imem[pc++] = {12'd0, 5'd1, 3'b000, 5'd0, OP_JALR};  // ret
    imem[pc++] = sw(0, 0, 36);           // skipped
    imem[pc++] = sw(S0, 0, 32);          // 55
    // 10 independent ALU instructions for the rate check
    r0 = pc;
    for (int i = 0; i < 10; i++) imem[pc++] = addi(5'(14 + i % 4), 0, i);
    imem[pc++] = wfi();
    imem[pc++] = addi(T0, 0, 99);
    imem[pc++] = sw(T0, 0, 40);
    imem[pc++] = wfi();
    wake = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // rate of straight-line ALU code
    wait (iaddr == 32'h1000 + 32'(4 * (r0 - 32'h1000 / 4 % 256)));
    @(negedge clk);
    begin
      int n;
      n = n_ret;
      repeat (10) @(posedge clk);
      @(negedge clk);
      check(n_ret - n == 10, $sformatf("10 ALU instructions retired in 10 cycles (%0d)", n_ret - n));
    end
    repeat (20) @(negedge clk);
    check(dmem[2][31:0] == 210, $sformatf("loop sum %0d", dmem[2][31:0]));
    check(dmem[2][63:32] == 32'(-200), "signed byte load and add");
    check(dmem[3][31:0] == 1470, "offloaded multiply");
    check(dmem[3][63:32] == 3, "mhartid");
    check(dmem[4][31:0] == 55, "JAL/JALR");
    check(dmem[4][63:32] == 0, "instruction after JAL skipped");
    check(dmem[5][31:0] == 0, "core sleeps in WFI");
    check(n_stall > 0, "load-use and offload dependencies stalled the core");
    @(negedge clk); wake = 1; @(negedge clk); wake = 0;
    repeat (10) @(negedge clk);
    check(dmem[5][31:0] == 99, "wake-up ends WFI");
    finish();
  end
endmodule
