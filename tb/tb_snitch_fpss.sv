// Test of the FP subsystem with the FPU model and a single-cycle memory:
// integer-to-FP conversions, dependent arithmetic (scoreboard), FSD/FLD
// through the FP load/store unit, an FP compare whose result returns to the
// integer side with its destination register, and SSR register semantics
// (reads of ft0/ft1 pop the stream lanes, once per instruction even if the
// register is named twice; a write to ft1 pushes into lane 1)
// with the stream switched on and off.
module tb_snitch_fpss;
  import snitch_pkg::*;
  import rv_asm_pkg::*;
  localparam int WatchdogCycles = 20000;
  `include "tb_common.svh"
  logic ssr_en; acc_req_t areq; logic avalid, aready; acc_rsp_t arsp; logic arvalid, arready;
  fpu_req_t freq; logic fvalid, fready, frvalid, frready; fpu_rsp_t frsp;
  logic [1:0][63:0] srdata, swdata; logic [1:0] srvalid, srdone, swvalid, swready;
  mem_req_t dreq; logic dvalid, dready, drvalid; mem_rsp_t drsp;
  logic fpu_op, issue, busy;
  snitch_fpss dut (.clk_i (clk), .rst_ni (rst_n), .ssr_en_i (ssr_en),
    .acc_req_i (areq), .acc_req_valid_i (avalid), .acc_req_ready_o (aready),
    .acc_rsp_o (arsp), .acc_rsp_valid_o (arvalid), .acc_rsp_ready_i (arready),
    .fpu_req_o (freq), .fpu_req_valid_o (fvalid), .fpu_req_ready_i (fready),
    .fpu_rsp_i (frsp), .fpu_rsp_valid_i (frvalid), .fpu_rsp_ready_o (frready),
    .ssr_rdata_i (srdata), .ssr_rvalid_i (srvalid), .ssr_rdone_o (srdone),
    .ssr_wdata_o (swdata), .ssr_wvalid_o (swvalid), .ssr_wready_i (swready),
    .data_req_o (dreq), .data_req_valid_o (dvalid), .data_req_ready_i (dready),
    .data_rsp_i (drsp), .data_rsp_valid_i (drvalid),
    .fpu_op_o (fpu_op), .issue_o (issue), .busy_o (busy));
  fpu_model i_fpu (.clk_i (clk), .rst_ni (rst_n), .req_i (freq), .req_valid_i (fvalid),
    .req_ready_o (fready), .rsp_o (frsp), .rsp_valid_o (frvalid), .rsp_ready_i (frready));
  logic [63:0] mem [64];
  assign dready = 1'b1;
  always @(posedge clk) begin
    drvalid <= rst_n && dvalid; drsp.data <= mem[dreq.addr[8:3]];
    if (rst_n && dvalid && dreq.write) mem[dreq.addr[8:3]] = dreq.data;
  end
  // SSR lanes: lane 0 streams 1.0, 2.0, ...; lane 1 streams 10.0, 20.0, ...
  int pops [2]; real pushed [$];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 2; l++) if (srdone[l]) pops[l]++;
    if (swvalid[1] && swready[1]) pushed.push_back($bitstoreal(swdata[1]));
  end
  always_comb begin
    srdata[0] = $realtobits(real'(pops[0] + 1));
    srdata[1] = $realtobits(10.0 * real'(pops[1] + 1));
  end
  assign srvalid = 2'b11;
  assign swready = 2'b11;
  assign arready = 1'b1;
  acc_rsp_t rsp_q [$];
  always @(posedge clk) if (rst_n && arvalid) rsp_q.push_back(arsp);

  task automatic send(input logic [31:0] instr, input logic [31:0] a);
    @(negedge clk);
    areq = '{instr: instr, op_a: a, op_b: 0, op_c: 0, hart: 0}; avalid = 1;
    do @(posedge clk); while (!aready);
    @(negedge clk); avalid = 0;
  endtask

  initial begin
    ssr_en = 0; avalid = 0; areq = '0; pops = '{0, 0};
    for (int i = 0; i < 64; i++) mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    send(fcvt_d_w(1, 5), 5);
    send(fcvt_d_w(2, 6), 7);
    send(fmul_d(3, 1, 2), 0);              // depends on both conversions
    send(fsd(3, 0, 0), 32'h1000_0010);     // address computed by the core
    send(fld(4, 0, 0), 32'h1000_0010);
    send(fadd_d(5, 4, 4), 0);              // depends on the load
    send(fsd(5, 0, 0), 32'h1000_0018);
    send(feq_d(9, 5, 5), 0);               // result to integer register x9
    while (busy || rsp_q.size() == 0) @(posedge clk);
    check($bitstoreal(mem[2]) == 35.0, $sformatf("FMUL via FSD: %f", $bitstoreal(mem[2])));
    check($bitstoreal(mem[3]) == 70.0, $sformatf("FLD then FADD: %f", $bitstoreal(mem[3])));
    check(rsp_q.size() == 1 && rsp_q[0].rd == 9 && rsp_q[0].data == 1, "FEQ result returned to x9");
    // SSR semantics
    ssr_en = 1;
    send(fadd_d(6, 0, 1), 0);              // 1 + 10
    send(fadd_d(7, 0, 1), 0);              // 2 + 20
    send(fadd_d(1, 6, 7), 0);              // write to ft1: pushed into lane 1
    send(fadd_d(8, 0, 0), 0);              // ft0 twice in one instruction: one pop, 3 + 3
    while (busy) @(posedge clk);
    ssr_en = 0;
    send(fsd(8, 0, 0), 32'h1000_0020);
    send(fadd_d(10, 1, 1), 0);             // ft1 as a normal register again (still 5.0)
    send(fsd(10, 0, 0), 32'h1000_0028);
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    check(pops[0] == 3 && pops[1] == 2, $sformatf("stream pops %0d/%0d", pops[0], pops[1]));
    check(pushed.size() == 1 && pushed[0] == 33.0, "write to ft1 went to the stream");
    check($bitstoreal(mem[4]) == 6.0, $sformatf("one pop per instruction and lane: %f", $bitstoreal(mem[4])));
    check($bitstoreal(mem[5]) == 10.0, $sformatf("register semantics restored: %f", $bitstoreal(mem[5])));
    finish();
  end
endmodule
