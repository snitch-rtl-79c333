// Test of the FREP sequencer: bypass of plain FP instructions, an outer loop
// (whole body repeated), an inner loop (each instruction repeated) and a
// staggered loop (rd and rs3 counting up and wrapping), each compared
// instruction by instruction with a model. Checks the paper's rates: a
// sequenced loop issues one instruction per cycle once the body has been
// written, and the core side is released after it has written the body
// (here, FREP plus 3 instructions repeated 4 times may occupy the input for
// at most 6 cycles, and all 12 instructions must leave within 16 cycles: two
// cycles to start the loop, then one instruction per cycle).
module tb_snitch_sequencer;
  import snitch_pkg::*;
  import rv_asm_pkg::*;
  localparam int WatchdogCycles = 20000;
  `include "tb_common.svh"
  acc_req_t inp, oup; logic inp_valid, inp_ready, oup_valid, oup_ready, busy, seq_issue;
  snitch_sequencer dut (.clk_i (clk), .rst_ni (rst_n), .inp_i (inp), .inp_valid_i (inp_valid),
                        .inp_ready_o (inp_ready), .oup_o (oup), .oup_valid_o (oup_valid),
                        .oup_ready_i (oup_ready), .busy_o (busy), .seq_issue_o (seq_issue));
  logic [31:0] exp_q [$];
  int n_seq = 0;
  bit rnd_stall = 0;
  always @(negedge clk) oup_ready = rnd_stall ? ($urandom_range(0, 2) != 0) : 1'b1;
  always @(posedge clk) if (rst_n && oup_valid && oup_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      logic [31:0] e;
      e = exp_q.pop_front();
      check(oup.instr == e, $sformatf("issued %h expected %h", oup.instr, e));
    end
    n_seq += int'(seq_issue);
  end

  // input driver: presents queued instructions back to back
  acc_req_t in_q [$];
  always @(posedge clk) if (rst_n && inp_valid && inp_ready) void'(in_q.pop_front());
  always @(negedge clk) begin
    inp_valid = (in_q.size() != 0);
    if (in_q.size() != 0) inp = in_q[0];
  end
  task automatic send(input logic [31:0] instr, input logic [31:0] op_a);
    in_q.push_back('{instr: instr, op_a: op_a, op_b: 0, op_c: 0, hart: 0});
  endtask
  task automatic drain_input();
    while (in_q.size() != 0) @(posedge clk);
  endtask

  function automatic logic [31:0] stag(input logic [31:0] i, input logic [3:0] mask, input int off);
    logic [31:0] r;
    r = i;
    if (mask[3]) r[11:7]  = i[11:7]  + 5'(off);
    if (mask[2]) r[19:15] = i[19:15] + 5'(off);
    if (mask[1]) r[24:20] = i[24:20] + 5'(off);
    if (mask[0]) r[31:27] = i[31:27] + 5'(off);
    return r;
  endfunction

  task automatic loop(input bit outer, input int reps, input logic [2:0] cnt,
                      input logic [3:0] mask, input logic [31:0] body [$]);
    if (outer) begin
      for (int r = 0; r < (reps == 0 ? 1 : reps); r++)
        foreach (body[k]) exp_q.push_back(stag(body[k], mask, r % (cnt + 1)));
    end else begin
      foreach (body[k]) for (int r = 0; r < (reps == 0 ? 1 : reps); r++)
        exp_q.push_back(stag(body[k], mask, r % (cnt + 1)));
    end
    send(frep(outer, 5'd5, body.size(), cnt, mask), 32'(reps));
    foreach (body[k]) send(body[k], 0);
  endtask

  initial begin
    logic [31:0] body [$];
    repeat (2) @(posedge clk); rst_n = 1;
    // bypass
    for (int i = 0; i < 5; i++) begin
      logic [31:0] x;
      x = fadd_d(5'($urandom), 5'($urandom), 5'($urandom));
      exp_q.push_back(x); send(x, 0);
    end
    // outer loop, rate check
    body = {fmul_d(1, 2, 3), fadd_d(4, 5, 6), fmax_d(7, 8, 9)};
    begin
      longint t0, t_in, t_first, t_last;
      int n0;
      drain_input();
      while (exp_q.size() != 0) @(posedge clk);
      n0 = n_seq;
      t0 = cyc;
      loop(1, 4, 0, 0, body);
      drain_input();
      t_in = cyc;
      check(t_in - t0 <= 6, $sformatf("core side busy %0d cycles for FREP + 3 instructions", t_in - t0));
      while (exp_q.size() != 0) @(posedge clk);
      check(cyc - t0 <= 16, $sformatf("12 sequenced instructions took %0d cycles", cyc - t0));
      check(n_seq - n0 == 12, "sequencer issue count");
    end
    // instructions behind a running loop stay in order
    body = {fmadd_d(10, 0, 1, 10)};
    loop(1, 8, 1, 4'b1001, body);
    begin logic [31:0] x; x = fadd_d(10, 10, 11); exp_q.push_back(x); send(x, 0); end
    // inner loop with stagger of rs1 and rs2, random output stalls
    rnd_stall = 1;
    body = {fmul_d(1, 2, 3), fadd_d(4, 5, 6)};
    loop(0, 3, 2, 4'b0110, body);
    loop(1, 0, 0, 0, body);                // max_rep 0 runs once
    for (int k = 0; k < 20; k++) begin
      int n;
      body = {};
      n = $urandom_range(1, 16);
      for (int i = 0; i < n; i++) body.push_back(fmadd_d(5'($urandom), 5'($urandom), 5'($urandom), 5'($urandom)));
      loop($urandom_range(0, 1), $urandom_range(0, 6), 3'($urandom_range(0, 3)), 4'($urandom), body);
      drain_input();
    end
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    check(!busy, "sequencer idle at the end");
    finish();
  end
endmodule
