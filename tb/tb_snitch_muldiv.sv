// Test of the shared multiply/divide unit with 8 requesting cores: random
// MUL/MULH/MULHSU/MULHU/DIV/DIVU/REM/REMU (with division by zero and
// overflow cases) against a model, responses routed back by hart id.
// Timing checks: a multiplication answers 2 cycles after acceptance and the
// multiplier accepts back-to-back; a division takes at most 34 cycles.
module tb_snitch_muldiv;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 200000;
  `include "tb_common.svh"
  acc_req_t [7:0] req; logic [7:0] req_valid, req_ready;
  acc_rsp_t rsp; logic rsp_valid, rsp_ready, div_busy;
  snitch_muldiv dut (.clk_i (clk), .rst_ni (rst_n), .req_i (req), .req_valid_i (req_valid),
                     .req_ready_o (req_ready), .rsp_o (rsp), .rsp_valid_o (rsp_valid),
                     .rsp_ready_i (rsp_ready), .div_busy_o (div_busy));

  function automatic logic [31:0] model(input logic [2:0] f3, input logic [31:0] a, b);
    logic signed [63:0] p;
    unique case (f3)
      3'd0: return a * b;
      3'd1: begin p = $signed(a) * $signed(b); return p[63:32]; end
      3'd2: begin p = $signed({{32{a[31]}}, a}) * $signed({32'b0, b}); return p[63:32]; end
      3'd3: return 32'(({32'b0, a} * {32'b0, b}) >> 32);
      3'd4: return (b == 0) ? '1 : (a == 32'h8000_0000 && b == '1) ? a : 32'($signed(a) / $signed(b));
      3'd5: return (b == 0) ? '1 : a / b;
      3'd6: return (b == 0) ? a : (a == 32'h8000_0000 && b == '1) ? 0 : 32'($signed(a) % $signed(b));
      default: return (b == 0) ? a : a % b;
    endcase
  endfunction

  function automatic logic [31:0] operand();
    case ($urandom_range(0, 4))
      0: return 0;
      1: return 32'hFFFF_FFFF;
      2: return 32'h8000_0000;
      3: return $urandom_range(0, 100);
      default: return $urandom;
    endcase
  endfunction

  logic [31:0] exp_q [8][$];
  longint t_acc [8][$];
  int done = 0;
  bit rnd_stall = 0;
  always @(negedge clk) rsp_ready = rnd_stall ? ($urandom_range(0, 3) != 0) : 1'b1;
  // responses
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    int h;
    longint lat;
    h = int'(rsp.hart);
    if (exp_q[h].size() == 0) check(0, "unexpected response");
    else begin
      logic [31:0] e;
      e = exp_q[h].pop_front();
      lat = cyc - t_acc[h].pop_front();
      check(rsp.data == e, $sformatf("hart %0d result %h expected %h", h, rsp.data, e));
      check(rsp.rd == 5'(h + 1), "destination register returned");
    end
  end

  task automatic one(input int h, input logic [2:0] f3, input bit wait_rsp);
    @(negedge clk);
    req[h].instr = {7'b0000001, 5'd2, 5'd1, f3, 5'(h + 1), OP_OP};
    req[h].op_a = operand(); req[h].op_b = operand(); req[h].hart = 4'(h);
    req_valid[h] = 1;
    exp_q[h].push_back(model(f3, req[h].op_a, req[h].op_b));
    do @(posedge clk); while (!req_ready[h]);
    t_acc[h].push_back(cyc);
    @(negedge clk); req_valid[h] = 0;
    if (wait_rsp) while (exp_q[h].size() != 0) @(negedge clk);
  endtask

  initial begin
    req = '0; req_valid = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // latency of one multiplication and of divisions
    begin
      longint t0;
      @(negedge clk);
      req[0].instr = {7'b0000001, 5'd2, 5'd1, 3'd0, 5'd1, OP_OP};
      req[0].op_a = 7; req[0].op_b = 6; req[0].hart = 0; req_valid[0] = 1;
      exp_q[0].push_back(42);
      @(posedge clk); t0 = cyc; t_acc[0].push_back(cyc);
      check(req_ready[0], "multiplier accepts immediately");
      @(negedge clk); req_valid[0] = 0;
      while (!rsp_valid) @(posedge clk);
      check(cyc - t0 == 2, $sformatf("multiply latency %0d, expected 2", cyc - t0));
    end
    for (int i = 0; i < 20; i++) begin
      longint t0;
      t0 = cyc;
      one(1, 3'($urandom_range(4, 7)), 1);
      check(cyc - t0 <= 38, $sformatf("division took %0d cycles", cyc - t0));
    end
    // all harts concurrently, random operations, random response stalls
    rnd_stall = 1;
    for (int h = 0; h < 8; h++) begin
      automatic int hh = h;
      fork
        begin
          for (int k = 0; k < 25; k++) one(hh, 3'($urandom_range(0, 7)), 1);
          done++;
        end
      join_none
    end
    while (done != 8) @(negedge clk);
    rnd_stall = 0;
    repeat (50) @(negedge clk);
    for (int h = 0; h < 8; h++) check(exp_q[h].size() == 0, $sformatf("hart %0d got all responses", h));
    finish();
  end
endmodule
