// Test of the load/store unit, integer and FP variants: random byte, half,
// word (and double) loads and stores, signed and unsigned, against a memory
// model whose response latency varies; up to NumOutstanding loads in flight,
// results in order; FLW results NaN-boxed; AMO code forwarded. Checks that
// with a one-cycle memory the unit sustains one load per cycle.
module tb_snitch_lsu;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 100000;
  `include "tb_common.svh"
  logic [1:0] valid, ready, res_valid, res_ready, busy;
  logic [31:0] addr; logic [63:0] wdata; logic [1:0] size; logic sgn, write;
  amo_op_e amo; logic [4:0] tag;
  logic [1:0][4:0] res_tag; logic [1:0][63:0] res_data;
  mem_req_t [1:0] req; logic [1:0] req_valid, req_ready;
  mem_rsp_t [1:0] rsp; logic [1:0] rsp_valid;
  for (genvar g = 0; g < 2; g++) begin : gen_dut
    snitch_lsu #(.FpMode (g)) dut (
      .clk_i (clk), .rst_ni (rst_n), .valid_i (valid[g]), .ready_o (ready[g]),
      .addr_i (addr), .wdata_i (wdata), .size_i (size), .signed_i (sgn), .write_i (write),
      .amo_i (amo), .tag_i (tag), .res_valid_o (res_valid[g]), .res_ready_i (res_ready[g]),
      .res_tag_o (res_tag[g]), .res_data_o (res_data[g]), .busy_o (busy[g]),
      .data_req_o (req[g]), .data_req_valid_o (req_valid[g]), .data_req_ready_i (req_ready[g]),
      .data_rsp_i (rsp[g]), .data_rsp_valid_i (rsp_valid[g]));
  end
  // memory models: random acceptance, in-order responses after 1..3 cycles
  logic [63:0] mem [2][64];
  bit fast = 0;
  for (genvar g = 0; g < 2; g++) begin : gen_mem
    logic [63:0] q_data [$];
    int q_due [$];
    always @(negedge clk) req_ready[g] = fast ? 1'b1 : ($urandom_range(0, 3) != 0);
    always @(posedge clk) begin
      rsp_valid[g] <= 1'b0;
      if (q_due.size() != 0 && q_due[0] <= cyc) begin
        rsp_valid[g] <= 1'b1; rsp[g].data <= q_data.pop_front(); void'(q_due.pop_front());
      end
      if (rst_n && req_valid[g] && req_ready[g]) begin
        q_data.push_back(mem[g][req[g].addr[8:3]]);
        q_due.push_back(int'(cyc) + (fast ? 0 : $urandom_range(0, 2)));
        if (req[g].write)
          for (int b = 0; b < 8; b++) if (req[g].strb[b]) mem[g][req[g].addr[8:3]][b*8 +: 8] = req[g].data[b*8 +: 8];
      end
    end
  end
  logic [63:0] exp_q [2][$];
  always @(posedge clk) for (int g = 0; g < 2; g++) if (rst_n && res_valid[g] && res_ready[g]) begin
    if (exp_q[g].size() == 0) check(0, "unexpected result");
    else begin
      logic [63:0] e;
      e = exp_q[g].pop_front();
      check(res_data[g] == e, $sformatf("lsu %0d result %h expected %h", g, res_data[g], e));
    end
  end
  always @(negedge clk) res_ready = fast ? 2'b11 : 2'($urandom);

  function automatic logic [63:0] model(input int g, input logic [31:0] a, input logic [1:0] sz, input logic s);
    logic [63:0] w;
    w = mem[g][a[8:3]] >> (8 * a[2:0]);
    unique case (sz)
      2'd0: return s ? 64'(signed'(w[7:0]))  : 64'(w[7:0]);
      2'd1: return s ? 64'(signed'(w[15:0])) : 64'(w[15:0]);
      2'd2: return g ? {32'hFFFF_FFFF, w[31:0]} : (s ? 64'(signed'(w[31:0])) : 64'(w[31:0]));
      default: return w;
    endcase
  endfunction

  task automatic access(input int g, input bit wr, input logic [1:0] sz);
    logic [31:0] a;
    @(negedge clk);
    a = 32'h1000_0000 | 32'($urandom_range(0, 511));
    a = (a >> sz) << sz;
    addr = a; size = sz; sgn = $urandom_range(0, 1); write = wr; amo = AMO_NONE;
    wdata = {$urandom, $urandom}; tag = 5'($urandom);
    // the value the model will see once all earlier stores have landed
    valid = 2'b01 << g;
    do @(posedge clk); while (!ready[g]);
    if (!wr) exp_q[g].push_back(model(g, a, sz, sgn));
    @(negedge clk); valid = '0;
    if (wr) while (busy[g]) @(negedge clk);
  endtask

  initial begin
    valid = 0; addr = 0; wdata = 0; size = 0; sgn = 0; write = 0; amo = AMO_NONE; tag = 0;
    for (int g = 0; g < 2; g++) for (int i = 0; i < 64; i++) mem[g][i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 1500; k++) begin
      int g;
      g = $urandom_range(0, 1);
      access(g, $urandom_range(0, 2) == 0, 2'($urandom_range(0, g ? 3 : 2)));
    end
    while (busy != 0) @(negedge clk);
    // throughput with a single-cycle memory: 16 back-to-back loads
    fast = 1;
    repeat (3) @(negedge clk);
    begin
      longint t0;
      int n;
      n = 0;
      @(negedge clk);
      valid = 2'b01; write = 0; size = 2; sgn = 0; addr = 32'h1000_0040;
      t0 = cyc;
      while (n < 16) begin
        @(posedge clk);
        if (ready[0]) begin exp_q[0].push_back(model(0, addr, 2, 0)); n++; end
      end
      @(negedge clk); valid = 0;
      check(cyc - t0 <= 17, $sformatf("16 loads accepted in %0d cycles", cyc - t0));
    end
    while (busy != 0) @(negedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all results returned");
    finish();
  end
endmodule
