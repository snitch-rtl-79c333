// Test of one SSR lane with a single-cycle memory model: a 2-D read stream
// (row-major sub-block, relative strides), a read stream configured through
// the shadow registers while the first one runs, and a 1-D write stream; data
// and addresses are compared with a model. Timing checks: in steady state the
// lane delivers one element per cycle (16 elements within 16+4 cycles of the
// first), and configuration writes are held off while the shadow is full.
module tb_snitch_ssr;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 20000;
  `include "tb_common.svh"
  logic cfg_valid, cfg_write, cfg_ready; logic [4:0] cfg_word; logic [31:0] cfg_wdata, cfg_rdata;
  logic [63:0] rdata, wdata; logic rvalid, rdone, wvalid, wready, active;
  mem_req_t mreq; logic mreq_valid, mreq_ready; mem_rsp_t mrsp; logic mrsp_valid;
  snitch_ssr dut (
    .clk_i (clk), .rst_ni (rst_n), .cfg_valid_i (cfg_valid), .cfg_write_i (cfg_write),
    .cfg_word_i (cfg_word), .cfg_wdata_i (cfg_wdata), .cfg_rdata_o (cfg_rdata),
    .cfg_ready_o (cfg_ready), .rdata_o (rdata), .rvalid_o (rvalid), .rdone_i (rdone),
    .wdata_i (wdata), .wvalid_i (wvalid), .wready_o (wready), .mem_req_o (mreq),
    .mem_req_valid_o (mreq_valid), .mem_req_ready_i (mreq_ready), .mem_rsp_i (mrsp),
    .mem_rsp_valid_i (mrsp_valid), .active_o (active));

  logic [63:0] mem [1024];
  assign mreq_ready = 1'b1;
  always @(posedge clk) begin
    mrsp_valid <= rst_n && mreq_valid;
    mrsp.data  <= mem[mreq.addr[12:3]];
    if (rst_n && mreq_valid && mreq.write) mem[mreq.addr[12:3]] = mreq.data;
  end

  int held = 0;
  task automatic cfg(input int word, input logic [31:0] v);
    @(negedge clk);
    cfg_valid = 1; cfg_write = 1; cfg_word = 5'(word); cfg_wdata = v;
    do begin @(posedge clk); if (!cfg_ready) held++; end while (!cfg_ready);
    @(negedge clk); cfg_valid = 0;
  endtask

  logic [63:0] exp_q [$];
  longint t_first, t_last;
  int n_pop = 0;
  always @(negedge clk) rdone = rvalid && exp_q.size() != 0;
  always @(posedge clk) if (rst_n && rdone) begin
    check(rdata == exp_q.pop_front(), "streamed element");
    if (n_pop == 0) t_first = cyc;
    n_pop++;
    t_last = cyc;
  end

  initial begin
    cfg_valid = 0; cfg_write = 0; cfg_word = 0; cfg_wdata = 0; wvalid = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    // stream 1: 4x4 sub-block of a 16-column matrix at word 100, row-major
    for (int j = 0; j < 4; j++) for (int i = 0; i < 4; i++) exp_q.push_back(mem[100 + 16 * j + i]);
    cfg(2, 3); cfg(3, 3);                  // bounds (count - 1)
    cfg(6, 8); cfg(7, 16 * 8 - 3 * 8);     // strides: relative jumps
    cfg(25, 32'h1000_0000 + 100 * 8);      // 2-D read pointer
    // stream 2 (shadow): 1-D, 12 elements from word 500, every second word
    for (int i = 0; i < 12; i++) exp_q.push_back(mem[500 + 2 * i]);
    cfg(2, 11); cfg(6, 16);
    cfg(24, 32'h1000_0000 + 500 * 8);
    cfg(2, 7);                             // shadow full until stream 1 ends
    check(held > 0, "configuration held off while the shadow is full");
    while (exp_q.size() != 0) @(posedge clk);
    check(t_last - t_first + 1 <= 28 + 4, $sformatf("28 elements in %0d cycles", t_last - t_first + 1));
    // stream 3: 1-D write stream of 8 elements to word 700
    cfg(6, 8);
    cfg(28, 32'h1000_0000 + 700 * 8);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); wvalid = 1; wdata = 64'(i) * 64'h0101_0101_0101 + 1;
      do @(posedge clk); while (!wready);
    end
    @(negedge clk); wvalid = 0;
    while (active) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int i = 0; i < 8; i++) check(mem[700 + i] == 64'(i) * 64'h0101_0101_0101 + 1, "written element");
    @(negedge clk); cfg_valid = 1; cfg_write = 0; cfg_word = 0;
    #1 check(cfg_rdata[0] == 1'b0, "status reads idle");
    @(negedge clk); cfg_valid = 0;
    finish();
  end
endmodule
