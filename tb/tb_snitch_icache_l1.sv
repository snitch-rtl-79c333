// Test of the shared L1 instruction cache with 8 L0-side ports against a
// backing-memory model on the refill link (latency 3): random line requests
// from all ports must return the right line to the right port. Timing
// checks: a hit is answered in the cycle after the request (lookup latency
// of one cycle), and when all 8 ports miss on the same line at once the line
// is fetched from memory only once (requests coalesce).
module tb_snitch_icache_l1;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 200000;
  localparam int P = 8;
  `include "tb_common.svh"
  logic [P-1:0][31:0] addr; logic [P-1:0] valid, ready, rvalid; logic [127:0] rdata;
  mem_req_t mreq; logic mvalid, mready, mrvalid; mem_rsp_t mrsp; logic miss;
  snitch_icache_l1 dut (.clk_i (clk), .rst_ni (rst_n), .req_addr_i (addr), .req_valid_i (valid),
    .req_ready_o (ready), .rsp_data_o (rdata), .rsp_valid_o (rvalid), .refill_req_o (mreq),
    .refill_req_valid_o (mvalid), .refill_req_ready_i (mready), .refill_rsp_i (mrsp),
    .refill_rsp_valid_i (mrvalid), .miss_o (miss));
  function automatic logic [63:0] dw(input logic [31:0] a);
    return {a ^ 32'h1234_5678, a};
  endfunction
  logic [63:0] q_d [$]; longint q_t [$];
  int n_mem = 0;
  assign mready = 1'b1;
  always @(posedge clk) begin
    mrvalid <= 1'b0;
    if (q_t.size() != 0 && q_t[0] <= cyc) begin
      mrvalid <= 1'b1; mrsp.data <= q_d.pop_front(); void'(q_t.pop_front());
    end
    if (rst_n && mvalid) begin
      q_d.push_back(dw({mreq.addr[31:3], 3'b0})); q_t.push_back(cyc + 2); n_mem++;
    end
  end
  logic [31:0] want [P];
  bit busy [P];
  longint t_acc [P];
  int lat_bad = 0;
  always @(posedge clk) if (rst_n) for (int p = 0; p < P; p++) if (rvalid[p]) begin
    check(busy[p], "response to an idle port");
    check(rdata == {dw(want[p] + 8), dw(want[p])}, $sformatf("port %0d line %h", p, want[p]));
    busy[p] = 0;
  end
  task automatic req(input int p, input logic [31:0] a, output longint lat);
    longint t0;
    @(negedge clk);
    addr[p] = {a[31:4], 4'b0}; valid[p] = 1; want[p] = {a[31:4], 4'b0}; busy[p] = 1;
    #1 while (!ready[p]) begin @(negedge clk); #1; end
    @(negedge clk); valid[p] = 0;
    lat = 1;
    #1 while (!rvalid[p]) begin @(negedge clk); lat++; #1; end
    while (busy[p]) @(posedge clk);
  endtask
  initial begin
    longint lat;
    int done, m0;
    addr = '0; valid = '0;
    for (int p = 0; p < P; p++) busy[p] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // hit latency
    req(0, 32'h8000_0040, lat);
    req(0, 32'h8000_0040, lat);
    check(lat == 1, $sformatf("hit latency %0d, expected 1", lat));
    // coalescing: all ports miss on the same new line together
    m0 = n_mem;
    @(negedge clk);
    for (int p = 0; p < P; p++) begin
      addr[p] = 32'h8000_0200; valid[p] = 1; want[p] = 32'h8000_0200; busy[p] = 1;
    end
    begin
      logic [P-1:0] acc;
      acc = '0;
      while (acc != '1) begin
        logic [P-1:0] g;
        #1 g = ready & valid;
        @(posedge clk);
        acc |= g;
        @(negedge clk);
        valid = valid & ~g;
      end
    end
    while (busy.or() != 0) @(posedge clk);
    check(n_mem - m0 == 2, $sformatf("one refill (2 beats) for 8 requests, saw %0d beats", n_mem - m0));
    // random traffic, including conflict misses (addresses 8 KiB apart)
    done = 0;
    for (int p = 0; p < P; p++) begin
      automatic int pp = p;
      fork begin
        for (int k = 0; k < 150; k++) begin
          longint l;
          req(pp, 32'h8000_0000 + 32'($urandom_range(0, 3)) * 8192 + 32'(16 * $urandom_range(0, 15)), l);
        end
        done++;
      end join_none
    end
    while (done != P) @(negedge clk);
    finish();
  end
endmodule
