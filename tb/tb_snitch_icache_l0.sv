// Test of the L0 instruction cache against a refill model that answers line
// requests after a random delay: random fetches over a region larger than the
// cache must always return the right instruction. Timing checks: a hit
// returns in the same cycle (single-cycle hit), a loop that fits in the cache
// causes no misses once warm, and a miss is served one cycle after the line
// arrives.
module tb_snitch_icache_l0;
  localparam int WatchdogCycles = 100000;
  `include "tb_common.svh"
  logic [31:0] faddr, fdata, raddr; logic fvalid, fready, rvalid, rready, rrsp, miss;
  logic [127:0] rdata;
  snitch_icache_l0 dut (.clk_i (clk), .rst_ni (rst_n), .fetch_addr_i (faddr),
    .fetch_valid_i (fvalid), .fetch_data_o (fdata), .fetch_ready_o (fready),
    .refill_addr_o (raddr), .refill_valid_o (rvalid), .refill_ready_i (rready),
    .refill_data_i (rdata), .refill_rsp_valid_i (rrsp), .miss_o (miss));
  function automatic logic [31:0] word(input logic [31:0] a);
    return a ^ 32'hA5A5_0000 ^ {a[15:0], a[31:16]};
  endfunction
  // refill model
  logic [31:0] pend_addr; int pend_due; bit pend = 0;
  assign rready = !pend;
  always @(posedge clk) begin
    rrsp <= 1'b0;
    if (pend && cyc >= pend_due) begin
      rrsp <= 1'b1;
      for (int i = 0; i < 4; i++) rdata[i*32 +: 32] <= word({pend_addr[31:4], 4'b0} + 32'(4 * i));
      pend = 0;
    end else if (rst_n && rvalid && rready) begin
      pend = 1; pend_addr = raddr; pend_due = int'(cyc) + $urandom_range(1, 6);
    end
  end
  int n_miss = 0;
  always @(posedge clk) if (rst_n && miss) n_miss++;
  task automatic fetch(input logic [31:0] a, output int lat);
    @(negedge clk);
    faddr = a; fvalid = 1; lat = 0;
    #1 while (!fready) begin @(negedge clk); lat++; #1; end
    check(fdata == word(a), $sformatf("fetch %h", a));
  endtask
  initial begin
    int lat, m0;
    faddr = 0; fvalid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) fetch(32'h8000_0000 + 32'(4 * $urandom_range(0, 63)), lat);
    // warm loop of 16 instructions (4 lines) hits every time in the same cycle
    for (int r = 0; r < 2; r++) for (int i = 0; i < 16; i++) fetch(32'h8000_1000 + 32'(4 * i), lat);
    m0 = n_miss;
    for (int r = 0; r < 5; r++) for (int i = 0; i < 16; i++) begin
      fetch(32'h8000_1000 + 32'(4 * i), lat);
      check(lat == 0, "hit answered in the same cycle");
    end
    check(n_miss == m0, "no misses in a loop that fits the cache");
    finish();
  end
endmodule
