// Random test of the 2-read/1-write integer register file against a model:
// x0 always reads zero, writes are visible in the next cycle on both ports.
module tb_snitch_regfile;
  localparam int WatchdogCycles = 5000;
  `include "tb_common.svh"
  logic [4:0] ra, rb, wa; logic [31:0] da, db, wd; logic we;
  logic [31:0] model [32];
  snitch_regfile dut (.clk_i (clk), .rst_ni (rst_n), .raddr_a_i (ra), .rdata_a_o (da),
                      .raddr_b_i (rb), .rdata_b_o (db), .we_i (we), .waddr_i (wa), .wdata_i (wd));
  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); we = 1; wa = 5'(i); wd = $urandom; model[i] = (i == 0) ? 0 : wd;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom);
      #1 check(da == model[ra] && db == model[rb], $sformatf("read x%0d/x%0d", ra, rb));
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      @(posedge clk); if (we && wa != 0) model[wa] = wd;
    end
    finish();
  end
endmodule
