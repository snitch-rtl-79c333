// Random test of the 3-read/2-write FP register file against a model; when
// both write ports hit the same register, port 0 (the FPU result port) must win.
module tb_snitch_fp_regfile;
  localparam int WatchdogCycles = 5000;
  `include "tb_common.svh"
  logic [2:0][4:0] ra; logic [2:0][63:0] rd; logic [1:0] we;
  logic [1:0][4:0] wa; logic [1:0][63:0] wd;
  logic [63:0] model [32];
  snitch_fp_regfile dut (.clk_i (clk), .rst_ni (rst_n), .raddr_i (ra), .rdata_o (rd),
                         .we_i (we), .waddr_i (wa), .wdata_i (wd));
  initial begin
    we = 0; ra = '0; wa = '0; wd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); we = 2'b01; wa[0] = 5'(i); wd[0] = {$urandom, $urandom}; model[i] = wd[0];
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) ra[p] = 5'($urandom);
      #1 for (int p = 0; p < 3; p++)
        check(rd[p] == model[ra[p]], $sformatf("port %0d reads f%0d", p, ra[p]));
      we = 2'($urandom); wa[0] = 5'($urandom); wa[1] = ($urandom_range(0, 3) == 0) ? wa[0] : 5'($urandom);
      wd[0] = {$urandom, $urandom}; wd[1] = {$urandom, $urandom};
      @(posedge clk);
      if (we[1]) model[wa[1]] = wd[1];
      if (we[0]) model[wa[0]] = wd[0];
    end
    finish();
  end
endmodule
