// Random test of one TCDM SRAM bank: byte-enabled writes and a read latency
// of exactly one cycle (the paper's single-cycle TCDM access).
module tb_tcdm_bank;
  localparam int WatchdogCycles = 10000;
  `include "tb_common.svh"
  logic req, we; logic [8:0] addr; logic [63:0] wdata, rdata; logic [7:0] be;
  logic [63:0] model [512];
  tcdm_bank dut (.clk_i (clk), .req_i (req), .we_i (we), .addr_i (addr), .wdata_i (wdata),
                 .be_i (be), .rdata_o (rdata));
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    rst_n = 1;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 9'(i); be = '1; wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      logic [8:0] a;
      @(negedge clk);
      a = 9'($urandom); addr = a; req = 1; we = $urandom_range(0, 1); be = 8'($urandom);
      wdata = {$urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 8; b++) if (be[b]) model[a][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        @(negedge clk); req = 0;
        check(rdata == model[a], $sformatf("read word %0d one cycle after request", a));
      end
    end
    finish();
  end
endmodule
