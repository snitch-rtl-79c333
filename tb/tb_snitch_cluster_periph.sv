// Test of the cluster peripherals: read-only information registers, the
// cycle counter, the FPU-operation, bank-conflict and retired-instruction
// counters against counts of the driven events, the scratch registers and
// the wake-up register (a one-cycle pulse on exactly the written cores).
// Each access is answered one cycle after it is accepted.
module tb_snitch_cluster_periph;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 20000;
  `include "tb_common.svh"
  mem_req_t req; logic valid, ready, rvalid; mem_rsp_t rsp;
  logic [7:0] fpu_op, retire, wake; logic [5:0] conf;
  snitch_cluster_periph dut (.clk_i (clk), .rst_ni (rst_n), .req_i (req), .req_valid_i (valid),
    .req_ready_o (ready), .rsp_o (rsp), .rsp_valid_o (rvalid), .fpu_op_i (fpu_op),
    .retire_i (retire), .conflicts_i (conf), .wake_up_o (wake));
  longint n_fpu = 0, n_ret = 0, n_conf = 0;
  bit drive = 0;
  always @(negedge clk) begin
    fpu_op = drive ? 8'($urandom) : '0; retire = drive ? 8'($urandom) : '0;
    conf = drive ? 6'($urandom_range(0, 17)) : '0;
  end
  always @(posedge clk) if (rst_n) begin
    n_fpu += $countones(fpu_op); n_ret += $countones(retire); n_conf += conf;
  end
  task automatic acc(input logic [7:0] off, input bit wr, input logic [63:0] d, output logic [63:0] r);
    @(negedge clk);
    req = '{addr: PERIPH_BASE + 32'(off), write: wr, data: d, strb: '1, amo: AMO_NONE};
    valid = 1;
    do @(posedge clk); while (!ready);
    @(negedge clk); valid = 0;
    check(rvalid, "response one cycle after the request");
    r = rsp.data;
  endtask
  initial begin
    logic [63:0] r, c0;
    int pulses;
    valid = 0; req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    acc(8'h00, 0, 0, r); check(r == 64'(TCDM_BASE), "TCDM start");
    acc(8'h08, 0, 0, r); check(r == 64'(TCDM_BASE) + 128 * 1024, "TCDM end");
    acc(8'h10, 0, 0, r); check(r == 8, "number of cores");
    acc(8'h18, 0, 0, c0);
    repeat (10) @(negedge clk);
    acc(8'h18, 0, 0, r); check(r - c0 == 12, $sformatf("cycle counter advanced %0d", r - c0));
    drive = 1;
    repeat (500) @(negedge clk);
    drive = 0;
    repeat (3) @(negedge clk);
    acc(8'h20, 0, 0, r); check(r == 64'(n_fpu), $sformatf("FPU ops %0d vs %0d", r, n_fpu));
    acc(8'h28, 0, 0, r); check(r == 64'(n_conf), $sformatf("conflicts %0d vs %0d", r, n_conf));
    acc(8'h30, 0, 0, r); check(r == 64'(n_ret), $sformatf("retired %0d vs %0d", r, n_ret));
    acc(8'h38, 1, 64'hDEAD_BEEF_0123_4567, r);
    acc(8'h40, 1, 64'h1, r);
    acc(8'h38, 0, 0, r); check(r == 64'hDEAD_BEEF_0123_4567, "scratch 0");
    acc(8'h40, 0, 0, r); check(r == 64'h1, "scratch 1");
    pulses = 0;
    fork
      acc(8'h48, 1, 64'h5A, r);
      repeat (6) @(posedge clk) begin
        if (wake != 0) begin pulses++; check(wake == 8'h5A, "wake-up mask"); end
      end
    join
    check(pulses == 1, $sformatf("wake-up is a single pulse (%0d)", pulses));
    finish();
  end
endmodule
