// Test of the cluster crossbar with 10 masters and 3 slaves (peripherals,
// TCDM, system port), each slave a memory model with its own fixed latency
// (1, 2 and 5 cycles). Masters issue random reads and writes to random
// slaves; reads must return the model's data to the right master in program
// order, including when a master switches between slaves of different
// latency. Timing check: an uncontended request passes the crossbar in the
// same cycle (no added latency beyond the slave's).
module tb_snitch_cluster_xbar;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 200000;
  localparam int M = 10, S = 3;
  `include "tb_common.svh"
  mem_req_t [M-1:0] m_req; logic [M-1:0] m_valid, m_ready, m_rvalid; mem_rsp_t [M-1:0] m_rsp;
  mem_req_t [S-1:0] s_req; logic [S-1:0] s_valid, s_ready, s_rvalid; mem_rsp_t [S-1:0] s_rsp;
  snitch_cluster_xbar dut (.clk_i (clk), .rst_ni (rst_n), .m_req_i (m_req), .m_valid_i (m_valid),
    .m_ready_o (m_ready), .m_rsp_o (m_rsp), .m_rsp_valid_o (m_rvalid), .s_req_o (s_req),
    .s_valid_o (s_valid), .s_ready_i (s_ready), .s_rsp_i (s_rsp), .s_rsp_valid_i (s_rvalid));
  localparam logic [31:0] Base [S] = '{PERIPH_BASE, TCDM_BASE, 32'h8000_0000};
  localparam int Lat [S] = '{1, 2, 5};
  logic [63:0] mem [S][64];
  for (genvar s = 0; s < S; s++) begin : gen_slave
    logic [63:0] d_q [$]; longint due_q [$];
    always @(negedge clk) s_ready[s] = ($urandom_range(0, 4) != 0);
    always @(posedge clk) begin
      s_rvalid[s] <= 1'b0;
      if (due_q.size() != 0 && due_q[0] <= cyc) begin
        s_rvalid[s] <= 1'b1; s_rsp[s].data <= d_q.pop_front(); void'(due_q.pop_front());
      end
      if (rst_n && s_valid[s] && s_ready[s]) begin
        d_q.push_back(mem[s][s_req[s].addr[8:3]]); due_q.push_back(cyc + Lat[s] - 1);
        if (s_req[s].write) mem[s][s_req[s].addr[8:3]] = s_req[s].data;
      end
    end
  end
  logic [64:0] exp_q [M][$];
  always @(posedge clk) if (rst_n) for (int m = 0; m < M; m++) if (m_rvalid[m]) begin
    if (exp_q[m].size() == 0) check(0, "unexpected response");
    else begin
      logic [64:0] e;
      e = exp_q[m].pop_front();
      if (e[64]) check(m_rsp[m].data == e[63:0], $sformatf("master %0d read data", m));
    end
  end
  task automatic traffic(input int m, input int n);
    for (int i = 0; i < n; i++) begin
      int s, w; bit wr; logic [63:0] d;
      s = $urandom_range(0, S - 1); w = m * 3 + $urandom_range(0, 2);  // inside the 256-byte peripheral window wr = $urandom_range(0, 1);
      d = {$urandom, $urandom};
      @(negedge clk);
      m_req[m] = '{addr: Base[s] + 32'(w * 8), write: wr, data: d, strb: '1, amo: AMO_NONE};
      m_valid[m] = 1;
      do @(posedge clk); while (!m_ready[m]);
      exp_q[m].push_back(wr ? 65'(0) : {1'b1, mem[s][w]});
      @(negedge clk); m_valid[m] = 0;
    end
  endtask
  initial begin
    int done;
    m_valid = '0; m_req = '0;
    for (int s = 0; s < S; s++) for (int w = 0; w < 64; w++) mem[s][w] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    // pass-through in the same cycle
    @(negedge clk);
    m_req[3] = '{addr: TCDM_BASE + 32'h18, write: 0, data: 0, strb: '1, amo: AMO_NONE};
    m_valid[3] = 1;
    #1 check(s_valid[1] && s_req[1].addr == TCDM_BASE + 32'h18, "request reaches the slave in the same cycle");
    do @(posedge clk); while (!m_ready[3]);
    exp_q[3].push_back({1'b1, mem[1][3]});
    @(negedge clk); m_valid[3] = 0;
    done = 0;
    for (int m = 0; m < M; m++) begin
      automatic int mm = m;
      fork begin traffic(mm, 200); done++; end join_none
    end
    while (done != M) @(negedge clk);
    repeat (20) @(negedge clk);
    for (int m = 0; m < M; m++) check(exp_q[m].size() == 0, $sformatf("master %0d got all responses", m));
    finish();
  end
endmodule
