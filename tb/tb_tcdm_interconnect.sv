// Test of the TCDM interconnect (16 ports, 32 banks with their atomic units
// and SRAMs): every port issues random reads and writes, each port owning
// different words but sharing banks with the others, so bank conflicts occur;
// read data is compared with a model, responses must return in order to the
// right port. Timing checks: an uncontended read returns after exactly one
// cycle (the paper's single-cycle TCDM), and all 16 ports reading 16
// different banks are all served in the same cycle.
module tb_tcdm_interconnect;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 100000;
  localparam int P = 16, NB = 32, W = 512;
  `include "tb_common.svh"
  mem_req_t [P-1:0] req; logic [P-1:0] valid, ready, rvalid; mem_rsp_t [P-1:0] rsp;
  mem_req_t [NB-1:0] b_req; logic [NB-1:0][8:0] b_word; logic [NB-1:0][3:0] b_id, b_rid;
  logic [NB-1:0] b_valid, b_ready, b_rvalid; logic [NB-1:0][63:0] b_rdata;
  logic [4:0] conflicts;
  tcdm_interconnect dut (
    .clk_i (clk), .rst_ni (rst_n), .req_i (req), .req_valid_i (valid), .req_ready_o (ready),
    .rsp_o (rsp), .rsp_valid_o (rvalid), .bank_req_o (b_req), .bank_word_o (b_word),
    .bank_id_o (b_id), .bank_valid_o (b_valid), .bank_ready_i (b_ready),
    .bank_rsp_valid_i (b_rvalid), .bank_rsp_id_i (b_rid), .bank_rsp_data_i (b_rdata),
    .conflicts_o (conflicts));
  for (genvar b = 0; b < NB; b++) begin : gen_bank
    logic sreq, swe; logic [8:0] saddr; logic [63:0] swdata, srdata; logic [7:0] sbe;
    tcdm_amo i_amo (
      .clk_i (clk), .rst_ni (rst_n), .req_valid_i (b_valid[b]), .req_ready_o (b_ready[b]),
      .req_word_i (b_word[b]), .req_i (b_req[b]), .req_id_i (b_id[b]),
      .rsp_valid_o (b_rvalid[b]), .rsp_id_o (b_rid[b]), .rsp_data_o (b_rdata[b]),
      .bank_req_o (sreq), .bank_we_o (swe), .bank_addr_o (saddr), .bank_wdata_o (swdata),
      .bank_be_o (sbe), .bank_rdata_i (srdata));
    tcdm_bank i_bank (.clk_i (clk), .req_i (sreq), .we_i (swe), .addr_i (saddr),
                      .wdata_i (swdata), .be_i (sbe), .rdata_o (srdata));
  end

  // model indexed by 64-bit word address within the TCDM
  logic [63:0] model [P][64];
  logic [64:0] exp_q [P][$];  // {check data, data}
  int n_conf = 0;
  always @(posedge clk) if (rst_n) begin
    n_conf += int'(conflicts);
    for (int p = 0; p < P; p++) if (rvalid[p]) begin
      if (exp_q[p].size() == 0) check(0, $sformatf("unexpected response on port %0d", p));
      else begin
        logic [64:0] e;
        e = exp_q[p].pop_front();
        if (e[64]) check(rsp[p].data == e[63:0], $sformatf("port %0d read data", p));
      end
    end
  end
  // port p owns rows p, p+16, ... (a row is 32 words, one per bank)
  function automatic logic [31:0] addr_of(input int p, input int k);
    return TCDM_BASE + 32'(((k / 32) * P + p) * 32 * 8 + (k % 32) * 8);
  endfunction

  task automatic port_traffic(input int p, input int n);
    for (int i = 0; i < n; i++) begin
      int k; bit wr; logic [63:0] d;
      k = $urandom_range(0, 63); wr = $urandom_range(0, 1); d = {$urandom, $urandom};
      @(negedge clk);
      req[p] = '{addr: addr_of(p, k), write: wr, data: d, strb: '1, amo: AMO_NONE};
      valid[p] = 1;
      do @(posedge clk); while (!ready[p]);
      exp_q[p].push_back(wr ? 65'(0) : {1'b1, model[p][k]});
      if (wr) model[p][k] = d;
      @(negedge clk); valid[p] = 0;
      if (wr) begin while (exp_q[p].size() != 0) @(negedge clk); end
    end
  endtask

  initial begin
    valid = '0; req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < P; p++) for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      req[p] = '{addr: addr_of(p, k), write: 1, data: {$urandom, $urandom}, strb: '1, amo: AMO_NONE};
      model[p][k] = req[p].data; valid[p] = 1;
      exp_q[p].push_back('0);
      do @(posedge clk); while (!ready[p]);
      @(negedge clk); valid[p] = 0;
    end
    repeat (3) @(negedge clk);
    // single-cycle latency
    @(negedge clk);
    req[0] = '{addr: addr_of(0, 5), write: 0, data: 0, strb: '1, amo: AMO_NONE}; valid[0] = 1;
    exp_q[0].push_back({1'b1, model[0][5]});
    #1 check(ready[0], "uncontended request granted at once");
    @(posedge clk); @(negedge clk); valid[0] = 0;
    check(rvalid[0], "response after one cycle");
    @(negedge clk);
    // 16 ports, 16 different banks, one cycle
    for (int p = 0; p < P; p++) begin
      req[p] = '{addr: addr_of(p, p), write: 0, data: 0, strb: '1, amo: AMO_NONE}; valid[p] = 1;
      exp_q[p].push_back({1'b1, model[p][p]});
    end
    #1 check(ready == '1, "all ports granted in parallel");
    @(posedge clk); @(negedge clk); valid = '0;
    repeat (2) @(negedge clk);
    // random concurrent traffic
    for (int p = 0; p < P; p++) begin
      automatic int pp = p;
      fork port_traffic(pp, 150); join_none
    end
    repeat (20) @(negedge clk);
    while (valid != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    check(n_conf > 0, "bank conflicts occurred");
    for (int p = 0; p < P; p++) check(exp_q[p].size() == 0, "all responses returned");
    finish();
  end
endmodule
