// Test of the per-bank atomic unit in front of a TCDM bank: random reads,
// byte-enabled writes, all AMOs on either 32-bit half of a word, LR/SC from
// several initiators, all against a model. Timing checks: every response comes
// exactly one cycle after acceptance, and an AMO blocks the bank for exactly
// one further cycle (its write-back).
module tb_tcdm_amo;
  import snitch_pkg::*;
  localparam int WatchdogCycles = 50000;
  `include "tb_common.svh"
  logic req_valid, req_ready, rsp_valid; logic [3:0] req_word; mem_req_t req;
  logic [3:0] req_id, rsp_id; logic [63:0] rsp_data;
  logic b_req, b_we; logic [3:0] b_addr; logic [63:0] b_wdata, b_rdata; logic [7:0] b_be;
  tcdm_amo #(.Words (16), .IdWidth (4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .req_valid_i (req_valid), .req_ready_o (req_ready),
    .req_word_i (req_word), .req_i (req), .req_id_i (req_id), .rsp_valid_o (rsp_valid),
    .rsp_id_o (rsp_id), .rsp_data_o (rsp_data), .bank_req_o (b_req), .bank_we_o (b_we),
    .bank_addr_o (b_addr), .bank_wdata_o (b_wdata), .bank_be_o (b_be), .bank_rdata_i (b_rdata));
  tcdm_bank #(.Words (16)) i_bank (.clk_i (clk), .req_i (b_req), .we_i (b_we), .addr_i (b_addr),
                                   .wdata_i (b_wdata), .be_i (b_be), .rdata_o (b_rdata));

  logic [63:0] mem [16];
  bit res_v; logic [3:0] res_id, res_w;

  function automatic logic [31:0] alu(input amo_op_e op, input logic [31:0] o, input logic [31:0] x);
    unique case (op)
      AMO_SWAP: return x;
      AMO_ADD:  return o + x;
      AMO_XOR:  return o ^ x;
      AMO_AND:  return o & x;
      AMO_OR:   return o | x;
      AMO_MIN:  return ($signed(o) < $signed(x)) ? o : x;
      AMO_MAX:  return ($signed(o) > $signed(x)) ? o : x;
      AMO_MINU: return (o < x) ? o : x;
      default:  return (o > x) ? o : x;
    endcase
  endfunction

  // issue one request, check its response one cycle later; returns the
  // expected response computed from the model
  task automatic op(input amo_op_e a, input logic [3:0] w, input logic [3:0] id,
                    input bit wr, input logic hi);
    logic [63:0] e, d;
    logic [31:0] old;
    @(negedge clk);
    d = {$urandom, $urandom};
    req = '{addr: {27'b0, w, hi, 2'b0}, write: wr, data: d, strb: 8'($urandom), amo: a};
    req_word = w; req_id = id; req_valid = 1;
    #1 check(req_ready, "unit ready when idle");
    e = mem[w];
    old = hi ? mem[w][63:32] : mem[w][31:0];
    if (a == AMO_NONE && wr) begin
      for (int b = 0; b < 8; b++) if (req.strb[b]) mem[w][b*8 +: 8] = d[b*8 +: 8];
      if (w == res_w) res_v = 0;
    end else if (a == AMO_LR) begin
      if (!res_v || res_id == id) begin res_v = 1; res_id = id; res_w = w; end
    end else if (a == AMO_SC) begin
      bit ok;
      ok = res_v && res_id == id && res_w == w;
      if (res_id == id) res_v = 0;
      e = hi ? {31'b0, !ok, 32'b0} : {63'b0, !ok};
      if (ok) for (int b = 0; b < 8; b++) if (req.strb[b]) mem[w][b*8 +: 8] = d[b*8 +: 8];
    end else if (a != AMO_NONE) begin
      if (hi) mem[w][63:32] = alu(a, old, d[63:32]); else mem[w][31:0] = alu(a, old, d[31:0]);
      if (w == res_w) res_v = 0;
    end
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    check(rsp_valid && rsp_id == id, "response one cycle after acceptance");
    if (!(a == AMO_NONE && wr)) begin
      if (a == AMO_NONE || a == AMO_LR || a == AMO_SC) check(rsp_data == e, $sformatf("%s data %h expected %h", a.name(), rsp_data, e));
      else check((hi ? rsp_data[63:32] : rsp_data[31:0]) == old, $sformatf("%s old value", a.name()));
    end
    if (!(a inside {AMO_NONE, AMO_LR, AMO_SC})) begin
      #1 check(!req_ready, "bank blocked during AMO write-back");
      @(negedge clk);
      #1 check(req_ready, "bank free after AMO write-back");
    end
  endtask

  initial begin
    req_valid = 0; req = '0; req_word = 0; req_id = 0;
    res_v = 0; res_id = 0; res_w = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 16; w++) begin
      @(negedge clk);
      req = '{addr: {27'b0, 4'(w), 3'b0}, write: 1, data: {$urandom, $urandom}, strb: '1, amo: AMO_NONE};
      req_word = 4'(w); req_id = 0; req_valid = 1; mem[w] = req.data;
    end
    @(negedge clk); req_valid = 0;
    @(negedge clk);
    // LR/SC: the holder's SC succeeds despite another initiator's LR
    op(AMO_LR, 3, 1, 0, 0);
    op(AMO_LR, 3, 2, 0, 0);
    op(AMO_SC, 3, 1, 1, 0);
    check(rsp_data[0] == 1'b0, "holder's SC succeeds");
    op(AMO_SC, 3, 2, 1, 0);
    check(rsp_data[0] == 1'b1, "second SC fails");
    op(AMO_LR, 5, 4, 0, 1);
    op(AMO_NONE, 5, 3, 1, 0);
    op(AMO_SC, 5, 4, 1, 1);
    check(rsp_data[32] == 1'b1, "SC fails after an intervening write");
    for (int k = 0; k < 3000; k++) begin
      amo_op_e a;
      a = amo_op_e'($urandom_range(0, 11));
      op(a, 4'($urandom_range(0, 3)), 4'($urandom_range(0, 3)), $urandom_range(0, 1), $urandom_range(0, 1));
    end
    finish();
  end
endmodule
