// One stream semantic register (SSR) lane.
//
// A lane turns register reads (or writes) of one FP register into a memory
// stream with an affine address pattern of up to NumLoops nested loops. The
// address generator keeps one index per loop and a single pointer; each step
// adds the stride of the outermost loop that advances (a "stride select" in
// front of one adder), so software programs each stride as the jump to take
// when that loop advances and all inner loops wrap. Bounds are "iterations
// minus one".
//
// Configuration is memory mapped, 32-bit words at word index:
//   0       status (read: bit 0 stream active, bit 1 shadow full)
//   2+d     bound of loop d          6+d  stride of loop d
//   24+d    read pointer: starts a read stream of d+1 loops at this address
//   28+d    write pointer: starts a write stream of d+1 loops
// Bounds and strides land in a shadow set; writing a pointer completes the
// shadow configuration. The shadow moves into the active set as soon as the
// lane is idle, so the next stream can be configured while the current one
// runs; while the shadow is full, further configuration writes are held off
// (cfg_ready_o low). A swap to the opposite direction also waits until the
// data queue has drained.
//
// Data queue: DataDepth 64-bit entries. In read mode a memory request is only
// issued when a slot is free counting requests in flight (credits), so read
// data never overflows; the register side sees rvalid_o when the head is
// available and pops it with rdone_i. In write mode register writes push into
// the queue (wvalid_i/wready_o) and the address generator drains it. The
// shadow registers follow the paper; the register map, the queue depth and
// the direction-swap rule are this design's choices.
module snitch_ssr import snitch_pkg::*; #(
  parameter int unsigned NumLoops  = 4,
  parameter int unsigned DataDepth = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // configuration (memory mapped)
  input  logic        cfg_valid_i,
  input  logic        cfg_write_i,
  input  logic [4:0]  cfg_word_i,
  input  logic [31:0] cfg_wdata_i,
  output logic [31:0] cfg_rdata_o,
  output logic        cfg_ready_o,
  // register side
  output logic [63:0] rdata_o,
  output logic        rvalid_o,
  input  logic        rdone_i,
  input  logic [63:0] wdata_i,
  input  logic        wvalid_i,
  output logic        wready_o,
  // memory side
  output mem_req_t    mem_req_o,
  output logic        mem_req_valid_o,
  input  logic        mem_req_ready_i,
  input  mem_rsp_t    mem_rsp_i,
  input  logic        mem_rsp_valid_i,
  output logic        active_o
);
  localparam int unsigned QW = $clog2(DataDepth);
  localparam int unsigned LW = $clog2(NumLoops);

  typedef struct packed {
    logic        write;
    logic [LW-1:0] dims;   // number of loops - 1
    logic [31:0] ptr;
  } head_t;

  logic [31:0] sh_bound_q [NumLoops], sh_stride_q [NumLoops];
  logic [31:0] bound_q [NumLoops], stride_q [NumLoops], idx_q [NumLoops];
  head_t       sh_q, cur_q;
  logic        sh_full_q, active_q;

  // ---------------------------------------------------------------- data queue
  logic [63:0] q_q [DataDepth];
  logic [QW-1:0] q_w_q, q_r_q;
  logic [QW:0] q_n_q, infl_q;
  logic        q_dir_q;     // 1: queue holds write data
  logic        q_push, q_pop;
  logic [63:0] q_in;

  // ---------------------------------------------------------------- config
  assign cfg_ready_o = !cfg_write_i || !sh_full_q;
  always_comb begin
    cfg_rdata_o = '0;
    if (cfg_word_i == 5'd0) cfg_rdata_o = {30'b0, sh_full_q, active_q};
    for (int d = 0; d < NumLoops; d++) begin
      if (cfg_word_i == 5'(2 + d)) cfg_rdata_o = sh_bound_q[d];
      if (cfg_word_i == 5'(6 + d)) cfg_rdata_o = sh_stride_q[d];
    end
  end

  // ---------------------------------------------------------------- address generation
  logic last, step, can_issue, swap;
  logic [LW:0] adv;  // loop that advances (NumLoops = none)
  always_comb begin
    adv = (LW+1)'(NumLoops);
    for (int d = NumLoops - 1; d >= 0; d--)
      if (d <= int'(cur_q.dims) && idx_q[d] != bound_q[d]) adv = (LW+1)'(d);
  end
  assign last = (adv == (LW+1)'(NumLoops));

  assign can_issue = active_q && (cur_q.write ? (q_n_q != '0 && q_dir_q)
                                              : ((q_n_q + infl_q) < (QW+1)'(DataDepth)));
  assign mem_req_valid_o  = can_issue;
  assign mem_req_o.addr   = cur_q.ptr;
  assign mem_req_o.write  = cur_q.write;
  assign mem_req_o.data   = q_q[q_r_q];
  assign mem_req_o.strb   = 8'hFF;
  assign mem_req_o.amo    = AMO_NONE;
  assign step = can_issue && mem_req_ready_i;

  // swap in the shadow configuration
  assign swap = sh_full_q && !active_q &&
                ((sh_q.write == q_dir_q) || (q_n_q == '0 && infl_q == '0));

  // ---------------------------------------------------------------- register side
  assign rvalid_o = !q_dir_q && (q_n_q != '0);
  assign rdata_o  = q_q[q_r_q];
  assign wready_o = q_dir_q && (q_n_q < (QW+1)'(DataDepth));

  assign q_push = q_dir_q ? (wvalid_i && wready_o) : mem_rsp_valid_i;
  assign q_in   = q_dir_q ? wdata_i : mem_rsp_i.data;
  assign q_pop  = q_dir_q ? step : (rvalid_o && rdone_i);
  assign active_o = active_q || sh_full_q || (q_n_q != '0) || (infl_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < NumLoops; d++) begin
        sh_bound_q[d] <= '0; sh_stride_q[d] <= '0;
        bound_q[d] <= '0; stride_q[d] <= '0; idx_q[d] <= '0;
      end
      sh_q <= '0; cur_q <= '0; sh_full_q <= 1'b0; active_q <= 1'b0;
      for (int i = 0; i < DataDepth; i++) q_q[i] <= '0;
      q_w_q <= '0; q_r_q <= '0; q_n_q <= '0; infl_q <= '0; q_dir_q <= 1'b0;
    end else begin
      // configuration writes
      if (cfg_valid_i && cfg_write_i && !sh_full_q) begin
        for (int d = 0; d < NumLoops; d++) begin
          if (cfg_word_i == 5'(2 + d)) sh_bound_q[d]  <= cfg_wdata_i;
          if (cfg_word_i == 5'(6 + d)) sh_stride_q[d] <= cfg_wdata_i;
        end
        if (cfg_word_i[4:3] == 2'b11 && int'(cfg_word_i[1:0]) < NumLoops) begin
          sh_q      <= '{write: cfg_word_i[2], dims: LW'(cfg_word_i[1:0]), ptr: cfg_wdata_i};
          sh_full_q <= 1'b1;
        end
      end
      // shadow -> active
      if (swap) begin
        cur_q     <= sh_q;
        sh_full_q <= 1'b0;
        active_q  <= 1'b1;
        q_dir_q   <= sh_q.write;
        for (int d = 0; d < NumLoops; d++) begin
          bound_q[d] <= sh_bound_q[d]; stride_q[d] <= sh_stride_q[d]; idx_q[d] <= '0;
        end
      end
      // address stepping
      if (step) begin
        if (last) active_q <= 1'b0;
        else begin
          cur_q.ptr <= cur_q.ptr + stride_q[adv[LW-1:0]];
          for (int d = 0; d < NumLoops; d++) begin
            if (d < int'(adv)) idx_q[d] <= '0;
            else if (d == int'(adv)) idx_q[d] <= idx_q[d] + 1;
          end
        end
      end
      // data queue
      if (q_push) begin
        q_q[q_w_q] <= q_in;
        q_w_q <= QW'((int'(q_w_q) + 1) % DataDepth);
      end
      if (q_pop) q_r_q <= QW'((int'(q_r_q) + 1) % DataDepth);
      q_n_q  <= q_n_q + (QW+1)'(q_push) - (QW+1)'(q_pop);
      // every request gets a response; reads are counted as credits
      infl_q <= infl_q + (QW+1)'(step) - (QW+1)'(mem_rsp_valid_i);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) q_n_q <= (QW+1)'(DataDepth));
endmodule
