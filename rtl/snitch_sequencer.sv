// FPU sequencer: the FREP sequence buffer on the offload path between the
// integer core and the FP subsystem.
//
// Three lanes leave the core's offload link: FREP instructions go into a
// configuration queue (CfgDepth entries); FP instructions that form the body of
// a configured loop are written into the sequence buffer (Depth entries of
// instruction plus 32-bit operand, e.g. a load address); all other FP
// instructions take the bypass lane straight to the FP subsystem. Once a loop
// is configured, the read logic issues buffered instructions as soon as they
// have been written ("instructions available"), so the first iteration
// overlaps with filling the buffer and the core is free as soon as the last
// body instruction is written.
//
// FREP fields (see snitch_pkg): is_outer, max_inst (1..16 instructions),
// max_rep (register value = number of iterations; 0 is run once), stagger mask
// {rd,rs1,rs2,rs3} and stagger count (0..7). Outer mode repeats the whole body
// max_rep times; inner mode repeats each instruction max_rep times before
// moving on. With staggering, the masked register fields of iteration r are
// increased by r mod (stagger_count+1), i.e. they count up stagger_count times
// and then wrap, which matches the worked examples of the paper.
// One body is held at a time: a second FREP may be queued while the first runs,
// but its body instructions are only accepted once the first loop has ended.
// Bypass instructions wait until no loop is active or queued, so the FP subsystem sees
// instructions in program order. Timing: all lanes are combinational from
// input to output; one instruction leaves per cycle.
module snitch_sequencer import snitch_pkg::*; #(
  parameter int unsigned Depth    = 16,
  parameter int unsigned CfgDepth = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  acc_req_t inp_i,
  input  logic     inp_valid_i,
  output logic     inp_ready_o,
  output acc_req_t oup_o,
  output logic     oup_valid_o,
  input  logic     oup_ready_i,
  output logic     busy_o,
  output logic     seq_issue_o   // an instruction left from the sequence buffer
);
  localparam int unsigned DW = $clog2(Depth);
  localparam int unsigned CW = (CfgDepth > 1) ? $clog2(CfgDepth) : 1;

  typedef struct packed {
    logic        is_outer;
    logic [3:0]  max_inst;   // number of instructions - 1
    logic [31:0] max_rep;    // number of iterations (0 = 1)
    logic [3:0]  mask;       // {rd, rs1, rs2, rs3}
    logic [2:0]  cnt;
  } cfg_t;

  cfg_t        cfgq_q [CfgDepth];
  logic [CW-1:0] cq_w_q, cq_r_q;
  logic [CW:0] cq_n_q;

  logic [31:0] buf_instr_q [Depth];
  logic [31:0] buf_data_q  [Depth];
  logic [3:0]  buf_hart_q;

  logic        active_q;
  cfg_t        cur_q;
  logic [DW:0] fill_q;     // body instructions written
  logic [DW-1:0] idx_q;    // instruction being issued
  logic [31:0] rep_q;      // iteration being issued
  logic [2:0]  stg_q;      // stagger offset

  logic is_frep, inp_to_cfg, inp_to_buf, inp_to_byp, filling;
  logic [DW:0] body_len;
  assign is_frep   = (inp_i.instr[6:0] == OP_FREP);
  assign body_len  = (DW+1)'(cur_q.max_inst) + 1'b1;
  assign filling   = active_q && (fill_q < body_len);

  assign inp_to_cfg = inp_valid_i && is_frep && (cq_n_q < (CW+1)'(CfgDepth));
  assign inp_to_buf = inp_valid_i && !is_frep && filling;

  // ---------------------------------------------------------------- read logic
  logic        seq_valid, last;
  logic [31:0] reps;
  acc_req_t    seq_req;
  assign reps      = (cur_q.max_rep == '0) ? 32'd1 : cur_q.max_rep;
  assign seq_valid = active_q && ((DW+1)'(idx_q) < fill_q);
  assign last      = (rep_q == reps - 1) && ((DW+1)'(idx_q) == body_len - 1);

  function automatic logic [4:0] stg(input logic [4:0] r, input logic en, input logic [2:0] o);
    return en ? r + 5'(o) : r;
  endfunction

  always_comb begin
    logic [31:0] ins;
    ins = buf_instr_q[idx_q];
    seq_req       = '0;
    seq_req.instr = ins;
    seq_req.instr[11:7]  = stg(ins[11:7],  cur_q.mask[3], stg_q);
    seq_req.instr[19:15] = stg(ins[19:15], cur_q.mask[2], stg_q);
    seq_req.instr[24:20] = stg(ins[24:20], cur_q.mask[1], stg_q);
    seq_req.instr[31:27] = stg(ins[31:27], cur_q.mask[0], stg_q);
    seq_req.op_a  = buf_data_q[idx_q];
    seq_req.hart  = buf_hart_q;
  end

  // ---------------------------------------------------------------- output mux
  assign inp_to_byp  = inp_valid_i && !is_frep && !active_q && (cq_n_q == '0);
  always_comb begin
    if (active_q) begin
      oup_o       = seq_req;
      oup_valid_o = seq_valid;
    end else begin
      oup_o       = inp_i;
      oup_valid_o = inp_to_byp;
    end
  end
  assign inp_ready_o = inp_to_cfg || inp_to_buf || (inp_to_byp && oup_ready_i);
  assign seq_issue_o = active_q && seq_valid && oup_ready_i;
  assign busy_o      = active_q || (cq_n_q != '0);

  logic seq_fire;
  assign seq_fire = seq_issue_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cq_w_q <= '0; cq_r_q <= '0; cq_n_q <= '0;
      for (int i = 0; i < CfgDepth; i++) cfgq_q[i] <= '0;
      for (int i = 0; i < Depth; i++) begin buf_instr_q[i] <= '0; buf_data_q[i] <= '0; end
      buf_hart_q <= '0;
      active_q <= 1'b0; cur_q <= '0; fill_q <= '0; idx_q <= '0; rep_q <= '0; stg_q <= '0;
    end else begin
      logic pop;
      pop = !active_q && (cq_n_q != '0);
      if (inp_to_cfg) begin
        cfgq_q[cq_w_q] <= '{is_outer: inp_i.instr[7], max_inst: inp_i.instr[23:20],
                            max_rep: inp_i.op_a, mask: inp_i.instr[11:8],
                            cnt: inp_i.instr[14:12]};
        cq_w_q <= CW'((int'(cq_w_q) + 1) % CfgDepth);
      end
      if (pop) begin
        cur_q    <= cfgq_q[cq_r_q];
        cq_r_q   <= CW'((int'(cq_r_q) + 1) % CfgDepth);
        active_q <= 1'b1;
        fill_q <= '0; idx_q <= '0; rep_q <= '0; stg_q <= '0;
      end
      cq_n_q <= cq_n_q + (CW+1)'(inp_to_cfg) - (CW+1)'(pop);

      if (inp_to_buf) begin
        buf_instr_q[fill_q[DW-1:0]] <= inp_i.instr;
        buf_data_q[fill_q[DW-1:0]]  <= inp_i.op_a;
        buf_hart_q <= inp_i.hart;
        fill_q <= fill_q + 1'b1;
      end

      if (seq_fire) begin
        if (last) begin
          active_q <= 1'b0;
        end else if (cur_q.is_outer) begin
          if ((DW+1)'(idx_q) == body_len - 1) begin
            idx_q <= '0;
            rep_q <= rep_q + 1;
            stg_q <= (stg_q == cur_q.cnt) ? '0 : stg_q + 1'b1;
          end else idx_q <= idx_q + 1'b1;
        end else begin
          if (rep_q == reps - 1) begin
            rep_q <= '0;
            stg_q <= '0;
            idx_q <= idx_q + 1'b1;
          end else begin
            rep_q <= rep_q + 1;
            stg_q <= (stg_q == cur_q.cnt) ? '0 : stg_q + 1'b1;
          end
        end
      end
    end
  end

  // The body is never longer than the buffer.
  assert property (@(posedge clk_i) disable iff (!rst_ni) fill_q <= (DW+1)'(Depth));
endmodule
