// Integer multiply/divide unit (RISC-V M extension) shared by the cores of a
// Hive through their accelerator links.
//
// NrPorts request ports are served by a round-robin arbiter, one request per
// cycle. Multiplications (MUL, MULH, MULHSU, MULHU) go through a fully
// pipelined two-stage multiplier: a request accepted in cycle t delivers its
// result in cycle t+2, and back-to-back multiplications are accepted every
// cycle. Divisions and remainders (DIV, DIVU, REM, REMU) use a bit-serial
// restoring divider, one quotient bit per cycle. Before it starts, the
// dividend magnitude is shifted left past its leading zeros, so only
// 32 - lzc(dividend) steps are needed (early out); the worst case is 32 steps.
// One division is in flight at a time. Division by zero and signed overflow
// follow the RISC-V specification. Results leave on one response port with
// valid/ready, tagged with destination register and hart; the multiplier
// result has priority, a finished division waits. The pipelined multiplier and
// the early-out bit-serial divider follow the paper; the arbitration policy
// and the output priority are this design's choices.
module snitch_muldiv import snitch_pkg::*; #(
  parameter int unsigned NrPorts = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  acc_req_t [NrPorts-1:0] req_i,
  input  logic [NrPorts-1:0] req_valid_i,
  output logic [NrPorts-1:0] req_ready_o,
  output acc_rsp_t           rsp_o,
  output logic               rsp_valid_o,
  input  logic               rsp_ready_i,
  output logic               div_busy_o
);
  localparam int unsigned IW = (NrPorts > 1) ? $clog2(NrPorts) : 1;

  // ---------------------------------------------------------------- arbiter
  logic [IW-1:0] rr_q, sel;
  logic          any;
  always_comb begin
    sel = rr_q; any = 1'b0;
    for (int k = 0; k < NrPorts; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(rr_q) + k) % NrPorts);
      if (!any && req_valid_i[idx]) begin any = 1'b1; sel = idx; end
    end
  end

  acc_req_t req;
  logic     is_div, accept;
  assign req    = req_i[sel];
  assign is_div = req.instr[14];   // funct3[2]: 1 = div/rem

  // ---------------------------------------------------------------- multiplier
  logic       m1_valid_q, m2_valid_q, m_stall;
  logic [1:0] m1_op_q;
  logic [32:0] m1_a_q, m1_b_q;
  logic [4:0] m1_rd_q, m2_rd_q;
  logic [3:0] m1_hart_q, m2_hart_q;
  logic [31:0] m2_res_q;
  logic        div_done, div_take;
  acc_rsp_t    div_rsp;

  assign m_stall = m2_valid_q && !rsp_ready_i;

  logic div_idle;
  assign accept = any && (is_div ? div_idle : !(m1_valid_q && m_stall));
  always_comb begin
    req_ready_o = '0;
    req_ready_o[sel] = accept;
  end

  logic [65:0] prod;
  assign prod = 66'($signed(m1_a_q) * $signed(m1_b_q));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q <= '0;
      m1_valid_q <= 1'b0; m2_valid_q <= 1'b0;
      m1_op_q <= '0; m1_a_q <= '0; m1_b_q <= '0; m1_rd_q <= '0; m1_hart_q <= '0;
      m2_rd_q <= '0; m2_hart_q <= '0; m2_res_q <= '0;
    end else begin
      if (accept) rr_q <= IW'((int'(sel) + 1) % NrPorts);
      if (!m_stall) begin
        m2_valid_q <= m1_valid_q;
        m2_rd_q    <= m1_rd_q;
        m2_hart_q  <= m1_hart_q;
        m2_res_q   <= (m1_op_q == 2'b00) ? prod[31:0] : prod[63:32];
      end
      if (!(m1_valid_q && m_stall)) begin
        m1_valid_q <= accept && !is_div;
        m1_op_q    <= req.instr[13:12];
        // funct3 00 MUL, 01 MULH (s*s), 10 MULHSU (s*u), 11 MULHU (u*u)
        m1_a_q     <= {(req.instr[13:12] != 2'b11) & req.op_a[31], req.op_a};
        m1_b_q     <= {(req.instr[13:12] inside {2'b00, 2'b01}) & req.op_b[31], req.op_b};
        m1_rd_q    <= req.instr[11:7];
        m1_hart_q  <= req.hart;
      end
    end
  end

  // ---------------------------------------------------------------- divider
  typedef enum logic [1:0] {DIdle, DRun, DDone} dstate_e;
  dstate_e     dstate_q;
  logic [5:0]  cnt_q;
  logic [32:0] rem_q;
  logic [31:0] dvd_q, dvs_q;
  logic        neg_q_q, neg_r_q, want_rem_q, by_zero_q;
  logic [31:0] orig_a_q;
  logic [4:0]  d_rd_q;
  logic [3:0]  d_hart_q;

  assign div_idle   = (dstate_q == DIdle);
  assign div_busy_o = !div_idle;

  logic        sgn;
  logic [31:0] mag_a, mag_b;
  logic [5:0]  lzc;
  assign sgn   = !req.instr[12];                  // DIV / REM signed
  assign mag_a = (sgn && req.op_a[31]) ? -req.op_a : req.op_a;
  assign mag_b = (sgn && req.op_b[31]) ? -req.op_b : req.op_b;
  always_comb begin
    lzc = 6'd32;
    for (int i = 0; i < 32; i++) if (mag_a[i]) lzc = 6'(31 - i);
  end

  logic [32:0] rem_sh, rem_sub;
  assign rem_sh  = {rem_q[31:0], dvd_q[31]};
  assign rem_sub = rem_sh - {1'b0, dvs_q};

  logic [31:0] quo, remd;
  assign quo  = neg_q_q ? -dvd_q : dvd_q;
  assign remd = neg_r_q ? -rem_q[31:0] : rem_q[31:0];
  always_comb begin
    div_rsp.rd   = d_rd_q;
    div_rsp.hart = d_hart_q;
    if (by_zero_q) div_rsp.data = want_rem_q ? orig_a_q : 32'hFFFF_FFFF;
    else           div_rsp.data = want_rem_q ? remd : quo;
  end
  assign div_done = (dstate_q == DDone);
  assign div_take = div_done && !m2_valid_q && rsp_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dstate_q <= DIdle; cnt_q <= '0; rem_q <= '0; dvd_q <= '0; dvs_q <= '0;
      neg_q_q <= 1'b0; neg_r_q <= 1'b0; want_rem_q <= 1'b0; by_zero_q <= 1'b0;
      orig_a_q <= '0; d_rd_q <= '0; d_hart_q <= '0;
    end else begin
      unique case (dstate_q)
        DIdle: if (accept && is_div) begin
          cnt_q      <= 6'd32 - lzc;
          rem_q      <= '0;
          dvd_q      <= (lzc == 6'd32) ? '0 : mag_a << lzc[4:0];
          dvs_q      <= mag_b;
          neg_q_q    <= sgn && (req.op_a[31] ^ req.op_b[31]);
          neg_r_q    <= sgn && req.op_a[31];
          want_rem_q <= req.instr[13];
          by_zero_q  <= (req.op_b == '0);
          orig_a_q   <= req.op_a;
          d_rd_q     <= req.instr[11:7];
          d_hart_q   <= req.hart;
          dstate_q   <= ((lzc == 6'd32) || (req.op_b == '0)) ? DDone : DRun;
        end
        DRun: begin
          if (!rem_sub[32]) begin
            rem_q <= rem_sub;
            dvd_q <= {dvd_q[30:0], 1'b1};
          end else begin
            rem_q <= rem_sh;
            dvd_q <= {dvd_q[30:0], 1'b0};
          end
          cnt_q <= cnt_q - 6'd1;
          if (cnt_q == 6'd1) dstate_q <= DDone;
        end
        DDone: if (div_take) dstate_q <= DIdle;
        default: dstate_q <= DIdle;
      endcase
    end
  end

  // ---------------------------------------------------------------- output
  always_comb begin
    if (m2_valid_q) begin
      rsp_valid_o = 1'b1;
      rsp_o = '{rd: m2_rd_q, data: m2_res_q, hart: m2_hart_q};
    end else begin
      rsp_valid_o = div_done;
      rsp_o = div_rsp;
    end
  end
endmodule
