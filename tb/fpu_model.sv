// Behavioural model of the floating-point unit that the FP subsystem
// connects to. It is not synthesizable and not part of the design: the FPU is
// external IP. Arithmetic uses the simulator's double/single reals
// (round-to-nearest), which is exact for the values the testbenches use.
// Fully pipelined with a fixed latency of Latency cycles; results leave in
// order with their tag; the whole pipeline stalls while the oldest result is
// not accepted. Supported: FMADD/FMSUB/FNMSUB/FNMADD, FADD, FSUB, FMUL, FDIV,
// FSGNJ*, FMIN/FMAX, FEQ/FLT/FLE, FCVT.W.D, FCVT.D.W, FMV.X.W, FMV.W.X. Arithmetic is
// modelled in double precision only; single-precision arithmetic returns a
// NaN-boxed quiet NaN.
module fpu_model import snitch_pkg::*; #(
  parameter int unsigned Latency = 3
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  fpu_req_t req_i,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  output fpu_rsp_t rsp_o,
  output logic     rsp_valid_o,
  input  logic     rsp_ready_i
);
  fpu_rsp_t pipe_q [Latency];
  logic     vld_q  [Latency];
  logic     stall;
  assign stall       = vld_q[Latency-1] && !rsp_ready_i;
  assign req_ready_o = !stall;
  assign rsp_o       = pipe_q[Latency-1];
  assign rsp_valid_o = vld_q[Latency-1];

  function automatic real unpack(input logic [63:0] v, input logic dbl);
    return dbl ? $bitstoreal(v) : 0.0;
  endfunction
  function automatic logic [63:0] pack(input real r, input logic dbl);
    return dbl ? $realtobits(r) : 64'hFFFF_FFFF_7FC0_0000;
  endfunction

  function automatic logic [63:0] compute(input fpu_req_t q);
    logic [6:0] op;
    logic [4:0] f5;
    logic       dbl;
    real a, b, c, r;
    op  = q.instr[6:0];
    f5  = q.instr[31:27];
    dbl = q.instr[25];
    a = unpack(q.op_a, dbl);
    b = unpack(q.op_b, dbl);
    c = unpack(q.op_c, dbl);
    unique case (op)
      OP_FMADD:  return pack(a * b + c, dbl);
      OP_FMSUB:  return pack(a * b - c, dbl);
      OP_FNMSUB: return pack(-(a * b) + c, dbl);
      OP_FNMADD: return pack(-(a * b) - c, dbl);
      default: ;
    endcase
    unique case (f5)
      5'b00000: r = a + b;
      5'b00001: r = a - b;
      5'b00010: r = a * b;
      5'b00011: r = a / b;
      5'b00100: begin
        logic sgn;
        logic [63:0] x;
        x = q.op_a;
        unique case (q.instr[13:12])
          2'b00:   sgn = dbl ? q.op_b[63] : q.op_b[31];
          2'b01:   sgn = dbl ? !q.op_b[63] : !q.op_b[31];
          default: sgn = (dbl ? q.op_a[63] : q.op_a[31]) ^ (dbl ? q.op_b[63] : q.op_b[31]);
        endcase
        if (dbl) x[63] = sgn; else x[31] = sgn;
        return x;
      end
      5'b00101: r = (q.instr[12] ? (a > b) : (a < b)) ? a : b;
      5'b10100: begin
        unique case (q.instr[13:12])
          2'b10:   return 64'(a == b);
          2'b01:   return 64'(a < b);
          default: return 64'(a <= b);
        endcase
      end
      5'b11000: return 64'($rtoi(a));
      5'b11010: return pack(real'($signed(q.int_op)), dbl);
      5'b11100: return 64'(q.op_a[31:0]);
      5'b11110: return {32'hFFFF_FFFF, q.int_op};
      default:  r = 0.0;
    endcase
    return pack(r, dbl);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < Latency; i++) begin vld_q[i] <= 1'b0; pipe_q[i] <= '0; end
    end else if (!stall) begin
      vld_q[0]  <= req_valid_i;
      pipe_q[0] <= '{result: compute(req_i), tag: req_i.tag};
      for (int i = 1; i < Latency; i++) begin
        vld_q[i]  <= vld_q[i-1];
        pipe_q[i] <= pipe_q[i-1];
      end
    end
  end
endmodule
