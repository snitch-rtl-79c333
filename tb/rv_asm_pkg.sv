// Instruction encoders for writing small RISC-V test programs in
// SystemVerilog testbenches (RV32IMA, the D-extension instructions used by the
// tests, and the FREP instruction of this design).
package rv_asm_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input logic [4:0] rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] op);
    return {12'(imm), rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_type(input int imm, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3, input logic [6:0] op);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], op};
  endfunction
  function automatic logic [31:0] lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] addi(input logic [4:0] rd, rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] slli(input logic [4:0] rd, rs1, input int sh);
    return i_type(sh & 31, rs1, 3'b001, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] add(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mul(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] divu(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b101, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] rem(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b110, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] lw(input logic [4:0] rd, rs1, input int imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lb(input logic [4:0] rd, rs1, input int imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input logic [4:0] rs2, rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b010, 7'b0100011);
  endfunction
  function automatic logic [31:0] sb(input logic [4:0] rs2, rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b000, 7'b0100011);
  endfunction
  function automatic logic [31:0] beq(input logic [4:0] rs1, rs2, input int off);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], rs2, rs1, 3'b000, o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] bne(input logic [4:0] rs1, rs2, input int off);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], rs2, rs1, 3'b001, o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] blt(input logic [4:0] rs1, rs2, input int off);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], rs2, rs1, 3'b100, o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] jal(input logic [4:0] rd, input int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] csrr(input logic [4:0] rd, input logic [11:0] csr);
    return {csr, 5'd0, 3'b010, rd, 7'b1110011};
  endfunction
  function automatic logic [31:0] csrsi(input logic [11:0] csr, input logic [4:0] uimm);
    return {csr, uimm, 3'b110, 5'd0, 7'b1110011};
  endfunction
  function automatic logic [31:0] csrci(input logic [11:0] csr, input logic [4:0] uimm);
    return {csr, uimm, 3'b111, 5'd0, 7'b1110011};
  endfunction
  function automatic logic [31:0] wfi();
    return 32'h1050_0073;
  endfunction
  function automatic logic [31:0] amoadd_w(input logic [4:0] rd, rs1, rs2);
    return {5'b00000, 2'b00, rs2, rs1, 3'b010, rd, 7'b0101111};
  endfunction
  function automatic logic [31:0] lr_w(input logic [4:0] rd, rs1);
    return {5'b00010, 2'b00, 5'd0, rs1, 3'b010, rd, 7'b0101111};
  endfunction
  function automatic logic [31:0] sc_w(input logic [4:0] rd, rs1, rs2);
    return {5'b00011, 2'b00, rs2, rs1, 3'b010, rd, 7'b0101111};
  endfunction
  // double-precision FP
  function automatic logic [31:0] fmadd_d(input logic [4:0] rd, rs1, rs2, rs3);
    return {rs3, 2'b01, rs2, rs1, 3'b000, rd, 7'b1000011};
  endfunction
  function automatic logic [31:0] fadd_d(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0000001, rs2, rs1, 3'b000, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] fmul_d(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0001001, rs2, rs1, 3'b000, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] fmax_d(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0010101, rs2, rs1, 3'b001, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] fcvt_d_w(input logic [4:0] rd, rs1);
    return r_type(7'b1101001, 5'd0, rs1, 3'b000, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] fcvt_w_d(input logic [4:0] rd, rs1);
    return r_type(7'b1100001, 5'd0, rs1, 3'b001, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] feq_d(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b1010001, rs2, rs1, 3'b010, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] fld(input logic [4:0] rd, rs1, input int imm);
    return i_type(imm, rs1, 3'b011, rd, 7'b0000111);
  endfunction
  function automatic logic [31:0] fsd(input logic [4:0] rs2, rs1, input int imm);
    return s_type(imm, rs2, rs1, 3'b011, 7'b0100111);
  endfunction
  // FREP: n instructions, repetitions in register rs1, stagger count and mask
  function automatic logic [31:0] frep(input logic outer, input logic [4:0] rs1,
                                       input int n, input logic [2:0] cnt,
                                       input logic [3:0] mask);
    return {8'b0, 4'(n - 1), rs1, cnt, mask, outer, 7'b0001011};
  endfunction
endpackage
