// Shared types and constants of the Snitch cluster.
//
// The cluster is built from three kinds of handshaked links, all of them
// valid/ready on the request side:
//   * the data-memory link (mem_req_t / mem_rsp_t): 32-bit byte address,
//     64-bit data, byte strobes and an atomic-operation code. Responses carry
//     no back-pressure; every initiator reserves room for its responses before
//     it issues a request, and every target answers in request order.
//   * the accelerator (offload) link (acc_req_t / acc_rsp_t): a whole 32-bit
//     RISC-V instruction plus up to three 32-bit operands travels to the unit
//     that executes it; results come back tagged with the destination register
//     and the issuing hart.
//   * the FPU link (fpu_req_t / fpu_rsp_t): operands for the floating-point
//     unit, which this design does not contain (it is an external IP).
// The address map, the atomic encodings and the FREP instruction encoding are
// this design's own choices; the paper does not fix them.
package snitch_pkg;

  // ---------------------------------------------------------------- address map
  localparam logic [31:0] TCDM_BASE     = 32'h1000_0000;  // 128 KiB scratchpad
  localparam logic [31:0] PERIPH_BASE   = 32'h1002_0000;  // cluster peripherals
  localparam logic [31:0] PERIPH_MASK   = 32'hFFFF_FF00;
  localparam logic [31:0] SSR_CFG_BASE  = 32'h1003_0000;  // core-private SSR configuration
  localparam logic [31:0] SSR_CFG_MASK  = 32'hFFFF_FF00;  // 2 lanes x 32 words x 4 B
  localparam logic [31:0] BOOT_ADDR     = 32'h8000_0000;

  // ---------------------------------------------------------------- CSRs
  localparam logic [11:0] CSR_SSR       = 12'h7C0;  // bit 0 enables the stream semantics
  localparam logic [11:0] CSR_MCYCLE    = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET  = 12'hB02;
  localparam logic [11:0] CSR_MHARTID   = 12'hF14;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;
  localparam logic [6:0] OP_AMO    = 7'b0101111;
  localparam logic [6:0] OP_LOADFP = 7'b0000111;
  localparam logic [6:0] OP_STOREFP= 7'b0100111;
  localparam logic [6:0] OP_FMADD  = 7'b1000011;
  localparam logic [6:0] OP_FMSUB  = 7'b1000111;
  localparam logic [6:0] OP_FNMSUB = 7'b1001011;
  localparam logic [6:0] OP_FNMADD = 7'b1001111;
  localparam logic [6:0] OP_FP     = 7'b1010011;
  // FREP: custom-0 opcode. Fields: [7] is_outer, [11:8] stagger mask
  // {rd,rs1,rs2,rs3}, [14:12] stagger count, [19:15] rs1 (= max_rep),
  // [23:20] max_inst - 1.
  localparam logic [6:0] OP_FREP   = 7'b0001011;

  // ---------------------------------------------------------------- atomics
  typedef enum logic [3:0] {
    AMO_NONE = 4'd0, AMO_SWAP = 4'd1, AMO_ADD = 4'd2, AMO_XOR = 4'd3,
    AMO_AND  = 4'd4, AMO_OR   = 4'd5, AMO_MIN = 4'd6, AMO_MAX = 4'd7,
    AMO_MINU = 4'd8, AMO_MAXU = 4'd9, AMO_LR  = 4'd10, AMO_SC = 4'd11
  } amo_op_e;

  // ---------------------------------------------------------------- memory link
  typedef struct packed {
    logic [31:0] addr;
    logic        write;
    logic [63:0] data;
    logic [7:0]  strb;
    amo_op_e     amo;
  } mem_req_t;

  typedef struct packed {
    logic [63:0] data;
  } mem_rsp_t;

  // ---------------------------------------------------------------- offload link
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] op_a;
    logic [31:0] op_b;
    logic [31:0] op_c;
    logic [3:0]  hart;   // issuing core inside its hive
  } acc_req_t;

  typedef struct packed {
    logic [4:0]  rd;
    logic [31:0] data;
    logic [3:0]  hart;
  } acc_rsp_t;

  // ---------------------------------------------------------------- FPU link
  typedef struct packed {
    logic [31:0] instr;     // the RISC-V FP instruction (after staggering)
    logic [63:0] op_a;
    logic [63:0] op_b;
    logic [63:0] op_c;
    logic [31:0] int_op;    // integer operand (fmv.d.x, fcvt.d.w ...)
    logic [7:0]  tag;       // {int_dest, ssr_dest, unused, rd[4:0]}
  } fpu_req_t;

  typedef struct packed {
    logic [63:0] result;
    logic [7:0]  tag;
  } fpu_rsp_t;

  // Instruction classes as seen from the integer core.
  function automatic logic is_fp_op(input logic [31:0] i);
    return i[6:0] inside {OP_LOADFP, OP_STOREFP, OP_FMADD, OP_FMSUB, OP_FNMSUB,
                          OP_FNMADD, OP_FP, OP_FREP};
  endfunction

  // FP instruction that writes the integer register file.
  function automatic logic fp_writes_int(input logic [31:0] i);
    return (i[6:0] == OP_FP) && (i[31:27] inside {5'b10100, 5'b11100, 5'b11000});
  endfunction

  // FP instruction that reads the integer register file through rs1.
  function automatic logic fp_reads_int(input logic [31:0] i);
    return (i[6:0] == OP_FP) && (i[31:27] inside {5'b11110, 5'b11010});
  endfunction

  // FP instruction that uses rs3.
  function automatic logic fp_has_rs3(input logic [31:0] i);
    return i[6:0] inside {OP_FMADD, OP_FMSUB, OP_FNMSUB, OP_FNMADD};
  endfunction

  // FP instruction that reads rs2 from the FP register file.
  function automatic logic fp_has_rs2(input logic [31:0] i);
    if (i[6:0] == OP_STOREFP) return 1'b1;
    if (i[6:0] inside {OP_FMADD, OP_FMSUB, OP_FNMSUB, OP_FNMADD}) return 1'b1;
    if (i[6:0] == OP_FP)
      return !(i[31:27] inside {5'b01011, 5'b11100, 5'b11110, 5'b11010, 5'b11000, 5'b01000});
    return 1'b0;
  endfunction

  // FP instruction that reads rs1 from the FP register file.
  function automatic logic fp_has_rs1(input logic [31:0] i);
    if (i[6:0] inside {OP_LOADFP, OP_STOREFP, OP_FREP}) return 1'b0;
    return !fp_reads_int(i);
  endfunction

  // FP instruction that writes the FP register file.
  function automatic logic fp_has_rd(input logic [31:0] i);
    if (i[6:0] inside {OP_STOREFP, OP_FREP}) return 1'b0;
    return !fp_writes_int(i);
  endfunction

endpackage
