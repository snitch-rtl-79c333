// Atomic unit in front of one TCDM bank.
//
// Plain reads and writes pass through to the bank; their response (write
// responses included) leaves one cycle after the request, tagged with the
// initiator id. An atomic memory operation (swap, add, xor, and, or, min, max,
// minu, maxu on the 32-bit word selected by address bit 2) runs as a small
// FSM: the operand is read from the SRAM in the cycle the request is accepted;
// in the next cycle the local ALU combines it with the request data, the
// result is written back and the old value is returned. During that second
// cycle the bank accepts no other access, so the read-modify-write is atomic.
// Load-reserved takes the bank's single reservation (initiator id and word
// address) if it is free or already held by the same initiator; an LR that
// finds the reservation held by another initiator leaves it alone, so the
// holder's SC still succeeds and LR/SC loops cannot livelock each other.
// Store-conditional succeeds (writes, returns 0) only if that initiator holds
// the reservation for that address, and returns 1 otherwise. Any write to the
// reserved word, and the holder's SC, clear the reservation. One reservation
// per bank is this design's choice (the paper does not describe the
// reservation mechanism). Responses always come one cycle after
// acceptance, so the interconnect can route them without buffering.
module tcdm_amo import snitch_pkg::*; #(
  parameter int unsigned Words   = 512,
  parameter int unsigned IdWidth = 4,
  localparam int unsigned AW     = $clog2(Words)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  logic [AW-1:0]      req_word_i,
  input  mem_req_t           req_i,
  input  logic [IdWidth-1:0] req_id_i,
  output logic               rsp_valid_o,
  output logic [IdWidth-1:0] rsp_id_o,
  output logic [63:0]        rsp_data_o,
  // bank side
  output logic               bank_req_o,
  output logic               bank_we_o,
  output logic [AW-1:0]      bank_addr_o,
  output logic [63:0]        bank_wdata_o,
  output logic [7:0]         bank_be_o,
  input  logic [63:0]        bank_rdata_i
);
  typedef enum logic {Idle, Modify} state_e;
  state_e state_q;

  logic               rsp_valid_q, sc_q, sc_ok_q;
  logic [IdWidth-1:0] rsp_id_q;
  logic               hi_q;
  amo_op_e            op_q;
  logic [31:0]        operand_q;
  logic [AW-1:0]      word_q;

  logic               res_valid_q;
  logic [IdWidth-1:0] res_id_q;
  logic [AW-1:0]      res_word_q;

  logic is_rmw;
  assign is_rmw = !(req_i.amo inside {AMO_NONE, AMO_LR, AMO_SC});
  assign req_ready_o = (state_q == Idle);

  logic accept, sc_ok;
  assign accept = req_valid_i && req_ready_o;
  assign sc_ok  = res_valid_q && res_id_q == req_id_i && res_word_q == req_word_i;

  // ---------------------------------------------------------------- ALU
  logic [31:0] old, res;
  assign old = hi_q ? bank_rdata_i[63:32] : bank_rdata_i[31:0];
  always_comb begin
    unique case (op_q)
      AMO_SWAP: res = operand_q;
      AMO_ADD:  res = old + operand_q;
      AMO_XOR:  res = old ^ operand_q;
      AMO_AND:  res = old & operand_q;
      AMO_OR:   res = old | operand_q;
      AMO_MIN:  res = ($signed(old) < $signed(operand_q)) ? old : operand_q;
      AMO_MAX:  res = ($signed(old) > $signed(operand_q)) ? old : operand_q;
      AMO_MINU: res = (old < operand_q) ? old : operand_q;
      AMO_MAXU: res = (old > operand_q) ? old : operand_q;
      default:  res = old;
    endcase
  end

  // ---------------------------------------------------------------- bank port
  always_comb begin
    bank_req_o   = 1'b0;
    bank_we_o    = 1'b0;
    bank_addr_o  = req_word_i;
    bank_wdata_o = req_i.data;
    bank_be_o    = req_i.strb;
    if (state_q == Modify) begin
      bank_req_o   = 1'b1;
      bank_we_o    = 1'b1;
      bank_addr_o  = word_q;
      bank_wdata_o = {res, res};
      bank_be_o    = hi_q ? 8'hF0 : 8'h0F;
    end else if (accept) begin
      bank_req_o = 1'b1;
      if (req_i.amo == AMO_SC) begin
        bank_req_o = sc_ok;
        bank_we_o  = 1'b1;
      end else begin
        bank_we_o  = req_i.write && req_i.amo == AMO_NONE;
      end
    end
  end

  assign rsp_valid_o = rsp_valid_q;
  assign rsp_id_o    = rsp_id_q;
  assign rsp_data_o  = sc_q ? (hi_q ? {31'b0, !sc_ok_q, 32'b0} : {63'b0, !sc_ok_q})
                            : bank_rdata_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle; rsp_valid_q <= 1'b0; rsp_id_q <= '0; sc_q <= 1'b0; sc_ok_q <= 1'b0;
      hi_q <= 1'b0; op_q <= AMO_NONE; operand_q <= '0; word_q <= '0;
      res_valid_q <= 1'b0; res_id_q <= '0; res_word_q <= '0;
    end else begin
      rsp_valid_q <= accept;
      if (accept) begin
        rsp_id_q  <= req_id_i;
        sc_q      <= (req_i.amo == AMO_SC);
        sc_ok_q   <= sc_ok;
        hi_q      <= req_i.addr[2];
        op_q      <= req_i.amo;
        operand_q <= req_i.addr[2] ? req_i.data[63:32] : req_i.data[31:0];
        word_q    <= req_word_i;
        if (is_rmw) state_q <= Modify;
        // reservations
        if (req_i.amo == AMO_LR && (!res_valid_q || res_id_q == req_id_i)) begin
          res_valid_q <= 1'b1; res_id_q <= req_id_i; res_word_q <= req_word_i;
        end else if (req_i.amo == AMO_SC && res_id_q == req_id_i) begin
          res_valid_q <= 1'b0;
        end else if ((req_i.write || is_rmw) && req_word_i == res_word_q) begin
          res_valid_q <= 1'b0;
        end
      end
      if (state_q == Modify) state_q <= Idle;
    end
  end
endmodule
