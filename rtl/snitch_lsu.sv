// Load/store unit, used by the integer core (32-bit results, sign extension)
// and by the FP subsystem (64-bit results, single-precision loads NaN-boxed).
//
// The LSU turns a register-level access (address, size, signedness, store
// data, optional atomic operation) into a request on the 64-bit memory link:
// store data is shifted to its byte lane and byte strobes are generated.
// Every request gets exactly one response, in order. Each issued request takes
// an entry of an in-order table of NumOutstanding slots; the entry is kept
// until its response has arrived and, for loads and atomics, until the result
// has been accepted by the register-file write port. A request is only issued
// while a slot is free, so a response always has a place to go and the LSU
// never blocks the memory system (as the paper requires). Responses to stores
// are dropped: stores are fire-and-forget for the core.
// Timing: a request is forwarded combinationally (valid_i -> data_req_valid_o);
// the earliest result is presented in the cycle the response arrives.
module snitch_lsu import snitch_pkg::*; #(
  parameter int unsigned NumOutstanding = 4,
  parameter bit          FpMode         = 1'b0,  // 64-bit results, NaN-boxing
  parameter int unsigned TagWidth       = 5
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // request from the pipeline
  input  logic                valid_i,
  output logic                ready_o,
  input  logic [31:0]         addr_i,
  input  logic [63:0]         wdata_i,
  input  logic [1:0]          size_i,     // 0: byte, 1: half, 2: word, 3: double
  input  logic                signed_i,
  input  logic                write_i,
  input  amo_op_e             amo_i,
  input  logic [TagWidth-1:0] tag_i,
  // result towards the register file
  output logic                res_valid_o,
  input  logic                res_ready_i,
  output logic [TagWidth-1:0] res_tag_o,
  output logic [63:0]         res_data_o,
  output logic                busy_o,
  // memory link
  output mem_req_t            data_req_o,
  output logic                data_req_valid_o,
  input  logic                data_req_ready_i,
  input  mem_rsp_t            data_rsp_i,
  input  logic                data_rsp_valid_i
);
  localparam int unsigned PW = (NumOutstanding > 1) ? $clog2(NumOutstanding) : 1;

  typedef struct packed {
    logic                is_store;
    logic [TagWidth-1:0] tag;
    logic [1:0]          size;
    logic                sign;
    logic [2:0]          offset;
    logic                filled;
    logic [63:0]         data;
  } entry_t;

  entry_t            tab_q [NumOutstanding];
  logic [PW-1:0]     wptr_q, fptr_q, rptr_q;
  logic [PW:0]       used_q;
  logic              push, pop;

  // ---------------------------------------------------------------- issue
  assign ready_o          = (used_q < (PW+1)'(NumOutstanding)) && data_req_ready_i;
  assign data_req_valid_o = valid_i && (used_q < (PW+1)'(NumOutstanding));
  assign push             = data_req_valid_o && data_req_ready_i;

  always_comb begin
    logic [7:0] bytes;
    unique case (size_i)
      2'd0:    bytes = 8'h01;
      2'd1:    bytes = 8'h03;
      2'd2:    bytes = 8'h0F;
      default: bytes = 8'hFF;
    endcase
    data_req_o.addr  = addr_i;
    data_req_o.write = write_i && (amo_i == AMO_NONE);
    data_req_o.data  = wdata_i << {addr_i[2:0], 3'b000};
    data_req_o.strb  = bytes << addr_i[2:0];
    data_req_o.amo   = amo_i;
  end

  // ---------------------------------------------------------------- result
  entry_t head;
  assign head = tab_q[rptr_q];

  always_comb begin
    logic [63:0] sh;
    sh = head.data >> {head.offset, 3'b000};
    unique case (head.size)
      2'd0:    res_data_o = {{56{head.sign & sh[7]}},  sh[7:0]};
      2'd1:    res_data_o = {{48{head.sign & sh[15]}}, sh[15:0]};
      2'd2:    res_data_o = FpMode ? {32'hFFFF_FFFF, sh[31:0]}
                                   : {{32{head.sign & sh[31]}}, sh[31:0]};
      default: res_data_o = sh;
    endcase
  end

  assign res_valid_o = (used_q != '0) && head.filled && !head.is_store;
  assign res_tag_o   = head.tag;
  assign pop         = (used_q != '0) && head.filled && (head.is_store || res_ready_i);
  assign busy_o      = (used_q != '0);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(NumOutstanding - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      fptr_q <= '0;
      rptr_q <= '0;
      used_q <= '0;
      for (int i = 0; i < NumOutstanding; i++) tab_q[i] <= '0;
    end else begin
      if (push) begin
        tab_q[wptr_q] <= '{is_store: write_i && (amo_i == AMO_NONE), tag: tag_i,
                           size: size_i, sign: signed_i, offset: addr_i[2:0],
                           filled: 1'b0, data: '0};
        wptr_q <= inc(wptr_q);
      end
      if (data_rsp_valid_i) begin
        tab_q[fptr_q].filled <= 1'b1;
        tab_q[fptr_q].data   <= data_rsp_i.data;
        fptr_q <= inc(fptr_q);
      end
      if (pop) rptr_q <= inc(rptr_q);
      used_q <= used_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // A response never arrives without an outstanding request.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_rsp_valid_i |-> (used_q != '0));
endmodule
