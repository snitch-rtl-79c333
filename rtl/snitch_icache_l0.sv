// Core-private L0 instruction cache: small, fully set-associative, flip-flop
// based, single-cycle hit.
//
// The core presents a fetch address every cycle; if one of the NrLines tags
// matches, the 32-bit instruction is returned in the same cycle (ready). On a
// miss the line is requested from the shared L1 instruction cache
// (refill_valid_o / refill_ready_i, one refill outstanding); when the line
// arrives (refill_rsp_valid_i) it replaces the entry pointed to by a
// round-robin victim pointer and the fetch hits in the next cycle. The line
// size (LineWidth bits) and the number of lines are this design's choices; the
// paper gives only the organisation (small, private, fully associative, FF
// based, single cycle).
module snitch_icache_l0 #(
  parameter int unsigned NrLines   = 4,
  parameter int unsigned LineWidth = 128
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [31:0]          fetch_addr_i,
  input  logic                 fetch_valid_i,
  output logic [31:0]          fetch_data_o,
  output logic                 fetch_ready_o,
  output logic [31:0]          refill_addr_o,
  output logic                 refill_valid_o,
  input  logic                 refill_ready_i,
  input  logic [LineWidth-1:0] refill_data_i,
  input  logic                 refill_rsp_valid_i,
  output logic                 miss_o
);
  localparam int unsigned OW = $clog2(LineWidth / 8);
  localparam int unsigned LW = (NrLines > 1) ? $clog2(NrLines) : 1;

  logic [31-OW:0]       tag_q  [NrLines];
  logic [LineWidth-1:0] data_q [NrLines];
  logic [NrLines-1:0]   valid_q;
  logic [LW-1:0]        victim_q;
  logic                 pending_q;

  logic             hit;
  logic [LW-1:0]    hit_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0;
    for (int i = 0; i < NrLines; i++)
      if (valid_q[i] && tag_q[i] == fetch_addr_i[31:OW]) begin hit = 1'b1; hit_idx = LW'(i); end
  end

  logic [LineWidth-1:0] line;
  assign line          = data_q[hit_idx];
  assign fetch_data_o  = line[{fetch_addr_i[OW-1:2], 5'b0} +: 32];
  assign fetch_ready_o = fetch_valid_i && hit;
  assign miss_o        = fetch_valid_i && !hit;

  assign refill_valid_o = fetch_valid_i && !hit && !pending_q;
  assign refill_addr_o  = {fetch_addr_i[31:OW], {OW{1'b0}}};

  logic [31-OW:0] pend_tag_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0; victim_q <= '0; pending_q <= 1'b0; pend_tag_q <= '0;
      for (int i = 0; i < NrLines; i++) begin tag_q[i] <= '0; data_q[i] <= '0; end
    end else begin
      if (refill_valid_o && refill_ready_i) begin
        pending_q  <= 1'b1;
        pend_tag_q <= fetch_addr_i[31:OW];
      end
      if (refill_rsp_valid_i && pending_q) begin
        pending_q         <= 1'b0;
        tag_q[victim_q]   <= pend_tag_q;
        data_q[victim_q]  <= refill_data_i;
        valid_q[victim_q] <= 1'b1;
        victim_q          <= LW'((int'(victim_q) + 1) % NrLines);
      end
    end
  end
endmodule
