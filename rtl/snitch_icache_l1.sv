// Shared L1 instruction cache of a Hive.
//
// NrPorts L0 caches send line requests; a round-robin arbiter accepts one per
// cycle. The tag and data arrays behave like SRAMs: the lookup of a request
// accepted in cycle t is resolved in cycle t+1, and a hit is answered then
// (rsp_valid_o bit of the port, line on rsp_data_o). A miss allocates the
// single refill slot; the line is fetched from backing memory as a burst of
// LineWidth/64 consecutive 64-bit reads on the refill link and written into
// the arrays. Requests from other ports for the line being refilled coalesce
// with it: they are recorded in the slot and all are answered together when
// the refill completes. While a refill is running, requests for other lines
// are held back. The cache is direct mapped (this design's choice; the paper
// does not give the organisation); Size is in bytes.
module snitch_icache_l1 import snitch_pkg::*; #(
  parameter int unsigned NrPorts   = 8,
  parameter int unsigned Size      = 8192,
  parameter int unsigned LineWidth = 128
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [NrPorts-1:0][31:0] req_addr_i,
  input  logic [NrPorts-1:0]   req_valid_i,
  output logic [NrPorts-1:0]   req_ready_o,
  output logic [LineWidth-1:0] rsp_data_o,
  output logic [NrPorts-1:0]   rsp_valid_o,
  // refill link towards the cluster crossbar
  output mem_req_t             refill_req_o,
  output logic                 refill_req_valid_o,
  input  logic                 refill_req_ready_i,
  input  mem_rsp_t             refill_rsp_i,
  input  logic                 refill_rsp_valid_i,
  output logic                 miss_o
);
  localparam int unsigned NrSets = Size * 8 / LineWidth;
  localparam int unsigned OW     = $clog2(LineWidth / 8);
  localparam int unsigned SW     = $clog2(NrSets);
  localparam int unsigned TW     = 32 - OW - SW;
  localparam int unsigned Beats  = LineWidth / 64;
  localparam int unsigned BW     = (Beats > 1) ? $clog2(Beats) : 1;
  localparam int unsigned IW     = (NrPorts > 1) ? $clog2(NrPorts) : 1;

  logic [TW-1:0]        tag_q  [NrSets];
  logic [LineWidth-1:0] data_q [NrSets];
  logic [NrSets-1:0]    valid_q;

  // ---------------------------------------------------------------- refill slot
  logic                 busy_q;
  logic [31:OW]         mshr_q;
  logic [NrPorts-1:0]   waiting_q;
  logic [BW:0]          sent_q, recv_q;
  logic [LineWidth-1:0] line_q;

  // ---------------------------------------------------------------- arbitration
  logic [IW-1:0] rr_q, sel;
  logic          any;
  logic [NrPorts-1:0] eligible;
  always_comb begin
    for (int p = 0; p < NrPorts; p++)
      eligible[p] = req_valid_i[p] && (!busy_q || req_addr_i[p][31:OW] == mshr_q);
    sel = rr_q; any = 1'b0;
    for (int k = 0; k < NrPorts; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(rr_q) + k) % NrPorts);
      if (!any && eligible[idx]) begin any = 1'b1; sel = idx; end
    end
  end

  // the lookup stage: one request in flight
  logic          lk_valid_q;
  logic [IW-1:0] lk_port_q;
  logic [31:OW]  lk_line_q;
  logic          accept;
  logic [SW-1:0] lk_set;
  logic          lk_hit;
  // a lookup that misses needs the refill slot; hold new requests meanwhile
  assign accept = any && !(lk_valid_q && !lk_hit && busy_q);
  always_comb begin
    req_ready_o = '0;
    req_ready_o[sel] = accept;
  end

  assign lk_set = lk_line_q[OW +: SW];
  assign lk_hit = valid_q[lk_set] && tag_q[lk_set] == lk_line_q[31:OW+SW];
  assign miss_o = lk_valid_q && !lk_hit;

  logic refill_done;
  assign refill_done = busy_q && (recv_q == (BW+1)'(Beats));

  always_comb begin
    rsp_valid_o = '0;
    rsp_data_o  = data_q[lk_set];
    if (refill_done) begin
      rsp_valid_o = waiting_q;
      rsp_data_o  = line_q;
    end else if (lk_valid_q && lk_hit) begin
      rsp_valid_o[lk_port_q] = 1'b1;
    end
  end

  assign refill_req_valid_o = busy_q && (sent_q < (BW+1)'(Beats));
  assign refill_req_o = '{addr: {mshr_q, {OW{1'b0}}} + 32'({sent_q, 3'b000}), write: 1'b0,
                          data: '0, strb: 8'hFF, amo: AMO_NONE};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0; busy_q <= 1'b0; mshr_q <= '0; waiting_q <= '0;
      sent_q <= '0; recv_q <= '0; line_q <= '0;
      rr_q <= '0; lk_valid_q <= 1'b0; lk_port_q <= '0; lk_line_q <= '0;
      for (int i = 0; i < NrSets; i++) begin tag_q[i] <= '0; data_q[i] <= '0; end
    end else begin
      if (accept) rr_q <= IW'((int'(sel) + 1) % NrPorts);
      // lookup stage
      if (lk_valid_q && !lk_hit) begin
        if (!busy_q) begin
          busy_q    <= 1'b1;
          mshr_q    <= lk_line_q;
          waiting_q <= (NrPorts)'(1) << lk_port_q;
          sent_q    <= '0;
          recv_q    <= '0;
        end else if (lk_line_q == mshr_q && !refill_done) begin
          waiting_q[lk_port_q] <= 1'b1;     // coalesce
        end
      end
      if (!(lk_valid_q && !lk_hit && busy_q && !(lk_line_q == mshr_q && !refill_done))) begin
        lk_valid_q <= accept;
        lk_port_q  <= sel;
        lk_line_q  <= req_addr_i[sel][31:OW];
      end
      // refill burst
      if (refill_req_valid_o && refill_req_ready_i) sent_q <= sent_q + 1'b1;
      if (refill_rsp_valid_i && busy_q) begin
        line_q[recv_q[BW-1:0]*64 +: 64] <= refill_rsp_i.data;
        recv_q <= recv_q + 1'b1;
      end
      if (refill_done) begin
        busy_q <= 1'b0;
        valid_q[mshr_q[OW +: SW]] <= 1'b1;
        tag_q[mshr_q[OW +: SW]]   <= mshr_q[31:OW+SW];
        data_q[mshr_q[OW +: SW]]  <= line_q;
        waiting_q <= '0;
      end
    end
  end
endmodule
