// TCDM interconnect: a fully connected, purely combinational crossbar from
// NrPorts initiator ports to NrBanks banks.
//
// Consecutive 64-bit words are interleaved across the banks (bank index =
// address bits [3 +: log2(NrBanks)]). Each bank has a round-robin arbiter;
// a request is granted (req_ready_o) in the cycle it wins. The bank side
// answers exactly one cycle after a grant with the initiator id, which routes
// the response back, so responses arrive in order per initiator. The
// conflicts_o output counts, per cycle, the requests that lost arbitration
// (a performance counter of the cluster peripherals adds them up). The
// default of 16 ports and 32 banks (a banking factor of two, two ports per
// core) is the paper's configuration.
module tcdm_interconnect import snitch_pkg::*; #(
  parameter int unsigned NrPorts = 16,
  parameter int unsigned NrBanks = 32,
  parameter int unsigned Words   = 512,
  localparam int unsigned IW     = (NrPorts > 1) ? $clog2(NrPorts) : 1,
  localparam int unsigned BW     = $clog2(NrBanks),
  localparam int unsigned AW     = $clog2(Words)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  mem_req_t [NrPorts-1:0]     req_i,
  input  logic [NrPorts-1:0]         req_valid_i,
  output logic [NrPorts-1:0]         req_ready_o,
  output mem_rsp_t [NrPorts-1:0]     rsp_o,
  output logic [NrPorts-1:0]         rsp_valid_o,
  // bank side
  output mem_req_t [NrBanks-1:0]     bank_req_o,
  output logic [NrBanks-1:0][AW-1:0] bank_word_o,
  output logic [NrBanks-1:0][IW-1:0] bank_id_o,
  output logic [NrBanks-1:0]         bank_valid_o,
  input  logic [NrBanks-1:0]         bank_ready_i,
  input  logic [NrBanks-1:0]         bank_rsp_valid_i,
  input  logic [NrBanks-1:0][IW-1:0] bank_rsp_id_i,
  input  logic [NrBanks-1:0][63:0]   bank_rsp_data_i,
  output logic [$clog2(NrPorts+1)-1:0] conflicts_o
);
  logic [NrBanks-1:0][IW-1:0] rr_q;
  logic [NrBanks-1:0][IW-1:0] win;
  logic [NrBanks-1:0]         any;
  logic [NrPorts-1:0][BW-1:0] target;

  for (genvar p = 0; p < NrPorts; p++) begin : gen_target
    assign target[p] = req_i[p].addr[3 +: BW];
  end

  always_comb begin
    req_ready_o = '0;
    for (int b = 0; b < NrBanks; b++) begin
      any[b] = 1'b0; win[b] = rr_q[b];
      for (int k = 0; k < NrPorts; k++) begin
        logic [IW-1:0] p;
        p = IW'((int'(rr_q[b]) + k) % NrPorts);
        if (!any[b] && req_valid_i[p] && target[p] == BW'(b)) begin
          any[b] = 1'b1; win[b] = p;
        end
      end
      bank_valid_o[b] = any[b];
      bank_req_o[b]   = req_i[win[b]];
      bank_word_o[b]  = req_i[win[b]].addr[3+BW +: AW];
      bank_id_o[b]    = win[b];
      if (any[b] && bank_ready_i[b]) req_ready_o[win[b]] = 1'b1;
    end
  end

  always_comb begin
    conflicts_o = '0;
    for (int p = 0; p < NrPorts; p++)
      if (req_valid_i[p] && !req_ready_o[p]) conflicts_o = conflicts_o + 1'b1;
  end

  always_comb begin
    rsp_valid_o = '0;
    for (int p = 0; p < NrPorts; p++) rsp_o[p] = '0;
    for (int b = 0; b < NrBanks; b++) begin
      if (bank_rsp_valid_i[b]) begin
        rsp_valid_o[bank_rsp_id_i[b]]  = 1'b1;
        rsp_o[bank_rsp_id_i[b]].data   = bank_rsp_data_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rr_q <= '0;
    else for (int b = 0; b < NrBanks; b++)
      if (any[b] && bank_ready_i[b]) rr_q[b] <= IW'((int'(win[b]) + 1) % NrPorts);
  end
endmodule
