// Behavioural model of main memory behind the cluster's master port: a
// 8 KiB memory of 64-bit words (the address wraps) that accepts one request per cycle and answers
// every request, in order, Latency cycles later. Testbenches fill it with
// write_word() before releasing reset.
module mem_model import snitch_pkg::*; #(
  parameter int unsigned Latency = 3
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t req_i,
  input  logic     valid_i,
  output logic     ready_o,
  output mem_rsp_t rsp_o,
  output logic     rsp_valid_o
);
  logic [63:0] mem [1024];  // 8 KiB window, address bits [12:3]
  logic [63:0] data_q [Latency];
  logic        vld_q  [Latency];

  task automatic write_word(input logic [31:0] addr, input logic [31:0] w);
    logic [63:0] d;
    d = mem[addr[12:3]];
    if (addr[2]) d[63:32] = w; else d[31:0] = w;
    mem[addr[12:3]] = d;
  endtask

  function automatic logic [63:0] read_dword(input logic [31:0] addr);
    return mem[addr[12:3]];
  endfunction

  assign ready_o     = 1'b1;
  assign rsp_o.data  = data_q[Latency-1];
  assign rsp_valid_o = vld_q[Latency-1];

  initial for (int i = 0; i < 1024; i++) mem[i] = '0;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < Latency; i++) begin vld_q[i] <= 1'b0; data_q[i] <= '0; end
    end else begin
      vld_q[0]  <= valid_i;
      data_q[0] <= read_dword(req_i.addr);
      if (valid_i && req_i.write) begin
        logic [63:0] d;
        d = read_dword(req_i.addr);
        for (int b = 0; b < 8; b++) if (req_i.strb[b]) d[b*8 +: 8] = req_i.data[b*8 +: 8];
        mem[req_i.addr[12:3]] = d;
      end
      for (int i = 1; i < Latency; i++) begin vld_q[i] <= vld_q[i-1]; data_q[i] <= data_q[i-1]; end
    end
  end
endmodule
