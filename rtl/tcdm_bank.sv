// One bank of the tightly coupled data memory: a single-port SRAM of Words x
// 64 bit with byte write enables and one cycle read latency (the data of a
// read in cycle t is on rdata_o in cycle t+1). Written as an array so that a
// synthesis flow can map it to an SRAM macro of the target technology. The
// default (512 words = 4 KiB) gives 128 KiB over the 32 banks of the cluster.
module tcdm_bank #(
  parameter int unsigned Words = 512,
  localparam int unsigned AW   = $clog2(Words)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [63:0]   wdata_i,
  input  logic [7:0]    be_i,
  output logic [63:0]   rdata_o
);
  logic [63:0] mem [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 8; b++) if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
