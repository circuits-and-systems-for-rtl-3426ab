// sram_bank: one single-port memory bank of the L2 scratchpad or the cluster L1.
//
// WORDS words of DATA_W bits. A request with we=1 writes wdata at addr; a
// request with we=0 returns the word on rdata in the following cycle (rdata
// holds its value until the next read). In silicon this is a foundry SRAM
// macro; here it is an array. Word width follows the 32-bit SoC; the one-cycle
// read latency is this design's choice.
module sram_bank #(
  parameter int unsigned WORDS  = 65536,
  parameter int unsigned DATA_W = 32
) (
  input  logic                     clk,
  input  logic                     req,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [DATA_W-1:0]        wdata,
  output logic [DATA_W-1:0]        rdata
);
  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
