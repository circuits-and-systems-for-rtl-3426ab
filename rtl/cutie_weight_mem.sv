// cutie_weight_mem: CUTIE's on-chip weight memories, one per OCU.
//
// Every OCU has a private memory of DEPTH words of W bits holding the
// compressed weights of all layers back to back: for layer l, word 10*l + t
// (t = 0..8) is kernel tap t (N_I trits, compressed), word 10*l + 9 holds the
// thresholds {thr_hi[31:16], thr_lo[15:0]}. The host writes one word of one
// OCU per cycle (we/wocu/waddr/wdata). For weight loading all memories are
// read at the same address in parallel (re/raddr); rdata[o] is valid one cycle
// later. Keeping all weights on chip, layer after layer, is the paper's; the
// layout and the number of layers are this design's.
module cutie_weight_mem #(
  parameter int unsigned N_O   = 96,
  parameter int unsigned DEPTH = 80,
  parameter int unsigned W     = 160
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(N_O)-1:0]   wocu,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata [N_O]
);
  for (genvar o = 0; o < N_O; o++) begin : g_mem
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wocu == $clog2(N_O)'(o)) mem[waddr] <= wdata;
      if (re) rdata[o] <= mem[raddr];
    end
  end
endmodule
