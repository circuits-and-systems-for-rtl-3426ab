// cutie_compressor: packs trits five at a time into bytes for CUTIE's memories.
//
// Input: N_TRITS trits, trit n at bits [2n+1:2n] (2-bit two's complement).
// Output: ceil(N_TRITS/5) bytes, byte j = sum_i (t_{5j+i} + 1) * 3^i; missing
// trits of the last group count as 0. Purely combinational. The five-in-eight
// grouping is the paper's; the base-3 code is this design's choice.
module cutie_compressor
  import cutie_pkg::*;
#(
  parameter int unsigned N_TRITS = 96,
  parameter int unsigned NB      = (N_TRITS + 4) / 5
) (
  input  logic [2*N_TRITS-1:0] trits,
  output logic [8*NB-1:0]      code
);
  always_comb begin
    for (int j = 0; j < NB; j++) begin
      trit_t t [5];
      for (int i = 0; i < 5; i++)
        t[i] = (5 * j + i < N_TRITS) ? trits[2*(5*j+i) +: 2] : T_ZERO;
      code[8*j +: 8] = pack5(t[0], t[1], t[2], t[3], t[4]);
    end
  end
endmodule
