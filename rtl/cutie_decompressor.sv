// cutie_decompressor: expands CUTIE's compressed ternary words.
//
// The input holds ceil(N_TRITS/5) bytes; byte j carries trits 5j .. 5j+4 in
// the base-3 code of cutie_pkg (code = sum (t_i+1)*3^i). The output holds
// N_TRITS trits, trit n at bits [2n+1:2n] in 2-bit two's complement. Purely
// combinational. Packing five trits into eight bits (1.6 bit per trit) is the
// paper's; the code itself is this design's choice.
module cutie_decompressor
  import cutie_pkg::*;
#(
  parameter int unsigned N_TRITS = 96,
  parameter int unsigned NB      = (N_TRITS + 4) / 5
) (
  input  logic [8*NB-1:0]      code,
  output logic [2*N_TRITS-1:0] trits
);
  always_comb begin
    trits = '0;
    for (int j = 0; j < NB; j++) begin
      logic [7:0] v;
      v = code[8*j +: 8];
      for (int i = 0; i < 5; i++) begin
        if (5 * j + i < N_TRITS) trits[2*(5*j+i) +: 2] = digit_to_trit(v % 8'd3);
        v = v / 8'd3;
      end
    end
  end
endmodule
