// cutie_popcount: counts the ones of an N-bit vector with a two-level adder
// structure.
//
// Used by the CUTIE output channel units to count the +1 and the -1 products
// of a 3x3xN_I ternary window. Level 1 counts each group of G bits with small
// (clog2(G+1)-bit) adders; level 2 adds the group counts at full width. This
// keeps most adders narrow: about N small increments plus N/G wide additions,
// instead of N increments at the full output width. Purely combinational.
// The structure and the group size are this design's choice; the paper only
// gives the widths of the positive and negative counts.
module cutie_popcount #(
  parameter int unsigned N  = 864,
  parameter int unsigned G  = 16,
  parameter int unsigned OW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [OW-1:0] count
);
  localparam int unsigned NG = (N + G - 1) / G;
  localparam int unsigned GW = $clog2(G + 1);
  logic [GW-1:0] gcnt [NG];

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      gcnt[g] = '0;
      for (int i = 0; i < G; i++)
        if (g * G + i < N) gcnt[g] = gcnt[g] + GW'(bits[g*G+i]);
    end
  end

  always_comb begin
    count = '0;
    for (int g = 0; g < NG; g++) count = count + OW'(gcnt[g]);
  end
endmodule
