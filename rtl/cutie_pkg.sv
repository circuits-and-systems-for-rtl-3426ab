// cutie_pkg: ternary value encoding and the 5-trits-in-8-bits code used by CUTIE.
//
// A trit is held as a 2-bit two's-complement number: 2'b00 = 0, 2'b01 = +1,
// 2'b11 = -1 (2'b10 is never produced and decodes as 0).
// Five trits t0..t4 are packed into one byte as  code = sum_i (t_i + 1) * 3^i,
// giving codes 0..242, i.e. 1.6 bit per trit. Grouping five trits into eight
// bits is the paper's; the base-3 code itself is this design's choice.
package cutie_pkg;

  typedef logic [1:0] trit_t;

  localparam trit_t T_ZERO = 2'b00;
  localparam trit_t T_POS  = 2'b01;
  localparam trit_t T_NEG  = 2'b11;

  // bytes needed for n trits
  function automatic int unsigned cbytes(int unsigned n);
    return (n + 4) / 5;
  endfunction

  function automatic logic [7:0] pack5(trit_t t0, trit_t t1, trit_t t2, trit_t t3, trit_t t4);
    logic [7:0] d0, d1, d2, d3, d4;
    d0 = (t0 == T_POS) ? 8'd2 : (t0 == T_NEG) ? 8'd0 : 8'd1;
    d1 = (t1 == T_POS) ? 8'd2 : (t1 == T_NEG) ? 8'd0 : 8'd1;
    d2 = (t2 == T_POS) ? 8'd2 : (t2 == T_NEG) ? 8'd0 : 8'd1;
    d3 = (t3 == T_POS) ? 8'd2 : (t3 == T_NEG) ? 8'd0 : 8'd1;
    d4 = (t4 == T_POS) ? 8'd2 : (t4 == T_NEG) ? 8'd0 : 8'd1;
    return d0 + 8'd3 * d1 + 8'd9 * d2 + 8'd27 * d3 + 8'd81 * d4;
  endfunction

  function automatic trit_t digit_to_trit(logic [7:0] d);
    return (d == 8'd2) ? T_POS : (d == 8'd0) ? T_NEG : T_ZERO;
  endfunction

  // trit i (0..4) of a code
  function automatic trit_t unpack1(logic [7:0] code, int unsigned i);
    logic [7:0] v;
    v = code;
    for (int unsigned k = 0; k < 4; k++) if (k < i) v = v / 8'd3;
    return digit_to_trit(v % 8'd3);
  endfunction

endpackage
