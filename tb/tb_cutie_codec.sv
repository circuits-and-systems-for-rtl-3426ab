// tb_cutie_codec: checks the CUTIE trit compressor and decompressor at the
// paper's 96 channels (20 bytes). Random trit vectors (including the all +1 /
// all -1 corners) are compressed; every byte must equal sum (t_i+1)*3^i over
// its five trits (unused trits of the last byte count as 0), and the
// decompressed vector must equal the original. Random codes 0..242 per byte
// must also survive decompress -> compress unchanged.
module tb_cutie_codec;
  localparam int N = 96;
  localparam int NB = (N + 4) / 5;
  logic [2*N-1:0] trits, trits_back, trits2;
  logic [8*NB-1:0] code, code2, code_in;
  int checks = 0, failures = 0;

  cutie_compressor   #(.N_TRITS(N)) i_c (.trits(trits), .code(code));
  cutie_decompressor #(.N_TRITS(N)) i_d (.code(code), .trits(trits_back));
  cutie_decompressor #(.N_TRITS(N)) i_d2 (.code(code_in), .trits(trits2));
  cutie_compressor   #(.N_TRITS(N)) i_c2 (.trits(trits2), .code(code2));

  function automatic logic [1:0] rtrit(int mode);
    int r;
    r = (mode == 1) ? 2 : (mode == 2) ? 0 : $urandom_range(0, 2);
    return (r == 2) ? 2'b01 : (r == 0) ? 2'b11 : 2'b00;
  endfunction

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int mode;
      mode = (it < 2) ? it + 1 : 0;
      for (int i = 0; i < N; i++) trits[2*i +: 2] = rtrit(mode);
      #1;
      for (int b = 0; b < NB; b++) begin
        int e; e = 0;
        for (int k = 4; k >= 0; k--) begin
          int d; d = 1;
          if (5 * b + k < N) d = (trits[2*(5*b+k) +: 2] == 2'b01) ? 2 : (trits[2*(5*b+k) +: 2] == 2'b11) ? 0 : 1;
          e = e * 3 + d;
        end
        checks++;
        if (int'(code[8*b +: 8]) != e) begin
          failures++; $display("byte %0d: %0d expected %0d", b, code[8*b +: 8], e);
        end
      end
      checks++;
      if (trits_back !== trits) begin failures++; $display("round trip mismatch"); end
      for (int b = 0; b < NB; b++) code_in[8*b +: 8] = 8'($urandom_range(0, 242));
      // the last byte carries only N-5*(NB-1) trits; keep the rest at 0 (digit 1)
      if (N % 5 != 0) begin
        int e; e = 0;
        for (int k = 4; k >= 0; k--) e = e * 3 + ((k < N % 5) ? $urandom_range(0, 2) : 1);
        code_in[8*(NB-1) +: 8] = 8'(e);
      end
      #1;
      checks++;
      if (code2 !== code_in) begin failures++; $display("code round trip %h -> %h", code_in, code2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
