// cutie_ocu: CUTIE's Output Channel Compute Unit, which computes one output
// channel of a 3x3 ternary convolution per cycle.
//
// Weight buffer: two banks (double buffering, so the next layer's weights can
// be loaded while the current layer runs). Each bank holds K*K taps of N_I
// trits plus two 16-bit thresholds. wb_we with wb_tap < K*K writes a tap from
// a compressed word (decompressed here); wb_tap = K*K writes the thresholds
// {thr_hi[31:16], thr_lo[15:0]} from wb_data[31:0]. bank_sel picks the bank
// used for compute.
// Datapath (3-stage pipeline, one window per cycle):
//   1. ternary multipliers over the K*K*N_I window; products +1 and -1 are
//      counted separately by adder trees (cutie_popcount, 11-bit sums) and
//      subtracted (12-bit result)
//   2. optional 2x2 pooling (pool_en): max or sum (pool_avg) of the results of
//      pixels (2i..2i+1, 2j..2j+1); a line buffer of IMG_W/2 entries keeps the
//      horizontal pairs of even rows until the odd row arrives; 16-bit result
//   3. thresholding: +1 if v > thr_hi, -1 if v < thr_lo, else 0
// out_valid/out_trit appear 3 cycles after win_valid (for pooling, only after
// the odd column of odd rows). win holds tap t = 3*dy+dx, channel c at
// bits [2*(t*N_I+c) +: 2]. The sum/pool/threshold chain and its widths follow
// the paper's figure; pooling by summation instead of averaging, the
// threshold comparison direction and the pipeline depth are this design's.
module cutie_ocu
  import cutie_pkg::*;
#(
  parameter int unsigned N_I   = 96,
  parameter int unsigned K     = 3,
  parameter int unsigned IMG_W = 32,
  parameter int unsigned NB    = (N_I + 4) / 5
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight buffer load
  input  logic                      wb_we,
  input  logic                      wb_bank,
  input  logic [3:0]                wb_tap,
  input  logic [8*NB-1:0]           wb_data,
  input  logic                      bank_sel,
  // window
  input  logic                      win_valid,
  input  logic [2*K*K*N_I-1:0]      win,
  input  logic                      pool_en,
  input  logic                      pool_avg,
  input  logic [$clog2(IMG_W)-1:0]  px,
  input  logic                      row_odd,
  // result
  output logic                      out_valid,
  output logic [1:0]                out_trit,
  output logic signed [15:0]        out_value
);
  // the threshold word needs 32 bits of the compressed weight word
  if (8 * NB < 32) begin : g_check
    $error("cutie_ocu: N_I must be at least 16 to hold the thresholds");
  end

  // ---------------- weight buffer (double) ----------------
  logic [2*N_I-1:0]   wbuf [2][K*K];
  logic signed [15:0] thr_lo [2];
  logic signed [15:0] thr_hi [2];
  logic [2*N_I-1:0]   wb_trits;

  cutie_decompressor #(.N_TRITS(N_I)) i_decompr (.code(wb_data), .trits(wb_trits));

  always_ff @(posedge clk) begin
    if (wb_we) begin
      if (wb_tap < 4'(K * K)) wbuf[wb_bank][wb_tap] <= wb_trits;
      else begin
        thr_lo[wb_bank] <= wb_data[15:0];
        thr_hi[wb_bank] <= wb_data[31:16];
      end
    end
  end

  // ---------------- stage 1: ternary MAC ----------------
  // a product is +1 when both trits are non-zero with equal signs, -1 when
  // the signs differ; the two kinds are counted by adder trees
  localparam int unsigned NP = K * K * N_I;
  logic [NP-1:0] pbits, nbits;
  logic [$clog2(NP+1)-1:0] pcnt, ncnt;
  logic [10:0] npos, nneg;

  always_comb begin
    for (int t = 0; t < K * K; t++) begin
      for (int c = 0; c < N_I; c++) begin
        trit_t a, w;
        a = win[2*(t*N_I+c) +: 2];
        w = wbuf[bank_sel][t][2*c +: 2];
        pbits[t*N_I+c] = a[0] && w[0] && (a[1] == w[1]);
        nbits[t*N_I+c] = a[0] && w[0] && (a[1] != w[1]);
      end
    end
  end

  cutie_popcount #(.N(NP)) i_pcnt (.bits(pbits), .count(pcnt));
  cutie_popcount #(.N(NP)) i_ncnt (.bits(nbits), .count(ncnt));
  assign npos = 11'(pcnt);
  assign nneg = 11'(ncnt);

  logic               s1_valid, s1_pool, s1_avg, s1_odd;
  logic [$clog2(IMG_W)-1:0] s1_px;
  logic signed [11:0] s1_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sum <= '0; s1_pool <= 1'b0; s1_avg <= 1'b0; s1_odd <= 1'b0; s1_px <= '0;
    end else begin
      s1_valid <= win_valid;
      if (win_valid) begin
        s1_sum  <= signed'({1'b0, npos}) - signed'({1'b0, nneg});
        s1_pool <= pool_en;
        s1_avg  <= pool_avg;
        s1_odd  <= row_odd;
        s1_px   <= px;
      end
    end
  end

  // ---------------- stage 2: pooling ----------------
  logic signed [15:0] hreg;                 // first pixel of a horizontal pair
  logic signed [15:0] line [IMG_W/2];       // pooled pairs of the even row
  logic signed [15:0] s1_ext, hpair, vpair;
  logic signed [15:0] s2_val;
  logic               s2_valid;

  function automatic logic signed [15:0] comb2(logic signed [15:0] a, logic signed [15:0] b, logic avg);
    if (avg) return a + b;
    return (a > b) ? a : b;
  endfunction

  assign s1_ext = 16'(s1_sum);
  assign hpair  = comb2(hreg, s1_ext, s1_avg);
  assign vpair  = comb2(line[s1_px[$clog2(IMG_W)-1:1]], hpair, s1_avg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_val   <= '0;
      hreg     <= '0;
    end else begin
      s2_valid <= 1'b0;
      if (s1_valid) begin
        if (!s1_pool) begin
          s2_valid <= 1'b1;
          s2_val   <= s1_ext;
        end else if (!s1_px[0]) begin
          hreg <= s1_ext;
        end else if (s1_odd) begin
          s2_valid <= 1'b1;
          s2_val   <= vpair;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid && s1_pool && s1_px[0] && !s1_odd) line[s1_px[$clog2(IMG_W)-1:1]] <= hpair;
  end

  // ---------------- stage 3: thresholding ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_trit  <= T_ZERO;
      out_value <= '0;
    end else begin
      out_valid <= s2_valid;
      if (s2_valid) begin
        out_value <= s2_val;
        if (s2_val > thr_hi[bank_sel])      out_trit <= T_POS;
        else if (s2_val < thr_lo[bank_sel]) out_trit <= T_NEG;
        else                                out_trit <= T_ZERO;
      end
    end
  end
endmodule
