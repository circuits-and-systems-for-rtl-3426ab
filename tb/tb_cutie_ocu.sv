// tb_cutie_ocu: checks one CUTIE output channel unit at the paper's 96 input
// channels on a 32-pixel-wide image. Random 3x3x96 ternary windows are
// streamed row by row (one per cycle, random gaps). A reference computes the
// ternary dot product per pixel, the 2x2 max or sum pooling and the
// thresholds, and every output (value and trit, in order) is compared. The
// double weight buffer is checked by loading bank 1 while bank 0 computes,
// then switching.
module tb_cutie_ocu;
  import cutie_pkg::*;
  localparam int N_I = 96, IMG_W = 32, NB = (N_I + 4) / 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wb_we = 0, wb_bank = 0, bank_sel = 0;
  logic [3:0] wb_tap = 0;
  logic [8*NB-1:0] wb_data = 0;
  logic win_valid = 0, pool_en = 0, pool_avg = 0, row_odd = 0;
  logic [2*9*N_I-1:0] win = 0;
  logic [$clog2(IMG_W)-1:0] px = 0;
  logic out_valid;
  logic [1:0] out_trit;
  logic signed [15:0] out_value;
  int checks = 0, failures = 0, n_out = 0;
  int wref [2][9][N_I];
  int thr_lo [2], thr_hi [2];
  int exp_v [$];
  int exp_t [$];

  cutie_ocu #(.N_I(N_I), .IMG_W(IMG_W)) dut (.*);

  function automatic int tval(logic [1:0] t);
    return (t == T_POS) ? 1 : (t == T_NEG) ? -1 : 0;
  endfunction

  function automatic logic [1:0] rtrit();
    int r; r = $urandom_range(0, 2);
    return (r == 2) ? T_POS : (r == 0) ? T_NEG : T_ZERO;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int ev, et;
    checks++;
    n_out++;
    if (exp_v.size() == 0) begin failures++; $display("unexpected output t=%0t n=%0d", $time, n_out); end
    else begin
      ev = exp_v.pop_front(); et = exp_t.pop_front();
      if (int'(out_value) != ev || tval(out_trit) != et) begin
        failures++; $display("output %0d/%0d expected %0d/%0d", out_value, tval(out_trit), ev, et);
      end
    end
  end

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_bank(int b);
    for (int t = 0; t < 9; t++) begin
      logic [2*N_I-1:0] tr;
      for (int c = 0; c < N_I; c++) begin tr[2*c +: 2] = rtrit(); wref[b][t][c] = tval(tr[2*c +: 2]); end
      @(negedge clk); wb_we = 1; wb_bank = b[0]; wb_tap = 4'(t);
      for (int k = 0; k < NB; k++) begin
        logic [1:0] q [5];
        for (int i = 0; i < 5; i++) q[i] = (5 * k + i < N_I) ? tr[2*(5*k+i) +: 2] : T_ZERO;
        wb_data[8*k +: 8] = pack5(q[0], q[1], q[2], q[3], q[4]);
      end
    end
    thr_lo[b] = -$urandom_range(0, 12);
    thr_hi[b] = $urandom_range(0, 12);
    @(negedge clk); wb_we = 1; wb_bank = b[0]; wb_tap = 4'd9;
    wb_data = '0; wb_data[31:0] = {16'(thr_hi[b]), 16'(thr_lo[b])};
    @(negedge clk); wb_we = 0;
  endtask

  function automatic int thresh(int v, int b);
    return (v > thr_hi[b]) ? 1 : (v < thr_lo[b]) ? -1 : 0;
  endfunction

  // streams an IMG_W x rows image; returns nothing, fills expectations
  task automatic run_image(int rows, bit pool, bit avg);
    int val [4][IMG_W];
    for (int y = 0; y < rows; y++) begin
      for (int x = 0; x < IMG_W; x++) begin
        int s; s = 0;
        for (int t = 0; t < 9; t++) for (int c = 0; c < N_I; c++) begin
          logic [1:0] a; a = rtrit();
          win[2*(t*N_I+c) +: 2] = a;
          s += tval(a) * wref[bank_sel][t][c];
        end
        val[y % 4][x] = s;
        if (!pool) begin exp_v.push_back(s); exp_t.push_back(thresh(s, bank_sel)); end
        else if (y % 2 == 1 && x % 2 == 1) begin
          int a0, a1, b0, b1, r;
          a0 = val[(y - 1) % 4][x - 1]; a1 = val[(y - 1) % 4][x];
          b0 = val[y % 4][x - 1]; b1 = s;
          if (avg) r = (a0 + a1) + (b0 + b1);
          else begin
            r = (a0 > a1) ? a0 : a1;
            r = (r > ((b0 > b1) ? b0 : b1)) ? r : ((b0 > b1) ? b0 : b1);
          end
          exp_v.push_back(r); exp_t.push_back(thresh(r, bank_sel));
        end
        win_valid = 1; pool_en = pool; pool_avg = avg; px = 5'(x); row_odd = y[0];
        @(negedge clk);
        win_valid = 0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_bank(0);
    bank_sel = 0;
    run_image(2, 0, 0);
    run_image(4, 1, 0);
    // load bank 1 while bank 0 computes
    fork
      run_image(2, 1, 1);
      load_bank(1);
    join
    bank_sel = 1;
    run_image(4, 1, 1);
    run_image(2, 0, 0);
    checks++;
    if (exp_v.size() != 0) begin failures++; $display("%0d outputs missing", exp_v.size()); end
    $display("outputs %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
