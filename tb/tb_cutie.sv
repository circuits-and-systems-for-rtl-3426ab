// tb_cutie: runs whole ternary networks on a reduced CUTIE (16 output and 16
// input channels, 8x8 maps, up to 4 layers; the structure is the same as at
// the paper's 96 channels and 32x32). Weights of every layer go into the
// weight memories and the input image into feature-map bank 0 through the
// target ports, the layer table is programmed over APB and the inference is
// started. A reference model computes each layer (3x3 ternary convolution
// with zero padding, optional 2x2 max or sum pooling, two thresholds) and the
// result read back from the bank named in STATUS must match exactly. It also
// checks the eoi pulse, that every layer switch found its weights pre-loaded
// (OVERLAP = layers - 1), and the cycle count against the row-load +
// one-window-per-cycle schedule.
module tb_cutie;
  import cutie_pkg::*;
  localparam int N_O = 16, N_I = 16, IMG = 8, N_L = 4, NB = (N_I + 4) / 5;
  localparam int FW = $clog2(IMG * IMG), WDEPTH = 10 * N_L, WAW = $clog2(WDEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic psel = 0, penable = 0, pwrite = 0, pready, eoi;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic w_we = 0;
  logic [$clog2(N_O)-1:0] w_ocu = 0;
  logic [WAW-1:0] w_addr = 0;
  logic [8*NB-1:0] w_wdata = 0;
  logic h_req = 0, h_we = 0, h_bank = 0, h_gnt;
  logic [FW-1:0] h_addr = 0;
  logic [8*NB-1:0] h_wdata = 0, h_rdata;
  int checks = 0, failures = 0, eois = 0;

  int wt [N_L][N_O][9][N_I];
  int thi [N_L][N_O], tlo [N_L][N_O];
  int fm [IMG][IMG][N_I];
  int lw [N_L], lh [N_L], lpool [N_L], lavg [N_L];

  cutie #(.N_O(N_O), .N_I(N_I), .IMG_W(IMG), .IMG_H(IMG), .N_LAYERS(N_L)) dut (.*);

  always @(posedge clk) if (rst_n && eoi) eois++;

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [1:0] enc(int v);
    return (v > 0) ? T_POS : (v < 0) ? T_NEG : T_ZERO;
  endfunction

  function automatic logic [8*NB-1:0] pack(int v [N_I]);
    logic [8*NB-1:0] r;
    for (int k = 0; k < NB; k++) begin
      logic [1:0] q [5];
      for (int i = 0; i < 5; i++) q[i] = (5 * k + i < N_I) ? enc(v[5*k+i]) : T_ZERO;
      r[8*k +: 8] = pack5(q[0], q[1], q[2], q[3], q[4]);
    end
    return r;
  endfunction

  task automatic apb_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 0; paddr = a; penable = 0;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  // reference: one layer in place on fm
  task automatic ref_layer(int l);
    int o_fm [IMG][IMG][N_I];
    int v [IMG][IMG];
    int w, h, ow, oh;
    w = lw[l]; h = lh[l];
    ow = lpool[l] ? w / 2 : w; oh = lpool[l] ? h / 2 : h;
    for (int o = 0; o < N_O; o++) begin
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
        int s; s = 0;
        for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
          int xx, yy; xx = x + dx - 1; yy = y + dy - 1;
          if (xx >= 0 && xx < w && yy >= 0 && yy < h)
            for (int c = 0; c < N_I; c++) s += fm[yy][xx][c] * wt[l][o][3*dy+dx][c];
        end
        v[y][x] = s;
      end
      for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
        int r;
        if (!lpool[l]) r = v[y][x];
        else if (lavg[l]) r = v[2*y][2*x] + v[2*y][2*x+1] + v[2*y+1][2*x] + v[2*y+1][2*x+1];
        else begin
          r = v[2*y][2*x];
          if (v[2*y][2*x+1] > r) r = v[2*y][2*x+1];
          if (v[2*y+1][2*x] > r) r = v[2*y+1][2*x];
          if (v[2*y+1][2*x+1] > r) r = v[2*y+1][2*x+1];
        end
        o_fm[y][x][o] = (r > thi[l][o]) ? 1 : (r < tlo[l][o]) ? -1 : 0;
      end
    end
    fm = o_fm;
  endtask

  task automatic run(int nl, int seed_pool);
    logic [31:0] st, cyc, ovl;
    int w, h, exp_cyc;
    // weights
    for (int l = 0; l < nl; l++) for (int o = 0; o < N_O; o++) begin
      for (int t = 0; t < 9; t++) begin
        int tv [N_I];
        for (int c = 0; c < N_I; c++) begin wt[l][o][t][c] = $urandom_range(0, 2) - 1; tv[c] = wt[l][o][t][c]; end
        @(negedge clk); w_we = 1; w_ocu = 4'(o); w_addr = WAW'(10 * l + t); w_wdata = pack(tv);
      end
      thi[l][o] = $urandom_range(0, 4); tlo[l][o] = -$urandom_range(0, 4);
      @(negedge clk); w_we = 1; w_ocu = 4'(o); w_addr = WAW'(10 * l + 9);
      w_wdata = '0; w_wdata[31:0] = {16'(thi[l][o]), 16'(tlo[l][o])};
    end
    @(negedge clk); w_we = 0;
    // layer table
    w = IMG; h = IMG; exp_cyc = 11;
    for (int l = 0; l < nl; l++) begin
      lw[l] = w; lh[l] = h;
      lpool[l] = (w >= 4 && ((seed_pool >> l) & 1)) ? 1 : 0;
      lavg[l] = $urandom_range(0, 1);
      apb_wr(8'(8'h40 + 4 * l), {14'd0, 1'(lavg[l]), 1'(lpool[l]), 2'd0, 6'(h), 2'd0, 6'(w)});
      exp_cyc += h * (2 * w + 1) + (w + 1) + 8;
      if (lpool[l]) begin w /= 2; h /= 2; end
    end
    apb_wr(8'h08, 32'(nl));
    // input image in bank 0
    for (int y = 0; y < IMG; y++) for (int x = 0; x < IMG; x++) begin
      int pv [N_I];
      for (int c = 0; c < N_I; c++) begin fm[y][x][c] = $urandom_range(0, 2) - 1; pv[c] = fm[y][x][c]; end
      @(negedge clk); h_req = 1; h_we = 1; h_bank = 0; h_addr = FW'(y * IMG + x); h_wdata = pack(pv);
      #1 checks++; if (!h_gnt) begin failures++; $display("host write refused while idle"); end
    end
    @(negedge clk); h_req = 0;
    for (int l = 0; l < nl; l++) ref_layer(l);
    eois = 0;
    apb_wr(8'h00, 32'h1);
    while (eois == 0) @(negedge clk);
    apb_rd(8'h04, st); apb_rd(8'h0C, cyc); apb_rd(8'h10, ovl);
    checks += 4;
    if (st[1:0] != 2'b10) begin failures++; $display("STATUS %b", st[2:0]); end
    if (st[2] != 1'(nl % 2)) begin failures++; $display("result bank %0d", st[2]); end
    if (ovl != 32'(nl - 1)) begin failures++; $display("overlap %0d for %0d layers", ovl, nl); end
    if (cyc > 32'(exp_cyc) || cyc < 32'(IMG * IMG)) begin failures++; $display("cycles %0d, schedule %0d", cyc, exp_cyc); end
    $display("layers %0d pool %b: %0d cycles (schedule bound %0d), output %0dx%0d", nl, seed_pool, cyc, exp_cyc, w, h);
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      int pv [N_I];
      logic [8*NB-1:0] e;
      for (int c = 0; c < N_O; c++) pv[c] = fm[y][x][c];
      e = pack(pv);
      @(negedge clk); h_req = 1; h_we = 0; h_bank = st[2]; h_addr = FW'(y * w + x);
      @(negedge clk); h_req = 0;
      checks++;
      if (h_rdata !== e) begin failures++; $display("pixel (%0d,%0d): %h expected %h", x, y, h_rdata, e); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0);
    run(3, 3'b110);
    run(4, 4'b0101);
    run(2, 2'b00);
    checks++;
    if (eois != 1) begin failures++; $display("eoi pulses %0d", eois); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
