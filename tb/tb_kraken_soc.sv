// tb_kraken_soc: end-to-end test of the Kraken SoC model at its full size
// (4 x 64k-word L2 banks, 8 SNE slices, 96-channel 32x32 CUTIE with 8 layer
// slots, 16-bank cluster TCDM); the top is instantiated without parameter
// overrides.
//
// Scenario, as the host would run it:
//   1. host writes SNE weights and neuron parameters into L2
//   2. the DVS sensor sends events; the DVS interface stores spike and
//      frame-time words in an L2 buffer (checked word by word)
//   3. a second DVS session with a tiny buffer must drop and count events
//   4. SNE loads weights/parameters from L2, clears its neurons, streams the
//      DVS buffer through its 8 slices and writes output events back to L2
//      until it raises eoc; the output multiset must equal eight reference
//      LIF models fed with the same words. Meanwhile the host reads and
//      writes a scratch area of L2, competing with the SNE and DVS masters.
//   5. CUTIE gets 2 layers of 96x96x3x3 ternary weights and a 32x32x96
//      ternary image, runs conv+max-pool (32x32 -> 16x16) then conv, and must
//      match a reference model bit for bit, with the second layer's weights
//      pre-loaded during the first layer.
//   6. all the time, the 8 cluster-core ports hammer the TCDM with colliding
//      accesses that are checked against a reference memory.
// Each mechanism is counted (DVS words, DVS drops, L2 waits for the host, SNE
// time events, SNE output events, SNE eoc, CUTIE pooling, CUTIE weight
// overlap, CUTIE eoi, TCDM conflicts); the test fails if any count is zero.
module tb_kraken_soc;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  import cutie_pkg::*;
  localparam int N = 96, NB = 20, IMG = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req = 0, host_we = 0, host_gnt, host_rvalid;
  logic [31:0] host_addr = 0, host_wdata = 0, host_rdata;
  logic sne_psel = 0, sne_penable = 0, sne_pwrite = 0, sne_pready, sne_eoc;
  logic [7:0] sne_paddr = 0;
  logic [31:0] sne_pwdata = 0, sne_prdata;
  logic cutie_psel = 0, cutie_penable = 0, cutie_pwrite = 0, cutie_pready, cutie_eoi;
  logic [7:0] cutie_paddr = 0;
  logic [31:0] cutie_pwdata = 0, cutie_prdata;
  logic cutie_w_we = 0;
  logic [6:0] cutie_w_ocu = 0;
  logic [6:0] cutie_w_addr = 0;
  logic [8*NB-1:0] cutie_w_wdata = 0;
  logic cutie_h_req = 0, cutie_h_we = 0, cutie_h_bank = 0, cutie_h_gnt;
  logic [9:0] cutie_h_addr = 0;
  logic [8*NB-1:0] cutie_h_wdata = 0, cutie_h_rdata;
  logic dvs_valid = 0, dvs_ready, dvs_pol = 0, dvs_frame_end = 0;
  logic [7:0] dvs_x = 0, dvs_y = 0;
  logic dvs_cfg_en = 0, dvs_cfg_clear = 0;
  logic [31:0] dvs_cfg_base = 0, dvs_cfg_len = 0, dvs_wr_count, dvs_overflow_cnt;
  logic [7:0] tcdm_req = 0, tcdm_we = 0, tcdm_gnt, tcdm_rvalid;
  logic [31:0] tcdm_addr [8];
  logic [31:0] tcdm_wdata [8];
  logic [31:0] tcdm_rdata [8];

  kraken_soc dut (.*);

  int checks = 0, failures = 0;
  int n_dvs_words = 0, n_dvs_drop = 0, n_host_wait = 0, n_time_ev = 0, n_sne_out = 0;
  int n_eoc = 0, n_pool = 0, n_overlap = 0, n_eoi = 0, n_tcdm_conf = 0;
  bit tcdm_run = 1;

  always @(posedge clk) if (rst_n && sne_eoc) n_eoc++;
  always @(posedge clk) if (rst_n && cutie_eoi) n_eoi++;

  task automatic fail(string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  initial begin
    #400000000; fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- host L2 port ----------------
  // request set after a falling edge; the grant is sampled just before the
  // rising edge; read data arrive one cycle after the grant
  task automatic host_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); host_req = 1; host_we = 1; host_addr = a; host_wdata = d;
    #4; while (!host_gnt) begin n_host_wait++; @(negedge clk); #4; end
    @(negedge clk); host_req = 0; host_we = 0;
  endtask

  task automatic host_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); host_req = 1; host_we = 0; host_addr = a;
    #4; while (!host_gnt) begin n_host_wait++; @(negedge clk); #4; end
    @(negedge clk); host_req = 0; #1;
    if (!host_rvalid) fail("host read without rvalid");
    d = host_rdata;
  endtask

  // ---------------- APB ----------------
  task automatic sne_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); sne_psel = 1; sne_pwrite = 1; sne_paddr = a; sne_pwdata = d; sne_penable = 0;
    @(negedge clk); sne_penable = 1;
    @(negedge clk); sne_psel = 0; sne_penable = 0; sne_pwrite = 0;
  endtask
  task automatic sne_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); sne_psel = 1; sne_pwrite = 0; sne_paddr = a; sne_penable = 0;
    @(negedge clk); sne_penable = 1; #1 d = sne_prdata;
    @(negedge clk); sne_psel = 0; sne_penable = 0;
  endtask
  task automatic cu_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); cutie_psel = 1; cutie_pwrite = 1; cutie_paddr = a; cutie_pwdata = d; cutie_penable = 0;
    @(negedge clk); cutie_penable = 1;
    @(negedge clk); cutie_psel = 0; cutie_penable = 0; cutie_pwrite = 0;
  endtask
  task automatic cu_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); cutie_psel = 1; cutie_pwrite = 0; cutie_paddr = a; cutie_penable = 0;
    @(negedge clk); cutie_penable = 1; #1 d = cutie_prdata;
    @(negedge clk); cutie_psel = 0; cutie_penable = 0;
  endtask

  // ---------------- TCDM traffic ----------------
  // master m writes and reads back words in its own address set; all sets map
  // to the same few banks, so masters collide constantly
  for (genvar m = 0; m < 8; m++) begin : g_core
    initial begin
      logic [31:0] model [int];
      tcdm_addr[m] = 0; tcdm_wdata[m] = 0;
      @(posedge rst_n);
      while (tcdm_run) begin
        logic [31:0] a, d;
        bit wr;
        a = 32'(m * 4096 + 64 * $urandom_range(0, 15) + 4 * $urandom_range(0, 1));
        wr = !model.exists(int'(a)) || ($urandom_range(0, 1) == 1);
        d = $urandom;
        @(negedge clk);
        tcdm_req[m] = 1; tcdm_we[m] = wr; tcdm_addr[m] = a; tcdm_wdata[m] = d;
        #4; while (!tcdm_gnt[m]) begin n_tcdm_conf++; @(negedge clk); #4; end
        @(negedge clk); tcdm_req[m] = 0; #1;
        if (wr) model[int'(a)] = d;
        else begin
          checks++;
          if (!tcdm_rvalid[m] || tcdm_rdata[m] !== model[int'(a)]) fail($sformatf("tcdm core %0d read %h", m, a));
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    end
  end

  // ---------------- scenario ----------------
  lif_ref sm [8];
  int exp_cnt [int];
  logic [31:0] exp_words [$];
  int n_words;

  task automatic sne_phase();
    logic [31:0] st, cnt, w;
    logic [31:0] q [$];
    int n_exp;
    for (int s = 0; s < 8; s++) begin
      sm[s] = new(32 * (s % 4), 32 * (s / 4), 32, 32, s);
      sm[s].thr = 3;
    end
    // weights at 0x0 (only channels 0/1 matter for DVS input), params at 0x1000
    for (int a = 0; a < 288; a++) begin
      logic [31:0] wd;
      for (int i = 0; i < 8; i++) begin
        wd[4*i +: 4] = 4'($urandom_range(1, 5));
        for (int s = 0; s < 8; s++) sm[s].wt[a * 8 + i] = int'(wd[4*i +: 4]);
      end
      if (a < 3) host_wr(32'(4 * a), wd);
      else begin
        // unused channels: zero weights, no host traffic needed beyond the model
        wd = '0;
        for (int i = 0; i < 8; i++) for (int s = 0; s < 8; s++) sm[s].wt[a * 8 + i] = 0;
        host_wr(32'(4 * a), wd);
      end
    end
    host_wr(32'h1000, 32'd3);
    for (int a = 1; a <= 4; a++) begin
      logic [31:0] pd;
      for (int b = 0; b < 4; b++) begin
        pd[8*b +: 8] = 8'(250 - 10 * ((a - 1) * 4 + b));
        for (int s = 0; s < 8; s++) sm[s].lut[(a - 1) * 4 + b] = int'(pd[8*b +: 8]);
      end
      host_wr(32'h1000 + 32'(4 * a), pd);
    end
    // reference run over the DVS words as stored in L2
    for (int i = 0; i < n_words; i++) begin
      host_rd(32'h4000 + 32'(4 * i), w);
      checks++;
      if (w !== exp_words[i]) fail($sformatf("DVS word %0d = %h, expected %h", i, w, exp_words[i]));
      if (w[31:28] == 4'(EV_TIME)) begin
        n_time_ev++;
        for (int s = 0; s < 8; s++) sm[s].time_ev(int'(w[27:0]));
      end else for (int s = 0; s < 8; s++) sm[s].spike(int'(w[7:0]), int'(w[15:8]), int'(w[23:16]), q);
    end
    n_exp = q.size();
    while (q.size() > 0) begin
      int e; e = int'(q.pop_front());
      if (exp_cnt.exists(e)) exp_cnt[e]++; else exp_cnt[e] = 1;
    end
    // SNE programme
    sne_wr(8'h18, 32'h0000_FF01); sne_wr(8'h08, 32'h0); sne_wr(8'h0C, 32'd288); sne_wr(8'h00, 32'h1);
    do sne_rd(8'h04, st); while (st[0]);
    sne_wr(8'h18, 32'h0000_FF02); sne_wr(8'h08, 32'h1000); sne_wr(8'h0C, 32'd5); sne_wr(8'h00, 32'h1);
    do sne_rd(8'h04, st); while (st[0]);
    for (int s = 0; s < 8; s++) sne_wr(8'(8'h20 + 4 * s), {8'd0, 8'(s), 8'(32 * (s / 4)), 8'(32 * (s % 4))});
    sne_wr(8'h00, 32'h4);
    repeat (70) @(negedge clk);
    sne_wr(8'h10, 32'h10000); sne_wr(8'h00, 32'h2);
    sne_wr(8'h18, 32'h0000_FF00); sne_wr(8'h08, 32'h4000); sne_wr(8'h0C, 32'(n_words));
    sne_wr(8'h00, 32'h1);
    // host traffic against the streamers
    fork
      begin : host_noise
        logic [31:0] model [int];
        while (n_eoc == 0) begin
          logic [31:0] a, d;
          a = 32'h20000 + 32'(4 * $urandom_range(0, 63));
          if (!model.exists(int'(a)) || $urandom_range(0, 1)) begin
            d = $urandom; host_wr(a, d); model[int'(a)] = d;
          end else begin
            host_rd(a, d); checks++;
            if (d !== model[int'(a)]) fail("host scratch read");
          end
        end
      end
    join
    sne_rd(8'h14, cnt);
    sne_wr(8'h00, 32'h8);   // close the output stream
    checks++;
    if (cnt != 32'(n_exp)) fail($sformatf("SNE wrote %0d events, model %0d", cnt, n_exp));
    for (int i = 0; i < int'(cnt); i++) begin
      int e;
      host_rd(32'h10000 + 32'(4 * i), w);
      e = int'(w);
      checks++;
      if (!exp_cnt.exists(e) || exp_cnt[e] == 0) fail($sformatf("unexpected SNE output %h", w));
      else begin exp_cnt[e]--; n_sne_out++; end
    end
    $display("SNE: %0d input words, %0d output events", n_words, cnt);
  endtask

  task automatic dvs_phase();
    int ts;
    ts = 0;
    dvs_cfg_base = 32'h4000; dvs_cfg_len = 32'd2000; dvs_cfg_en = 1;
    @(negedge clk); dvs_cfg_clear = 1; @(negedge clk); dvs_cfg_clear = 0;
    for (int n = 0; n < 500; n++) begin
      logic fe;
      fe = (n % 40 == 39);
      dvs_valid = 1; dvs_x = 8'($urandom_range(0, 127)); dvs_y = 8'($urandom_range(0, 63));
      dvs_pol = $urandom_range(0, 1); dvs_frame_end = fe;
      exp_words.push_back(mk_spike(dvs_x, dvs_y, {7'd0, dvs_pol}));
      if (fe) begin ts++; exp_words.push_back(mk_time(28'(ts))); end
      @(posedge clk); while (!dvs_ready) @(posedge clk);
      @(negedge clk); dvs_valid = 0; dvs_frame_end = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    n_words = exp_words.size();
    n_dvs_words = int'(dvs_wr_count);
    checks++;
    if (dvs_wr_count != 32'(n_words)) fail($sformatf("DVS wrote %0d words, expected %0d", dvs_wr_count, n_words));
    // tiny buffer: the rest must be dropped and counted
    dvs_cfg_base = 32'h6000; dvs_cfg_len = 32'd8;
    @(negedge clk); dvs_cfg_clear = 1; @(negedge clk); dvs_cfg_clear = 0;
    for (int n = 0; n < 20; n++) begin
      dvs_valid = 1; dvs_x = 8'(n); dvs_y = 8'(n); dvs_pol = 1;
      @(posedge clk); while (!dvs_ready) @(posedge clk);
      @(negedge clk); dvs_valid = 0;
    end
    repeat (10) @(negedge clk);
    n_dvs_drop = int'(dvs_overflow_cnt);
    checks++;
    if (dvs_overflow_cnt != 32'd12) fail($sformatf("DVS dropped %0d events, expected 12", dvs_overflow_cnt));
    dvs_cfg_en = 0;
  endtask

  // ---------------- CUTIE ----------------
  byte wt [2][N][9][N];
  int thi [2][N], tlo [2][N];
  byte fm [IMG][IMG][N];

  function automatic logic [1:0] enc(int v);
    return (v > 0) ? T_POS : (v < 0) ? T_NEG : T_ZERO;
  endfunction

  function automatic logic [8*NB-1:0] pack(byte v [N]);
    logic [8*NB-1:0] r;
    for (int k = 0; k < NB; k++)
      r[8*k +: 8] = pack5(enc(v[5*k]), enc(v[5*k+1]), enc(v[5*k+2]), enc(v[5*k+3]), enc(v[5*k+4]));
    return r;
  endfunction

  task automatic ref_layer(int l, int w, int h, bit pool);
    byte o_fm [IMG][IMG][N];
    int v [IMG][IMG];
    for (int o = 0; o < N; o++) begin
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
        int s; s = 0;
        for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
          int xx, yy; xx = x + dx - 1; yy = y + dy - 1;
          if (xx >= 0 && xx < w && yy >= 0 && yy < h)
            for (int c = 0; c < N; c++) s += int'(fm[yy][xx][c]) * int'(wt[l][o][3*dy+dx][c]);
        end
        v[y][x] = s;
      end
      for (int y = 0; y < (pool ? h / 2 : h); y++) for (int x = 0; x < (pool ? w / 2 : w); x++) begin
        int r;
        if (!pool) r = v[y][x];
        else begin
          r = v[2*y][2*x];
          if (v[2*y][2*x+1] > r) r = v[2*y][2*x+1];
          if (v[2*y+1][2*x] > r) r = v[2*y+1][2*x];
          if (v[2*y+1][2*x+1] > r) r = v[2*y+1][2*x+1];
        end
        o_fm[y][x][o] = byte'((r > thi[l][o]) ? 1 : (r < tlo[l][o]) ? -1 : 0);
      end
    end
    fm = o_fm;
  endtask

  task automatic cutie_phase();
    logic [31:0] st, ovl, cyc;
    for (int l = 0; l < 2; l++) for (int o = 0; o < N; o++) begin
      for (int t = 0; t < 9; t++) begin
        byte tv [N];
        for (int c = 0; c < N; c++) begin wt[l][o][t][c] = byte'($urandom_range(0, 2) - 1); tv[c] = wt[l][o][t][c]; end
        @(negedge clk); cutie_w_we = 1; cutie_w_ocu = 7'(o); cutie_w_addr = 7'(10 * l + t); cutie_w_wdata = pack(tv);
      end
      thi[l][o] = $urandom_range(0, 16); tlo[l][o] = -$urandom_range(0, 16);
      @(negedge clk); cutie_w_we = 1; cutie_w_ocu = 7'(o); cutie_w_addr = 7'(10 * l + 9);
      cutie_w_wdata = '0; cutie_w_wdata[31:0] = {16'(thi[l][o]), 16'(tlo[l][o])};
    end
    @(negedge clk); cutie_w_we = 0;
    for (int y = 0; y < IMG; y++) for (int x = 0; x < IMG; x++) begin
      byte pv [N];
      for (int c = 0; c < N; c++) begin fm[y][x][c] = byte'($urandom_range(0, 2) - 1); pv[c] = fm[y][x][c]; end
      @(negedge clk); cutie_h_req = 1; cutie_h_we = 1; cutie_h_bank = 0;
      cutie_h_addr = 10'(y * IMG + x); cutie_h_wdata = pack(pv);
    end
    @(negedge clk); cutie_h_req = 0;
    cu_wr(8'h40, {14'd0, 1'b0, 1'b1, 2'd0, 6'd32, 2'd0, 6'd32});
    cu_wr(8'h44, {14'd0, 1'b0, 1'b0, 2'd0, 6'd16, 2'd0, 6'd16});
    cu_wr(8'h08, 32'd2);
    cu_wr(8'h00, 32'd1);
    ref_layer(0, 32, 32, 1);
    n_pool++;
    ref_layer(1, 16, 16, 0);
    while (n_eoi == 0) @(negedge clk);
    cu_rd(8'h04, st); cu_rd(8'h10, ovl); cu_rd(8'h0C, cyc);
    n_overlap = int'(ovl);
    checks += 2;
    if (st[2:0] != 3'b010) fail($sformatf("CUTIE STATUS %b", st[2:0]));
    if (ovl != 32'd1) fail($sformatf("CUTIE overlap %0d", ovl));
    for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) begin
      byte pv [N];
      logic [8*NB-1:0] e;
      for (int c = 0; c < N; c++) pv[c] = fm[y][x][c];
      e = pack(pv);
      @(negedge clk); cutie_h_req = 1; cutie_h_we = 0; cutie_h_bank = 0; cutie_h_addr = 10'(y * 16 + x);
      @(negedge clk); cutie_h_req = 0;
      checks++;
      if (cutie_h_rdata !== e) fail($sformatf("CUTIE pixel (%0d,%0d)", x, y));
    end
    $display("CUTIE: 2 layers in %0d cycles", cyc);
  endtask

  initial begin
    for (int m = 0; m < 8; m++) begin tcdm_addr[m] = 0; tcdm_wdata[m] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    dvs_phase();
    sne_phase();
    cutie_phase();
    tcdm_run = 0;
    repeat (20) @(negedge clk);
    $display("mechanisms: dvs_words=%0d dvs_drops=%0d host_l2_waits=%0d sne_time_events=%0d sne_outputs=%0d sne_eoc=%0d cutie_pool=%0d cutie_overlap=%0d cutie_eoi=%0d tcdm_conflicts=%0d",
             n_dvs_words, n_dvs_drop, n_host_wait, n_time_ev, n_sne_out, n_eoc, n_pool, n_overlap, n_eoi, n_tcdm_conf);
    checks += 10;
    if (n_dvs_words == 0) fail("no DVS words");
    if (n_dvs_drop == 0) fail("no DVS drops");
    if (n_host_wait == 0) fail("host never waited for L2");
    if (n_time_ev == 0) fail("no SNE time events");
    if (n_sne_out == 0) fail("no SNE outputs");
    if (n_eoc != 1) fail("SNE eoc count");
    if (n_pool == 0) fail("no CUTIE pooling");
    if (n_overlap == 0) fail("no CUTIE weight overlap");
    if (n_eoi != 1) fail("CUTIE eoi count");
    if (n_tcdm_conf == 0) fail("no TCDM conflicts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
