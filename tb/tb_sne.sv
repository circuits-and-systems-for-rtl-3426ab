// tb_sne: end-to-end run of one SNE layer tile through the register port, as
// the host would schedule it: stream weights into all slices, stream the
// neuron parameters, map slice s to the 32x32 output tile (32*(s%4),
// 32*(s/4)) of output channel s, clear the neurons, open the write streamer,
// stream spike and time events from L2, and wait for the end-of-execution
// event. The output events found in memory are compared (as a multiset) with
// eight reference LIF models; the run must also show the paper's 12-cycle
// cost per input spike (inputs are broadcast to all slices in parallel).
module tb_sne;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic psel = 0, penable = 0, pwrite = 0, pready, eoc;
  logic [7:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic [1:0] mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr [2];
  logic [31:0] mem_wdata [2];
  logic [31:0] mem_rdata [2];
  int checks = 0, failures = 0, cyc = 0, eocs = 0;
  logic [31:0] mem [int];
  lif_ref m [8];
  logic [31:0] exp_q [$];
  int exp_cnt [int];
  int n_exp = 0;

  sne dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (eoc) eocs++;

  // two-port memory: random grants, replies one cycle later
  always @(posedge clk) for (int p = 0; p < 2; p++) mem_gnt[p] <= ($urandom_range(0, 4) != 0);
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      mem_rvalid[p] <= 1'b0;
      if (mem_req[p] && mem_gnt[p]) begin
        if (mem_we[p]) mem[mem_addr[p]] = mem_wdata[p];
        else begin mem_rvalid[p] <= 1'b1; mem_rdata[p] <= mem.exists(mem_addr[p]) ? mem[mem_addr[p]] : 32'd0; end
      end
    end
  end

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

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

  task automatic wait_s0();
    logic [31:0] st;
    do apb_rd(8'h04, st); while (st[0]);
  endtask

  initial begin
    logic [31:0] st, cnt;
    int n_ev, n_spk, t0, t1;
    for (int s = 0; s < 8; s++) begin
      m[s] = new(32 * (s % 4), 32 * (s / 4), 32, 32, s);
      m[s].thr = 5;
    end
    // weights at 0x0, parameters at 0x1000
    for (int a = 0; a < 288; a++) begin
      logic [31:0] wd;
      for (int i = 0; i < 8; i++) begin
        wd[4*i +: 4] = ((a * 8 + i) % 4 == 0) ? 4'($urandom_range(0, 15)) : 4'($urandom_range(1, 6));
        for (int s = 0; s < 8; s++) m[s].wt[a * 8 + i] = int'(wd[4*i +: 4]);
      end
      mem[32'(4 * a)] = wd;
    end
    mem[32'h1000] = 32'd5;
    for (int a = 1; a <= 4; a++) begin
      logic [31:0] pd;
      for (int b = 0; b < 4; b++) begin
        pd[8*b +: 8] = 8'(240 - 12 * ((a - 1) * 4 + b));
        for (int s = 0; s < 8; s++) m[s].lut[(a - 1) * 4 + b] = int'(pd[8*b +: 8]);
      end
      mem[32'h1000 + 32'(4 * a)] = pd;
    end
    // events at 0x2000
    n_ev = 0; n_spk = 0;
    for (int n = 0; n < 400; n++) begin
      if (n % 25 == 24) begin
        int ts; ts = m[0].now + $urandom_range(1, 6);
        for (int s = 0; s < 8; s++) m[s].time_ev(ts);
        mem[32'h2000 + 32'(4 * n_ev)] = mk_time(28'(ts));
      end else begin
        int x, y, c;
        x = $urandom_range(0, 127); y = $urandom_range(0, 63); c = $urandom_range(0, 255);
        for (int s = 0; s < 8; s++) m[s].spike(x, y, c, exp_q);
        mem[32'h2000 + 32'(4 * n_ev)] = mk_spike(8'(x), 8'(y), 8'(c));
        n_spk++;
      end
      n_ev++;
    end
    while (exp_q.size() > 0) begin
      int e; e = int'(exp_q.pop_front());
      if (exp_cnt.exists(e)) exp_cnt[e]++; else exp_cnt[e] = 1;
      n_exp++;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // weight loading
    apb_wr(8'h18, 32'h0000_FF01);
    apb_wr(8'h08, 32'h0); apb_wr(8'h0C, 32'd288); apb_wr(8'h00, 32'h1);
    wait_s0();
    // parameter loading
    apb_wr(8'h18, 32'h0000_FF02);
    apb_wr(8'h08, 32'h1000); apb_wr(8'h0C, 32'd5); apb_wr(8'h00, 32'h1);
    wait_s0();
    // tile configuration and neuron memory init
    for (int s = 0; s < 8; s++) apb_wr(8'(8'h20 + 4 * s), {8'd0, 8'(s), 8'(32 * (s / 4)), 8'(32 * (s % 4))});
    apb_wr(8'h00, 32'h4);
    repeat (70) @(negedge clk);
    // output streamer and event streaming
    apb_wr(8'h10, 32'h10000); apb_wr(8'h00, 32'h2);
    apb_wr(8'h18, 32'h0000_FF00);
    apb_wr(8'h08, 32'h2000); apb_wr(8'h0C, 32'(n_ev));
    t0 = cyc;
    apb_wr(8'h00, 32'h1);
    while (eocs == 0) @(posedge clk);
    t1 = cyc;
    apb_rd(8'h04, st);
    apb_rd(8'h14, cnt);
    checks += 3;
    if (!st[3]) begin failures++; $display("STATUS.eoc not set"); end
    if (cnt != 32'(n_exp)) begin failures++; $display("SNE wrote %0d events, model %0d", cnt, n_exp); end
    for (int i = 0; i < int'(cnt); i++) begin
      int e; e = int'(mem[32'h10000 + 32'(4 * i)]);
      checks++;
      if (!exp_cnt.exists(e) || exp_cnt[e] == 0) begin failures++; $display("unexpected output %h", e); end
      else exp_cnt[e]--;
    end
    // 12 cycles per spike, plus memory and pipeline overhead
    checks++;
    if ((t1 - t0) < 12 * n_spk || (t1 - t0) > 14 * n_spk + 100) begin
      failures++; $display("%0d cycles for %0d spikes", t1 - t0, n_spk);
    end
    $display("events %0d (spikes %0d), outputs %0d, cycles %0d", n_ev, n_spk, cnt, t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
