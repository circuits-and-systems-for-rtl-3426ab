// tb_sne_slice: loads random 4-bit weights, a threshold and a decay LUT into an
// sne_slice through its load ports, clears the neurons, then streams random
// spike and time events and compares the multiset of output spikes with the
// reference LIF model over the slice's 32x32 output tile (the order across
// clusters depends on arbitration, so outputs are compared as a set). It also
// checks the paper's rate: without back-pressure a spike event costs 12 cycles.
module tb_sne_slice;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] x_base = 8'd32, y_base = 8'd0, oc = 8'd9;
  logic init_start = 0, wbuf_we = 0, prm_we = 0;
  logic [8:0] wbuf_waddr = 0;
  logic [31:0] wbuf_wdata = 0, prm_wdata = 0;
  logic [2:0] prm_addr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  logic [31:0] in_data = 0, out_data;
  int checks = 0, failures = 0, cyc = 0, outs = 0;
  logic [31:0] exp_q [$];
  int exp_cnt [int];
  lif_ref m;

  sne_slice dut (.*);

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    outs++;
    checks++;
    if (!exp_cnt.exists(int'(out_data)) || exp_cnt[int'(out_data)] == 0) begin
      failures++; $display("unexpected output %h", out_data);
    end else exp_cnt[int'(out_data)]--;
  end

  task automatic send(logic [31:0] w);
    @(negedge clk);
    in_valid = 1; in_data = w;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    int t0, t1, n_spk, n_time, n_exp;
    m = new(32, 0, 32, 32, 9);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    for (int a = 0; a < 288; a++) begin
      logic [31:0] wd;
      for (int i = 0; i < 8; i++) begin
        logic [3:0] nib;
        nib = ((a * 8 + i) % 3 == 0) ? 4'($urandom_range(0, 15)) : 4'($urandom_range(1, 6));
        wd[4*i +: 4] = nib;
        m.wt[a * 8 + i] = int'(nib);
      end
      @(negedge clk); wbuf_we = 1; wbuf_waddr = 9'(a); wbuf_wdata = wd;
    end
    @(negedge clk); wbuf_we = 0;
    // parameters
    m.thr = 6;
    @(negedge clk); prm_we = 1; prm_addr = 0; prm_wdata = 32'd6;
    for (int a = 1; a <= 4; a++) begin
      logic [31:0] pd;
      for (int b = 0; b < 4; b++) begin
        pd[8*b +: 8] = 8'(250 - 14 * ((a - 1) * 4 + b));
        m.lut[(a - 1) * 4 + b] = int'(pd[8*b +: 8]);
      end
      @(negedge clk); prm_addr = 3'(a); prm_wdata = pd;
    end
    @(negedge clk); prm_we = 0;
    init_start = 1; @(negedge clk); init_start = 0;
    repeat (70) @(negedge clk);
    // events
    n_spk = 0; n_time = 0; n_exp = 0;
    t0 = cyc;
    for (int n = 0; n < 600; n++) begin
      if ($urandom_range(0, 14) == 0) begin
        int ts; ts = m.now + $urandom_range(1, 12);
        m.time_ev(ts);
        n_time++;
        send(mk_time(28'(ts)));
      end else begin
        int x, y, c;
        x = $urandom_range(28, 68); y = $urandom_range(0, 35); c = $urandom_range(0, 255);
        m.spike(x, y, c, exp_q);
        while (exp_q.size() > 0) begin
          int e; e = int'(exp_q.pop_front());
          if (exp_cnt.exists(e)) exp_cnt[e]++; else exp_cnt[e] = 1;
          n_exp++;
        end
        send(mk_spike(8'(x), 8'(y), 8'(c)));
        n_spk++;
      end
    end
    t1 = cyc;
    repeat (40) @(negedge clk);
    foreach (exp_cnt[k]) begin
      checks++;
      if (exp_cnt[k] != 0) begin failures++; $display("missing output %h x%0d", k, exp_cnt[k]); end
    end
    checks += 2;
    if (outs != n_exp || outs < 100) begin failures++; $display("outputs %0d expected %0d", outs, n_exp); end
    if ((t1 - t0) < 12 * n_spk || (t1 - t0) > 12 * n_spk + 2 * n_time + 16) begin
      failures++; $display("cycles %0d for %0d spikes, %0d time events", t1 - t0, n_spk, n_time);
    end
    $display("spikes %0d, outputs %0d, cycles %0d", n_spk, outs, t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
