// tb_sne_cluster: drives one sne_cluster the way the slice sequencer does
// (nine steps per spike, step held while the output is stalled) with random
// spikes around and inside its 8x8 tile, random time advances and random
// collector back-pressure, and compares every output spike with the reference
// LIF model (sne_ref_pkg). Also checks that memory initialisation clears the
// neurons and that no spike is produced for events outside the receptive field.
module tb_sne_cluster;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] x0 = 8'd16, y0 = 8'd8, oc = 8'd5;
  logic init_we = 0;
  logic [5:0] init_addr = 0;
  logic step_valid = 0;
  logic [3:0] step_k = 0;
  logic [7:0] ev_x = 0, ev_y = 0;
  logic [15:0] cur_time = 0;
  logic signed [7:0] thr = 8'sd10;
  logic [7:0] lut [16];
  logic signed [3:0] w_data;
  logic out_valid, out_ready = 1, stall;
  logic [31:0] out_data;
  int checks = 0, failures = 0, stalls = 0, outs = 0;
  logic [31:0] exp_q [$];
  logic [3:0] wt [2304];
  logic [7:0] cur_c = 0;
  lif_ref m;

  sne_cluster dut (.*);

  assign w_data = wt[int'(cur_c) * 9 + int'(step_k)];

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++; outs++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected spike %h", out_data); end
    else begin
      logic [31:0] e; e = exp_q.pop_front();
      if (out_data != e) begin failures++; $display("spike %h expected %h", out_data, e); end
    end
  end

  task automatic do_spike(int x, int y, int c);
    cur_c = 8'(c); ev_x = 8'(x); ev_y = 8'(y);
    m.spike(x, y, c, exp_q);
    for (int k = 0; k < 9; k++) begin
      @(negedge clk);
      step_k = 4'(k);
      while (stall) begin step_valid = 0; stalls++; @(negedge clk); end
      step_valid = 1;
      @(posedge clk);
    end
    @(negedge clk); step_valid = 0;
  endtask

  initial begin
    m = new(16, 8, 8, 8, 5);
    m.thr = 10;
    for (int i = 0; i < 16; i++) begin
      lut[i] = 8'(256 * (15 - i) / 16 + 8); m.lut[i] = int'(lut[i]);
    end
    for (int i = 0; i < 2304; i++) begin wt[i] = 4'($urandom_range(0, 15)); m.wt[i] = int'(wt[i]); end
    // bias weights positive so that neurons fire often
    for (int i = 0; i < 2304; i += 2) begin wt[i] = 4'($urandom_range(2, 7)); m.wt[i] = int'(wt[i]); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); init_we = 1; init_addr = 6'(i);
    end
    @(negedge clk); init_we = 0;
    for (int n = 0; n < 1500; n++) begin
      if ($urandom_range(0, 9) == 0) begin
        cur_time = cur_time + 16'($urandom_range(1, 20));
        m.time_ev(int'(cur_time));
      end
      do_spike($urandom_range(13, 27), $urandom_range(5, 19), $urandom_range(0, 255));
    end
    repeat (10) @(posedge clk);
    checks += 3;
    if (exp_q.size() != 0) begin failures++; $display("%0d spikes missing", exp_q.size()); end
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    if (outs < 50) begin failures++; $display("too few output spikes: %0d", outs); end
    $display("outputs %0d, stall cycles %0d, neuron updates %0d", outs, stalls, m.updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
