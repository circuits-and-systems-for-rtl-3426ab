// tb_sne_sequencer: checks the slice schedule. Back-to-back spike events must
// be accepted exactly 12 cycles apart with nine step_valid cycles (k = 0..8,
// event fields latched) each; stall must hold the step and lengthen the
// sequence by the stalled cycles; a time event must update cur_time in one
// cycle; init_start must sweep init_addr 0..63 with init_we.
module tb_sne_sequencer;
  import sne_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_start = 0, in_valid = 0, in_ready, stall = 0, step_valid, init_we, busy;
  logic [31:0] in_data = 0;
  logic [3:0] step_k;
  logic [7:0] ev_x, ev_y, ev_c;
  logic [27:0] cur_time;
  logic [5:0] init_addr;
  int checks = 0, failures = 0, cyc = 0;
  int acc_cyc [$];
  int steps = 0, exp_k = 0, inits = 0;

  sne_sequencer dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) acc_cyc.push_back(cyc);
    if (step_valid) begin
      checks++;
      if (int'(step_k) != exp_k % 9) begin failures++; $display("step %0d expected %0d", step_k, exp_k % 9); end
      exp_k++; steps++;
    end
    if (init_we) begin
      checks++;
      if (int'(init_addr) != inits % 64) begin failures++; $display("init addr %0d", init_addr); end
      inits++;
    end
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // memory init
    @(negedge clk); init_start = 1;
    @(negedge clk); init_start = 0;
    repeat (70) @(negedge clk);
    checks++; if (inits != 64) begin failures++; $display("init cycles %0d", inits); end
    // time event
    in_valid = 1; in_data = mk_time(28'h123_4567);
    @(negedge clk);
    checks++; if (cur_time != 28'h123_4567) begin failures++; $display("time %h", cur_time); end
    // 20 back-to-back spikes
    for (int i = 0; i < 20; i++) begin
      in_data = mk_spike(8'(i), 8'(i + 1), 8'(i + 2));
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      checks += 3;
      if (ev_x != 8'(i) || ev_y != 8'(i + 1) || ev_c != 8'(i + 2)) begin failures++; $display("latched event wrong"); end
    end
    in_valid = 0;
    repeat (15) @(negedge clk);
    for (int i = 2; i < acc_cyc.size(); i++) begin
      checks++;
      if (acc_cyc[i] - acc_cyc[i-1] != 12) begin failures++; $display("event spacing %0d", acc_cyc[i] - acc_cyc[i-1]); end
    end
    checks++; if (steps != 180) begin failures++; $display("steps %0d", steps); end
    // stalled spike: 5 stall cycles -> 17 cycles
    acc_cyc.delete();
    in_valid = 1; in_data = mk_spike(1, 2, 3);
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    stall = 1; repeat (5) @(negedge clk); stall = 0;
    in_valid = 1; in_data = mk_spike(4, 5, 6);
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
    checks++; if (acc_cyc[1] - acc_cyc[0] != 17) begin failures++; $display("stalled spacing %0d", acc_cyc[1] - acc_cyc[0]); end
    repeat (15) @(negedge clk);
    checks++; if (steps != 198) begin failures++; $display("steps after stall %0d", steps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
