// tb_dvsi: drives random DVS events and frame boundaries into dvsi, grants its
// memory requests at random, and compares every word written to L2 (address and
// data) with the expected sequence: one spike word per event, channel =
// polarity, and a time word with the incremented 28-bit frame counter at each
// frame end. A second run with a buffer smaller than the traffic checks that
// words stop at cfg_len and that the dropped events are counted.
module tb_dvsi;
  import sne_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_en = 0, cfg_clear = 0;
  logic [31:0] cfg_base = 32'h0000_1000, cfg_len = 32'd1000;
  logic [31:0] wr_count, overflow_cnt;
  logic [27:0] cur_ts;
  logic dvs_valid = 0, dvs_ready, dvs_pol = 0, dvs_frame_end = 0;
  logic [7:0] dvs_x = 0, dvs_y = 0;
  logic mem_req, mem_we, mem_gnt;
  logic [31:0] mem_addr, mem_wdata;
  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];
  int nwr = 0;

  dvsi dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory: random grants, check the written words
  always @(negedge clk) mem_gnt <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && mem_req && mem_gnt) begin
    checks += 2;
    if (!mem_we || mem_addr != cfg_base + 32'(4 * nwr)) begin
      failures++; $display("bad write address %h (word %0d)", mem_addr, nwr);
    end
    if (exp_q.size() == 0 || mem_wdata != exp_q[0]) begin
      failures++; $display("word %0d = %h expected %h", nwr, mem_wdata, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
    nwr++;
  end

  task automatic send(int n_events, int frames);
    int ts;
    ts = 0;
    for (int f = 0; f < frames; f++) begin
      for (int e = 0; e < n_events; e++) begin
        @(negedge clk);
        dvs_valid = 1; dvs_x = 8'($urandom_range(0, 131)); dvs_y = 8'($urandom_range(0, 103));
        dvs_pol = 1'($urandom);
        dvs_frame_end = (e == n_events - 1);
        while (!dvs_ready) begin @(negedge clk); end
        exp_q.push_back(mk_spike(dvs_x, dvs_y, {7'd0, dvs_pol}));
        if (dvs_frame_end) begin ts++; exp_q.push_back(mk_time(28'(ts))); end
        @(posedge clk); #1;
        dvs_valid = 0; dvs_frame_end = 0;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; cfg_en = 1;
    send(10, 5);
    repeat (20) @(posedge clk);
    checks += 3;
    if (exp_q.size() != 0) begin failures++; $display("%0d words never written", exp_q.size()); end
    if (wr_count != 32'(55)) begin failures++; $display("wr_count %0d", wr_count); end
    if (cur_ts != 28'd5) begin failures++; $display("timestamp %0d", cur_ts); end
    // overflow: a 20-word buffer, 33 words of traffic
    @(negedge clk); cfg_clear = 1; cfg_len = 32'd20; nwr = 0;
    @(negedge clk); cfg_clear = 0;
    send(10, 3);
    repeat (20) @(posedge clk);
    checks += 2;
    if (wr_count != 32'd20) begin failures++; $display("wr_count after overflow %0d", wr_count); end
    if (overflow_cnt != 32'd13) begin failures++; $display("overflow_cnt %0d", overflow_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
