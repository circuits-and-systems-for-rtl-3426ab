// tb_sne_xbar: exercises the four routings of sne_xbar with directed traffic:
// input broadcast (each selected slice gets every word once, waiting for the
// slowest ready), output streaming (collector words reach the write
// streamer), internal redirection (collector words reach the slices) and
// weight / parameter loading (masked write enables with an auto-incremented
// address that cfg_clear resets).
module tb_sne_xbar;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] cfg_target = 0;
  logic cfg_in_src = 0, cfg_out_dst = 0, cfg_clear = 0;
  logic [N-1:0] cfg_mask = 8'b1010_0110;
  logic s0_valid = 0, s0_ready, col_valid = 0, col_ready, s1_valid, s1_ready = 1;
  logic [31:0] s0_data = 0, col_data = 0, s1_data, sl_data, ld_wdata;
  logic [N-1:0] sl_valid, sl_ready = '1, wbuf_we, prm_we;
  logic [7:0] wbuf_waddr;
  logic [2:0] prm_addr;
  int checks = 0, failures = 0;
  int rx [N];
  int bcast = 0, redirect = 0, outs = 0, loads = 0;

  sne_xbar #(.N_SLICES(N), .WAW(8)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) if (sl_valid[s] && sl_ready[s]) begin
      rx[s]++;
      checks++;
      if (!cfg_mask[s]) begin failures++; $display("slice %0d not selected but got a word", s); end
      if (sl_data != (cfg_in_src ? col_data : s0_data)) begin failures++; $display("wrong slice data"); end
    end
    if (sl_valid != '0 && (sl_valid != cfg_mask)) begin checks++; failures++; $display("partial broadcast"); end
  end

  initial begin
    for (int s = 0; s < N; s++) rx[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. input broadcast, random per-slice readiness
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); s0_valid = 1; s0_data = 32'(1000 + i);
      forever begin
        sl_ready = 8'($urandom);
        #1;
        if (s0_ready) break;
        @(negedge clk);
      end
      @(posedge clk); bcast++;
    end
    @(negedge clk); s0_valid = 0; sl_ready = '1;
    for (int s = 0; s < N; s++) begin
      checks++;
      if (rx[s] != (cfg_mask[s] ? 50 : 0)) begin failures++; $display("slice %0d got %0d words", s, rx[s]); end
    end
    // 2. output streaming
    cfg_out_dst = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); col_valid = 1; col_data = 32'(2000 + i); s1_ready = 1'($urandom);
      #1;
      checks += 2;
      if (!s1_valid || s1_data != col_data) begin failures++; $display("collector word not at s1"); end
      if (col_ready != s1_ready) begin failures++; $display("col_ready should follow s1_ready"); end
      if (sl_valid != '0) begin failures++; $display("output word leaked to slices"); end
      outs++;
    end
    @(negedge clk); col_valid = 0; s1_ready = 1;
    // 3. internal redirection
    cfg_in_src = 1; cfg_out_dst = 1;
    for (int s = 0; s < N; s++) rx[s] = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); col_valid = 1; col_data = 32'(3000 + i);
      #1;
      checks += 2;
      if (s1_valid) begin failures++; $display("redirected word reached s1"); end
      if (!col_ready || sl_valid != cfg_mask) begin failures++; $display("redirection did not broadcast"); end
      @(posedge clk); redirect++;
    end
    @(negedge clk); col_valid = 0; cfg_in_src = 0; cfg_out_dst = 0;
    // 4. weight and parameter loading
    for (int tg = 1; tg <= 2; tg++) begin
      cfg_target = 2'(tg);
      @(negedge clk); cfg_clear = 1; @(negedge clk); cfg_clear = 0;
      for (int i = 0; i < 6; i++) begin
        @(negedge clk); s0_valid = 1; s0_data = 32'(4000 + i);
        #1;
        checks += 3;
        if (!s0_ready) begin failures++; $display("load stalled"); end
        if ((tg == 1 ? wbuf_we : prm_we) != cfg_mask || (tg == 1 ? prm_we : wbuf_we) != '0) begin
          failures++; $display("wrong load enables");
        end
        if ((tg == 1 ? int'(wbuf_waddr) : int'(prm_addr)) != i || ld_wdata != s0_data) begin
          failures++; $display("load address %0d expected %0d", tg == 1 ? wbuf_waddr : 8'(prm_addr), i);
        end
        if (sl_valid != '0) begin failures++; $display("load word sent as event"); end
        @(posedge clk); loads++;
      end
      @(negedge clk); s0_valid = 0;
    end
    $display("broadcast %0d, output %0d, redirected %0d, loaded %0d", bcast, outs, redirect, loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
