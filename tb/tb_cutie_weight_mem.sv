// tb_cutie_weight_mem: checks CUTIE's per-OCU weight memory at the paper's
// size (96 OCUs x 80 words of 160 bits): random writes to single OCUs and
// broadcast reads of one address to all OCUs, compared with a reference.
module tb_cutie_weight_mem;
  localparam int N_O = 96, DEPTH = 80, W = 160;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [$clog2(N_O)-1:0] wocu = 0;
  logic [$clog2(DEPTH)-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0;
  logic [W-1:0] rdata [N_O];
  logic [W-1:0] model [N_O][DEPTH];
  logic [W-1:0] exp_q [N_O];
  logic chk = 0;
  int checks = 0, failures = 0;

  cutie_weight_mem #(.N_O(N_O), .DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int o = 0; o < N_O; o++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; wocu = 7'(o); waddr = 7'(a);
      for (int i = 0; i < W / 32; i++) wdata[32*i +: 32] = $urandom;
      model[o][a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if (chk) for (int o = 0; o < N_O; o++) begin
        checks++;
        if (rdata[o] !== exp_q[o]) begin failures++; $display("ocu %0d mismatch", o); end
      end
      chk = 0;
      re = $urandom_range(0, 1); raddr = 7'($urandom_range(0, DEPTH - 1));
      we = $urandom_range(0, 1); wocu = 7'($urandom_range(0, N_O - 1));
      waddr = 7'($urandom_range(0, DEPTH - 1));
      for (int i = 0; i < W / 32; i++) wdata[32*i +: 32] = $urandom;
      if (re) begin for (int o = 0; o < N_O; o++) exp_q[o] = model[o][raddr]; chk = 1; end
      if (we) model[wocu][waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
