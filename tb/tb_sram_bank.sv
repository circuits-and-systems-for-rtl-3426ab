// tb_sram_bank: writes random words to random addresses of a sram_bank and
// checks every read against a reference array, including the one-cycle read
// latency and that rdata holds its value while no read is made.
module tb_sram_bank;
  localparam int WORDS = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0;
  logic [9:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  sram_bank #(.WORDS(WORDS), .DATA_W(32)) dut (.clk, .req, .we, .addr, .wdata, .rdata);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 10'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    repeat (2000) begin
      @(negedge clk);
      req = 1; addr = 10'($urandom_range(0, WORDS - 1));
      we = ($urandom_range(0, 3) == 0);
      wdata = $urandom;
      if (we) begin
        @(posedge clk); ref_mem[addr] = wdata;
      end else begin
        logic [31:0] e; e = ref_mem[addr];
        @(posedge clk); #1;
        checks++;
        if (rdata !== e) begin failures++; $display("addr %0d read %h expected %h", addr, rdata, e); end
        @(negedge clk); req = 0;
        @(posedge clk); #1;
        checks++;
        if (rdata !== e) begin failures++; $display("rdata did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
