// tb_sne_streamer: connects sne_streamer to a behavioural memory that grants
// at random and answers reads after a random delay (in order). Read mode must
// deliver the LEN words from BASE in order under random consumer
// back-pressure, without ever holding more requests in flight than its FIFO
// can absorb; write mode must store an incoming stream at BASE, BASE+4, ...
// and report the number of words.
module tb_sne_streamer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, stop = 0, mode = 0, busy;
  logic [31:0] base = 0, len = 0, count;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic rd_valid, rd_ready = 1, wr_valid = 0, wr_ready, wr_empty;
  logic [31:0] rd_data, wr_data = 0;
  int checks = 0, failures = 0;
  logic [31:0] mem [int];
  logic [31:0] rq [$];
  int rdel [$];
  int nread = 0;

  sne_streamer #(.FIFO_DEPTH(4)) dut (.*);

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] memval(logic [31:0] a);
    return mem.exists(a) ? mem[a] : (a ^ 32'hA5A5_0000);
  endfunction

  // memory model: random grant, in-order replies 1..3 cycles later
  always @(posedge clk) begin
    mem_gnt <= ($urandom_range(0, 2) != 0);
    rd_ready <= ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (rdel.size() > 0) begin
      for (int i = 0; i < rdel.size(); i++) if (rdel[i] > 0) rdel[i]--;
      if (rdel[0] == 0) begin
        mem_rvalid <= 1'b1; mem_rdata <= rq.pop_front(); void'(rdel.pop_front());
      end
    end
    if (mem_req && mem_gnt) begin
      if (mem_we) mem[mem_addr] = mem_wdata;
      else begin rq.push_back(memval(mem_addr)); rdel.push_back($urandom_range(0, 2)); end
    end
  end

  always @(posedge clk) if (rst_n && rd_valid && rd_ready) begin
    checks++;
    if (rd_data != memval(32'h100 + 32'(4 * nread))) begin failures++; $display("word %0d = %h", nread, rd_data); end
    nread++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // read 200 words from 0x100
    @(negedge clk); start = 1; mode = 0; base = 32'h100; len = 200;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    checks++; if (nread != 200) begin failures++; $display("read %0d words", nread); end
    // write 150 words to 0x8000
    @(negedge clk); start = 1; mode = 1; base = 32'h8000;
    @(negedge clk); start = 0;
    for (int i = 0; i < 150; i++) begin
      wr_valid = 1; wr_data = 32'(i * 3 + 11);
      @(posedge clk); while (!wr_ready) @(posedge clk);
      @(negedge clk);
    end
    wr_valid = 0;
    while (!wr_empty) @(negedge clk);
    stop = 1; @(negedge clk); stop = 0;
    checks += 2;
    if (count != 150) begin failures++; $display("count %0d", count); end
    if (busy) begin failures++; $display("still busy after stop"); end
    for (int i = 0; i < 150; i++) begin
      checks++;
      if (memval(32'h8000 + 32'(4 * i)) != 32'(i * 3 + 11)) begin failures++; $display("written word %0d wrong", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
