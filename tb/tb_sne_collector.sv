// tb_sne_collector: 16 random producers push tagged words into sne_collector
// while the consumer applies random back-pressure. Every word must come out
// exactly once and the words of each producer in order; the collector must
// be empty at the end.
module tb_sne_collector;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_ready;
  logic [31:0] in_data [N];
  logic out_valid, out_ready = 1, empty;
  logic [31:0] out_data;
  int checks = 0, failures = 0;
  int sent [N], got [N];
  int total = 0;

  sne_collector #(.N_IN(N), .DEPTH(2)) dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) sent[i]++;
    if (out_valid && out_ready) begin
      int src, seq;
      src = int'(out_data[31:16]); seq = int'(out_data[15:0]);
      checks++; total++;
      if (src >= N || seq != got[src]) begin failures++; $display("got %h expected seq %0d", out_data, got[src]); end
      else got[src]++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; in_data[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          // previous word was taken at the last edge (or none pending)
          in_valid[i] = ($urandom_range(0, 3) == 0);
          in_data[i] = {16'(i), 16'(sent[i])};
        end
      end
      @(posedge clk);
    end
    @(negedge clk); in_valid = '0;
    repeat (200) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] != sent[i]) begin failures++; $display("source %0d sent %0d got %0d", i, sent[i], got[i]); end
    end
    checks++; if (!empty) begin failures++; $display("not empty at the end"); end
    $display("merged %0d events", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
