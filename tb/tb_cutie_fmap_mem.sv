// tb_cutie_fmap_mem: checks CUTIE's double-buffered feature-map memory at the
// paper's sizes (1024 pixels x 160 bits per bank). Random traffic drives the
// controller read and write-back ports and the host port at once; a reference
// copy of both banks checks every read, and the host grant must be refused
// exactly when the controller uses the same bank for the same direction.
module tb_cutie_fmap_mem;
  localparam int WORDS = 1024, W = 160, AW = $clog2(WORDS);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, rd_bank = 0, wb_en = 0, wb_bank = 0, h_req = 0, h_we = 0, h_bank = 0, h_gnt;
  logic [AW-1:0] rd_addr = 0, wb_addr = 0, h_addr = 0;
  logic [W-1:0] rd_data, wb_data = 0, h_wdata = 0, h_rdata;
  int checks = 0, failures = 0, refused = 0;
  logic [W-1:0] model [2][WORDS];
  logic [W-1:0] exp_rd, exp_h;
  logic chk_rd = 0, chk_h = 0;

  cutie_fmap_mem #(.WORDS(WORDS), .W(W)) dut (.*);

  function automatic logic [W-1:0] rword();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // known contents through the host port
    for (int b = 0; b < 2; b++) for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      h_req = 1; h_we = 1; h_bank = b[0]; h_addr = AW'(a); h_wdata = rword();
      model[b][a] = h_wdata;
    end
    @(negedge clk); h_req = 0;
    for (int it = 0; it < 20000; it++) begin
      logic g;
      @(negedge clk);
      if (chk_rd) begin checks++; if (rd_data !== exp_rd) begin failures++; $display("rd mismatch"); end end
      if (chk_h)  begin checks++; if (h_rdata !== exp_h) begin failures++; $display("host rd mismatch"); end end
      chk_rd = 0; chk_h = 0;
      rd_en = $urandom_range(0, 1); rd_bank = $urandom_range(0, 1); rd_addr = AW'($urandom_range(0, 15));
      wb_en = $urandom_range(0, 1); wb_bank = $urandom_range(0, 1); wb_addr = AW'($urandom_range(0, 15));
      wb_data = rword();
      h_req = $urandom_range(0, 1); h_we = $urandom_range(0, 1); h_bank = $urandom_range(0, 1);
      h_addr = AW'($urandom_range(0, 15)); h_wdata = rword();
      #1;
      g = h_we ? !(wb_en && wb_bank == h_bank) : !(rd_en && rd_bank == h_bank);
      checks++;
      if (h_gnt !== g) begin failures++; $display("grant %b expected %b", h_gnt, g); end
      if (h_req && !g) refused++;
      if (rd_en) begin exp_rd = model[rd_bank][rd_addr]; chk_rd = 1; end
      if (h_req && !h_we && g) begin exp_h = model[h_bank][h_addr]; chk_h = 1; end
      if (wb_en) model[wb_bank][wb_addr] = wb_data;
      if (h_req && h_we && g) model[h_bank][h_addr] = h_wdata;
    end
    checks++;
    if (refused == 0) begin failures++; $display("no host refusal seen"); end
    $display("host refusals %0d", refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
