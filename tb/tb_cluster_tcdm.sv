// tb_cluster_tcdm: random-traffic test of cluster_tcdm.
//
// 8 masters issue random reads and writes (held until granted) to a small
// address window so that bank conflicts are frequent, plus a few far
// addresses. A reference memory is updated at each grant; each read reply
// (rvalid) is compared with the value the reference held at grant time. The
// test also checks that every request is eventually granted, that at most one
// master per bank is granted per cycle and that replies come exactly one
// cycle after the grant.
module tb_cluster_tcdm;
  localparam int NM = 8;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] req, we, gnt, rvalid;
  logic [31:0] addr [NM];
  logic [31:0] wdata [NM];
  logic [31:0] rdata [NM];
  int checks = 0, failures = 0, cycle = 0, conflicts = 0;
  logic [31:0] ref_mem [int];
  logic [31:0] exp_q [NM][$];
  logic [NM-1:0] rd_pend;
  int wait_cnt [NM];

  cluster_tcdm dut (.clk, .rst_n, .mst_req(req), .mst_we(we), .mst_addr(addr), .mst_wdata(wdata),
              .mst_gnt(gnt), .mst_rvalid(rvalid), .mst_rdata(rdata));

  function automatic logic [31:0] rnd_addr();
    if ($urandom_range(0, 9) == 0) return 32'(($urandom_range(0, 3) << 15) | ($urandom_range(0, 15) << 2));
    return 32'($urandom_range(0, 31) << 2);
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #(10 * 40000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; we = '0; rd_pend = '0;
    for (int m = 0; m < NM; m++) begin addr[m] = '0; wdata[m] = '0; wait_cnt[m] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise the window with known data
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      req = '0; req[0] = 1; we[0] = 1; addr[0] = 32'(a << 2); wdata[0] = 32'(a * 7 + 1);
      #4;
      while (!gnt[0]) begin @(negedge clk); #4; end
      ref_mem[a << 2] = 32'(a * 7 + 1);
    end
    @(negedge clk); req = '0; #4;
    repeat (3000) begin
      logic [NM-1:0] g;
      @(negedge clk);
      // replies to the grants of the previous clock edge
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (rvalid[m] != rd_pend[m]) begin failures++; $display("master %0d rvalid=%0b expected %0b", m, rvalid[m], rd_pend[m]); end
        if (rvalid[m] && exp_q[m].size() > 0) begin
          logic [31:0] e;
          e = exp_q[m].pop_front();
          checks++;
          if (e != 32'hDEAD_BEEF && rdata[m] != e) begin
            failures++; $display("master %0d read %h expected %h", m, rdata[m], e);
          end
        end
      end
      // new requests
      for (int m = 0; m < NM; m++) begin
        if (!req[m] && $urandom_range(0, 2) != 0) begin
          req[m] = 1; we[m] = $urandom_range(0, 1); addr[m] = rnd_addr(); wdata[m] = $urandom;
          wait_cnt[m] = 0;
        end
      end
      #4;  // just before the clock edge
      g = gnt;
      begin
        int per_bank [NB];
        for (int b = 0; b < NB; b++) per_bank[b] = 0;
        for (int m = 0; m < NM; m++) if (req[m] && g[m]) per_bank[(addr[m] >> 2) % NB]++;
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (per_bank[b] > 1) begin failures++; $display("bank %0d granted %0d masters", b, per_bank[b]); end
          if (per_bank[b] == 1) for (int m = 0; m < NM; m++) if (req[m] && !g[m] && ((addr[m] >> 2) % NB) == b) conflicts++;
        end
      end
      for (int m = 0; m < NM; m++) begin
        rd_pend[m] = req[m] && g[m] && !we[m];
        if (req[m] && g[m]) begin
          if (we[m]) ref_mem[addr[m]] = wdata[m];
          else exp_q[m].push_back(ref_mem.exists(addr[m]) ? ref_mem[addr[m]] : 32'hDEAD_BEEF);
        end
        if (req[m] && !g[m]) begin
          wait_cnt[m]++;
          checks++;
          if (wait_cnt[m] > 2 * NM) begin failures++; $display("master %0d starved", m); wait_cnt[m] = 0; end
        end
      end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) if (req[m] && g[m]) req[m] = 0;
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("no bank conflict was exercised"); end
    $display("bank conflicts resolved: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
