// log_interconnect: N_MST masters to N_BANK word-interleaved memory banks.
//
// Each master issues word requests (req/we/addr/wdata). The bank is selected by
// the word-address bits addr[2 +: log2(N_BANK)] (word-level interleaving), the
// row inside the bank by the bits above them. Every bank arbitrates among the
// masters requesting it with its own round-robin pointer and grants one per
// cycle (gnt); the bank answers one cycle later and the read data are routed
// back to the granted master with rvalid. Masters hold req stable until gnt.
// Word interleaving and single-cycle access follow the paper; round-robin
// arbitration is this design's choice.
module log_interconnect #(
  parameter int unsigned N_MST   = 4,
  parameter int unsigned N_BANK  = 4,
  parameter int unsigned BANK_AW = 16,
  parameter int unsigned DATA_W  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_MST-1:0]     mst_req,
  input  logic [N_MST-1:0]     mst_we,
  input  logic [31:0]          mst_addr  [N_MST],
  input  logic [DATA_W-1:0]    mst_wdata [N_MST],
  output logic [N_MST-1:0]     mst_gnt,
  output logic [N_MST-1:0]     mst_rvalid,
  output logic [DATA_W-1:0]    mst_rdata [N_MST],
  output logic [N_BANK-1:0]    bank_req,
  output logic [N_BANK-1:0]    bank_we,
  output logic [BANK_AW-1:0]   bank_addr  [N_BANK],
  output logic [DATA_W-1:0]    bank_wdata [N_BANK],
  input  logic [DATA_W-1:0]    bank_rdata [N_BANK]
);
  localparam int unsigned BW = (N_BANK > 1) ? $clog2(N_BANK) : 1;
  localparam int unsigned MW = (N_MST > 1) ? $clog2(N_MST) : 1;

  logic [BW-1:0] sel [N_MST];
  logic [MW-1:0] rr    [N_BANK];
  logic [MW-1:0] win   [N_BANK];
  logic [MW-1:0] win_q [N_BANK];
  logic [N_BANK-1:0] rd_q;

  always_comb begin
    for (int m = 0; m < N_MST; m++)
      sel[m] = (N_BANK > 1) ? BW'(mst_addr[m][2 +: BW]) : '0;
  end

  always_comb begin
    mst_gnt = '0;
    for (int b = 0; b < N_BANK; b++) begin
      logic found;
      found = 1'b0;
      win[b] = '0;
      bank_req[b] = 1'b0;
      bank_we[b] = 1'b0;
      bank_addr[b] = '0;
      bank_wdata[b] = '0;
      for (int k = 0; k < N_MST; k++) begin
        int m;
        m = (int'(rr[b]) + k) % N_MST;
        if (!found && mst_req[m] && (int'(sel[m]) == b)) begin
          found = 1'b1;
          win[b] = MW'(m);
        end
      end
      if (found) begin
        bank_req[b]   = 1'b1;
        bank_we[b]    = mst_we[win[b]];
        bank_addr[b]  = mst_addr[win[b]][2 + ((N_BANK > 1) ? BW : 0) +: BANK_AW];
        bank_wdata[b] = mst_wdata[win[b]];
        mst_gnt[win[b]] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BANK; b++) begin
        rr[b] <= '0;
        win_q[b] <= '0;
      end
      rd_q <= '0;
    end else begin
      for (int b = 0; b < N_BANK; b++) begin
        rd_q[b]  <= bank_req[b] && !bank_we[b];
        win_q[b] <= win[b];
        if (bank_req[b]) rr[b] <= (int'(win[b]) == N_MST - 1) ? '0 : win[b] + 1'b1;
      end
    end
  end

  always_comb begin
    mst_rvalid = '0;
    for (int m = 0; m < N_MST; m++) mst_rdata[m] = '0;
    for (int b = 0; b < N_BANK; b++) begin
      if (rd_q[b]) begin
        mst_rvalid[win_q[b]] = 1'b1;
        mst_rdata[win_q[b]]  = bank_rdata[b];
      end
    end
  end

  // a master must keep its request until it is granted
  for (genvar m = 0; m < N_MST; m++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      mst_req[m] && !mst_gnt[m] |=> mst_req[m]);
  end
endmodule
