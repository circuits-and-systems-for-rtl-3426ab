// l2_mem: the 1 MiB L2 scratchpad of the SoC: four word-interleaved 256 KiB banks (bank count is this design's choice; the 1 MiB size is the paper's) shared by the host port, the two SNE streamers and the DVS interface.
//
// A log_interconnect arbitrates the N_MST master ports onto N_BANK sram_bank
// instances. Addresses are byte addresses of 32-bit words; consecutive words
// live in consecutive banks. Requests are granted in the cycle they are made
// unless another master wins the same bank (round robin); read data return
// one cycle after the grant with rvalid. Accesses beyond the memory size wrap.
module l2_mem #(
  parameter int unsigned N_MST      = 4,
  parameter int unsigned N_BANK     = 4,
  parameter int unsigned BANK_WORDS = 65536
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_MST-1:0]  mst_req,
  input  logic [N_MST-1:0]  mst_we,
  input  logic [31:0]       mst_addr  [N_MST],
  input  logic [31:0]       mst_wdata [N_MST],
  output logic [N_MST-1:0]  mst_gnt,
  output logic [N_MST-1:0]  mst_rvalid,
  output logic [31:0]       mst_rdata [N_MST]
);
  localparam int unsigned BANK_AW = $clog2(BANK_WORDS);

  logic [N_BANK-1:0]  bank_req, bank_we;
  logic [BANK_AW-1:0] bank_addr  [N_BANK];
  logic [31:0]        bank_wdata [N_BANK];
  logic [31:0]        bank_rdata [N_BANK];

  log_interconnect #(
    .N_MST(N_MST), .N_BANK(N_BANK), .BANK_AW(BANK_AW), .DATA_W(32)
  ) i_xbar (
    .clk, .rst_n,
    .mst_req, .mst_we, .mst_addr, .mst_wdata, .mst_gnt, .mst_rvalid, .mst_rdata,
    .bank_req, .bank_we, .bank_addr, .bank_wdata, .bank_rdata
  );

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    sram_bank #(.WORDS(BANK_WORDS), .DATA_W(32)) i_bank (
      .clk,
      .req   (bank_req[b]),
      .we    (bank_we[b]),
      .addr  (bank_addr[b]),
      .wdata (bank_wdata[b]),
      .rdata (bank_rdata[b])
    );
  end
endmodule
