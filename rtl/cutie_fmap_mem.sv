// cutie_fmap_mem: CUTIE's double-buffered feature-map memory.
//
// Two banks (A = 0, B = 1) of WORDS compressed pixels. During a layer the
// controller reads input pixels from one bank (rd_*) and writes results to the
// other (wb_*); the roles swap every layer, so input and output maps never
// collide. The host port (h_*) loads the input image and reads results. Write
// arbitration: a controller write-back wins over a host write to the same bank,
// and a controller read wins over a host read of the same bank; the host port
// is then refused (h_gnt = 0) and must retry. Reads return one cycle after
// the request (rd_data, h_rdata). The double buffer with write arbitration is
// the paper's; the priority rule and the port set are this design's choices.
module cutie_fmap_mem #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned W     = 160
) (
  input  logic                     clk,
  // controller read
  input  logic                     rd_en,
  input  logic                     rd_bank,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  // controller write-back
  input  logic                     wb_en,
  input  logic                     wb_bank,
  input  logic [$clog2(WORDS)-1:0] wb_addr,
  input  logic [W-1:0]             wb_data,
  // host port
  input  logic                     h_req,
  input  logic                     h_we,
  input  logic                     h_bank,
  input  logic [$clog2(WORDS)-1:0] h_addr,
  input  logic [W-1:0]             h_wdata,
  output logic                     h_gnt,
  output logic [W-1:0]             h_rdata
);
  logic [W-1:0] mem [2][WORDS];

  always_comb begin
    if (h_we) h_gnt = !(wb_en && wb_bank == h_bank);
    else      h_gnt = !(rd_en && rd_bank == h_bank);
  end

  always_ff @(posedge clk) begin
    if (wb_en) mem[wb_bank][wb_addr] <= wb_data;
    if (h_req && h_we && h_gnt) mem[h_bank][h_addr] <= h_wdata;
    if (rd_en) rd_data <= mem[rd_bank][rd_addr];
    if (h_req && !h_we && h_gnt) h_rdata <= mem[h_bank][h_addr];
  end
endmodule
