// kraken_soc: the digital core of the Kraken SoC for multi-modal perception on
// nano-drones: an event path (DVS interface -> L2 -> Sparse Neural Engine) and
// a frame/ternary path (CUTIE) next to the programmable cores.
//
// What is inside:
//   * l2_mem        1 MiB word-interleaved L2 scratchpad behind a logarithmic
//                   interconnect with four masters: the host port (fabric
//                   controller / IO subsystem), SNE streamer 0 (reads),
//                   SNE streamer 1 (writes) and the DVS interface
//   * dvsi          turns DVS sensor events into SNE event words in an L2 buffer
//   * sne           spiking-network engine, programmed over its APB port,
//                   streaming events from and to L2
//   * cutie         ternary-network engine with its own weight and
//                   feature-map memories, programmed over its APB port
//   * cluster_tcdm  128 kB L1 of the eight-core cluster (cores outside)
// The RISC-V fabric controller, the eight cluster cores, the peripherals, the
// clock-domain crossings and the power control are not part of this RTL: their
// connections are the ports of this module (host_*, tcdm_*, *_p*, dvs_cfg_*,
// the two end-of-computation events). Everything runs on one clock.
module kraken_soc #(
  parameter int unsigned L2_BANKS      = 4,
  parameter int unsigned L2_BANK_WORDS = 65536,
  parameter int unsigned SNE_SLICES    = 8,
  parameter int unsigned CUTIE_OCUS    = 96,
  parameter int unsigned CUTIE_CIN     = 96,
  parameter int unsigned CUTIE_IMG     = 32,
  parameter int unsigned CUTIE_LAYERS  = 8,
  parameter int unsigned CNB           = (CUTIE_CIN + 4) / 5,
  parameter int unsigned CFW           = $clog2(CUTIE_IMG * CUTIE_IMG),
  parameter int unsigned CWAW          = $clog2(10 * CUTIE_LAYERS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host (fabric controller / IO subsystem) port into L2
  input  logic        host_req,
  input  logic        host_we,
  input  logic [31:0] host_addr,
  input  logic [31:0] host_wdata,
  output logic        host_gnt,
  output logic        host_rvalid,
  output logic [31:0] host_rdata,
  // SNE register port
  input  logic        sne_psel,
  input  logic        sne_penable,
  input  logic        sne_pwrite,
  input  logic [7:0]  sne_paddr,
  input  logic [31:0] sne_pwdata,
  output logic [31:0] sne_prdata,
  output logic        sne_pready,
  output logic        sne_eoc,
  // CUTIE register port, weight and feature-map target ports
  input  logic        cutie_psel,
  input  logic        cutie_penable,
  input  logic        cutie_pwrite,
  input  logic [7:0]  cutie_paddr,
  input  logic [31:0] cutie_pwdata,
  output logic [31:0] cutie_prdata,
  output logic        cutie_pready,
  input  logic        cutie_w_we,
  input  logic [$clog2(CUTIE_OCUS)-1:0] cutie_w_ocu,
  input  logic [CWAW-1:0]  cutie_w_addr,
  input  logic [8*CNB-1:0] cutie_w_wdata,
  input  logic        cutie_h_req,
  input  logic        cutie_h_we,
  input  logic        cutie_h_bank,
  input  logic [CFW-1:0]   cutie_h_addr,
  input  logic [8*CNB-1:0] cutie_h_wdata,
  output logic        cutie_h_gnt,
  output logic [8*CNB-1:0] cutie_h_rdata,
  output logic        cutie_eoi,
  // DVS sensor and DVS interface configuration
  input  logic        dvs_valid,
  output logic        dvs_ready,
  input  logic [7:0]  dvs_x,
  input  logic [7:0]  dvs_y,
  input  logic        dvs_pol,
  input  logic        dvs_frame_end,
  input  logic        dvs_cfg_en,
  input  logic        dvs_cfg_clear,
  input  logic [31:0] dvs_cfg_base,
  input  logic [31:0] dvs_cfg_len,
  output logic [31:0] dvs_wr_count,
  output logic [31:0] dvs_overflow_cnt,
  // cluster core ports into L1
  input  logic [7:0]  tcdm_req,
  input  logic [7:0]  tcdm_we,
  input  logic [31:0] tcdm_addr  [8],
  input  logic [31:0] tcdm_wdata [8],
  output logic [7:0]  tcdm_gnt,
  output logic [7:0]  tcdm_rvalid,
  output logic [31:0] tcdm_rdata [8]
);
  // ---------------- L2 ----------------
  localparam int unsigned M_HOST = 0, M_SNE0 = 1, M_SNE1 = 2, M_DVS = 3;
  logic [3:0]  l2_req, l2_we, l2_gnt, l2_rvalid;
  logic [31:0] l2_addr [4];
  logic [31:0] l2_wdata [4];
  logic [31:0] l2_rdata [4];

  l2_mem #(.N_MST(4), .N_BANK(L2_BANKS), .BANK_WORDS(L2_BANK_WORDS)) i_l2 (
    .clk, .rst_n,
    .mst_req(l2_req), .mst_we(l2_we), .mst_addr(l2_addr), .mst_wdata(l2_wdata),
    .mst_gnt(l2_gnt), .mst_rvalid(l2_rvalid), .mst_rdata(l2_rdata)
  );

  assign l2_req[M_HOST]   = host_req;
  assign l2_we[M_HOST]    = host_we;
  assign l2_addr[M_HOST]  = host_addr;
  assign l2_wdata[M_HOST] = host_wdata;
  assign host_gnt    = l2_gnt[M_HOST];
  assign host_rvalid = l2_rvalid[M_HOST];
  assign host_rdata  = l2_rdata[M_HOST];

  // ---------------- DVS interface ----------------
  logic [27:0] dvs_ts;
  dvsi i_dvsi (
    .clk, .rst_n,
    .cfg_en(dvs_cfg_en), .cfg_clear(dvs_cfg_clear), .cfg_base(dvs_cfg_base), .cfg_len(dvs_cfg_len),
    .wr_count(dvs_wr_count), .overflow_cnt(dvs_overflow_cnt), .cur_ts(dvs_ts),
    .dvs_valid, .dvs_ready, .dvs_x, .dvs_y, .dvs_pol, .dvs_frame_end,
    .mem_req(l2_req[M_DVS]), .mem_we(l2_we[M_DVS]), .mem_addr(l2_addr[M_DVS]),
    .mem_wdata(l2_wdata[M_DVS]), .mem_gnt(l2_gnt[M_DVS])
  );

  // ---------------- SNE ----------------
  logic [1:0]  s_req, s_we, s_gnt, s_rvalid;
  logic [31:0] s_addr [2];
  logic [31:0] s_wdata [2];
  logic [31:0] s_rdata [2];

  sne #(.N_SLICES(SNE_SLICES)) i_sne (
    .clk, .rst_n,
    .psel(sne_psel), .penable(sne_penable), .pwrite(sne_pwrite), .paddr(sne_paddr),
    .pwdata(sne_pwdata), .prdata(sne_prdata), .pready(sne_pready),
    .mem_req(s_req), .mem_we(s_we), .mem_addr(s_addr), .mem_wdata(s_wdata),
    .mem_gnt(s_gnt), .mem_rvalid(s_rvalid), .mem_rdata(s_rdata),
    .eoc(sne_eoc)
  );

  for (genvar i = 0; i < 2; i++) begin : g_sne_l2
    assign l2_req[M_SNE0 + i]   = s_req[i];
    assign l2_we[M_SNE0 + i]    = s_we[i];
    assign l2_addr[M_SNE0 + i]  = s_addr[i];
    assign l2_wdata[M_SNE0 + i] = s_wdata[i];
    assign s_gnt[i]    = l2_gnt[M_SNE0 + i];
    assign s_rvalid[i] = l2_rvalid[M_SNE0 + i];
    assign s_rdata[i]  = l2_rdata[M_SNE0 + i];
  end

  // ---------------- CUTIE ----------------
  cutie #(.N_O(CUTIE_OCUS), .N_I(CUTIE_CIN), .IMG_W(CUTIE_IMG), .IMG_H(CUTIE_IMG),
          .N_LAYERS(CUTIE_LAYERS)) i_cutie (
    .clk, .rst_n,
    .psel(cutie_psel), .penable(cutie_penable), .pwrite(cutie_pwrite), .paddr(cutie_paddr),
    .pwdata(cutie_pwdata), .prdata(cutie_prdata), .pready(cutie_pready),
    .w_we(cutie_w_we), .w_ocu(cutie_w_ocu), .w_addr(cutie_w_addr), .w_wdata(cutie_w_wdata),
    .h_req(cutie_h_req), .h_we(cutie_h_we), .h_bank(cutie_h_bank), .h_addr(cutie_h_addr),
    .h_wdata(cutie_h_wdata), .h_gnt(cutie_h_gnt), .h_rdata(cutie_h_rdata),
    .eoi(cutie_eoi)
  );

  // ---------------- cluster L1 ----------------
  cluster_tcdm i_tcdm (
    .clk, .rst_n,
    .mst_req(tcdm_req), .mst_we(tcdm_we), .mst_addr(tcdm_addr), .mst_wdata(tcdm_wdata),
    .mst_gnt(tcdm_gnt), .mst_rvalid(tcdm_rvalid), .mst_rdata(tcdm_rdata)
  );
endmodule
