// sne_slice: one of the eight SNE processing slices.
//
// A slice holds the layer's shared data (the 4-bit 3x3 weights of its output
// channel for up to 256 input channels, the firing threshold and the decay LUT),
// one sne_sequencer and 16 sne_clusters arranged as a 4x4 grid. Cluster j
// covers the 8x8 output tile with origin (x_base + 8*(j%4), y_base + 8*(j/4)),
// so a slice maps a 32x32 output tile of output channel oc. Every event entering
// the slice is broadcast to all clusters; the sequencer steps them in lockstep
// and the weight of the current tap, w[ev_c][k], is read once from the shared
// buffer and broadcast. Output spikes of the clusters are merged by the slice
// collector into out_*.
// Loading: wbuf_we writes eight 4-bit weights (bits [4i+3:4i] -> weight
// 8*wbuf_waddr+i); weight index = c*9 + k. prm_we writes word 0 = threshold
// (bits [7:0], signed), words 1..4 = LUT entries 4*(addr-1) .. +3, byte-wise.
// init_start clears all neuron memories (64 cycles).
// Slice/cluster counts, 256 input channels and the shared weight buffer are the
// paper's; the tile mapping and load formats are this design's choices.
module sne_slice
  import sne_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 16,
  parameter int unsigned MAX_CIN    = 256,
  parameter int unsigned T_W        = 16,
  parameter int unsigned LUT_N      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  x_base,
  input  logic [7:0]  y_base,
  input  logic [7:0]  oc,
  input  logic        init_start,
  input  logic        wbuf_we,
  input  logic [$clog2(MAX_CIN*9/8)-1:0] wbuf_waddr,
  input  logic [31:0] wbuf_wdata,
  input  logic        prm_we,
  input  logic [2:0]  prm_addr,
  input  logic [31:0] prm_wdata,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic        busy
);
  localparam int unsigned NWGT = MAX_CIN * 9;
  localparam int unsigned WAW  = $clog2(NWGT);

  // shared weight buffer and parameters
  logic [3:0]  wbuf [NWGT];
  logic signed [7:0] thr;
  logic [7:0]  lut [LUT_N];

  always_ff @(posedge clk) begin
    if (wbuf_we)
      for (int i = 0; i < 8; i++) wbuf[WAW'({wbuf_waddr, 3'(i)})] <= wbuf_wdata[4*i +: 4];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr <= 8'sd127;
      for (int i = 0; i < LUT_N; i++) lut[i] <= '0;
    end else if (prm_we) begin
      if (prm_addr == 3'd0) thr <= prm_wdata[7:0];
      else
        for (int b = 0; b < 4; b++)
          if ((int'(prm_addr) - 1) * 4 + b < LUT_N) lut[(int'(prm_addr) - 1) * 4 + b] <= prm_wdata[8*b +: 8];
    end
  end

  // sequencer
  logic        stall, step_valid, init_we, seq_busy;
  logic [3:0]  step_k;
  logic [7:0]  ev_x, ev_y, ev_c;
  logic [TS_W-1:0] cur_time;
  logic [5:0]  init_addr;

  sne_sequencer i_seq (
    .clk, .rst_n, .init_start,
    .in_valid, .in_ready, .in_data,
    .stall, .step_valid, .step_k, .ev_x, .ev_y, .ev_c, .cur_time,
    .init_we, .init_addr, .busy(seq_busy)
  );

  // weight broadcast: the same tap for every cluster
  logic [WAW-1:0] w_addr;
  logic signed [3:0] w_data;
  assign w_addr = WAW'(ev_c) * WAW'(9) + WAW'(step_k);
  assign w_data = (step_k < 4'd9 && w_addr < WAW'(NWGT)) ? wbuf[w_addr] : 4'sd0;

  // clusters
  logic [N_CLUSTERS-1:0] c_valid, c_ready, c_stall;
  logic [31:0]           c_data [N_CLUSTERS];

  for (genvar j = 0; j < N_CLUSTERS; j++) begin : g_cl
    sne_cluster #(.T_W(T_W), .LUT_N(LUT_N)) i_cluster (
      .clk, .rst_n,
      .x0 (x_base + 8'(8 * (j % 4))),
      .y0 (y_base + 8'(8 * (j / 4))),
      .oc,
      .init_we, .init_addr,
      .step_valid, .step_k, .ev_x, .ev_y,
      .cur_time (cur_time[T_W-1:0]),
      .thr, .lut, .w_data,
      .out_valid(c_valid[j]), .out_ready(c_ready[j]), .out_data(c_data[j]),
      .stall    (c_stall[j])
    );
  end
  assign stall = |c_stall;

  logic col_empty;
  sne_collector #(.N_IN(N_CLUSTERS), .DEPTH(2)) i_collector (
    .clk, .rst_n,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid, .out_ready, .out_data, .empty(col_empty)
  );

  assign busy = seq_busy || !col_empty || (|c_valid);
endmodule
