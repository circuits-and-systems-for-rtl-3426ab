// sne_xbar: SNE's re-programmable crossbar (c-Xbar) between the streamers, the
// slices and the slice-merging collector.
//
// Configuration (held static while streams run):
//   cfg_target : what the read streamer (s0) carries: 0 = events, 1 = weights,
//                2 = neuron parameters
//   cfg_in_src : event source for the slices: 0 = read streamer (input
//                broadcast), 1 = collector output (internal redirection)
//   cfg_out_dst: collector output goes to 0 = write streamer s1 (output
//                streaming to L2), 1 = the slices (redirection)
//   cfg_mask   : slices that receive events / weights / parameters
// Events are broadcast: a word is passed only when every selected slice is
// ready, and each selected slice sees it once. Weight and parameter words are
// written into the selected slices with an auto-incremented address that
// cfg_clear resets. The three dataflows are the paper's; the encoding and the
// broadcast rule are this design's.
module sne_xbar #(
  parameter int unsigned N_SLICES = 8,
  parameter int unsigned WAW      = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          cfg_target,
  input  logic                cfg_in_src,
  input  logic                cfg_out_dst,
  input  logic [N_SLICES-1:0] cfg_mask,
  input  logic                cfg_clear,
  // read streamer
  input  logic                s0_valid,
  output logic                s0_ready,
  input  logic [31:0]         s0_data,
  // collector
  input  logic                col_valid,
  output logic                col_ready,
  input  logic [31:0]         col_data,
  // write streamer
  output logic                s1_valid,
  input  logic                s1_ready,
  output logic [31:0]         s1_data,
  // slices
  output logic [N_SLICES-1:0] sl_valid,
  input  logic [N_SLICES-1:0] sl_ready,
  output logic [31:0]         sl_data,
  output logic [N_SLICES-1:0] wbuf_we,
  output logic [WAW-1:0]      wbuf_waddr,
  output logic [N_SLICES-1:0] prm_we,
  output logic [2:0]          prm_addr,
  output logic [31:0]         ld_wdata
);
  logic        ev_valid, ev_ready, all_rdy;
  logic [31:0] ev_data;
  logic        s0_events;

  assign s0_events = (cfg_target == 2'd0);
  assign all_rdy   = &(sl_ready | ~cfg_mask);

  // source of slice events
  assign ev_valid = cfg_in_src ? (col_valid && cfg_out_dst) : (s0_valid && s0_events);
  assign ev_data  = cfg_in_src ? col_data : s0_data;
  assign ev_ready = all_rdy;
  assign sl_valid = cfg_mask & {N_SLICES{ev_valid && all_rdy}};
  assign sl_data  = ev_data;

  // collector destination
  assign s1_valid  = col_valid && !cfg_out_dst;
  assign s1_data   = col_data;
  assign col_ready = cfg_out_dst ? (cfg_in_src && ev_ready) : s1_ready;

  // read streamer: weight / parameter writes never stall
  assign s0_ready = s0_events ? (!cfg_in_src && ev_ready) : 1'b1;
  assign wbuf_we  = cfg_mask & {N_SLICES{s0_valid && cfg_target == 2'd1}};
  assign prm_we   = cfg_mask & {N_SLICES{s0_valid && cfg_target == 2'd2}};
  assign ld_wdata = s0_data;

  logic [WAW-1:0] ld_cnt;
  assign wbuf_waddr = ld_cnt;
  assign prm_addr   = ld_cnt[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_cnt <= '0;
    else if (cfg_clear) ld_cnt <= '0;
    else if (s0_valid && !s0_events) ld_cnt <= ld_cnt + 1'b1;
  end
endmodule
