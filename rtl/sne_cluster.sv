// sne_cluster: one SNE cluster, 64 leaky-integrate-and-fire (LIF) neurons that
// share a single datapath in time-domain multiplexing.
//
// The 64 neurons form an 8x8 tile of output pixels, origin (x0, y0), of output
// channel oc. For every input spike the slice sequencer presents the event
// (ev_x, ev_y, ev_c) for nine steps k = 0..8, one per kernel tap
// (kx = k % 3, ky = k / 3). The address filter keeps the event only if its
// 3x3 receptive field touches the tile; the address shift turns step k into
// the neuron (xo, yo) = (ev_x + 1 - kx, ev_y + 1 - ky) and, if that neuron is
// inside the tile, the datapath updates it in the same cycle with the
// weight w_data = w[ev_c][k] supplied by the slice's shared weight buffer.
// The update fuses the leak and the spike: the neuron memory keeps the
// potential v and the time of last update t_last; dt = cur_time - t_last
// selects a decay coefficient from the LUT (dt = 0: no decay; 1 <= dt <= LUT_N:
// v = (v * lut[dt-1]) >>> 8; larger dt: v = 0), then v += w (saturating at
// 8 bits), t_last = cur_time. If v >= thr, the neuron fires: an output spike
// (xo, yo, oc) is placed in the output register and v is cleared.
// The 64-neuron / 8-bit / 4-bit / LUT-of-cumulative-decay scheme follows the
// paper; the tile mapping, LUT indexing, fixed-point format and reset-to-zero
// are this design's choices.
// Timing: one neuron update per step cycle. stall is high while the output
// register holds a spike the collector has not taken; the sequencer then holds
// the step. init_we zeroes neuron init_addr (memory initialisation per tile).
module sne_cluster
  import sne_pkg::*;
#(
  parameter int unsigned TILE  = 8,
  parameter int unsigned V_W   = 8,
  parameter int unsigned W_W   = 4,
  parameter int unsigned T_W   = 16,
  parameter int unsigned LUT_N = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // mapping
  input  logic [7:0]                x0,
  input  logic [7:0]                y0,
  input  logic [7:0]                oc,
  // neuron memory initialisation
  input  logic                      init_we,
  input  logic [$clog2(TILE*TILE)-1:0] init_addr,
  // sequencer
  input  logic                      step_valid,
  input  logic [3:0]                step_k,
  input  logic [7:0]                ev_x,
  input  logic [7:0]                ev_y,
  input  logic [T_W-1:0]            cur_time,
  // shared parameters and weight
  input  logic signed [V_W-1:0]     thr,
  input  logic [7:0]                lut [LUT_N],
  input  logic signed [W_W-1:0]     w_data,
  // output spike
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [31:0]               out_data,
  output logic                      stall
);
  localparam int unsigned N  = TILE * TILE;
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned TW = $clog2(TILE);
  localparam logic signed [9:0] TS = 10'(TILE);

  logic signed [V_W-1:0] vmem [N];
  logic [T_W-1:0]        tmem [N];

  // ---------------- address filter ----------------
  logic signed [9:0] rx, ry;      // event position relative to the tile origin
  logic              in_field;
  assign rx = signed'({2'b00, ev_x}) - signed'({2'b00, x0});
  assign ry = signed'({2'b00, ev_y}) - signed'({2'b00, y0});
  assign in_field = (rx >= -10'sd1) && (rx <= TS) && (ry >= -10'sd1) && (ry <= TS);

  // ---------------- address shift ----------------
  logic [1:0]        kx, ky;
  logic signed [9:0] lx, ly;      // neuron position inside the tile
  logic signed [9:0] gx, gy;      // neuron position in the output map
  logic              hit;
  logic [NW-1:0]     nidx;
  always_comb begin
    kx = 2'(step_k % 4'd3);
    ky = 2'(step_k / 4'd3);
    lx = rx + 10'sd1 - signed'({8'd0, kx});
    ly = ry + 10'sd1 - signed'({8'd0, ky});
    gx = signed'({2'b00, ev_x}) + 10'sd1 - signed'({8'd0, kx});
    gy = signed'({2'b00, ev_y}) + 10'sd1 - signed'({8'd0, ky});
    hit = step_valid && in_field && (step_k < 4'd9) &&
          (lx >= 10'sd0) && (lx < TS) && (ly >= 10'sd0) && (ly < TS);
    nidx = NW'({ly[TW-1:0], lx[TW-1:0]});
  end

  // ---------------- LIF datapath ----------------
  logic signed [V_W-1:0]   v_old, v_dec;
  logic [T_W-1:0]          dt, lidx;
  logic signed [V_W+9:0]   prod;
  logic signed [V_W+1:0]   v_sum;
  logic signed [V_W-1:0]   v_new;
  logic                    fire;
  localparam logic signed [V_W+1:0] VMAX = (V_W+2)'((1 << (V_W-1)) - 1);
  localparam logic signed [V_W+1:0] VMIN = -(V_W+2)'(1 << (V_W-1));

  always_comb begin
    v_old = vmem[nidx];
    dt    = cur_time - tmem[nidx];
    prod  = '0;
    lidx  = '0;
    if (dt == '0) begin
      v_dec = v_old;
    end else if (dt <= T_W'(LUT_N)) begin
      lidx  = dt - 1'b1;
      prod  = (V_W+10)'(v_old) * signed'({10'd0, lut[lidx[$clog2(LUT_N)-1:0]]});
      v_dec = V_W'(prod >>> 8);
    end else begin
      v_dec = '0;
    end
    v_sum = (V_W+2)'(v_dec) + (V_W+2)'(w_data);
    if (v_sum > VMAX)      v_new = VMAX[V_W-1:0];
    else if (v_sum < VMIN) v_new = VMIN[V_W-1:0];
    else                   v_new = v_sum[V_W-1:0];
    fire = (v_new >= thr);
  end

  assign stall = out_valid && !out_ready;

  always_ff @(posedge clk) begin
    if (init_we) begin
      vmem[init_addr] <= '0;
      tmem[init_addr] <= '0;
    end else if (hit) begin
      vmem[nidx] <= fire ? '0 : v_new;
      tmem[nidx] <= cur_time;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (hit && fire) begin
      out_valid <= 1'b1;
      out_data  <= mk_spike(gx[7:0], gy[7:0], oc);
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  // the sequencer never steps while the output register is blocked
  a_no_step_on_stall: assert property (@(posedge clk) disable iff (!rst_n)
    stall |-> !step_valid);
endmodule
