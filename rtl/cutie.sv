// cutie: the Completely Unrolled Ternary Inference Engine, a ternary-network
// accelerator that computes all N_O output channels of a 3x3 convolution
// layer for one output pixel per cycle.
//
// Data flow: input pixels (N_I trits, compressed five per byte) sit in one bank
// of the double-buffered feature-map memory. The controller copies image rows
// into the tile buffer, which builds the zero-padded 3x3 window of every pixel
// and broadcasts it to the N_O output channel compute units (cutie_ocu). Each
// OCU produces one output trit per pixel (after optional 2x2 pooling); the N_O
// trits are compressed and written back to the other feature-map bank. Layers
// run back to back without the host: layer l reads bank l%2 and writes bank
// (l+1)%2. Weights of all layers live in the on-chip weight memories; the
// weights of layer 0 are loaded into the OCU weight buffers before the first
// layer, and those of layer l+1 are loaded into the idle half of the double
// buffer while layer l computes, so a layer switch costs no load time. After
// the last layer CUTIE pulses eoi (end of inference) and STATUS tells which bank
// holds the result.
// Per output row y the controller first loads any of rows y, y+1 not yet in the
// tile buffer (W+1 cycles per row), then issues W windows, one per cycle.
//
// Register map (APB, this design's choice):
//   0x00 CTRL   [0] start inference (input image in bank 0)
//   0x04 STATUS [0] busy, [1] eoi seen (cleared by start), [2] result bank
//   0x08 NUM_LAYERS
//   0x0C CYCLES  cycles of the last inference (start to eoi)
//   0x10 OVERLAP number of layer switches whose weights were already pre-loaded
//   0x40 + 4*l  LAYER l: [5:0] input width, [13:8] input height,
//               [16] pooling enable, [17] pooling = sum (1) / max (0)
// Feature-map host port (h_*) and weight write port (w_*) are the chip's
// input-image and weight target ports.
module cutie
  import cutie_pkg::*;
#(
  parameter int unsigned N_O      = 96,
  parameter int unsigned N_I      = 96,
  parameter int unsigned IMG_W    = 32,
  parameter int unsigned IMG_H    = 32,
  parameter int unsigned N_LAYERS = 8,
  parameter int unsigned NB       = (N_I + 4) / 5,
  parameter int unsigned FW       = $clog2(IMG_W * IMG_H),
  parameter int unsigned WDEPTH   = 10 * N_LAYERS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // APB
  input  logic                      psel,
  input  logic                      penable,
  input  logic                      pwrite,
  input  logic [7:0]                paddr,
  input  logic [31:0]               pwdata,
  output logic [31:0]               prdata,
  output logic                      pready,
  // weight target port
  input  logic                      w_we,
  input  logic [$clog2(N_O)-1:0]    w_ocu,
  input  logic [$clog2(WDEPTH)-1:0] w_addr,
  input  logic [8*NB-1:0]           w_wdata,
  // feature-map target port
  input  logic                      h_req,
  input  logic                      h_we,
  input  logic                      h_bank,
  input  logic [FW-1:0]             h_addr,
  input  logic [8*NB-1:0]           h_wdata,
  output logic                      h_gnt,
  output logic [8*NB-1:0]           h_rdata,
  // end of inference
  output logic                      eoi
);
  localparam int unsigned XW = $clog2(IMG_W + 1);
  localparam int unsigned YW = $clog2(IMG_H + 1);
  localparam int unsigned LW = $clog2(N_LAYERS + 1);
  localparam int unsigned WAW = $clog2(WDEPTH);

  // ---------------- registers ----------------
  logic [LW-1:0] num_layers;
  logic [5:0]    l_w [N_LAYERS];
  logic [5:0]    l_h [N_LAYERS];
  logic          l_pool [N_LAYERS];
  logic          l_avg  [N_LAYERS];
  logic          start, busy, eoi_flag, res_bank;
  logic [31:0]   cycles, overlap_cnt;

  assign pready = 1'b1;
  assign start  = psel && penable && pwrite && paddr == 8'h00 && pwdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_layers <= LW'(1);
      for (int l = 0; l < N_LAYERS; l++) begin
        l_w[l] <= 6'(IMG_W); l_h[l] <= 6'(IMG_H); l_pool[l] <= 1'b0; l_avg[l] <= 1'b0;
      end
    end else if (psel && penable && pwrite) begin
      if (paddr == 8'h08) num_layers <= LW'(pwdata);
      for (int l = 0; l < N_LAYERS; l++)
        if (paddr == 8'(8'h40 + 4 * l)) begin
          l_w[l]    <= pwdata[5:0];
          l_h[l]    <= pwdata[13:8];
          l_pool[l] <= pwdata[16];
          l_avg[l]  <= pwdata[17];
        end
    end
  end

  always_comb begin
    prdata = '0;
    case (paddr)
      8'h04: prdata = {29'd0, res_bank, eoi_flag, busy};
      8'h08: prdata = 32'(num_layers);
      8'h0C: prdata = cycles;
      8'h10: prdata = overlap_cnt;
      default: begin
        for (int l = 0; l < N_LAYERS; l++)
          if (paddr == 8'(8'h40 + 4 * l))
            prdata = {14'd0, l_avg[l], l_pool[l], 2'd0, l_h[l], 2'd0, l_w[l]};
      end
    endcase
  end

  // ---------------- weight memories and loader ----------------
  logic [8*NB-1:0] wm_rdata [N_O];
  logic            wl_re, wl_busy, wl_we_q, wl_bank, wl_bank_q;
  logic [WAW-1:0]  wl_addr;
  logic [3:0]      wl_tap, wl_tap_q;
  logic            wl_start;
  logic [LW-1:0]   wl_layer;

  cutie_weight_mem #(.N_O(N_O), .DEPTH(WDEPTH), .W(8*NB)) i_wmem (
    .clk, .we(w_we), .wocu(w_ocu), .waddr(w_addr), .wdata(w_wdata),
    .re(wl_re), .raddr(wl_addr), .rdata(wm_rdata)
  );

  assign wl_re   = wl_busy;
  assign wl_addr = WAW'(10 * int'(wl_layer) + int'(wl_tap));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_busy <= 1'b0; wl_tap <= '0; wl_we_q <= 1'b0; wl_tap_q <= '0; wl_bank_q <= 1'b0;
    end else begin
      wl_we_q   <= wl_busy;
      wl_tap_q  <= wl_tap;
      wl_bank_q <= wl_bank;
      if (wl_start) begin
        wl_busy <= 1'b1;
        wl_tap  <= '0;
      end else if (wl_busy) begin
        if (wl_tap == 4'd9) wl_busy <= 1'b0;
        wl_tap <= wl_tap + 1'b1;
      end
    end
  end

  // ---------------- controller ----------------
  typedef enum logic [2:0] {C_IDLE, C_WLOAD, C_ROWLOAD, C_COMPUTE, C_DRAIN, C_NEXT} cstate_e;
  cstate_e state;
  logic [LW-1:0] layer;
  logic          in_bank, wbank;
  logic [YW-1:0] y, rows_loaded;
  logic [XW-1:0] x;
  logic [XW-1:0] cur_w;
  logic [YW-1:0] cur_h;
  logic [2:0]    drain;
  logic          pre_pending;        // next layer's weights not yet loaded
  logic          rl_issue, rl_wr;
  logic [XW-1:0] rl_x_q;
  logic [FW-1:0] out_cnt;

  assign cur_w = XW'(l_w[layer]);
  assign cur_h = YW'(l_h[layer]);
  assign busy  = (state != C_IDLE);

  // loader start: layer 0 before compute, layer l+1 at the start of layer l
  always_comb begin
    wl_start = 1'b0;
    wl_layer = layer;
    wl_bank  = wbank;
    if (state == C_IDLE && start) begin
      wl_start = 1'b1;
    end
    if (state != C_IDLE && state != C_WLOAD) begin
      wl_layer = layer + 1'b1;
      wl_bank  = !wbank;
    end
    if (state == C_ROWLOAD && pre_pending && !wl_busy) wl_start = 1'b1;
  end

  assign rl_issue = (state == C_ROWLOAD) && (x < cur_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      layer <= '0; in_bank <= 1'b0; wbank <= 1'b0;
      y <= '0; x <= '0; rows_loaded <= '0; drain <= '0;
      pre_pending <= 1'b0; rl_wr <= 1'b0; rl_x_q <= '0;
      eoi <= 1'b0; eoi_flag <= 1'b0; res_bank <= 1'b0;
      cycles <= '0; overlap_cnt <= '0;
    end else begin
      eoi   <= 1'b0;
      rl_wr <= rl_issue;
      rl_x_q <= x;
      if (busy) cycles <= cycles + 1;
      case (state)
        C_IDLE: if (start) begin
          state <= C_WLOAD;
          layer <= '0; in_bank <= 1'b0; wbank <= 1'b0;
          eoi_flag <= 1'b0; cycles <= 32'd1; overlap_cnt <= '0;
        end
        C_WLOAD: if (!wl_busy && !wl_we_q) begin
          state <= C_ROWLOAD;
          y <= '0; x <= '0; rows_loaded <= '0;
          pre_pending <= (32'(layer) + 1 < 32'(num_layers));
        end
        C_ROWLOAD: begin
          if (pre_pending && !wl_busy) pre_pending <= 1'b0;
          if (x < cur_w) x <= x + 1'b1;
          else begin
            // row fully issued; its last word is written this cycle
            rows_loaded <= rows_loaded + 1'b1;
            x <= '0;
            if (!((rows_loaded + 1'b1 <= y + 1'b1) && (rows_loaded + 1'b1 < cur_h)))
              state <= C_COMPUTE;
          end
        end
        C_COMPUTE: begin
          if (x == cur_w - 1'b1) begin
            x <= '0;
            y <= y + 1'b1;
            if (y == cur_h - 1'b1) begin
              state <= C_DRAIN;
              drain <= '0;
            end else if (rows_loaded < cur_h) state <= C_ROWLOAD;
          end else x <= x + 1'b1;
        end
        C_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd4 && !wl_busy && !wl_we_q) state <= C_NEXT;
        end
        default: begin // C_NEXT
          if (32'(layer) + 1 < 32'(num_layers)) begin
            overlap_cnt <= overlap_cnt + 1;
            layer   <= layer + 1'b1;
            in_bank <= !in_bank;
            wbank   <= !wbank;
            y <= '0; x <= '0; rows_loaded <= '0;
            pre_pending <= (32'(layer) + 2 < 32'(num_layers));
            state <= C_ROWLOAD;
          end else begin
            state    <= C_IDLE;
            eoi      <= 1'b1;
            eoi_flag <= 1'b1;
            res_bank <= !in_bank;
          end
        end
      endcase
    end
  end

  // ---------------- feature-map memory ----------------
  logic [8*NB-1:0] fm_rdata, wb_data;
  logic            wb_en;

  cutie_fmap_mem #(.WORDS(IMG_W * IMG_H), .W(8*NB)) i_fmap (
    .clk,
    .rd_en(rl_issue), .rd_bank(in_bank),
    .rd_addr(FW'(int'(rows_loaded) * int'(cur_w) + int'(x))), .rd_data(fm_rdata),
    .wb_en, .wb_bank(!in_bank), .wb_addr(out_cnt), .wb_data,
    .h_req, .h_we, .h_bank, .h_addr, .h_wdata, .h_gnt, .h_rdata
  );

  // ---------------- tile buffer ----------------
  logic [2*9*N_I-1:0] win;
  logic               win_valid;

  cutie_tile_buffer #(.N_I(N_I), .IMG_W(IMG_W), .IMG_H(IMG_H)) i_tile (
    .clk,
    .wr_en(rl_wr), .wr_x(rl_x_q), .wr_y(rows_loaded), .wr_data(fm_rdata),
    .img_w(cur_w), .img_h(cur_h), .cx(x), .cy(y), .win
  );

  assign win_valid = (state == C_COMPUTE);

  // ---------------- OCUs ----------------
  logic [N_O-1:0]   o_valid;
  logic [2*N_O-1:0] o_trits;

  for (genvar o = 0; o < N_O; o++) begin : g_ocu
    logic signed [15:0] value;
    cutie_ocu #(.N_I(N_I), .K(3), .IMG_W(IMG_W)) i_ocu (
      .clk, .rst_n,
      .wb_we(wl_we_q), .wb_bank(wl_bank_q), .wb_tap(wl_tap_q), .wb_data(wm_rdata[o]),
      .bank_sel(wbank),
      .win_valid, .win,
      .pool_en(l_pool[layer]), .pool_avg(l_avg[layer]),
      .px(x[$clog2(IMG_W)-1:0]), .row_odd(y[0]),
      .out_valid(o_valid[o]), .out_trit(o_trits[2*o +: 2]), .out_value(value)
    );
  end

  // ---------------- compression and write-back ----------------
  cutie_compressor #(.N_TRITS(N_O)) i_compr (.trits(o_trits), .code(wb_data));
  assign wb_en = o_valid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_cnt <= '0;
    else if (state == C_WLOAD || state == C_NEXT) out_cnt <= '0;
    else if (wb_en) out_cnt <= out_cnt + 1'b1;
  end

  // all OCUs run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    o_valid == '0 || o_valid == '1);
endmodule
