// sne: the Sparse Neural Engine, an event-driven accelerator for spiking
// convolutional networks with 3x3, 4-bit kernels and 8-bit LIF neurons.
//
// Structure: an APB register file programs two streamers (DMA engines on two
// L2 master ports), a crossbar (sne_xbar), eight slices (sne_slice, 16
// clusters x 64 neurons each) and a collector that merges the slices' output
// streams. A layer tile is run as in the paper's schedule: load weights and
// parameters through streamer 0 (crossbar target weights / params), clear the
// neuron memories (CTRL.init), open streamer 1 for output events, then stream
// the input events through streamer 0. When the input stream is consumed and
// every slice, collector and the write path are idle, SNE raises eoc for one
// cycle (the end-of-execution event that wakes the host) and sets STATUS.eoc.
//
// Register map (APB, word offsets; this design's choice):
//   0x00 CTRL   (write 1 to act) [0] start streamer 0, [1] start streamer 1,
//               [2] clear neuron memories of the masked slices,
//               [3] stop streamer 1, [4] clear STATUS.eoc, [5] reset load address
//   0x04 STATUS [0] streamer 0 busy, [1] streamer 1 open, [2] slices busy, [3] eoc
//   0x08 S0_BASE  0x0C S0_LEN (words)  0x10 S1_BASE  0x14 S1_COUNT (read only)
//   0x18 XBAR   [1:0] target, [2] in_src, [3] out_dst, [15:8] slice mask
//   0x20 + 4*s  SLICE s: [7:0] x_base, [15:8] y_base, [23:16] output channel
// pready is always 1; register reads return in the access phase.
module sne
  import sne_pkg::*;
#(
  parameter int unsigned N_SLICES = 8,
  parameter int unsigned MAX_CIN  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // APB
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [7:0]  paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  // L2 ports of streamer 0 (read) and streamer 1 (write)
  output logic [1:0]  mem_req,
  output logic [1:0]  mem_we,
  output logic [31:0] mem_addr  [2],
  output logic [31:0] mem_wdata [2],
  input  logic [1:0]  mem_gnt,
  input  logic [1:0]  mem_rvalid,
  input  logic [31:0] mem_rdata [2],
  // end-of-execution event
  output logic        eoc
);
  localparam int unsigned WAW = $clog2(MAX_CIN * 9 / 8);

  // ---------------- registers ----------------
  logic [31:0] s0_base, s0_len, s1_base;
  logic [1:0]  x_target;
  logic        x_in_src, x_out_dst;
  logic [N_SLICES-1:0] x_mask;
  logic [7:0]  sl_x [N_SLICES];
  logic [7:0]  sl_y [N_SLICES];
  logic [7:0]  sl_oc [N_SLICES];
  logic        eoc_flag, running;
  logic        wr_acc;
  logic        c_s0_start, c_s1_start, c_init, c_s1_stop, c_eoc_clr, c_ld_clr;

  logic        s0_busy, s1_busy;
  logic [31:0] s0_count, s1_count;
  logic [N_SLICES-1:0] sl_busy;
  logic        top_empty, idle;

  assign pready = 1'b1;
  assign wr_acc = psel && penable && pwrite;
  assign c_s0_start = wr_acc && paddr == 8'h00 && pwdata[0];
  assign c_s1_start = wr_acc && paddr == 8'h00 && pwdata[1];
  assign c_init     = wr_acc && paddr == 8'h00 && pwdata[2];
  assign c_s1_stop  = wr_acc && paddr == 8'h00 && pwdata[3];
  assign c_eoc_clr  = wr_acc && paddr == 8'h00 && pwdata[4];
  assign c_ld_clr   = (wr_acc && paddr == 8'h00 && pwdata[5]) || c_s0_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_base <= '0; s0_len <= '0; s1_base <= '0;
      x_target <= '0; x_in_src <= 1'b0; x_out_dst <= 1'b0; x_mask <= '1;
      for (int s = 0; s < N_SLICES; s++) begin
        sl_x[s] <= '0; sl_y[s] <= '0; sl_oc[s] <= 8'(s);
      end
    end else if (wr_acc) begin
      case (paddr)
        8'h08: s0_base <= pwdata;
        8'h0C: s0_len  <= pwdata;
        8'h10: s1_base <= pwdata;
        8'h18: begin
          x_target  <= pwdata[1:0];
          x_in_src  <= pwdata[2];
          x_out_dst <= pwdata[3];
          x_mask    <= pwdata[8 +: N_SLICES];
        end
        default: begin
          for (int s = 0; s < N_SLICES; s++)
            if (paddr == 8'(8'h20 + 4 * s)) begin
              sl_x[s]  <= pwdata[7:0];
              sl_y[s]  <= pwdata[15:8];
              sl_oc[s] <= pwdata[23:16];
            end
        end
      endcase
    end
  end

  always_comb begin
    prdata = '0;
    case (paddr)
      8'h04: prdata = {28'd0, eoc_flag, |sl_busy, s1_busy, s0_busy};
      8'h08: prdata = s0_base;
      8'h0C: prdata = s0_len;
      8'h10: prdata = s1_base;
      8'h14: prdata = s1_count;
      8'h18: prdata = {16'd0, 8'(x_mask), 4'd0, x_out_dst, x_in_src, x_target};
      default: begin
        for (int s = 0; s < N_SLICES; s++)
          if (paddr == 8'(8'h20 + 4 * s)) prdata = {8'd0, sl_oc[s], sl_y[s], sl_x[s]};
      end
    endcase
  end

  // ---------------- streamers ----------------
  logic        s0_valid, s0_ready, s1_valid, s1_ready;
  logic [31:0] s0_data, s1_data;
  logic        unused_s0_wr_ready, unused_s0_wr_empty, s1_wr_empty;

  sne_streamer i_streamer0 (
    .clk, .rst_n, .start(c_s0_start), .stop(1'b0), .mode(1'b0),
    .base(s0_base), .len(s0_len), .busy(s0_busy), .count(s0_count),
    .mem_req(mem_req[0]), .mem_we(mem_we[0]), .mem_addr(mem_addr[0]), .mem_wdata(mem_wdata[0]),
    .mem_gnt(mem_gnt[0]), .mem_rvalid(mem_rvalid[0]), .mem_rdata(mem_rdata[0]),
    .rd_valid(s0_valid), .rd_ready(s0_ready), .rd_data(s0_data),
    .wr_valid(1'b0), .wr_ready(unused_s0_wr_ready), .wr_data(32'd0),
    .wr_empty(unused_s0_wr_empty)
  );

  logic unused_s1_rd_valid;
  logic [31:0] unused_s1_rd_data;
  sne_streamer i_streamer1 (
    .clk, .rst_n, .start(c_s1_start), .stop(c_s1_stop), .mode(1'b1),
    .base(s1_base), .len(32'd0), .busy(s1_busy), .count(s1_count),
    .mem_req(mem_req[1]), .mem_we(mem_we[1]), .mem_addr(mem_addr[1]), .mem_wdata(mem_wdata[1]),
    .mem_gnt(mem_gnt[1]), .mem_rvalid(mem_rvalid[1]), .mem_rdata(mem_rdata[1]),
    .rd_valid(unused_s1_rd_valid), .rd_ready(1'b1), .rd_data(unused_s1_rd_data),
    .wr_valid(s1_valid), .wr_ready(s1_ready), .wr_data(s1_data),
    .wr_empty(s1_wr_empty)
  );

  // ---------------- crossbar ----------------
  logic        col_valid, col_ready;
  logic [31:0] col_data;
  logic [N_SLICES-1:0] sl_in_valid, sl_in_ready, wbuf_we, prm_we;
  logic [31:0] sl_in_data, ld_wdata;
  logic [WAW-1:0] wbuf_waddr;
  logic [2:0]  prm_addr;

  sne_xbar #(.N_SLICES(N_SLICES), .WAW(WAW)) i_xbar (
    .clk, .rst_n,
    .cfg_target(x_target), .cfg_in_src(x_in_src), .cfg_out_dst(x_out_dst),
    .cfg_mask(x_mask), .cfg_clear(c_ld_clr),
    .s0_valid, .s0_ready, .s0_data,
    .col_valid, .col_ready, .col_data,
    .s1_valid, .s1_ready, .s1_data,
    .sl_valid(sl_in_valid), .sl_ready(sl_in_ready), .sl_data(sl_in_data),
    .wbuf_we, .wbuf_waddr, .prm_we, .prm_addr, .ld_wdata
  );

  // ---------------- slices ----------------
  logic [N_SLICES-1:0] so_valid, so_ready;
  logic [31:0]         so_data [N_SLICES];

  for (genvar s = 0; s < N_SLICES; s++) begin : g_slice
    sne_slice #(.MAX_CIN(MAX_CIN)) i_slice (
      .clk, .rst_n,
      .x_base(sl_x[s]), .y_base(sl_y[s]), .oc(sl_oc[s]),
      .init_start(c_init && x_mask[s]),
      .wbuf_we(wbuf_we[s]), .wbuf_waddr, .wbuf_wdata(ld_wdata),
      .prm_we(prm_we[s]), .prm_addr, .prm_wdata(ld_wdata),
      .in_valid(sl_in_valid[s]), .in_ready(sl_in_ready[s]), .in_data(sl_in_data),
      .out_valid(so_valid[s]), .out_ready(so_ready[s]), .out_data(so_data[s]),
      .busy(sl_busy[s])
    );
  end

  sne_collector #(.N_IN(N_SLICES), .DEPTH(2)) i_collector (
    .clk, .rst_n,
    .in_valid(so_valid), .in_ready(so_ready), .in_data(so_data),
    .out_valid(col_valid), .out_ready(col_ready), .out_data(col_data),
    .empty(top_empty)
  );

  // ---------------- end of execution ----------------
  assign idle = !s0_busy && (sl_busy == '0) && top_empty && !col_valid && s1_wr_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      eoc      <= 1'b0;
      eoc_flag <= 1'b0;
    end else begin
      eoc <= 1'b0;
      if (c_eoc_clr) eoc_flag <= 1'b0;
      if (c_s0_start && x_target == 2'd0) running <= 1'b1;
      else if (running && idle) begin
        running  <= 1'b0;
        eoc      <= 1'b1;
        eoc_flag <= 1'b1;
      end
    end
  end
endmodule
