// cutie_tile_buffer: CUTIE's sliding-window buffer.
//
// Compressed pixels read from the feature-map memory are decompressed on entry
// and stored as N_I trits; the buffer keeps three image rows (row y in slot
// y % 3). For a centre pixel (cx, cy) it outputs, combinationally, the 3x3
// window of N_I-trit pixels (tap t = 3*dy+dx holds pixel (cx+dx-1, cy+dy-1)),
// with zeros for positions outside the img_w x img_h image ("same" padding).
// The window is broadcast to all OCUs. Building square windows by sliding over
// the input map is the paper's; the three-row organisation and zero padding
// are this design's.
// Write: wr_en stores wr_data (compressed) as pixel (wr_x, wr_y).
module cutie_tile_buffer
  import cutie_pkg::*;
#(
  parameter int unsigned N_I   = 96,
  parameter int unsigned IMG_W = 32,
  parameter int unsigned IMG_H = 32,
  parameter int unsigned NB    = (N_I + 4) / 5,
  parameter int unsigned XW    = $clog2(IMG_W + 1),
  parameter int unsigned YW    = $clog2(IMG_H + 1)
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [XW-1:0]         wr_x,
  input  logic [YW-1:0]         wr_y,
  input  logic [8*NB-1:0]       wr_data,
  input  logic [XW-1:0]         img_w,
  input  logic [YW-1:0]         img_h,
  input  logic [XW-1:0]         cx,
  input  logic [YW-1:0]         cy,
  output logic [2*9*N_I-1:0]    win
);
  logic [2*N_I-1:0] rows [3][IMG_W];
  logic [2*N_I-1:0] wr_trits;

  cutie_decompressor #(.N_TRITS(N_I)) i_decompr (.code(wr_data), .trits(wr_trits));

  always_ff @(posedge clk) begin
    if (wr_en) rows[2'(wr_y % YW'(3))][wr_x[$clog2(IMG_W)-1:0]] <= wr_trits;
  end

  always_comb begin
    win = '0;
    for (int dy = 0; dy < 3; dy++) begin
      for (int dx = 0; dx < 3; dx++) begin
        int px, py;
        px = int'(cx) + dx - 1;
        py = int'(cy) + dy - 1;
        if (px >= 0 && px < int'(img_w) && py >= 0 && py < int'(img_h))
          win[2*N_I*(3*dy+dx) +: 2*N_I] = rows[py % 3][px % IMG_W];
      end
    end
  end
endmodule
