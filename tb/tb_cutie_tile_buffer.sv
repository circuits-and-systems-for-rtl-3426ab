// tb_cutie_tile_buffer: checks CUTIE's 3-row tile buffer at the paper's 96
// channels on a 32x32 map (and a random smaller active map size). Rows are
// written in image order, compressed, as the controller does; once row y+1
// is in, every window centred on row y is compared with a reference 3x3 window
// taken from the whole image, with zeros outside the active map.
module tb_cutie_tile_buffer;
  import cutie_pkg::*;
  localparam int N_I = 96, IMG_W = 32, IMG_H = 32, NB = (N_I + 4) / 5;
  localparam int XW = $clog2(IMG_W + 1), YW = $clog2(IMG_H + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [XW-1:0] wr_x = 0, img_w = 0, cx = 0;
  logic [YW-1:0] wr_y = 0, img_h = 0, cy = 0;
  logic [8*NB-1:0] wr_data = 0;
  logic [2*9*N_I-1:0] win;
  int checks = 0, failures = 0;
  logic [2*N_I-1:0] img [IMG_H][IMG_W];

  cutie_tile_buffer #(.N_I(N_I), .IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic write_row(int y, int w);
    for (int x = 0; x < w; x++) begin
      @(negedge clk);
      wr_en = 1; wr_x = XW'(x); wr_y = YW'(y);
      for (int k = 0; k < NB; k++) begin
        logic [1:0] q [5];
        for (int i = 0; i < 5; i++) q[i] = (5 * k + i < N_I) ? img[y][x][2*(5*k+i) +: 2] : T_ZERO;
        wr_data[8*k +: 8] = pack5(q[0], q[1], q[2], q[3], q[4]);
      end
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_row(int y, int w, int h);
    for (int x = 0; x < w; x++) begin
      logic [2*9*N_I-1:0] e;
      cx = XW'(x); cy = YW'(y);
      e = '0;
      for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) begin
        int xx, yy; xx = x + dx - 1; yy = y + dy - 1;
        if (xx >= 0 && xx < w && yy >= 0 && yy < h) e[2*N_I*(3*dy+dx) +: 2*N_I] = img[yy][xx];
      end
      #1;
      checks++;
      if (win !== e) begin failures++; $display("window (%0d,%0d) mismatch", x, y); end
    end
  endtask

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      int w, h;
      w = (pass == 0) ? IMG_W : $urandom_range(4, IMG_W);
      h = (pass == 0) ? IMG_H : $urandom_range(4, IMG_H);
      img_w = XW'(w); img_h = YW'(h);
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
        for (int c = 0; c < N_I; c++) begin
          int r; r = $urandom_range(0, 2);
          img[y][x][2*c +: 2] = (r == 2) ? T_POS : (r == 0) ? T_NEG : T_ZERO;
        end
      write_row(0, w);
      for (int y = 0; y < h; y++) begin
        if (y + 1 < h) write_row(y + 1, w);
        check_row(y, w, h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
