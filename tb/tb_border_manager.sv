// tb_border_manager: border replacement multiplexers.  A raw window is
// filled with distinct markers (i*WIN+j+1) and, for every centre position of
// a small image and every policy, the output window is compared with a
// table-free model: the source row/column of each tap is mirrored, clamped
// or replaced by the constant, and the marker expected is that of the raw
// window position holding that source pixel.
module tb_border_manager;
  import filter_pkg::*;
  import filter_ref_pkg::*;
  localparam int WIN = 7, PIX_W = 8, IMG_W = 9, IMG_H = 6, HALF = (WIN - 1) / 2;
  localparam int RW = $clog2(IMG_H), CW = $clog2(IMG_W);
  logic [PIX_W-1:0] win  [WIN][WIN];
  logic [PIX_W-1:0] bwin [WIN][WIN];
  logic [RW-1:0] row;
  logic [CW-1:0] col;
  border_mode_e mode;
  logic [PIX_W-1:0] const_pix;
  int checks = 0, failures = 0;
  int n_replaced = 0;

  border_manager #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < WIN; i++)
      for (int j = 0; j < WIN; j++) win[i][j] = PIX_W'(i * WIN + j + 1);
    const_pix = 8'd200;
    for (int m = 0; m < 4; m++) begin
      mode = border_mode_e'(m);
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) begin
          row = RW'(r); col = CW'(c);
          #1;
          for (int i = 0; i < WIN; i++)
            for (int j = 0; j < WIN; j++) begin
              int sr, sc, e;
              sr = src_index(r + i - HALF, IMG_H, mode);
              sc = src_index(c + j - HALF, IMG_W, mode);
              e = (sr < 0 || sc < 0) ? 200 : (sr - r + HALF) * WIN + (sc - c + HALF) + 1;
              if (e != i * WIN + j + 1) n_replaced++;
              checks++;
              if (int'(bwin[i][j]) != e) begin
                failures++;
                if (failures < 10) $display("FAIL mode %0d (%0d,%0d) tap (%0d,%0d): %0d exp %0d",
                                            m, r, c, i, j, bwin[i][j], e);
              end
            end
        end
    end
    checks++;
    if (n_replaced == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
