// border_manager: border pixel replacement multiplexers.
//
// For an output pixel near the image edge part of the WIN x WIN window
// lies outside the image.  Because the pipeline never stalls, those window
// positions then hold pixels of the neighbouring row, the previous frame
// or the next frame (priming of one frame overlaps flushing of the last).
// This block replaces them, so the output image has the input's size:
//   BORDER_CONST      - by the constant 'const_pix'
//   BORDER_REPLICATE  - by the nearest edge pixel
//   BORDER_MIRROR_DUP - by the mirror image, edge pixel repeated
//   BORDER_MIRROR     - by the mirror image, edge pixel not repeated
// For all four policies a replacement pixel either is a constant or lies
// inside the same raw window, so the block is a row multiplexer followed by
// a column multiplexer, with select values computed from the centre pixel's
// row and column (filter_pkg::border_map).  Rows and columns are handled
// independently, which also gives the corners.
//
// Purely combinational: 'row', 'col', 'mode' and 'const_pix' must belong to
// the window presented on 'win' in the same cycle.  The mirror policies
// need IMG_W and IMG_H of at least (WIN+1)/2.
//
// Following the published filter architecture: replacing out-of-image window pixels by multiplexers
// so that priming and flushing overlap and the stream never stalls, with
// the four extension policies.  This implementation's own choice: selecting
// the replacement from the raw window itself instead of from extra
// temporary pixel registers.
module border_manager
  import filter_pkg::*;
#(
  parameter int unsigned WIN   = DEF_WIN,
  parameter int unsigned PIX_W = DEF_PIX_W,
  parameter int unsigned IMG_W = DEF_IMG_W,
  parameter int unsigned IMG_H = DEF_IMG_H,
  localparam int unsigned RW   = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int unsigned CW   = (IMG_W > 1) ? $clog2(IMG_W) : 1,
  localparam int unsigned SW   = (WIN > 1) ? $clog2(WIN) : 1
) (
  input  logic [PIX_W-1:0] win  [WIN][WIN],
  input  logic [RW-1:0]    row,
  input  logic [CW-1:0]    col,
  input  border_mode_e     mode,
  input  logic [PIX_W-1:0] const_pix,
  output logic [PIX_W-1:0] bwin [WIN][WIN]
);

  localparam int HALF = (WIN - 1) / 2;

  logic [SW-1:0] rsel [WIN];
  logic [SW-1:0] csel [WIN];
  logic          rcon [WIN];
  logic          ccon [WIN];

  always_comb begin
    int m;
    for (int k = 0; k < WIN; k++) begin
      m = border_map(int'(row), k - HALF, IMG_H, WIN, mode);
      rcon[k] = (m < 0);
      rsel[k] = (m < 0) ? SW'(k) : SW'(m);
      m = border_map(int'(col), k - HALF, IMG_W, WIN, mode);
      ccon[k] = (m < 0);
      csel[k] = (m < 0) ? SW'(k) : SW'(m);
    end
  end

  always_comb begin
    for (int i = 0; i < WIN; i++) begin
      for (int j = 0; j < WIN; j++) begin
        bwin[i][j] = (rcon[i] || ccon[j]) ? const_pix : win[rsel[i]][csel[j]];
      end
    end
  end

endmodule
