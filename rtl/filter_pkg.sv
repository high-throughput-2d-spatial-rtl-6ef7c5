// filter_pkg: types, default sizes and index arithmetic shared by the
// streaming 2D spatial filter.
//
// Default sizes follow the evaluated configuration of the design: a 7x7
// window (WIN), 8-bit pixels (PIX_W) and a 640x480 image.  Coefficients
// are 15-bit two's complement numbers (49 x 15 = 735 coefficient register
// bits, the register count reported for the coefficient file).  A product
// of an unsigned pixel and a signed coefficient takes PIX_W+COEF_W bits
// (23 by default, within the 24-bit limit quoted for packing two adds in
// one DSP slice) and the sum of WIN*WIN products takes $clog2(WIN*WIN)
// more bits (29 by default).
//
// border_map() is the address arithmetic of the border policies: given the
// row (or column) index of the window centre and an offset from it, it
// returns which row (column) of the raw window holds the pixel that should
// be used, or -1 when the constant value must be used instead.
package filter_pkg;

  localparam int unsigned DEF_WIN    = 7;
  localparam int unsigned DEF_PIX_W  = 8;
  localparam int unsigned DEF_COEF_W = 15;
  localparam int unsigned DEF_IMG_W  = 640;
  localparam int unsigned DEF_IMG_H  = 480;

  // Border policies (see the four extension schemes of the design notes).
  typedef enum logic [1:0] {
    BORDER_CONST      = 2'd0,  // pixels outside the image take a constant value
    BORDER_REPLICATE  = 2'd1,  // outermost row/column repeated outwards
    BORDER_MIRROR_DUP = 2'd2,  // mirror with duplication: -1 -> 0, -2 -> 1
    BORDER_MIRROR     = 2'd3   // mirror without duplication: -1 -> 1, -2 -> 2
  } border_mode_e;

  // Sideband that travels with every pixel through the arithmetic pipeline.
  typedef struct packed {
    logic sof;  // first pixel of a frame
    logic eol;  // last pixel of a row
    logic eof;  // last pixel of a frame
  } pix_tag_t;

  // Window index (0 .. win-1) of the pixel that replaces the one at
  // offset 'off' (-(win-1)/2 .. (win-1)/2) from centre index 'pos' in a
  // dimension of length 'n'; -1 selects the constant.
  function automatic int border_map(input int pos, input int off, input int n,
                                    input int win, input border_mode_e mode);
    int half;
    int s;
    int m;
    half = (win - 1) / 2;
    s = pos + off;
    m = s;
    if (s < 0 || s >= n) begin
      unique case (mode)
        BORDER_CONST:      m = -1;
        BORDER_REPLICATE:  m = (s < 0) ? 0 : n - 1;
        BORDER_MIRROR_DUP: m = (s < 0) ? -s - 1 : 2 * n - 1 - s;
        BORDER_MIRROR:     m = (s < 0) ? -s : 2 * n - 2 - s;
        default:           m = -1;
      endcase
    end
    border_map = (m < 0) ? -1 : half + (m - pos);
  endfunction

endpackage
