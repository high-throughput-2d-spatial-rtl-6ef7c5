// filter_ref_pkg: golden model of the 2D spatial filter for the testbenches.
//
// Works directly on a whole frame held in a queue (row-major): for output
// pixel (r, c) it fetches, for every window tap, the source pixel the border
// policy prescribes and accumulates pixel * coefficient.  The border
// arithmetic is written out per policy, independently of the hardware's
// window-relative selection.
package filter_ref_pkg;
  import filter_pkg::*;

  // Source index along one dimension of length n, or -1 for the constant.
  function automatic int src_index(input int s, input int n, input border_mode_e mode);
    if (s >= 0 && s < n) return s;
    case (mode)
      BORDER_CONST:      return -1;
      BORDER_REPLICATE:  return (s < 0) ? 0 : n - 1;
      // mirror with duplication: ... 1 0 | 0 1 ... | n-2 n-1 | n-1 n-2 ...
      BORDER_MIRROR_DUP: return (s < 0) ? (-1 - s) : (n - 1) - (s - n);
      // mirror without duplication: ... 2 1 | 0 1 2 ... n-1 | n-2 n-3 ...
      BORDER_MIRROR:     return (s < 0) ? (0 - s) : (n - 2) - (s - n);
      default:           return -1;
    endcase
  endfunction

  function automatic longint ref_pixel(ref int img[$], input int h, input int w,
                                       input int r, input int c, input int win,
                                       ref int coef[$], input border_mode_e mode,
                                       input int cst);
    longint acc;
    int sr, sc, p, half;
    half = (win - 1) / 2;
    acc = 0;
    for (int i = 0; i < win; i++) begin
      for (int j = 0; j < win; j++) begin
        sr = src_index(r + i - half, h, mode);
        sc = src_index(c + j - half, w, mode);
        p  = (sr < 0 || sc < 0) ? cst : img[sr * w + sc];
        acc += longint'(p) * longint'(coef[i * win + j]);
      end
    end
    return acc;
  endfunction

endpackage
