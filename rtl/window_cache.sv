// window_cache: WIN x WIN window pixel cache.
//
// WIN rows of WIN pixel registers.  Each row is a shift register that, on
// every 'advance', shifts one place towards column 0 and takes a new pixel
// at column WIN-1 from its feed: the bottom row (WIN-1) from the incoming
// stream, row i from the row buffer tap that delays the stream by
// (WIN-1-i) image rows.  After an advance, win[i][j] holds the pixel at
// row offset i-(WIN-1)/2 and column offset j-(WIN-1)/2 from the centre
// pixel win[(WIN-1)/2][(WIN-1)/2], which entered the stream
// (WIN-1)/2 * (IMG_W + 1) steps earlier.  All WIN*WIN registers are
// presented to the filter function in parallel.
//
// Following the published filter architecture: the shift-register arrangement of the window cache.  The
// index convention and the absence of a reset are this implementation's
// own choices (the border logic never uses a window pixel that has not
// been written by the current stream).
module window_cache
  import filter_pkg::*;
#(
  parameter int unsigned WIN   = DEF_WIN,
  parameter int unsigned PIX_W = DEF_PIX_W
) (
  input  logic             clk,
  input  logic             advance,
  input  logic [PIX_W-1:0] row_in [WIN],
  output logic [PIX_W-1:0] win    [WIN][WIN]
);

  logic [PIX_W-1:0] cells [WIN][WIN];

  always_ff @(posedge clk) begin
    if (advance) begin
      for (int i = 0; i < WIN; i++) begin
        for (int j = 0; j < WIN - 1; j++) cells[i][j] <= cells[i][j+1];
        cells[i][WIN-1] <= row_in[i];
      end
    end
  end

  assign win = cells;

endmodule
