// spatial_filter_top: streaming WIN x WIN 2D spatial filter (direct form,
// fabric adder tree, border pixels handled without stalling).
//
// A raster-scan pixel stream enters at one pixel per clock.  WIN-1 row
// buffers and a WIN x WIN window cache present the neighbourhood of one
// pixel per cycle; the border manager substitutes pixels that fall outside
// the image according to the selected policy; WIN*WIN pipelined multipliers
// weight the window with run-time programmable coefficients and a pipelined
// binary adder tree sums the products.  One filtered pixel leaves per
// accepted input pixel, and the output image has the input's size.
//
// Interface:
//   enable        activation: high to accept frames; a frame that ends with
//                 'enable' low is flushed and the filter stops.
//   border_mode,  border policy and constant, sampled with the first pixel
//   border_const  of each frame.
//   coef_we/addr/ coefficient write port, coefficient k = i*WIN+j applies to
//   coef_wdata    the pixel at row offset i-(WIN-1)/2, column offset j-(WIN-1)/2.
//   in_valid/in_ready/in_pixel  input stream (transfer when both high).
//   out_valid/out_pixel/out_sof/out_eol/out_eof  output stream (no back-
//                 pressure), out_pixel is the full-precision signed sum.
// Timing: with an unbroken input stream the output for input pixel p leaves
// LATENCY = (WIN-1)/2*IMG_W + (WIN+1)/2 + 3 + ceil(log2(WIN*WIN)) cycles
// after p is presented, i.e. 1933 cycles for WIN=7, IMG_W=640.
//
// Following the published filter architecture: the block structure (row buffers, window cache,
// coefficient file, multipliers, LOG adder tree, control unit), the sizes
// and the latency.  This implementation's own choices: the handshake, the
// full-precision output (no rounding or saturation) and the frame markers.
module spatial_filter_top
  import filter_pkg::*;
#(
  parameter int unsigned WIN    = DEF_WIN,
  parameter int unsigned PIX_W  = DEF_PIX_W,
  parameter int unsigned COEF_W = DEF_COEF_W,
  parameter int unsigned IMG_W  = DEF_IMG_W,
  parameter int unsigned IMG_H  = DEF_IMG_H,
  localparam int unsigned NTAP   = WIN * WIN,
  localparam int unsigned AW     = $clog2(NTAP),
  localparam int unsigned PROD_W = PIX_W + COEF_W,
  localparam int unsigned SUM_W  = PROD_W + $clog2(NTAP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  border_mode_e             border_mode,
  input  logic [PIX_W-1:0]         border_const,
  input  logic                     coef_we,
  input  logic [AW-1:0]            coef_addr,
  input  logic signed [COEF_W-1:0] coef_wdata,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [PIX_W-1:0]         in_pixel,
  output logic                     out_valid,
  output logic signed [SUM_W-1:0]  out_pixel,
  output logic                     out_sof,
  output logic                     out_eol,
  output logic                     out_eof,
  output logic                     busy
);

  localparam int unsigned RW = (IMG_H > 1) ? $clog2(IMG_H) : 1;
  localparam int unsigned CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;

  logic                     advance;
  logic                     win_valid;
  logic [RW-1:0]            win_row;
  logic [CW-1:0]            win_col;
  border_mode_e             win_mode;
  logic [PIX_W-1:0]         win_const;
  pix_tag_t                 win_tag;

  logic [PIX_W-1:0]         tap   [WIN-1];
  logic [PIX_W-1:0]         row_in[WIN];
  logic [PIX_W-1:0]         win   [WIN][WIN];
  logic [PIX_W-1:0]         bwin  [WIN][WIN];
  logic [PIX_W-1:0]         pix   [NTAP];
  logic signed [COEF_W-1:0] coef  [NTAP];
  logic signed [PROD_W-1:0] prod  [NTAP];
  logic                     prod_valid;
  pix_tag_t                 prod_tag, out_tag;

  control_unit #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ctrl (
    .clk, .rst_n, .enable,
    .mode_in(border_mode), .const_in(border_const),
    .in_valid, .in_ready,
    .advance, .win_valid, .win_row, .win_col, .win_mode, .win_const, .win_tag,
    .busy
  );

  coef_file #(.WIN(WIN), .COEF_W(COEF_W)) u_coef (
    .clk, .rst_n, .we(coef_we), .waddr(coef_addr), .wdata(coef_wdata), .coef
  );

  row_buffers #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W)) u_rows (
    .clk, .rst_n, .advance, .pix_in(in_pixel), .tap
  );

  // Window row i is fed by the stream delayed by WIN-1-i image rows.
  always_comb begin
    row_in[WIN-1] = in_pixel;
    for (int i = 0; i < WIN - 1; i++) row_in[i] = tap[WIN-2-i];
  end

  window_cache #(.WIN(WIN), .PIX_W(PIX_W)) u_win (
    .clk, .advance, .row_in, .win
  );

  border_manager #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_border (
    .win, .row(win_row), .col(win_col), .mode(win_mode), .const_pix(win_const), .bwin
  );

  always_comb begin
    for (int i = 0; i < WIN; i++)
      for (int j = 0; j < WIN; j++)
        pix[i*WIN+j] = bwin[i][j];
  end

  multiplier_array #(.NTAP(NTAP), .PIX_W(PIX_W), .COEF_W(COEF_W), .TAG_W($bits(pix_tag_t))) u_mult (
    .clk, .rst_n, .in_valid(win_valid), .in_tag(win_tag), .pix, .coef,
    .out_valid(prod_valid), .out_tag(prod_tag), .prod
  );

  adder_tree #(.N(NTAP), .IN_W(PROD_W), .TAG_W($bits(pix_tag_t))) u_tree (
    .clk, .rst_n, .in_valid(prod_valid), .in_tag(prod_tag), .opnd(prod),
    .out_valid, .out_tag, .sum(out_pixel)
  );

  assign out_sof = out_tag.sof;
  assign out_eol = out_tag.eol;
  assign out_eof = out_tag.eof;

endmodule
