// row_buffers: WIN-1 cascaded line delays for a streamed raster image.
//
// Each line delay holds exactly IMG_W pixels, so on every 'advance' (one
// pixel step of the stream) tap[k] presents the pixel that entered the
// chain (k+1)*IMG_W steps earlier: the pixel directly above the input in
// the row k+1 rows higher.  Together with the input pixel itself this gives
// WIN vertically adjacent pixels per step, which the window cache turns
// into a WIN x WIN neighbourhood.  Only WIN-1 rows are stored because the
// oldest row of the window is no longer needed once it has been read.
//
// Each delay is a memory of IMG_W words addressed by one shared circular
// pointer: in an advancing cycle the word at the pointer is read (the
// oldest pixel) and overwritten with the delay's input, and the pointer
// steps on.  The read is combinational, so the taps are valid in the same
// cycle and change after each advancing clock edge.  The pointer needs no
// alignment with the image columns: only the delay length matters.
//
// Following the published filter architecture: WIN-1 row buffers cascaded as in the block diagram.  This
// implementation's own choices: one memory per row with a shared pointer and
// no reset of the stored pixels (they are only read after being written, or
// replaced by the border logic).
module row_buffers
  import filter_pkg::*;
#(
  parameter int unsigned WIN   = DEF_WIN,
  parameter int unsigned PIX_W = DEF_PIX_W,
  parameter int unsigned IMG_W = DEF_IMG_W,
  localparam int unsigned NROW = WIN - 1,
  localparam int unsigned PW   = (IMG_W > 1) ? $clog2(IMG_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             advance,
  input  logic [PIX_W-1:0] pix_in,
  output logic [PIX_W-1:0] tap [NROW]
);

  logic [PIX_W-1:0] mem [NROW][IMG_W];
  logic [PW-1:0]    ptr;

  always_comb begin
    for (int k = 0; k < NROW; k++) tap[k] = mem[k][ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance) begin
      ptr <= (int'(ptr) == IMG_W - 1) ? '0 : ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      mem[0][ptr] <= pix_in;
      for (int k = 1; k < NROW; k++) mem[k][ptr] <= tap[k-1];
    end
  end

endmodule
