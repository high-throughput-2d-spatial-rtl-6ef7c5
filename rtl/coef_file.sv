// coef_file: run-time programmable coefficient register file.
//
// Holds the WIN*WIN filter coefficients as COEF_W-bit two's complement
// registers and presents all of them in parallel to the multipliers every
// cycle.  A host (the higher layers of a vision system) rewrites one
// coefficient per cycle through a simple write port: when 'we' is high at
// a rising clock edge, coef[waddr] takes 'wdata'; the new value is visible
// on 'coef' from the next cycle.  Coefficient k = i*WIN + j multiplies the
// window pixel at row offset i-(WIN-1)/2 and column offset j-(WIN-1)/2
// from the output pixel (row-major, top-left first).
//
// Following the published filter architecture: a register file of WIN*WIN coefficients that can be
// changed at run time.  This implementation's own choices: the write port,
// reset of all coefficients to zero, and that a write takes effect at once
// (pixels already in the pipeline may see a mix of old and new values).
module coef_file
  import filter_pkg::*;
#(
  parameter int unsigned WIN    = DEF_WIN,
  parameter int unsigned COEF_W = DEF_COEF_W,
  localparam int unsigned NTAP  = WIN * WIN,
  localparam int unsigned AW    = $clog2(NTAP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic signed [COEF_W-1:0] wdata,
  output logic signed [COEF_W-1:0] coef [NTAP]
);

  logic signed [COEF_W-1:0] regs [NTAP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NTAP; k++) regs[k] <= '0;
    end else if (we && (int'(waddr) < NTAP)) begin
      regs[waddr] <= wdata;
    end
  end

  assign coef = regs;

endmodule
