// multiplier_array: WIN*WIN parallel pipelined pixel x coefficient products.
//
// Every cycle each of the NTAP multipliers takes one window pixel (unsigned,
// PIX_W bits) and its coefficient (signed, COEF_W bits) and, three cycles
// later, presents their signed PIX_W+COEF_W-bit product.  The three stages
// are the input register (pixel and coefficient), the multiply register and
// the output register, the arrangement of an FPGA DSP slice with all its
// pipeline registers enabled.  'in_valid' and a sideband 'in_tag' travel
// alongside; the pipeline never stalls.
//
// Following the published filter architecture: one multiplier per window pixel and a multiplier latency
// of three cycles.  This implementation's own choices: the stage split, the
// unsigned-pixel / signed-coefficient format and the tag sideband.
module multiplier_array
  import filter_pkg::*;
#(
  parameter int unsigned NTAP   = DEF_WIN * DEF_WIN,
  parameter int unsigned PIX_W  = DEF_PIX_W,
  parameter int unsigned COEF_W = DEF_COEF_W,
  parameter int unsigned TAG_W  = $bits(pix_tag_t),
  localparam int unsigned PROD_W = PIX_W + COEF_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic [PIX_W-1:0]         pix  [NTAP],
  input  logic signed [COEF_W-1:0] coef [NTAP],
  output logic                     out_valid,
  output logic [TAG_W-1:0]         out_tag,
  output logic signed [PROD_W-1:0] prod [NTAP]
);

  localparam int unsigned LAT = 3;

  logic signed [PIX_W:0]    a_q [NTAP];   // pixel, zero-extended to signed
  logic signed [COEF_W-1:0] b_q [NTAP];
  logic signed [PROD_W-1:0] m_q [NTAP];
  logic signed [PROD_W-1:0] p_q [NTAP];
  logic [LAT-1:0]           v_q;
  logic [TAG_W-1:0]         t_q [LAT];

  always_ff @(posedge clk) begin
    for (int k = 0; k < NTAP; k++) begin
      a_q[k] <= signed'({1'b0, pix[k]});
      b_q[k] <= coef[k];
      m_q[k] <= PROD_W'(a_q[k] * b_q[k]);
      p_q[k] <= m_q[k];
    end
    t_q[0] <= in_tag;
    for (int s = 1; s < LAT; s++) t_q[s] <= t_q[s-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LAT-2:0], in_valid};
  end

  assign prod      = p_q;
  assign out_valid = v_q[LAT-1];
  assign out_tag   = t_q[LAT-1];

endmodule
