// adder_tree: pipelined binary adder tree built from fabric logic.
//
// Sums N signed IN_W-bit operands with 2-input adders arranged in
// LEVELS = ceil(log2 N) levels, each followed by a register, so the sum
// appears LEVELS cycles after the operands (6 cycles for the 49 products of
// a 7x7 window, using N-1 = 48 adders).  At a level with an odd number of
// operands the last one is only registered.  All levels use the full
// OUT_W = IN_W + LEVELS width, so the sum never overflows.  A valid bit and
// a sideband tag travel with the data; the tree never stalls.
//
// Following the published filter architecture: the LOG layout of the direct-form filter - two-input
// adders in the logic fabric with one pipeline register each (adder latency
// of one cycle).  The uniform operand width is this implementation's own
// simplification; synthesis removes the unused upper bits.
module adder_tree
  import filter_pkg::*;
#(
  parameter int unsigned N     = DEF_WIN * DEF_WIN,
  parameter int unsigned IN_W  = DEF_PIX_W + DEF_COEF_W,
  parameter int unsigned TAG_W = $bits(pix_tag_t),
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [IN_W-1:0]  opnd [N],
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [OUT_W-1:0] sum
);

  // Number of operands entering level l (level 0 = the inputs).
  function automatic int unsigned count_at(input int unsigned l);
    int unsigned c;
    c = N;
    for (int unsigned k = 0; k < l; k++) c = (c + 1) / 2;
    return c;
  endfunction

  logic signed [OUT_W-1:0] ext  [N];          // sign-extended operands
  logic signed [OUT_W-1:0] node [LEVELS][N];  // node[l]: registers after level l
  logic [LEVELS-1:0]       v_q;
  logic [TAG_W-1:0]        t_q [LEVELS];

  always_comb begin
    for (int k = 0; k < N; k++) ext[k] = OUT_W'(opnd[k]);
  end

  // Level l pairs up the count_at(l) operands left by level l-1; slots past
  // the level's operand count are unused and held at zero.
  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < LEVELS; l++) begin
      for (int unsigned k = 0; k < N; k++) begin
        if (k >= (count_at(l) + 1) / 2)  node[l][k] <= '0;
        else if (2 * k + 1 < count_at(l))
          node[l][k] <= ((l == 0) ? ext[2*k]   : node[l-1][2*k])
                      + ((l == 0) ? ext[2*k+1] : node[l-1][2*k+1]);
        else
          node[l][k] <= (l == 0) ? ext[2*k] : node[l-1][2*k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LEVELS-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    t_q[0] <= in_tag;
    for (int s = 1; s < LEVELS; s++) t_q[s] <= t_q[s-1];
  end

  assign sum       = node[LEVELS-1][0];
  assign out_valid = v_q[LEVELS-1];
  assign out_tag   = t_q[LEVELS-1];

endmodule
