// wl_frame_runner: testbench helper that runs one full frame of IMG_W x
// IMG_H random pixels, with random 15-bit coefficients and mirroring,
// through a spatial_filter_top of that size, compares every output with the
// golden model and measures the latency of the first output.  It reports
// its counts on its ports once 'done' rises.
module wl_frame_runner
  import filter_pkg::*;
  import filter_ref_pkg::*;
#(
  parameter int IMG_W = 100,
  parameter int IMG_H = 100
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output longint latency
);
  localparam int WIN = DEF_WIN, PIX_W = DEF_PIX_W, COEF_W = DEF_COEF_W;
  localparam int NTAP = WIN * WIN, SUM_W = PIX_W + COEF_W + $clog2(NTAP);

  logic enable = 0;
  border_mode_e border_mode = BORDER_MIRROR;
  logic [PIX_W-1:0] border_const = '0;
  logic coef_we = 0;
  logic [$clog2(NTAP)-1:0] coef_addr = '0;
  logic signed [COEF_W-1:0] coef_wdata = '0;
  logic in_valid = 0, in_ready;
  logic [PIX_W-1:0] in_pixel = '0;
  logic out_valid, out_sof, out_eol, out_eof, busy;
  logic signed [SUM_W-1:0] out_pixel;

  spatial_filter_top #(.IMG_W(IMG_W), .IMG_H(IMG_H)) dut (
    .clk, .rst_n, .enable, .border_mode, .border_const, .coef_we, .coef_addr,
    .coef_wdata, .in_valid, .in_ready, .in_pixel, .out_valid, .out_pixel,
    .out_sof, .out_eol, .out_eof, .busy
  );

  longint cycle = 0, t_in = -1, t_out = -1;
  longint exp_q[$];
  int coef[$];
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    done = 0; checks = 0; failures = 0; latency = 0;
  end

  always @(posedge clk) begin
    if (in_valid && in_ready && t_in < 0) t_in = cycle;
    if (out_valid) begin
      longint e;
      if (t_out < 0) t_out = cycle;
      checks++;
      if (exp_q.size() == 0) failures++;
      else begin
        e = exp_q.pop_front();
        if (longint'(out_pixel) != e) begin
          failures++;
          if (failures < 10) $display("FAIL %0dx%0d: got %0d exp %0d", IMG_W, IMG_H, out_pixel, e);
        end
      end
    end
  end

  initial begin
    int img[$];
    @(posedge rst_n);
    for (int k = 0; k < NTAP; k++) begin
      int v;
      v = int'($urandom_range(0, 32767)) - 16384;
      coef.push_back(v);
      @(negedge clk);
      coef_we = 1; coef_addr = k[$clog2(NTAP)-1:0]; coef_wdata = COEF_W'(v);
    end
    @(negedge clk);
    coef_we = 0;
    for (int k = 0; k < IMG_W * IMG_H; k++) img.push_back(int'($urandom_range(0, 255)));
    for (int r = 0; r < IMG_H; r++)
      for (int c = 0; c < IMG_W; c++)
        exp_q.push_back(ref_pixel(img, IMG_H, IMG_W, r, c, WIN, coef, BORDER_MIRROR, 0));
    enable = 1;
    for (int k = 0; k < IMG_W * IMG_H; k++) begin
      @(negedge clk);
      in_valid = 1;
      in_pixel = img[k][PIX_W-1:0];
      if (k == IMG_W * IMG_H - 1) enable = 0;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    wait (!busy && exp_q.size() == 0);
    repeat (20) @(negedge clk);
    latency = t_out - t_in;
    done = 1;
  end
endmodule
