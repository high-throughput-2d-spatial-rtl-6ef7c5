// tb_spatial_filter_full: the filter at its default size (7x7 window,
// 8-bit pixels, 640x480 frames) on two complete frames.
//
// The first frame (mirroring without duplication) streams without a gap and
// is followed at once by the second (mirroring with duplication), so the
// priming of frame two overlaps the flushing of frame one; the second frame
// ends with enable low and is flushed by the filter itself.  Every one of
// the 2 x 307200 outputs is compared with the golden model, and the latency
// of the first output is checked against 3*640 + 4 + 3 + 6 = 1933 cycles.
module tb_spatial_filter_full;
  import filter_pkg::*;
  import filter_ref_pkg::*;

  localparam int WIN = DEF_WIN, PIX_W = DEF_PIX_W, COEF_W = DEF_COEF_W;
  localparam int IW = DEF_IMG_W, IH = DEF_IMG_H;
  localparam int NTAP = WIN * WIN;
  localparam int SUM_W = PIX_W + COEF_W + $clog2(NTAP);
  localparam int LATENCY = 1933;

  logic clk = 0, rst_n = 0;
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

  spatial_filter_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint exp_q[$];
  bit     exp_eof[$];
  int     coef[$];
  int     n_overlap = 0, n_flush = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  task automatic send_frame(input border_mode_e mode, input bit en_end);
    int img[$];
    for (int k = 0; k < IW * IH; k++) img.push_back(int'($urandom_range(0, 255)));
    for (int r = 0; r < IH; r++)
      for (int c = 0; c < IW; c++) begin
        exp_q.push_back(ref_pixel(img, IH, IW, r, c, WIN, coef, mode, 0));
        exp_eof.push_back(r == IH - 1 && c == IW - 1);
      end
    for (int k = 0; k < IW * IH; k++) begin
      @(negedge clk);
      in_valid = 1;
      in_pixel = img[k][PIX_W-1:0];
      if (k == 0) border_mode = mode;
      if (k == IW * IH - 1) enable = en_end;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
  endtask

  longint t_first_in = -1, t_first_out = -1;
  always @(posedge clk) begin
    if (in_valid && in_ready && t_first_in < 0) t_first_in = cycle;
    if (out_valid) begin
      longint e;
      bit f;
      if (t_first_out < 0) t_first_out = cycle;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        f = exp_eof.pop_front();
        check(longint'(out_pixel) == e, $sformatf("pixel got %0d exp %0d", out_pixel, e));
        check(out_eof == f, "end-of-frame marker");
      end
    end
    if (dut.u_ctrl.state == 2'd2 && dut.u_ctrl.flush_cnt == '0) n_flush++;
    if (dut.u_ctrl.accept && dut.u_ctrl.in_last && dut.u_ctrl.enable) n_overlap++;
  end

  initial begin
    repeat (2 * IW * IH + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NTAP; k++) begin
      int v;
      v = int'($urandom_range(0, 32767)) - 16384;
      coef.push_back(v);
      @(negedge clk);
      coef_we = 1; coef_addr = k[$clog2(NTAP)-1:0]; coef_wdata = COEF_W'(v);
    end
    @(negedge clk);
    coef_we = 0;
    enable = 1;
    send_frame(BORDER_MIRROR, 1);
    send_frame(BORDER_MIRROR_DUP, 0);
    @(negedge clk);
    in_valid = 0;
    wait (!busy && exp_q.size() == 0);
    repeat (20) @(negedge clk);
    check(t_first_out - t_first_in == longint'(LATENCY),
          $sformatf("latency %0d expected %0d", t_first_out - t_first_in, LATENCY));
    check(n_overlap == 1, "overlapped frame boundary");
    check(n_flush == 1, "final flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
