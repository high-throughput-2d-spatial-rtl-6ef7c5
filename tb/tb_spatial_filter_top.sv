// tb_spatial_filter_top: end-to-end test of the streaming spatial filter.
//
// Runs a sequence of small frames (12 x 9 pixels, 7x7 window) through the
// whole filter and compares every output pixel, in order, with the golden
// model of filter_ref_pkg.  The sequence exercises each mechanism of the
// design and counts how often it happened:
//   - back-to-back frames whose priming overlaps the previous flushing,
//   - a change of border policy between frames (all four policies used),
//   - input bubbles (in_valid low inside a frame),
//   - deactivation: a frame ended with enable low is flushed on its own,
//     with the input refused meanwhile, and a later reactivation,
//   - coefficient reloads between frames (3x3 and 5x5 kernels in the 7x7).
// It also checks the frame markers and, on the unbroken first frame, the
// latency (WIN-1)/2*IMG_W + (WIN+1)/2 + 3 + ceil(log2(WIN*WIN)).
module tb_spatial_filter_top;
  import filter_pkg::*;
  import filter_ref_pkg::*;

  localparam int WIN = 7, PIX_W = 8, COEF_W = 15, IW = 12, IH = 9;
  localparam int NTAP = WIN * WIN;
  localparam int SUM_W = PIX_W + COEF_W + $clog2(NTAP);
  localparam int HALF = (WIN - 1) / 2;
  localparam int LATENCY = HALF * IW + (WIN + 1) / 2 + 3 + $clog2(NTAP);

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

  spatial_filter_top #(.WIN(WIN), .PIX_W(PIX_W), .COEF_W(COEF_W), .IMG_W(IW), .IMG_H(IH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected outputs and markers, in order
  longint exp_q[$];
  bit     exp_sof[$], exp_eol[$], exp_eof[$];
  int     coef[$];

  // mechanism counters
  int n_overlap = 0, n_flush = 0, n_mode_switch = 0, n_bubble = 0, n_refused = 0;
  int n_mode_used[4] = '{0, 0, 0, 0};
  int n_reload = 0;
  border_mode_e last_mode;
  bit have_last_mode = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  task automatic load_coefs(input int kind);
    coef.delete();
    for (int k = 0; k < NTAP; k++) begin
      int i, j, v;
      i = k / WIN; j = k % WIN;
      if (kind == 0) v = int'($urandom_range(0, 2000)) - 1000;
      else v = (i >= HALF - kind && i <= HALF + kind && j >= HALF - kind && j <= HALF + kind)
               ? int'($urandom_range(0, 16000)) - 8000 : 0;
      coef.push_back(v);
      @(negedge clk);
      coef_we = 1; coef_addr = k[$clog2(NTAP)-1:0]; coef_wdata = COEF_W'(v);
    end
    @(negedge clk);
    coef_we = 0;
    n_reload++;
  endtask

  // Stream one frame.  bubbles: random in_valid gaps; en_end: enable level
  // while the last pixel is transferred.
  task automatic send_frame(input border_mode_e mode, input int cst, input bit bubbles,
                            input bit en_end);
    int img[$];
    for (int k = 0; k < IW * IH; k++) img.push_back(int'($urandom_range(0, 255)));
    for (int r = 0; r < IH; r++)
      for (int c = 0; c < IW; c++) begin
        exp_q.push_back(ref_pixel(img, IH, IW, r, c, WIN, coef, mode, cst));
        exp_sof.push_back(r == 0 && c == 0);
        exp_eol.push_back(c == IW - 1);
        exp_eof.push_back(r == IH - 1 && c == IW - 1);
      end
    if (have_last_mode && mode != last_mode) n_mode_switch++;
    last_mode = mode; have_last_mode = 1;
    n_mode_used[mode]++;
    for (int k = 0; k < IW * IH; k++) begin
      if (bubbles && k > 0 && $urandom_range(0, 3) == 0) begin
        @(negedge clk);
        in_valid = 0;
        n_bubble++;
      end
      @(negedge clk);
      in_valid = 1;
      in_pixel = img[k][PIX_W-1:0];
      if (k == 0) begin border_mode = mode; border_const = cst[PIX_W-1:0]; end
      if (k == IW * IH - 1) enable = en_end;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    enable = 1;
  endtask

  // output checker
  longint t_first_in = -1, t_first_out = -1;
  always @(posedge clk) begin
    if (in_valid && in_ready && t_first_in < 0) t_first_in = cycle;
    if (in_valid && !in_ready) n_refused++;
    if (out_valid) begin
      if (t_first_out < 0) t_first_out = cycle;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        longint e;
        bit s, l, f;
        e = exp_q.pop_front();
        s = exp_sof.pop_front(); l = exp_eol.pop_front(); f = exp_eof.pop_front();
        check(longint'(out_pixel) == e, $sformatf("pixel got %0d exp %0d", out_pixel, e));
        check(out_sof == s && out_eol == l && out_eof == f, "frame markers");
      end
    end
  end

  // count overlapped frame boundaries and flushes from the control state
  always @(posedge clk) begin
    if (dut.u_ctrl.state == 2'd2 && dut.u_ctrl.flush_cnt == '0) n_flush++;
    if (dut.u_ctrl.accept && dut.u_ctrl.in_last && dut.u_ctrl.enable) n_overlap++;
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_coefs(0);
    enable = 1;
    send_frame(BORDER_MIRROR,     0,   0, 1);  // unbroken: latency measured
    send_frame(BORDER_CONST,      77,  0, 1);  // back-to-back, mode switch
    send_frame(BORDER_REPLICATE,  0,   1, 1);  // with bubbles
    send_frame(BORDER_MIRROR_DUP, 0,   0, 0);  // deactivate -> flush
    // the next frame is offered while the flush runs and must wait
    send_frame(BORDER_MIRROR_DUP, 0,   1, 0);
    wait (!busy);
    repeat (5) @(negedge clk);
    load_coefs(1);                             // 3x3 kernel
    send_frame(BORDER_CONST,      200, 1, 0);
    wait (!busy && exp_q.size() == 0);
    load_coefs(2);                             // 5x5 kernel
    send_frame(BORDER_MIRROR,     0,   1, 0);
    wait (!busy && exp_q.size() == 0);
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "all outputs produced");
    check(t_first_out - t_first_in == longint'(LATENCY),
          $sformatf("latency %0d expected %0d", t_first_out - t_first_in, LATENCY));
    $display("mechanisms: overlap=%0d flush=%0d mode_switch=%0d bubbles=%0d refused=%0d reload=%0d",
             n_overlap, n_flush, n_mode_switch, n_bubble, n_refused, n_reload);
    check(n_overlap > 0, "overlapped priming/flushing happened");
    check(n_flush > 0, "flush happened");
    check(n_mode_switch > 0, "mode switch happened");
    check(n_bubble > 0, "input bubbles happened");
    check(n_refused > 0, "input refused during flush");
    check(n_reload > 2, "coefficient reload happened");
    for (int m = 0; m < 4; m++) check(n_mode_used[m] > 0, $sformatf("border mode %0d used", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
