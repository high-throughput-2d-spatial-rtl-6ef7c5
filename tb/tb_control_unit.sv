// tb_control_unit: control state machine.  Streams frames of a 6x4 image
// (5x5 window, priming delay 2*6+2 = 14 steps) with random input gaps,
// back-to-back frames and deactivations, and checks cycle by cycle against
// a model: in_ready only when allowed, advance = accepted pixel or flush
// step, a window released on exactly every step after the first 14 of a
// stream, its position in raster order with the right markers, flushing
// for exactly 14 cycles with the input refused, and the border mode and
// constant of the frame the released window belongs to.
module tb_control_unit;
  import filter_pkg::*;
  localparam int WIN = 5, PIX_W = 8, IMG_W = 6, IMG_H = 4;
  localparam int HALF = (WIN - 1) / 2, DELAY = HALF * IMG_W + HALF, FS = IMG_W * IMG_H;
  localparam int RW = $clog2(IMG_H), CW = $clog2(IMG_W);

  logic clk = 0, rst_n = 0, enable = 0;
  border_mode_e mode_in = BORDER_CONST;
  logic [PIX_W-1:0] const_in = '0;
  logic in_valid = 0, in_ready, advance, win_valid, busy;
  logic [RW-1:0] win_row;
  logic [CW-1:0] win_col;
  border_mode_e win_mode;
  logic [PIX_W-1:0] win_const;
  pix_tag_t win_tag;

  control_unit #(.WIN(WIN), .PIX_W(PIX_W), .IMG_W(IMG_W), .IMG_H(IMG_H)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // reference model state
  int  m_state = 0;          // 0 idle, 1 stream, 2 flush
  int  m_adv = 0;            // steps of this stream (saturating)
  int  m_flush = 0;
  int  m_in = 0;             // position of next input pixel in its frame
  int  m_out = 0;            // position of next released window
  bit  exp_valid = 0;
  int  exp_pos = 0;
  int  frame_mode[$], frame_const[$];
  int  cur_mode = 0, cur_const = 0;
  int  n_flush_cycles = 0, n_released = 0, n_refused = 0;

  always @(posedge clk) if (rst_n) begin
    bit ready_m, acc, adv;
    // outputs registered at the previous edge
    check(win_valid == exp_valid, "win_valid");
    if (exp_valid) begin
      check(int'(win_row) * IMG_W + int'(win_col) == exp_pos, "window position");
      check(win_tag.sof == (exp_pos == 0) && win_tag.eol == (exp_pos % IMG_W == IMG_W - 1)
            && win_tag.eof == (exp_pos == FS - 1), "window markers");
      check(int'(win_mode) == cur_mode && int'(win_const) == cur_const, "per-frame mode");
    end
    ready_m = (m_state == 1) || (m_state == 0 && enable);
    check(in_ready == ready_m, "in_ready");
    acc = in_valid && ready_m;
    adv = acc || (m_state == 2);
    check(advance == adv, "advance");
    if (in_valid && !ready_m) n_refused++;
    if (m_state == 2) n_flush_cycles++;
    // next expected release
    exp_valid = adv && (m_adv == DELAY);
    if (exp_valid) begin
      exp_pos = m_out;
      if (m_out == 0) begin
        cur_mode = frame_mode.pop_front();
        cur_const = frame_const.pop_front();
      end
      m_out = (m_out + 1) % FS;
      n_released++;
    end
    if (adv && m_adv < DELAY) m_adv++;
    if (acc) begin
      if (m_in == 0) begin frame_mode.push_back(int'(mode_in)); frame_const.push_back(int'(const_in)); end
      m_in = (m_in + 1) % FS;
    end
    case (m_state)
      0: if (acc) m_state = 1;
      1: if (acc && m_in == 0 && !enable) begin m_state = 2; m_flush = 0; end
      2: begin
        m_flush++;
        if (m_flush == DELAY) begin m_state = 0; m_adv = 0; end
      end
    endcase
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);        // enable low: nothing accepted
    in_valid = 1;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0) || (n < 200);
      enable = (n % 400 < 300) ? 1'b1 : ($urandom_range(0, 7) != 0 ? 1'b0 : 1'b1);
      mode_in = border_mode_e'($urandom_range(0, 3));
      const_in = PIX_W'($urandom_range(0, 255));
    end
    in_valid = 0;
    enable = 0;
    repeat (100) @(negedge clk);
    check(n_flush_cycles > 0 && n_refused > 0 && n_released > 3 * FS, "mechanisms exercised");
    $display("flush cycles=%0d refused=%0d released=%0d", n_flush_cycles, n_refused, n_released);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
