// control_unit: state machine that sequences the streaming filter.
//
// The filter moves in 'advance' steps: in each step one pixel enters the
// row buffers and the window cache.  The centre of the window lags the
// input by DELAY = (WIN-1)/2 * IMG_W + (WIN-1)/2 steps, so an output can
// only be formed once DELAY further pixels have entered.  The states:
//   IDLE   - nothing in flight.  A pixel is accepted only while 'enable'
//            (activation) is high; the first pixel starts a frame.
//   STREAM - one pixel accepted per cycle when 'in_valid' is high; the
//            first DELAY steps of a stream only fill the window (priming),
//            every later step releases one output window.  When the last
//            pixel of a frame is accepted with 'enable' still high, the
//            next frame simply follows: its priming overlaps the flushing
//            of the previous frame and nothing stalls.
//   FLUSH  - entered when the last pixel of a frame is accepted while
//            'enable' is low (deactivation).  Input is refused and the unit
//            advances on its own for DELAY cycles to release the last
//            DELAY windows of the frame, then returns to IDLE.
// Outputs are registered and describe the window cache contents after the
// same clock edge that shifted it: 'win_valid' marks a window centred on a
// real pixel (at 'win_row', 'win_col'), and the border policy and constant
// that were latched with that frame's first input pixel (a border mode
// change therefore applies from the next frame on).  'win_tag' marks the
// first pixel of a frame, the last of a row and the last of a frame.
//
// Following the published filter architecture: a state machine that controls priming, flushing,
// activation and deactivation.  The states, the enable protocol, the
// valid/ready input handshake and the per-frame latching of the border mode
// are this implementation's own choices.
module control_unit
  import filter_pkg::*;
#(
  parameter int unsigned WIN   = DEF_WIN,
  parameter int unsigned PIX_W = DEF_PIX_W,
  parameter int unsigned IMG_W = DEF_IMG_W,
  parameter int unsigned IMG_H = DEF_IMG_H,
  localparam int unsigned RW   = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int unsigned CW   = (IMG_W > 1) ? $clog2(IMG_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // activation / deactivation and per-frame configuration
  input  logic             enable,
  input  border_mode_e     mode_in,
  input  logic [PIX_W-1:0] const_in,
  // input pixel handshake
  input  logic             in_valid,
  output logic             in_ready,
  // datapath control
  output logic             advance,
  output logic             win_valid,
  output logic [RW-1:0]    win_row,
  output logic [CW-1:0]    win_col,
  output border_mode_e     win_mode,
  output logic [PIX_W-1:0] win_const,
  output pix_tag_t         win_tag,
  // status
  output logic             busy
);

  localparam int unsigned HALF  = (WIN - 1) / 2;
  localparam int unsigned DELAY = HALF * IMG_W + HALF;
  localparam int unsigned DW    = $clog2(DELAY + 1);

  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,
    ST_STREAM = 2'd1,
    ST_FLUSH  = 2'd2
  } state_e;

  state_e           state;
  logic [DW-1:0]    fill;       // advances of this stream, saturating at DELAY
  logic [DW-1:0]    flush_cnt;
  logic [RW-1:0]    in_row, c_row;
  logic [CW-1:0]    in_col, c_col;
  border_mode_e     in_mode;
  logic [PIX_W-1:0] in_const;
  logic             accept, in_first, in_last, c_first, c_last_col, c_last_row;
  logic             emit;

  assign in_ready  = (state == ST_STREAM) || (state == ST_IDLE && enable);
  assign accept    = in_valid && in_ready;
  assign advance   = accept || (state == ST_FLUSH);
  assign in_first  = (in_row == '0) && (in_col == '0);
  assign in_last   = (int'(in_row) == IMG_H - 1) && (int'(in_col) == IMG_W - 1);
  assign emit      = advance && (int'(fill) == DELAY);
  assign c_first    = (c_row == '0) && (c_col == '0);
  assign c_last_col = (int'(c_col) == IMG_W - 1);
  assign c_last_row = (int'(c_row) == IMG_H - 1);
  assign busy      = (state != ST_IDLE);

  // State, fill level and input position.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      fill      <= '0;
      flush_cnt <= '0;
      in_row    <= '0;
      in_col    <= '0;
      in_mode   <= BORDER_MIRROR;
      in_const  <= '0;
    end else begin
      if (advance && int'(fill) < DELAY) fill <= fill + 1'b1;
      if (accept) begin
        if (in_first) begin
          in_mode  <= mode_in;
          in_const <= const_in;
        end
        if (int'(in_col) == IMG_W - 1) begin
          in_col <= '0;
          in_row <= (int'(in_row) == IMG_H - 1) ? '0 : in_row + 1'b1;
        end else begin
          in_col <= in_col + 1'b1;
        end
      end
      unique case (state)
        ST_IDLE: begin
          if (accept) state <= ST_STREAM;
        end
        ST_STREAM: begin
          if (accept && in_last && !enable) begin
            state     <= ST_FLUSH;
            flush_cnt <= '0;
          end
        end
        ST_FLUSH: begin
          flush_cnt <= flush_cnt + 1'b1;
          if (int'(flush_cnt) == DELAY - 1) begin
            state <= ST_IDLE;
            fill  <= '0;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // Window centre position, advanced for each window released.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_row     <= '0;
      c_col     <= '0;
      win_valid <= 1'b0;
      win_row   <= '0;
      win_col   <= '0;
      win_mode  <= BORDER_MIRROR;
      win_const <= '0;
      win_tag   <= '0;
    end else begin
      win_valid <= emit;
      if (emit) begin
        win_row     <= c_row;
        win_col     <= c_col;
        win_tag.sof <= c_first;
        win_tag.eol <= c_last_col;
        win_tag.eof <= c_last_col && c_last_row;
        if (c_first) begin
          // The first input pixel of this frame entered DELAY steps ago;
          // a first pixel accepted in this very cycle belongs to a frame
          // that is too short to exist, so the latched values are current.
          win_mode  <= in_mode;
          win_const <= in_const;
        end
        if (c_last_col) begin
          c_col <= '0;
          c_row <= c_last_row ? '0 : c_row + 1'b1;
        end else begin
          c_col <= c_col + 1'b1;
        end
      end
    end
  end

  // Handshake and sequencing rules, checked in simulation.
  // (These simulation-only checks read rst_n synchronously, which lint
  // reports as a reset used both ways; no logic depends on it.)
  logic advance_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) advance_q <= 1'b0;
    else        advance_q <= advance;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      a_no_input_while_flushing: assert (!(state == ST_FLUSH && in_ready))
        else $error("control_unit: input accepted while flushing");
      a_release_needs_step: assert (!win_valid || advance_q)
        else $error("control_unit: window released without a step");
      a_fill_bounded: assert (int'(fill) <= DELAY)
        else $error("control_unit: fill level out of range");
    end
  end

  // A frame must be longer than the priming delay for the latched border
  // mode to be the one of the frame being released.
  initial assert (IMG_H > HALF && IMG_W > HALF)
    else $error("control_unit: image smaller than half a window");

endmodule
