// cal_control: integration timing and calibration noise-source control.
//
// The receiver injects a noise signal ahead of the first amplifiers through
// an RF switch that the polarimeter drives. Integrations alternate between
// cal-off and cal-on, so that two consecutive integrations form one
// calibration packet. Between integrations the switch is given time to
// settle, and no data are taken during that time.
//
// The controller counts the frames the window block completes. After
// FRAMES_PER_INT frames (all FFT lanes of both FPGA modules together, so
// each lane receives N_INT frames) it lowers win_enable, toggles cal_on and
// waits SWITCH_CYCLES clocks before raising win_enable again. int_index
// counts finished integrations; integration k is taken with cal_on = k[0],
// the first integration after reset being cal-off.
//
// Interface: frame_done is the window's last_accept pulse. win_enable is a
// register, so a frame that would begin in the clock after the last frame
// of an integration is already held off. blank_count counts the blanking
// periods that were completed.
//
// From the paper: cal switching synchronised with the polarimeter, 200 us
// allowed for switching between integrations, packets of one cal-on and one
// cal-off integration. This design's choices: cal-off first, the switch
// toggled in the first clock of the blanking time, and the data discarded
// for whole frames only.
module cal_control
  import polarimeter_pkg::*;
#(
  parameter int unsigned FRAMES_PER_INT = MODULES_DEF * LANES_DEF * N_INT_DEF,
  parameter int unsigned SWITCH_CYCLES  = SWITCH_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_done,
  output logic        win_enable,
  output logic        cal_on,
  output logic [15:0] int_index,
  output logic [15:0] blank_count
);
  localparam int unsigned FW = $clog2(FRAMES_PER_INT + 1);
  localparam int unsigned SW = $clog2(SWITCH_CYCLES + 1);

  typedef enum logic {S_INTEGRATE, S_BLANK} state_t;
  state_t        state;
  logic [FW-1:0] frames;
  logic [SW-1:0] wait_cnt;

  assign win_enable = (state == S_INTEGRATE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_INTEGRATE;
      frames      <= '0;
      wait_cnt    <= '0;
      cal_on      <= 1'b0;
      int_index   <= '0;
      blank_count <= '0;
    end else begin
      unique case (state)
        S_INTEGRATE:
          if (frame_done) begin
            if (frames == FW'(FRAMES_PER_INT - 1)) begin
              frames    <= '0;
              state     <= S_BLANK;
              cal_on    <= ~cal_on;
              int_index <= int_index + 1'b1;
              wait_cnt  <= '0;
            end else begin
              frames <= frames + 1'b1;
            end
          end
        S_BLANK:
          if (wait_cnt == SW'(SWITCH_CYCLES - 1)) begin
            state       <= S_INTEGRATE;
            blank_count <= blank_count + 1'b1;
          end else begin
            wait_cnt <= wait_cnt + 1'b1;
          end
      endcase
    end
  end

  // No frame may end while the data are blanked.
  assert property (@(posedge clk) disable iff (!rst_n) !(state == S_BLANK && frame_done));

endmodule
