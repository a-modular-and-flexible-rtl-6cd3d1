// calib_pulser -- test-pulse generator for calibration and debugging.
//
// A pulse on `start` launches a train of n_pulses pulses. Each pulse is high
// for `width` clock cycles, and pulses start `period` cycles apart. The
// train goes either to the Frontend LEDs selected by led_mask (light into
// the scintillator, so the whole analog chain is exercised) or, as a forced
// channel pattern, straight into the trigger path through channel_router.
// `busy` is high while the train runs and `done` pulses for one cycle in the
// cycle after the last low phase ends. A start while busy is ignored.
//
// Timing: the clock edge that samples `start` raises the first pulse; pulse
// i is high for edges i*period .. i*period+width-1 counted from that edge,
// busy for the n_pulses*period cycles, and done pulses after edge
// n_pulses*period. A width of 0 is treated as 1, and a width not below the
// period is cut to period-1 so that each pulse ends before the next begins;
// a period below 2 is treated as 2.
//
// Pulsing the LEDs and forcing digital test patterns come from the station
// description; the pulse-train parameters and encodings are this design's.
module calib_pulser #(
  parameter int unsigned N_CH  = station_pkg::N_CH,
  parameter int unsigned N_LED = station_pkg::N_LED
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      n_pulses,
  input  logic [15:0]      period,
  input  logic [7:0]       width,
  input  station_pkg::calib_target_e target,
  input  logic [N_LED-1:0] led_mask,
  input  logic [N_CH-1:0]  pattern,
  output logic [N_LED-1:0] led,
  output logic             force_en,
  output logic [N_CH-1:0]  force_pattern,
  output logic             busy,
  output logic             done
);

  typedef enum logic [1:0] { S_IDLE, S_HIGH, S_LOW } state_e;

  state_e          state_q;
  logic [15:0]     cnt_q;        // cycles left in the current phase
  logic [15:0]     left_q;       // pulses left after the current one
  logic [15:0]     hi_len_q, lo_len_q;
  station_pkg::calib_target_e target_q;
  logic [N_LED-1:0] mask_q;
  logic [N_CH-1:0] pattern_q;

  // Phase lengths from the requested period and width.
  logic [15:0] per_eff, hi_eff;
  always_comb begin
    per_eff = (period < 16'd2) ? 16'd2 : period;
    hi_eff  = (width == 8'd0) ? 16'd1 : {8'd0, width};
    if (hi_eff >= per_eff) hi_eff = per_eff - 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      cnt_q     <= '0;
      left_q    <= '0;
      hi_len_q  <= '0;
      lo_len_q  <= '0;
      target_q  <= station_pkg::CAL_LED;
      mask_q    <= '0;
      pattern_q <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start && n_pulses != 16'd0) begin
            state_q   <= S_HIGH;
            cnt_q     <= hi_eff;
            hi_len_q  <= hi_eff;
            lo_len_q  <= per_eff - hi_eff;
            left_q    <= n_pulses - 16'd1;
            target_q  <= target;
            mask_q    <= led_mask;
            pattern_q <= pattern;
          end
        end
        S_HIGH: begin
          if (cnt_q == 16'd1) begin
            state_q <= S_LOW;
            cnt_q   <= lo_len_q;
          end else begin
            cnt_q <= cnt_q - 16'd1;
          end
        end
        S_LOW: begin
          if (cnt_q == 16'd1) begin
            if (left_q == 16'd0) begin
              state_q <= S_IDLE;
              done    <= 1'b1;
            end else begin
              state_q <= S_HIGH;
              cnt_q   <= hi_len_q;
              left_q  <= left_q - 16'd1;
            end
          end else begin
            cnt_q <= cnt_q - 16'd1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  logic pulse_on;
  always_comb begin
    pulse_on      = (state_q == S_HIGH);
    busy          = (state_q != S_IDLE);
    led           = (pulse_on && target_q == station_pkg::CAL_LED) ? mask_q : '0;
    // While a forced train runs the detector is cut off from the trigger,
    // so the low phases force all channels low.
    force_en      = busy && (target_q == station_pkg::CAL_FORCE);
    force_pattern = pulse_on ? pattern_q : '0;
  end

endmodule
