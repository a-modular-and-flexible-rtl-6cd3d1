// gps_timebase -- coarse event time from the GPS pulse-per-second.
//
// The GPS pulse is synchronised with two flops; its rising edge gives a
// one-cycle `pps_tick`, high after the second clock edge that sees the
// pulse, and the counters step at the third. On each tick
// `seconds` advances and `ticks` (clock cycles since the last GPS pulse)
// restarts at 0; otherwise `ticks` counts up by one per clock, saturating at
// its maximum if the GPS pulse goes missing. `clear` zeroes both counters.
//
// Together with the TDC's fine measurement of trigger against GPS pulse,
// seconds and ticks give each event its timestamp. Timing against the GPS
// signal comes from the station description; this split into counters and
// their 32-bit widths are this design's choices.
module gps_timebase (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        gps_pps,
  output logic        pps_tick,
  output logic [31:0] seconds,
  output logic [31:0] ticks
);

  logic [2:0] sync_q;   // [0],[1] synchroniser, [2] previous level

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[1:0], gps_pps};
  end

  always_comb pps_tick = sync_q[1] & ~sync_q[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seconds <= '0;
      ticks   <= '0;
    end else if (clear) begin
      seconds <= '0;
      ticks   <= '0;
    end else if (pps_tick) begin
      seconds <= seconds + 32'd1;
      ticks   <= '0;
    end else if (ticks != '1) begin
      ticks   <= ticks + 32'd1;
    end
  end

endmodule
