// cosmic_block_ctrl -- cuts data taking into Cosmic blocks.
//
// A Cosmic block is a slice of the run over which operating conditions are
// taken as constant: when a block opens, the CPU reads out the environmental
// sensors, voltages, currents and its own state, so that the analysis can
// later reject whole blocks taken out of specification. A block closes after
// max_events events (mode BLK_BY_EVENTS) or after max_seconds GPS seconds
// (mode BLK_BY_TIME); a limit of 0 never closes it.
//
// Timing: the rising edge of `run` opens block 0 (block_start one cycle
// later). The event or GPS tick that reaches the limit closes the block in
// the same clock edge: block_end and block_start pulse together in the next
// cycle, block_id has advanced and the counters are back at 0. An event that
// closes a block belongs to the block it closes. Falling `run` closes the
// current block (block_end) without opening a new one.
//
// Slicing by time or by number of events comes from the station
// description; the time unit (GPS seconds) and the counter behaviour are
// this design's choices.
module cosmic_block_ctrl
  import station_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  block_mode_e mode,
  input  logic [31:0] max_events,
  input  logic [31:0] max_seconds,
  input  logic        event_in,
  input  logic        pps_tick,
  output logic [15:0] block_id,
  output logic [31:0] events_in_block,
  output logic [31:0] seconds_in_block,
  output logic        block_start,
  output logic        block_end
);

  logic run_q;
  logic [31:0] ev_next, s_next;
  logic        limit_hit;

  always_comb begin
    ev_next = events_in_block + (event_in ? 32'd1 : 32'd0);
    s_next  = seconds_in_block + (pps_tick ? 32'd1 : 32'd0);
    if (mode == BLK_BY_EVENTS) limit_hit = event_in && (max_events  != 0) && (ev_next >= max_events);
    else                       limit_hit = pps_tick && (max_seconds != 0) && (s_next  >= max_seconds);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q            <= 1'b0;
      block_id         <= '0;
      events_in_block  <= '0;
      seconds_in_block <= '0;
      block_start      <= 1'b0;
      block_end        <= 1'b0;
    end else begin
      run_q       <= run;
      block_start <= 1'b0;
      block_end   <= 1'b0;
      if (run && !run_q) begin
        block_id         <= '0;
        events_in_block  <= '0;
        seconds_in_block <= '0;
        block_start      <= 1'b1;
      end else if (!run && run_q) begin
        block_end <= 1'b1;
      end else if (run) begin
        if (limit_hit) begin
          block_id         <= block_id + 16'd1;
          events_in_block  <= '0;
          seconds_in_block <= '0;
          block_end        <= 1'b1;
          block_start      <= 1'b1;
        end else begin
          events_in_block  <= ev_next;
          seconds_in_block <= s_next;
        end
      end
    end
  end

endmodule
