// station_backend_top -- trigger, timing and acquisition logic of the
// Backend of a cosmic-ray detector station.
//
// Up to four Frontend boards each send two discriminated SiPM channels
// over an HDMI cable, eight channels in all (disc_in[2f], disc_in[2f+1]
// from Frontend f); the same cable carries that Frontend's two LED lines
// (led[2f], led[2f+1]). Inside:
//   channel_router    detector channels, or a forced test pattern
//   trigger_lut       five programmable truth tables -> trigger bits -> trigger
//   tdc_router        START/STOP pins of the two external TDCs: trigger
//                     against GPS pulse, or time over threshold of a channel
//   calib_pulser      LED pulses or forced patterns for calibration
//   gps_timebase      GPS seconds and clock ticks since the last GPS pulse
//   cosmic_block_ctrl cuts the run into Cosmic blocks by events or by time
//   event_builder     event records into a FIFO for the CPU
//   backend_regs      register bank on the CPU bus
// The path disc_in -> trigger -> tdc_start/tdc_stop has no clock in it;
// everything else runs on clk. The CPU (not part of this RTL) reads the TDC
// results over their serial interface, pairs them with the event records,
// and on block_start reads out the environmental and operating data.
//
// The partition into trigger look-up table, TDC routing, calibration and
// Cosmic blocks follows the station description; the clocked event record
// path and the register bus are this design's own.
module station_backend_top
  import station_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CH-1:0]  disc_in,     // discriminated SiPM channels
  input  logic             gps_pps,     // GPS timing pulse
  output logic [N_LED-1:0] led,         // calibration LED lines, two per Frontend
  output logic [N_TDC-1:0] tdc_start,
  output logic [N_TDC-1:0] tdc_stop,
  output logic             trigger,
  output logic             block_start, // a Cosmic block opened: read out slow data
  output logic             block_end,
  output logic             calib_done,  // calibration pulse train finished
  input  logic             bus_we,
  input  logic [7:0]       bus_addr,
  input  logic [31:0]      bus_wdata,
  output logic [31:0]      bus_rdata
);

  localparam int unsigned AW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  // configuration
  logic                run, fifo_clear, cal_start, lut_we, evt_pop;
  block_mode_e         block_mode;
  logic [N_OPS-1:0]    op_enable;
  logic [31:0]         blk_events, blk_seconds;
  logic [N_TDC-1:0]    tdc_enable, tdc_mode_bits;
  logic [N_TDC-1:0][$clog2(N_CH)-1:0] tot_sel;
  logic [15:0]         cal_n_pulses, cal_period;
  logic [7:0]          cal_width;
  calib_target_e       cal_target;
  logic [N_LED-1:0]    cal_led_mask;
  logic [N_CH-1:0]     cal_pattern;
  logic [$clog2(N_OPS)-1:0]     lut_op;
  logic [$clog2(LUT_WORDS)-1:0] lut_word;
  logic [CFG_W-1:0]    lut_wdata;
  tdc_mode_e           tdc_mode [N_TDC];

  // datapath
  logic                force_en, cal_busy;
  logic [N_CH-1:0]     force_pattern, chan, chan_sync;
  logic [N_OPS-1:0]    trig_bits;
  logic                pps_tick, event_pulse, fifo_empty;
  logic [31:0]         seconds, ticks, dropped, events_in_block, seconds_in_block;
  logic [15:0]         block_id;
  logic [AW:0]         fifo_level;
  event_t              evt_head;

  backend_regs u_regs (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .run, .block_mode, .fifo_clear, .op_enable, .blk_events, .blk_seconds,
    .tdc_enable, .tdc_mode(tdc_mode_bits), .tot_sel,
    .cal_n_pulses, .cal_period, .cal_width, .cal_target, .cal_led_mask, .cal_pattern, .cal_start,
    .lut_we, .lut_op, .lut_word, .lut_wdata, .evt_pop,
    .fifo_empty, .fifo_level(8'(fifo_level)), .cal_busy, .dropped,
    .block_id, .blk_evcnt(events_in_block), .blk_seccnt(seconds_in_block), .seconds, .evt_head
  );

  calib_pulser u_calib (
    .clk, .rst_n, .start(cal_start), .n_pulses(cal_n_pulses), .period(cal_period),
    .width(cal_width), .target(cal_target), .led_mask(cal_led_mask), .pattern(cal_pattern),
    .led, .force_en, .force_pattern, .busy(cal_busy), .done(calib_done)
  );

  channel_router u_router (
    .clk, .rst_n, .disc_in, .force_en, .force_pattern, .chan, .chan_sync
  );

  trigger_lut u_lut (
    .clk, .rst_n, .cfg_we(lut_we), .cfg_op(lut_op), .cfg_word(lut_word), .cfg_wdata(lut_wdata),
    .op_enable, .chan, .trig_bits, .trigger
  );

  always_comb begin
    for (int t = 0; t < N_TDC; t++) tdc_mode[t] = tdc_mode_e'(tdc_mode_bits[t]);
  end

  tdc_router u_tdc (
    .tdc_enable, .tdc_mode, .tot_sel, .trigger, .gps_pps, .chan, .tdc_start, .tdc_stop
  );

  gps_timebase u_time (
    .clk, .rst_n, .clear(fifo_clear), .gps_pps, .pps_tick, .seconds, .ticks
  );

  cosmic_block_ctrl u_blocks (
    .clk, .rst_n, .run, .mode(block_mode), .max_events(blk_events), .max_seconds(blk_seconds),
    .event_in(event_pulse), .pps_tick, .block_id, .events_in_block, .seconds_in_block,
    .block_start, .block_end
  );

  event_builder #(.DEPTH(FIFO_DEPTH)) u_events (
    .clk, .rst_n, .run, .clear(fifo_clear), .trigger, .trig_bits, .chan_sync,
    .block_id, .events_in_block, .seconds, .ticks, .event_pulse,
    .rd_en(evt_pop), .rd_data(evt_head), .empty(fifo_empty), .level(fifo_level), .dropped
  );

endmodule
