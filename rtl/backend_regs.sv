// backend_regs -- register bank between the station CPU and the trigger and
// acquisition logic.
//
// The CPU sets the operating configuration before a run (trigger truth
// tables, operation enables, TDC routing, calibration pulses, Cosmic block
// length), starts and stops the run, reads status and pops event records.
// The bus is a simple single-cycle one: a write takes effect at the clock
// edge where bus_we is high; bus_rdata is a combinational function of
// bus_addr. Writes to A_CAL_START, A_EVT_POP and to the A_CTRL clear bit, and
// writes into the truth-table window, leave as one-cycle strobes. Word
// addresses are listed in station_pkg; unmapped addresses read as 0.
//
// That the configuration is loaded by the CPU, from non-volatile memory or
// from the network, follows the station description; the bus and the
// register map are this design's own.
module backend_regs
  import station_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // CPU bus
  input  logic                bus_we,
  input  logic [7:0]          bus_addr,
  input  logic [31:0]         bus_wdata,
  output logic [31:0]         bus_rdata,
  // configuration out
  output logic                run,
  output block_mode_e         block_mode,
  output logic                fifo_clear,
  output logic [N_OPS-1:0]    op_enable,
  output logic [31:0]         blk_events,
  output logic [31:0]         blk_seconds,
  output logic [N_TDC-1:0]    tdc_enable,
  output logic [N_TDC-1:0]    tdc_mode,      // tdc_mode_e per bit
  output logic [N_TDC-1:0][$clog2(N_CH)-1:0] tot_sel,
  output logic [15:0]         cal_n_pulses,
  output logic [15:0]         cal_period,
  output logic [7:0]          cal_width,
  output calib_target_e       cal_target,
  output logic [N_LED-1:0]    cal_led_mask,
  output logic [N_CH-1:0]     cal_pattern,
  output logic                cal_start,
  output logic                lut_we,
  output logic [$clog2(N_OPS)-1:0]     lut_op,
  output logic [$clog2(LUT_WORDS)-1:0] lut_word,
  output logic [CFG_W-1:0]    lut_wdata,
  output logic                evt_pop,
  // status in
  input  logic                fifo_empty,
  input  logic [7:0]          fifo_level,
  input  logic                cal_busy,
  input  logic [31:0]         dropped,
  input  logic [15:0]         block_id,
  input  logic [31:0]         blk_evcnt,
  input  logic [31:0]         blk_seccnt,
  input  logic [31:0]         seconds,
  input  event_t              evt_head
);

  localparam int unsigned LUT_SPAN = N_OPS * LUT_WORDS;

  logic [31:0] tdc_cfg_q, cal_timing_q, cal_cfg_q;
  logic [7:0]  lut_off;
  logic [EVENT_W-1:0] head_bits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run          <= 1'b0;
      block_mode   <= BLK_BY_EVENTS;
      op_enable    <= '0;
      blk_events   <= '0;
      blk_seconds  <= '0;
      tdc_cfg_q    <= '0;
      cal_timing_q <= '0;
      cal_cfg_q    <= '0;
      cal_pattern  <= '0;
    end else if (bus_we) begin
      unique case (bus_addr)
        A_CTRL:        begin
                         run        <= bus_wdata[0];
                         block_mode <= block_mode_e'(bus_wdata[1]);
                       end
        A_OP_ENABLE:   op_enable    <= bus_wdata[N_OPS-1:0];
        A_BLK_EVENTS:  blk_events   <= bus_wdata;
        A_BLK_SECS:    blk_seconds  <= bus_wdata;
        A_TDC_CFG:     tdc_cfg_q    <= bus_wdata;
        A_CAL_TIMING:  cal_timing_q <= bus_wdata;
        A_CAL_CFG:     cal_cfg_q    <= bus_wdata;
        A_CAL_PATTERN: cal_pattern  <= bus_wdata[N_CH-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int t = 0; t < N_TDC; t++) begin
      tdc_enable[t] = tdc_cfg_q[8*t];
      tdc_mode[t]   = tdc_cfg_q[8*t+1];
      tot_sel[t]    = tdc_cfg_q[8*t+2 +: $clog2(N_CH)];
    end
    cal_n_pulses = cal_timing_q[15:0];
    cal_period   = cal_timing_q[31:16];
    cal_width    = cal_cfg_q[7:0];
    cal_target   = calib_target_e'(cal_cfg_q[8]);
    cal_led_mask = cal_cfg_q[16 +: N_LED];

    // strobes
    fifo_clear = bus_we && bus_addr == A_CTRL && bus_wdata[2];
    cal_start  = bus_we && bus_addr == A_CAL_START;
    evt_pop    = bus_we && bus_addr == A_EVT_POP;
    lut_off    = bus_addr - A_LUT_BASE;
    lut_we     = bus_we && bus_addr >= A_LUT_BASE && 32'(lut_off) < LUT_SPAN;
    lut_op     = $clog2(N_OPS)'(32'(lut_off) / LUT_WORDS);
    lut_word   = $clog2(LUT_WORDS)'(32'(lut_off) % LUT_WORDS);
    lut_wdata  = bus_wdata;

    // read-back
    head_bits = evt_head;
    unique case (bus_addr)
      A_CTRL:        bus_rdata = {30'd0, block_mode, run};
      A_OP_ENABLE:   bus_rdata = 32'(op_enable);
      A_BLK_EVENTS:  bus_rdata = blk_events;
      A_BLK_SECS:    bus_rdata = blk_seconds;
      A_TDC_CFG:     bus_rdata = tdc_cfg_q;
      A_CAL_TIMING:  bus_rdata = cal_timing_q;
      A_CAL_CFG:     bus_rdata = cal_cfg_q;
      A_CAL_PATTERN: bus_rdata = 32'(cal_pattern);
      A_STATUS:      bus_rdata = {16'd0, fifo_level, 5'd0, run, cal_busy, fifo_empty};
      A_DROPPED:     bus_rdata = dropped;
      A_BLOCK_ID:    bus_rdata = 32'(block_id);
      A_BLK_EVCNT:   bus_rdata = blk_evcnt;
      A_SECONDS:     bus_rdata = seconds;
      A_BLK_SECCNT:  bus_rdata = blk_seccnt;
      A_EVT0:        bus_rdata = head_bits[31:0];
      A_EVT1:        bus_rdata = head_bits[63:32];
      A_EVT2:        bus_rdata = head_bits[95:64];
      A_EVT3:        bus_rdata = 32'(head_bits[EVENT_W-1:96]);
      default:       bus_rdata = '0;
    endcase
  end

endmodule
