// event_builder -- turns each trigger into an event record for the CPU.
//
// The trigger and trigger bits come combinationally from trigger_lut, in
// no clock domain; they are synchronised with two flops, as the channel
// copy chan_sync already is, so all three line up. A rising edge of the
// synchronised trigger while `run` is high is an event: in that same cycle
// `event_pulse` is high and the record
//   {block_id, event_no, seconds, ticks, trig_bits, hits}
// is pushed into the event FIFO, event_no being the number of events
// already in the current Cosmic block (its low 16 bits; the upper bits of
// events_in_block are unused here). The record is thus taken three
// clock edges after the trigger rises; the exact trigger time comes from
// the external TDC. If the FIFO is full the record is lost and `dropped`
// counts it (saturating). Trigger pulses shorter than two clock cycles may
// be missed by this clocked path, though never by the TDC path.
//
// Event building on the Backend and the GPS-based timestamp come from the
// station description; the record layout and loss counting are this
// design's choices.
module event_builder
  import station_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic             clear,
  input  logic             trigger,
  input  logic [N_OPS-1:0] trig_bits,
  input  logic [N_CH-1:0]  chan_sync,
  input  logic [15:0]      block_id,
  input  logic [31:0]      events_in_block,
  input  logic [31:0]      seconds,
  input  logic [31:0]      ticks,
  output logic             event_pulse,
  input  logic             rd_en,
  output event_t           rd_data,
  output logic             empty,
  output logic [AW:0]      level,
  output logic [31:0]      dropped
);

  logic [1:0]       trig_sync_q;
  logic             trig_prev_q;
  logic [N_OPS-1:0] bits_meta_q, bits_sync_q;
  logic             full;
  event_t           rec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_sync_q <= '0;
      trig_prev_q <= 1'b0;
      bits_meta_q <= '0;
      bits_sync_q <= '0;
    end else begin
      trig_sync_q <= {trig_sync_q[0], trigger};
      trig_prev_q <= trig_sync_q[1];
      bits_meta_q <= trig_bits;
      bits_sync_q <= bits_meta_q;
    end
  end

  always_comb begin
    event_pulse   = run && trig_sync_q[1] && !trig_prev_q;
    rec.block_id  = block_id;
    rec.event_no  = events_in_block[15:0];
    rec.seconds   = seconds;
    rec.ticks     = ticks;
    rec.trig_bits = bits_sync_q;
    rec.hits      = chan_sync;
  end

  event_fifo #(.W(EVENT_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clear,
    .wr_en  (event_pulse),
    .wr_data(rec),
    .rd_en,
    .rd_data(rd_data),
    .empty,
    .full,
    .level
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                               dropped <= '0;
    else if (clear)                           dropped <= '0;
    else if (event_pulse && full && dropped != '1) dropped <= dropped + 32'd1;
  end

endmodule
