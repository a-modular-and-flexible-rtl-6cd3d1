// channel_router -- selects what the trigger logic sees: the discriminated
// SiPM channels arriving from the Frontend HDMI receivers, or a test pattern
// forced digitally inside the Backend.
//
// The selected levels leave on `chan` combinationally, with no clock in the
// path, so that the trigger edge presented to the TDCs is the detector's own
// edge. A copy is passed through a two-flop synchroniser (`chan_sync`, two
// clock cycles later) for the clocked event builder.
//
// Follows the station description: channels are routed to the trigger
// look-up table and test patterns can be injected by forcing signals in the
// programmable logic. Forcing all channels at once with one enable, and the
// synchroniser depth, are this design's choices.
module channel_router #(
  parameter int unsigned N_CH = station_pkg::N_CH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] disc_in,        // asynchronous discriminator outputs
  input  logic            force_en,
  input  logic [N_CH-1:0] force_pattern,
  output logic [N_CH-1:0] chan,           // combinational, to trigger_lut / tdc_router
  output logic [N_CH-1:0] chan_sync       // synchronised to clk
);

  logic [N_CH-1:0] meta_q;

  always_comb chan = force_en ? force_pattern : disc_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta_q    <= '0;
      chan_sync <= '0;
    end else begin
      meta_q    <= chan;
      chan_sync <= meta_q;
    end
  end

endmodule
