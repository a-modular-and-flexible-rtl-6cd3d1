// tdc_router -- drives the START and STOP pins of the external TDC chips.
//
// Each TDC has its own mode:
//   TDC_TIMING  START = trigger, STOP = GPS pulse-per-second. The TDC then
//               measures the trigger time against the GPS timing signal, the
//               quantity used to line up events from different stations.
//   TDC_TOT     START = channel tot_sel, STOP = its complement. START rises
//               with the discriminated pulse and STOP rises when it ends, so
//               the TDC measures time over threshold, an estimate of the
//               pulse amplitude.
// A disabled TDC has both pins held low. The routing is combinational: no
// clock sits between the detector edge and the TDC.
//
// The two TDCs, timing against GPS and the time-over-threshold routing come
// from the station description; using the inverted channel as STOP and the
// per-TDC enable are this design's choices.
module tdc_router #(
  parameter int unsigned N_CH  = station_pkg::N_CH,
  parameter int unsigned N_TDC = station_pkg::N_TDC,
  localparam int unsigned SEL_W = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic [N_TDC-1:0]            tdc_enable,
  input  station_pkg::tdc_mode_e                   tdc_mode [N_TDC],
  input  logic [N_TDC-1:0][SEL_W-1:0] tot_sel,
  input  logic                        trigger,
  input  logic                        gps_pps,
  input  logic [N_CH-1:0]             chan,
  output logic [N_TDC-1:0]            tdc_start,
  output logic [N_TDC-1:0]            tdc_stop
);

  always_comb begin
    for (int t = 0; t < N_TDC; t++) begin
      tdc_start[t] = 1'b0;
      tdc_stop[t]  = 1'b0;
      if (tdc_enable[t]) begin
        if (tdc_mode[t] == station_pkg::TDC_TOT) begin
          tdc_start[t] =  chan[tot_sel[t]];
          tdc_stop[t]  = ~chan[tot_sel[t]];
        end else begin
          tdc_start[t] = trigger;
          tdc_stop[t]  = gps_pps;
        end
      end
    end
  end

endmodule
