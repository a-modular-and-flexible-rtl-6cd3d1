// trigger_lut -- programmable trigger decision of the station.
//
// The eight channel levels form an index into N_OPS truth tables of 2^N_CH
// bits each. Table k holds an arbitrary Boolean function of the channels
// (for example "all four planes", or "upper pair OR lower pair"); its
// output, gated by op_enable[k], is trigger bit k. The trigger is the OR of
// the trigger bits. Channel to trigger is purely combinational, so the
// trigger edge keeps the timing of the detector signal.
//
// Tables are loaded one CFG_W-bit word at a time on clk: bit i of word w of
// table op is the output for channel pattern w*CFG_W+i. Reset clears every
// table, so nothing triggers until a configuration is loaded.
//
// The look-up table, the five operations and the "Trigger Bits" come from
// the station description; combining the operations by OR, loading in
// words and the reset value are this design's choices.
module trigger_lut #(
  parameter int unsigned N_CH  = station_pkg::N_CH,
  parameter int unsigned N_OPS = station_pkg::N_OPS,
  parameter int unsigned CFG_W = station_pkg::CFG_W,
  localparam int unsigned ENTRIES = 2 ** N_CH,
  localparam int unsigned WORDS   = (ENTRIES + CFG_W - 1) / CFG_W,
  localparam int unsigned OP_W    = (N_OPS > 1) ? $clog2(N_OPS) : 1,
  localparam int unsigned WORD_W  = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [OP_W-1:0]   cfg_op,
  input  logic [WORD_W-1:0] cfg_word,
  input  logic [CFG_W-1:0]  cfg_wdata,
  input  logic [N_OPS-1:0]  op_enable,
  input  logic [N_CH-1:0]   chan,
  output logic [N_OPS-1:0]  trig_bits,
  output logic              trigger
);

  // table_q[op] holds WORDS*CFG_W bits; entries past ENTRIES are unused.
  logic [N_OPS-1:0][WORDS*CFG_W-1:0] table_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      table_q <= '0;
    end else if (cfg_we && (32'(cfg_op) < N_OPS)) begin
      table_q[cfg_op][cfg_word*CFG_W +: CFG_W] <= cfg_wdata;
    end
  end

  always_comb begin
    for (int k = 0; k < N_OPS; k++) begin
      trig_bits[k] = op_enable[k] & table_q[k][chan];
    end
    trigger = |trig_bits;
  end

endmodule
