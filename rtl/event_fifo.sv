// event_fifo -- synchronous first-in first-out buffer for event records.
//
// Holds up to DEPTH records of W bits between the trigger logic and the CPU
// that ships events to local storage or the network. rd_data shows the
// oldest record whenever `empty` is low (first-word fall-through); rd_en
// drops it. A push while full and a pop while empty are ignored; a push and
// a pop in the same cycle are both done. `clear` empties the buffer. The
// storage is a plain array, written on the clock and read asynchronously.
//
// The station description names event building but no buffer; the FIFO and
// its depth are this design's choices. The bound assertion below is
// disabled during reset, which is why lint sees rst_n used both as an
// asynchronous reset and as a synchronous condition.
module event_fifo #(
  parameter int unsigned W     = station_pkg::EVENT_W,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  level
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  always_comb begin
    empty   = (level == '0);
    full    = (level == (AW+1)'(DEPTH));
    do_wr   = wr_en && !full;
    do_rd   = rd_en && !empty;
    rd_data = mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (32'(wr_ptr) == DEPTH-1) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (32'(rd_ptr) == DEPTH-1) ? '0 : rd_ptr + 1'b1;
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // A correct user never pushes into a full or pops an empty buffer
  // without knowing it is dropped; the event builder counts such losses.
  property p_level_bound;
    @(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH);
  endproperty
  a_level_bound: assert property (p_level_bound);

endmodule
