// event_builder_tb -- self-checking test of event_builder (with a 4-deep
// buffer so that overflow is reached quickly).
// Sends asynchronous trigger pulses with trigger bits, checks that each
// becomes exactly one event_pulse two clock edges after the first edge that
// sees the trigger, that the records read back carry the values present in
// that cycle, that a full buffer drops and counts events, that triggers
// outside a run are ignored and that clear empties the buffer.
module event_builder_tb;
  import station_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0, run = 0, clear = 0, trigger = 0, rd_en = 0;
  logic [N_OPS-1:0] trig_bits = 0;
  logic [N_CH-1:0] chan_sync = 0;
  logic [15:0] block_id = 0;
  logic [31:0] events_in_block = 0, seconds = 0, ticks = 0, dropped;
  logic event_pulse, empty;
  logic [2:0] level;
  event_t rd_data;
  int checks = 0, failures = 0, n_pulses = 0, edges_since = -1;
  event_t expq [$];

  event_builder #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // context inputs change every cycle
  always @(posedge clk) begin
    ticks     <= ticks + 1;
    chan_sync <= N_CH'($urandom);
    if (ticks[3:0] == 0) begin seconds <= seconds + 1; block_id <= block_id + 3; end
    events_in_block <= events_in_block + 7;
  end

  // expected record taken from the inputs in the pulse cycle
  always @(negedge clk) begin
    if (edges_since >= 0) edges_since++;
    if (event_pulse) begin
      event_t e;
      n_pulses++;
      check(edges_since == 3, $sformatf("event latency %0d negedges", edges_since));
      edges_since = -1;
      e.block_id = block_id; e.event_no = events_in_block[15:0]; e.seconds = seconds;
      e.ticks = ticks; e.trig_bits = trig_bits; e.hits = chan_sync;
      if (expq.size() < DEPTH) expq.push_back(e);
    end
  end

  task automatic fire(input logic [N_OPS-1:0] bits);
    @(posedge clk); #3;            // between edges: asynchronous to clk
    trig_bits = bits; trigger = 1; edges_since = 0;
    repeat (3 + $urandom % 3) @(posedge clk);
    #2 trigger = 0;
    repeat (3) @(posedge clk);
    #2 trig_bits = '0;
  endtask

  task automatic drain();
    while (!empty) begin
      @(negedge clk);
      check(rd_data == expq[0], $sformatf("record %h exp %h", rd_data, expq[0]));
      void'(expq.pop_front());
      rd_en = 1; @(negedge clk); rd_en = 0;
    end
    check(expq.size() == 0, "all expected records read");
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // outside a run: no events
    fire(5'b00001);
    check(n_pulses == 0 && empty, "no event while run is low");
    run = 1;
    for (int i = 0; i < 3; i++) fire(5'($urandom) | 5'b1);
    check(n_pulses == 3 && level == 3, "three events buffered");
    drain();
    // overflow: 6 events into a 4-deep buffer
    for (int i = 0; i < 6; i++) fire(5'($urandom) | 5'b1);
    check(level == 4 && dropped == 2, $sformatf("overflow level %0d dropped %0d", level, dropped));
    drain();
    for (int i = 0; i < 2; i++) fire(5'b10000);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; expq.delete();
    check(empty && dropped == 0, "clear empties buffer and loss counter");
    check(n_pulses == 11, $sformatf("event count %0d", n_pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
