// station_backend_top_tb -- end-to-end test of the Backend logic at its
// default size (eight channels, five trigger operations, two TDCs, 64-deep
// event buffer).
//
// Configures the station over the register bus like the CPU would, then:
//   1. four-plane AND trigger (operation 0) plus a two-plane telescope
//      trigger (operation 1): random channel patterns, some in
//      coincidence; the trigger pin, the timing-mode TDC pins and every
//      event record read back are compared with a model;
//   2. time over threshold: TDC 1 follows channel 2 and its complement;
//   3. Cosmic blocks sliced by number of events, then by GPS seconds;
//   4. calibration: LED pulse train, then a forced digital pattern that
//      must trigger once per pulse while the detector inputs are ignored;
//   5. buffer overflow: more events than the buffer holds, loss counted.
// Each mechanism is counted and one that never happened is a failure.
module station_backend_top_tb;
  import station_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] disc_in = 0;
  logic gps_pps = 0;
  logic [N_LED-1:0] led;
  logic [N_TDC-1:0] tdc_start, tdc_stop;
  logic trigger, block_start, block_end, calib_done;
  logic bus_we = 0;
  logic [7:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_and4 = 0, n_tele = 0, n_no_trig = 0, n_tdc_timing = 0, n_tot = 0;
  int n_blk_events = 0, n_blk_time = 0, n_led_pulses = 0, n_forced_events = 0;
  int n_dropped = 0, n_pps = 0, n_block_start = 0;

  station_backend_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a; #1 d = bus_rdata;
  endtask

  // GPS pulse-per-second, scaled to one "second" every 500 clock cycles
  bit pps_on = 0;
  initial forever begin
    repeat (495) @(posedge clk);
    if (pps_on) begin #2 gps_pps = 1; repeat (5) @(posedge clk); #2 gps_pps = 0; n_pps++; end
    else repeat (5) @(posedge clk);
  end

  always @(posedge clk) if (block_start) n_block_start++;
  logic led_q = 0;
  always @(negedge clk) begin
    if (led[0] && !led_q) n_led_pulses++;
    led_q <= led[0];
  end

  // truth tables of the example configurations
  function automatic logic [255:0] tbl(input int kind);
    logic [255:0] t;
    for (int p = 0; p < 256; p++)
      t[p] = (kind == 0) ? (p[3:0] == 4'hF) : (p[4] & p[5]);
    return t;
  endfunction

  function automatic logic [N_OPS-1:0] model_bits(input logic [7:0] p);
    return {3'b000, p[4] & p[5], p[3:0] == 4'hF};
  endfunction

  // pop every record and compare with the expected queue
  event_t expq [$];
  task automatic drain(input string tag);
    logic [31:0] d, w0, w1, w2, w3;
    event_t got;
    rd(A_STATUS, d);
    while (!d[0]) begin
      rd(A_EVT0, w0); rd(A_EVT1, w1); rd(A_EVT2, w2); rd(A_EVT3, w3);
      got = event_t'({w3[EVENT_W-97:0], w2, w1, w0});
      if (expq.size() == 0) check(0, {tag, ": unexpected record"});
      else begin
        event_t e = expq.pop_front();
        check(got.block_id == e.block_id && got.event_no == e.event_no &&
              got.trig_bits == e.trig_bits && got.hits == e.hits,
              $sformatf("%s: record blk %0d/%0d ev %0d/%0d bits %b/%b hits %h/%h", tag,
                        got.block_id, e.block_id, got.event_no, e.event_no,
                        got.trig_bits, e.trig_bits, got.hits, e.hits));
      end
      wr(A_EVT_POP, 0);
      rd(A_STATUS, d);
    end
    check(expq.size() == 0, $sformatf("%s: %0d records missing", tag, expq.size()));
  endtask

  // expected block numbering follows the TB's own count
  int exp_blk = 0, exp_ev = 0, blk_limit = 0;
  task automatic expect_event(input logic [7:0] p, input logic [N_OPS-1:0] bits);
    event_t e;
    e = '0;
    e.block_id = 16'(exp_blk); e.event_no = 16'(exp_ev); e.trig_bits = bits; e.hits = p;
    expq.push_back(e);
    exp_ev++;
    if (blk_limit != 0 && exp_ev >= blk_limit) begin exp_blk++; exp_ev = 0; end
  endtask

  // one detector pattern held for 4 cycles, then quiet
  task automatic pulse(input logic [7:0] p, input bit expect_rec);
    logic [N_OPS-1:0] b;
    b = model_bits(p);
    @(posedge clk); #3 disc_in = p;
    #1;
    check(trigger == |b, $sformatf("trigger for %h", p));
    check(tdc_start[0] == trigger && tdc_stop[0] == gps_pps, "TDC0 timing routing");
    n_tdc_timing++;
    check(tdc_start[1] == p[2] && tdc_stop[1] == !p[2], "TDC1 ToT routing");
    n_tot++;
    if (b[0]) n_and4++;
    if (b[1]) n_tele++;
    if (!(|b) && p != 0) n_no_trig++;
    if ((|b) && expect_rec) expect_event(p, b);
    repeat (4) @(posedge clk); #3 disc_in = 0;
    #1 check(tdc_start[1] == 0 && tdc_stop[1] == 1, "ToT stop after pulse");
    repeat (6) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [7:0] p;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    pps_on = 1;

    // configuration: tables, enables, TDC0 timing, TDC1 ToT on channel 2
    for (int w = 0; w < LUT_WORDS; w++) begin
      logic [255:0] t0 = tbl(0), t1 = tbl(1);
      wr(A_LUT_BASE + 8'(0 * LUT_WORDS + w), t0[w*32 +: 32]);
      wr(A_LUT_BASE + 8'(1 * LUT_WORDS + w), t1[w*32 +: 32]);
    end
    wr(A_OP_ENABLE, 32'b00011);
    wr(A_TDC_CFG, {16'd0, 8'b000_010_1_1, 8'b000_000_0_1});
    rd(A_TDC_CFG, d); check(d[15:0] == 16'h0B01, "TDC config read-back");

    // --- 1/2/3a: run, blocks of 5 events ---
    blk_limit = 5; exp_blk = 0; exp_ev = 0;
    wr(A_BLK_EVENTS, 5);
    wr(A_CTRL, 32'h1);              // run, slice by events
    for (int i = 0; i < 60; i++) begin
      case (i % 4)
        0: p = 8'h0F | 8'($urandom);              // AND of four planes
        1: p = 8'h30 | (8'($urandom) & 8'hC7);    // telescope pair
        default: p = 8'($urandom);
      endcase
      pulse(p, 1);
      if (i % 10 == 9) drain("events");
    end
    drain("events");
    rd(A_BLOCK_ID, d);
    check(d == 32'(exp_blk), $sformatf("block id %0d exp %0d", d, exp_blk));
    n_blk_events = exp_blk;

    // --- 3b: blocks of 2 GPS seconds ---
    wr(A_CTRL, 32'h0);               // stop
    blk_limit = 0; exp_blk = 0; exp_ev = 0;
    wr(A_BLK_SECS, 2);
    begin
      int t0, b0;
      t0 = n_pps;
      while (n_pps == t0) @(posedge clk);   // start between GPS pulses
      wr(A_CTRL, 32'h3);                    // run, slice by time
      t0 = n_pps;
      rd(A_BLOCK_ID, d); b0 = d;
      while (n_pps < t0 + 6) @(posedge clk);
      repeat (10) @(posedge clk);
      rd(A_BLOCK_ID, d);
      check(d == 32'(b0 + 3), $sformatf("time slicing: block %0d after 6 s (start %0d)", d, b0));
      n_blk_time = d - b0;
      rd(A_BLK_SECCNT, d); check(d == 0, "seconds counter restarted");
    end
    wr(A_CTRL, 32'h0);

    // --- 4a: LED calibration pulses ---
    wr(A_CAL_TIMING, {16'd12, 16'd4});          // period 12, 4 pulses
    wr(A_CAL_CFG, {8'd0, 8'hFF, 7'd0, 1'b0, 8'd3});
    begin
      int l0 = n_led_pulses;
      wr(A_CAL_START, 1);
      repeat (60) @(posedge clk);
      check(n_led_pulses - l0 == 4, $sformatf("LED pulses %0d", n_led_pulses - l0));
    end
    // --- 4b: forced digital pattern: each pulse must trigger, noise ignored ---
    blk_limit = 0; exp_blk = 0; exp_ev = 0;
    wr(A_BLK_EVENTS, 0);
    wr(A_CTRL, 32'h1);
    wr(A_CAL_PATTERN, 32'h0F);
    wr(A_CAL_TIMING, {16'd20, 16'd6});          // period 20, 6 pulses
    wr(A_CAL_CFG, {8'd0, 8'h00, 7'd0, 1'b1, 8'd5});
    wr(A_CAL_START, 1);
    for (int i = 0; i < 6; i++) expect_event(8'h0F, 5'b00001);
    for (int i = 0; i < 100; i++) begin   // inside the 120-cycle train
      @(posedge clk); #3 disc_in = 8'h30 | 8'($urandom);   // would fire the telescope
      #1 check(trigger == dut.u_calib.force_pattern[0], "forced pattern drives trigger");
    end
    disc_in = 0;
    repeat (10) @(posedge clk);
    drain("forced");
    n_forced_events = 6;
    rd(A_STATUS, d); check(d[1] == 0, "calibration finished");

    // --- 5: overflow of the 64-deep buffer ---
    wr(A_CTRL, 32'h5);                 // run, clear buffer
    rd(A_DROPPED, d); check(d == 0, "loss counter cleared");
    for (int i = 0; i < 70; i++) pulse(8'h0F, 0);
    rd(A_STATUS, d);   check(d[15:8] == 64, $sformatf("buffer level %0d", d[15:8]));
    rd(A_DROPPED, d);  check(d == 6, $sformatf("dropped %0d", d));
    n_dropped = d;

    // every mechanism must have happened
    check(n_and4 > 0, "four-plane AND trigger");
    check(n_tele > 0, "telescope trigger");
    check(n_no_trig > 0, "non-coincidence rejected");
    check(n_tdc_timing > 0 && n_tot > 0, "both TDC modes");
    check(n_blk_events >= 3, "blocks by events");
    check(n_blk_time >= 3, "blocks by time");
    check(n_led_pulses >= 4, "LED pulses");
    check(n_forced_events > 0, "forced events");
    check(n_dropped > 0, "overflow");
    check(n_block_start > 5, "block_start readout requests");
    $display("mechanisms: and4=%0d tele=%0d rejected=%0d tdc_timing=%0d tot=%0d blk_ev=%0d blk_time=%0d led=%0d forced=%0d dropped=%0d pps=%0d block_start=%0d",
             n_and4, n_tele, n_no_trig, n_tdc_timing, n_tot, n_blk_events, n_blk_time,
             n_led_pulses, n_forced_events, n_dropped, n_pps, n_block_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
