// station_workloads_tb -- runs the station arrangements of the detector
// description through station_backend_top at its default sizes.
//
//   0 minimum station: one Frontend, two planes in coincidence (ch 0, 1)
//   1 published run: four stacked planes on two Frontends, AND of all four
//     (ch 0-3), Cosmic blocks of 60 GPS seconds, about 1.5 muons per
//     second, which is the 90 counts per minute of the published data
//   2 doubled area: two stacks of two planes side by side, one trigger
//     operation per stack (ch 0, 1 and ch 2, 3)
//   3 telescope: two tilted planes in coincidence (ch 4, 5)
//
// Time is scaled: one GPS second is 200 clock cycles. Each second the
// testbench sends the GPS pulse, then a random number of muon crossings
// (all planes of a condition hit) and of noise (single hits, or a
// coincidence missing one plane), then reads every record back over the
// bus. Records must match a model of the trigger condition, block number
// and event number; for the published run, the count in each one-minute
// block must equal the coincidences injected into it.
module station_workloads_tb;
  import station_pkg::*;
  localparam int SEC = 200;           // clock cycles per scaled GPS second
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
  longint cyc = 0;

  station_backend_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #50000000; failures++; $display("watchdog expired");
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

  // trigger conditions of each arrangement
  function automatic logic [N_OPS-1:0] cond(input int cfg, input logic [7:0] c);
    case (cfg)
      0: return {4'b0, c[0] & c[1]};
      1: return {4'b0, &c[3:0]};
      2: return {3'b0, c[2] & c[3], c[0] & c[1]};
      default: return {4'b0, c[4] & c[5]};
    endcase
  endfunction

  function automatic logic [7:0] muon(input int cfg);
    case (cfg)
      0: return 8'h03;
      1: return 8'h0F;
      2: return ($urandom % 2) ? 8'h03 : 8'h0C;
      default: return 8'h30;
    endcase
  endfunction

  event_t expq [$];
  int blk_count [int];
  int n_events [4], n_rejected [4];

  task automatic drain();
    logic [31:0] d, w0, w1, w2, w3;
    event_t got, e;
    rd(A_STATUS, d);
    while (!d[0]) begin
      rd(A_EVT0, w0); rd(A_EVT1, w1); rd(A_EVT2, w2); rd(A_EVT3, w3);
      got = event_t'({w3[EVENT_W-97:0], w2, w1, w0});
      blk_count[got.block_id]++;
      if (expq.size() == 0) check(0, "unexpected record");
      else begin
        e = expq.pop_front();
        check(got.block_id == e.block_id && got.event_no == e.event_no &&
              got.trig_bits == e.trig_bits && got.hits == e.hits,
              $sformatf("record blk %0d/%0d ev %0d/%0d bits %b/%b hits %h/%h",
                        got.block_id, e.block_id, got.event_no, e.event_no,
                        got.trig_bits, e.trig_bits, got.hits, e.hits));
      end
      wr(A_EVT_POP, 0);
      rd(A_STATUS, d);
    end
  endtask

  task automatic run_config(input int cfg, input int n_sec, input bit by_time, input int limit,
                            output int muons_per_block [int]);
    int blk = 0, ev = 0;
    longint t0;
    // load the five tables (unused ones stay all-zero)
    for (int op = 0; op < N_OPS; op++)
      for (int w = 0; w < LUT_WORDS; w++) begin
        logic [31:0] word;
        for (int b = 0; b < 32; b++) word[b] = cond(cfg, 8'(w * 32 + b))[op];
        wr(A_LUT_BASE + 8'(op * LUT_WORDS + w), word);
      end
    wr(A_OP_ENABLE, 32'h1F);
    wr(A_TDC_CFG, 32'h1);                        // TDC 0: trigger against GPS
    wr(A_CTRL, 32'h4);                           // stopped, buffer cleared
    if (by_time) wr(A_BLK_SECS, limit); else wr(A_BLK_EVENTS, limit);
    wr(A_CTRL, by_time ? 32'h3 : 32'h1);
    blk_count.delete();
    muons_per_block.delete();
    for (int s = 0; s < n_sec; s++) begin
      int nm, nn;
      t0 = cyc;
      @(posedge clk); #2 gps_pps = 1;
      repeat (5) @(posedge clk); #2 gps_pps = 0;
      repeat (15) @(posedge clk);
      if (by_time) blk = (s + 1) / limit;        // the pulse opening second s counts s+1
      nm = $urandom % 4;                          // 1.5 muons per second on average
      nn = $urandom % 3;
      for (int i = 0; i < nm + nn; i++) begin
        logic [7:0] p;
        logic [N_OPS-1:0] bits;
        if (i < nm) p = muon(cfg);
        else if ($urandom % 2) p = 8'(1 << ($urandom % 8));
        else begin
          int k;
          p = muon(cfg);
          do k = $urandom % 8; while (!p[k]);
          p[k] = 1'b0;                             // one plane missing
        end
        bits = cond(cfg, p);
        @(posedge clk); #3 disc_in = p;
        #1 check(trigger == |bits, $sformatf("cfg %0d trigger for %h", cfg, p));
        check(tdc_start[0] == trigger, "trigger reaches TDC 0");
        repeat (4) @(posedge clk); #3 disc_in = 0;
        repeat (5) @(posedge clk);
        if (|bits) begin
          event_t e = '0;
          e.block_id = 16'(blk); e.event_no = 16'(ev); e.trig_bits = bits; e.hits = p;
          expq.push_back(e);
          n_events[cfg]++;
          if (by_time) muons_per_block[blk]++;
          ev++;
          if (!by_time && ev >= limit) begin blk++; ev = 0; end
        end else n_rejected[cfg]++;
      end
      drain();
      if (by_time && (s + 2) / limit != blk) ev = 0;   // next pulse opens a new block
      check(cyc - t0 < SEC, $sformatf("second %0d took %0d cycles", s, cyc - t0));
      while (cyc - t0 < SEC) @(posedge clk);
    end
    wr(A_CTRL, 32'h0);
    drain();
    check(expq.size() == 0, $sformatf("cfg %0d: %0d records missing", cfg, expq.size()));
    expq.delete();
  endtask

  initial begin
    int mpb [int];
    repeat (3) @(posedge clk); #1 rst_n = 1;

    run_config(0, 20, 0, 10, mpb);
    run_config(2, 20, 0, 7, mpb);
    run_config(3, 20, 0, 5, mpb);
    // published run: three one-minute blocks
    run_config(1, 180, 1, 60, mpb);
    for (int b = 0; b < 3; b++) begin
      check(blk_count.exists(b) && blk_count[b] == mpb[b],
            $sformatf("block %0d: %0d counts, %0d coincidences injected", b, blk_count.exists(b) ? blk_count[b] : 0, mpb[b]));
      $display("published-run block %0d: %0d counts per minute", b, blk_count.exists(b) ? blk_count[b] : 0);
    end
    for (int c = 0; c < 4; c++) begin
      check(n_events[c] > 0 && n_rejected[c] > 0, $sformatf("cfg %0d saw events and rejections", c));
      $display("arrangement %0d: %0d events, %0d non-coincident hits rejected", c, n_events[c], n_rejected[c]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
