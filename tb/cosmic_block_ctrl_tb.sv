// cosmic_block_ctrl_tb -- self-checking test of cosmic_block_ctrl.
// Feeds random event and GPS-second pulses in both slicing modes and
// compares block number, counters and the block_start / block_end pulses
// cycle by cycle with a reference model; also stops and restarts the run.
module cosmic_block_ctrl_tb;
  import station_pkg::*;
  logic clk = 0, rst_n = 0;
  logic run, event_in, pps_tick;
  block_mode_e mode;
  logic [31:0] max_events, max_seconds, events_in_block, seconds_in_block;
  logic [15:0] block_id;
  logic block_start, block_end;
  int checks = 0, failures = 0, n_blocks = 0;

  // model state
  logic m_run_q = 0, m_start = 0, m_end = 0;
  logic [15:0] m_id = 0;
  logic [31:0] m_ev = 0, m_s = 0;

  cosmic_block_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference model, updated at each edge from the inputs of that edge
  always @(posedge clk) if (rst_n) begin
    logic hit;
    logic [31:0] ne, ns;
    ne = m_ev + 32'(event_in);
    ns = m_s + 32'(pps_tick);
    hit = (mode == BLK_BY_EVENTS) ? (event_in && max_events != 0 && ne >= max_events)
                                  : (pps_tick && max_seconds != 0 && ns >= max_seconds);
    m_start <= 0; m_end <= 0;
    if (run && !m_run_q) begin m_id <= 0; m_ev <= 0; m_s <= 0; m_start <= 1; end
    else if (!run && m_run_q) m_end <= 1;
    else if (run) begin
      if (hit) begin m_id <= m_id + 1; m_ev <= 0; m_s <= 0; m_start <= 1; m_end <= 1; end
      else begin m_ev <= ne; m_s <= ns; end
    end
    m_run_q <= run;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (block_id !== m_id || events_in_block !== m_ev || seconds_in_block !== m_s ||
        block_start !== m_start || block_end !== m_end) begin
      failures++;
      if (failures < 10) $display("FAIL id %0d/%0d ev %0d/%0d s %0d/%0d st %b/%b end %b/%b",
        block_id, m_id, events_in_block, m_ev, seconds_in_block, m_s, block_start, m_start, block_end, m_end);
    end
    if (block_end && block_start) n_blocks++;
  end

  task automatic phase(input block_mode_e md, input int lim, input int cycles);
    @(negedge clk);
    mode = md;
    if (md == BLK_BY_EVENTS) max_events = lim; else max_seconds = lim;
    run = 1;
    repeat (cycles) begin
      @(negedge clk);
      event_in = ($urandom % 3) == 0;
      pps_tick = ($urandom % 5) == 0;
    end
    event_in = 0; pps_tick = 0;
    run = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    run = 0; event_in = 0; pps_tick = 0; mode = BLK_BY_EVENTS; max_events = 0; max_seconds = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    phase(BLK_BY_EVENTS, 7, 400);
    phase(BLK_BY_TIME, 4, 400);
    phase(BLK_BY_EVENTS, 1, 60);
    phase(BLK_BY_EVENTS, 0, 100);     // limit 0: one endless block
    phase(BLK_BY_TIME, 3, 300);
    checks++; if (n_blocks < 20) begin failures++; $display("FAIL only %0d block rolls", n_blocks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
