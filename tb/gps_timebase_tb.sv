// gps_timebase_tb -- self-checking test of gps_timebase.
// Sends GPS pulses of random length at random intervals and checks that
// pps_tick is high after the second clock edge that sees the pulse, that
// seconds counts the pulses and that ticks counts clock cycles since the
// last tick; then checks clear.
module gps_timebase_tb;
  logic clk = 0, rst_n = 0, clear = 0, gps_pps = 0;
  logic pps_tick;
  logic [31:0] seconds, ticks;
  int checks = 0, failures = 0;
  int exp_sec = 0, exp_ticks = 0, since_rise = -1;

  gps_timebase dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // model, evaluated just after each edge
  always @(posedge clk) begin
    #1;
    if (rst_n && !clear) begin
      if (since_rise >= 0) since_rise++;
      checks++;
      if (pps_tick !== (since_rise == 2)) begin
        failures++; $display("FAIL tick at %0d edges after rise", since_rise);
      end
      if (since_rise == 3) begin exp_sec++; exp_ticks = 0; since_rise = -1; end
      else if (exp_sec > 0 || exp_ticks > 0 || since_rise != 0) exp_ticks++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); #2 rst_n = 1;
    exp_ticks = -1;      // first edge after reset counts from 0
    for (int i = 0; i < 40; i++) begin
      repeat (5 + $urandom % 40) @(negedge clk);
      gps_pps = 1; since_rise = 0;
      repeat (3 + $urandom % 6) @(negedge clk);
      gps_pps = 0;
      @(posedge clk); #2;
      checks++;
      if (seconds !== 32'(exp_sec) || ticks !== 32'(exp_ticks)) begin
        failures++; $display("FAIL seconds %0d/%0d ticks %0d/%0d", seconds, exp_sec, ticks, exp_ticks);
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (seconds != 0 || ticks > 1) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
