// calib_pulser_tb -- self-checking test of calib_pulser.
// Runs pulse trains to the LEDs and to the forced-pattern output with
// several counts, periods and widths (including the clamped corner cases)
// and compares led, force_en, force_pattern, busy and done cycle by cycle
// with a timing model: pulse i is high for cycles i*P .. i*P+W-1 after the
// start edge, busy for n*P cycles and done in cycle n*P.
module calib_pulser_tb;
  import station_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [15:0] n_pulses, period;
  logic [7:0] width;
  calib_target_e target;
  logic [N_LED-1:0] led_mask, led;
  logic [N_CH-1:0] pattern, force_pattern;
  logic force_en, busy, done;
  int checks = 0, failures = 0;

  calib_pulser dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic train(input int n, input int p, input int w, input calib_target_e tg);
    int pe, we, errs;
    logic hi;
    pe = (p < 2) ? 2 : p;
    we = (w == 0) ? 1 : w;
    if (we >= pe) we = pe - 1;
    errs = 0;
    @(negedge clk);
    start = 1; n_pulses = 16'(n); period = 16'(p); width = 8'(w); target = tg;
    led_mask = 8'($urandom) | 8'h01; pattern = 8'($urandom) | 8'h01;
    @(posedge clk); #1;                      // edge 0 samples start
    start = 0;
    // change the inputs: the train must keep what it latched
    begin
      logic [7:0] m = led_mask, pt = pattern;
      led_mask = ~led_mask; pattern = ~pattern;
      for (int j = 0; j <= n * pe + 2; j++) begin
        hi = (j < n * pe) && ((j % pe) < we);
        checks++;
        if (busy !== (j < n * pe) || done !== (j == n * pe) ||
            led !== ((hi && tg == CAL_LED) ? m : 8'h00) ||
            force_en !== (tg == CAL_FORCE && j < n * pe) ||
            force_pattern !== (hi ? pt : 8'h00)) begin
          failures++; errs++;
          if (errs < 5) $display("FAIL n=%0d p=%0d w=%0d j=%0d busy=%b done=%b led=%h force=%b/%h",
                                  n, p, w, j, busy, done, led, force_en, force_pattern);
        end
        // a second start while busy is ignored
        if (j == 1) start = 1; else start = 0;
        @(posedge clk); #1;
      end
    end
  endtask

  initial begin
    start = 0; n_pulses = 0; period = 0; width = 0; target = CAL_LED; led_mask = 0; pattern = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk); #1;
    checks++; if (busy || led != 0 || force_en) failures++;
    train(3, 10, 4, CAL_LED);
    train(1, 5, 1, CAL_FORCE);
    train(4, 7, 3, CAL_FORCE);
    train(2, 6, 9, CAL_LED);     // width >= period: clamped to period-1
    train(2, 1, 0, CAL_LED);     // period < 2 and width 0
    train(5, 3, 2, CAL_LED);
    // zero pulses: nothing happens
    @(negedge clk); start = 1; n_pulses = 0;
    @(negedge clk); start = 0;
    checks++; if (busy) begin failures++; $display("FAIL zero-pulse start"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
