// tdc_router_tb -- self-checking test of tdc_router.
// Randomises enables, modes, channel selects and the input levels and
// compares the TDC START/STOP pins with the routing rules.
module tdc_router_tb;
  import station_pkg::*;
  logic [N_TDC-1:0] tdc_enable, tdc_start, tdc_stop;
  tdc_mode_e tdc_mode [N_TDC];
  logic [N_TDC-1:0][2:0] tot_sel;
  logic trigger, gps_pps;
  logic [N_CH-1:0] chan;
  int checks = 0, failures = 0;
  int n_timing = 0, n_tot = 0;

  tdc_router dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      tdc_enable = 2'($urandom);
      for (int t = 0; t < N_TDC; t++) begin
        tdc_mode[t] = tdc_mode_e'(1'($urandom));
        tot_sel[t]  = 3'($urandom);
      end
      trigger = 1'($urandom); gps_pps = 1'($urandom); chan = 8'($urandom);
      #1;
      for (int t = 0; t < N_TDC; t++) begin
        logic es, ep;
        if (!tdc_enable[t])          begin es = 0; ep = 0; end
        else if (tdc_mode[t] == TDC_TIMING) begin es = trigger; ep = gps_pps; n_timing++; end
        else begin es = chan[tot_sel[t]]; ep = !chan[tot_sel[t]]; n_tot++; end
        checks++;
        if (tdc_start[t] !== es || tdc_stop[t] !== ep) begin
          failures++;
          $display("FAIL tdc %0d en %b mode %0d sel %0d: start %b stop %b exp %b %b",
                   t, tdc_enable[t], tdc_mode[t], tot_sel[t], tdc_start[t], tdc_stop[t], es, ep);
        end
      end
    end
    checks++; if (n_timing == 0 || n_tot == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
