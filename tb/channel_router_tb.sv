// channel_router_tb -- self-checking test of channel_router.
// Drives random detector levels and forced patterns, checks the
// combinational selection at once and the synchronised copy two clock
// edges later against a model kept in the testbench.
module channel_router_tb;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] disc_in, force_pattern, chan, chan_sync;
  logic force_en;
  int checks = 0, failures = 0;
  logic [N-1:0] hist [3];

  channel_router #(.N_CH(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    disc_in = '0; force_pattern = '0; force_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(chan_sync == '0, "sync copy cleared by reset");
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      disc_in       = N'($urandom);
      force_pattern = N'($urandom);
      force_en      = ($urandom % 3) == 0;
      #1;
      check(chan == (force_en ? force_pattern : disc_in), "combinational selection");
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = chan;
      @(posedge clk); #1;
      // After this edge chan_sync holds the value sampled two edges ago.
      if (i >= 2) check(chan_sync == hist[1], $sformatf("sync copy i=%0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
