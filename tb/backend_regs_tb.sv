// backend_regs_tb -- self-checking test of backend_regs.
// Writes every configuration register with random values and checks the
// decoded outputs and the read-back; checks that the start, pop, clear and
// truth-table strobes last one cycle at the right addresses and that the
// truth-table window maps address 8'h40 + op*8 + word to (op, word); reads
// every status register and the four words of the head event record.
module backend_regs_tb;
  import station_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bus_we = 0;
  logic [7:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic run, fifo_clear, cal_start, lut_we, evt_pop;
  block_mode_e block_mode;
  logic [N_OPS-1:0] op_enable;
  logic [31:0] blk_events, blk_seconds;
  logic [N_TDC-1:0] tdc_enable, tdc_mode;
  logic [N_TDC-1:0][2:0] tot_sel;
  logic [15:0] cal_n_pulses, cal_period;
  logic [7:0] cal_width;
  calib_target_e cal_target;
  logic [N_LED-1:0] cal_led_mask;
  logic [N_CH-1:0] cal_pattern;
  logic [2:0] lut_op, lut_word;
  logic [31:0] lut_wdata;
  logic fifo_empty = 0, cal_busy = 0;
  logic [7:0] fifo_level = 0;
  logic [31:0] dropped = 0, blk_evcnt = 0, blk_seccnt = 0, seconds = 0;
  logic [15:0] block_id = 0;
  event_t evt_head;
  int checks = 0, failures = 0;

  backend_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a; #1 d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d, v;
    evt_head = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    check(!run && op_enable == 0 && tdc_enable == 0, "reset values");
    for (int r = 0; r < 20; r++) begin
      v = $urandom & ~32'h4; wr(A_CTRL, v);
      check(run == v[0] && block_mode == block_mode_e'(v[1]), "CTRL");
      rd(A_CTRL, d); check(d == {30'd0, v[1:0]}, "CTRL read");
      v = $urandom; wr(A_OP_ENABLE, v); check(op_enable == v[4:0], "OP_ENABLE");
      rd(A_OP_ENABLE, d); check(d == 32'(v[4:0]), "OP_ENABLE read");
      v = $urandom; wr(A_BLK_EVENTS, v); check(blk_events == v, "BLK_EVENTS");
      rd(A_BLK_EVENTS, d); check(d == v, "BLK_EVENTS read");
      v = $urandom; wr(A_BLK_SECS, v); check(blk_seconds == v, "BLK_SECS");
      v = $urandom; wr(A_TDC_CFG, v);
      check(tdc_enable == {v[8], v[0]} && tdc_mode == {v[9], v[1]} &&
            tot_sel[0] == v[4:2] && tot_sel[1] == v[12:10], "TDC_CFG");
      rd(A_TDC_CFG, d); check(d == v, "TDC_CFG read");
      v = $urandom; wr(A_CAL_TIMING, v); check(cal_n_pulses == v[15:0] && cal_period == v[31:16], "CAL_TIMING");
      v = $urandom; wr(A_CAL_CFG, v);
      check(cal_width == v[7:0] && cal_target == calib_target_e'(v[8]) && cal_led_mask == v[23:16], "CAL_CFG");
      v = $urandom; wr(A_CAL_PATTERN, v); check(cal_pattern == v[7:0], "CAL_PATTERN");
    end
    // strobes: combinational with the write, one cycle long
    @(negedge clk); bus_we = 1; bus_addr = A_CAL_START; #1 check(cal_start && !evt_pop && !lut_we, "cal_start strobe");
    bus_addr = A_EVT_POP; #1 check(evt_pop && !cal_start, "evt_pop strobe");
    bus_addr = A_CTRL; bus_wdata = 32'h5; #1 check(fifo_clear, "fifo_clear strobe");
    @(negedge clk); bus_we = 0; #1 check(!cal_start && !evt_pop && !fifo_clear, "strobes end");
    // truth-table window
    for (int a = 8'h38; a < 8'h70; a++) begin
      @(negedge clk); bus_we = 1; bus_addr = 8'(a); bus_wdata = $urandom; #1;
      if (a >= 8'h40 && a < 8'h40 + N_OPS * 8)
        check(lut_we && lut_op == 3'((a - 8'h40) / 8) && lut_word == 3'((a - 8'h40) % 8) && lut_wdata == bus_wdata,
              $sformatf("LUT window addr %h", a));
      else check(!lut_we, $sformatf("no LUT write at %h", a));
    end
    @(negedge clk); bus_we = 0;
    // status read-back
    fifo_empty = 1; cal_busy = 1; fifo_level = 8'h2a; dropped = $urandom; block_id = 16'($urandom);
    blk_evcnt = $urandom; blk_seccnt = $urandom; seconds = $urandom;
    evt_head = {$urandom, $urandom, $urandom, $urandom};
    rd(A_STATUS, d);   check(d[0] && d[1] && d[15:8] == 8'h2a && d[2] == run, "STATUS");
    rd(A_DROPPED, d);  check(d == dropped, "DROPPED");
    rd(A_BLOCK_ID, d); check(d == 32'(block_id), "BLOCK_ID");
    rd(A_BLK_EVCNT, d); check(d == blk_evcnt, "BLK_EVCNT");
    rd(A_BLK_SECCNT, d); check(d == blk_seccnt, "BLK_SECCNT");
    rd(A_SECONDS, d);  check(d == seconds, "SECONDS");
    begin
      logic [127:0] full_rec;
      full_rec = 128'(evt_head);
      rd(A_EVT0, d); check(d == full_rec[31:0], "EVT0");
      rd(A_EVT1, d); check(d == full_rec[63:32], "EVT1");
      rd(A_EVT2, d); check(d == full_rec[95:64], "EVT2");
      rd(A_EVT3, d); check(d == full_rec[127:96], "EVT3");
    end
    rd(8'hFF, d); check(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
