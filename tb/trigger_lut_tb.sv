// trigger_lut_tb -- self-checking test of trigger_lut.
// Loads the station's example trigger conditions (all four planes in
// coincidence, either of two stacked pairs) and then random truth tables,
// and compares trigger bits and trigger with a model for every channel
// pattern.
module trigger_lut_tb;
  import station_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [2:0] cfg_op;
  logic [2:0] cfg_word;
  logic [31:0] cfg_wdata;
  logic [N_OPS-1:0] op_enable, trig_bits;
  logic [N_CH-1:0] chan;
  logic trigger;
  int checks = 0, failures = 0;
  logic [255:0] model [N_OPS];

  trigger_lut dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(input int op, input logic [255:0] tbl);
    for (int w = 0; w < 8; w++) begin
      @(negedge clk);
      cfg_we = 1; cfg_op = 3'(op); cfg_word = 3'(w); cfg_wdata = tbl[w*32 +: 32];
    end
    @(negedge clk); cfg_we = 0;
    model[op] = tbl;
  endtask

  function automatic logic [255:0] tbl_of(input int kind);
    logic [255:0] t;
    for (int p = 0; p < 256; p++) begin
      case (kind)
        0: t[p] = (p[3:0] == 4'hF);                      // 4-plane AND
        1: t[p] = (p[0] & p[1]) | (p[2] & p[3]);         // doubled area
        2: t[p] = p[4] & p[5];                           // telescope pair
        default: t[p] = 1'($urandom);
      endcase
    end
    return t;
  endfunction

  task automatic sweep(input logic [N_OPS-1:0] en);
    logic [N_OPS-1:0] exp_bits;
    op_enable = en;
    for (int p = 0; p < 256; p++) begin
      chan = 8'(p); #1;
      for (int k = 0; k < N_OPS; k++) exp_bits[k] = en[k] & model[k][p];
      check(trig_bits == exp_bits && trigger == |exp_bits,
            $sformatf("pattern %02h en %b bits %b exp %b", p, en, trig_bits, exp_bits));
    end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_op = 0; cfg_word = 0; cfg_wdata = 0; op_enable = '1; chan = '0;
    for (int k = 0; k < N_OPS; k++) model[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    sweep('1);                        // cleared tables never trigger
    load(0, tbl_of(0));
    load(1, tbl_of(1));
    load(2, tbl_of(2));
    load(3, tbl_of(3));
    load(4, tbl_of(4));
    sweep(5'b00001);
    sweep(5'b00010);
    sweep(5'b00111);
    sweep('1);
    for (int r = 0; r < 6; r++) sweep(5'($urandom));
    // rewrite one word of one table, the rest must stay
    begin
      automatic logic [255:0] t = model[3];
      t[64 +: 32] = $urandom;
      load(3, t);
      sweep('1);
    end
    // a write addressed past the last operation is ignored
    @(negedge clk); cfg_we = 1; cfg_op = 3'd5; cfg_word = 0; cfg_wdata = '1;
    @(negedge clk); cfg_we = 0;
    sweep('1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
