// event_fifo_tb -- self-checking test of event_fifo.
// Random pushes and pops, with phases that fill the buffer to full and
// drain it to empty, compared with a queue model: head data, empty, full,
// level, ignored push-when-full and pop-when-empty, and clear.
module event_fifo_tb;
  localparam int W = 20, DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data, rd_data;
  logic empty, full;
  logic [3:0] level;
  int checks = 0, failures = 0, n_full = 0, n_empty_pop = 0;
  logic [W-1:0] q [$];

  event_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare();
    checks++;
    if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH) || level !== 4'(q.size()) ||
        (q.size() > 0 && rd_data !== q[0])) begin
      failures++;
      if (failures < 10) $display("FAIL size %0d level %0d empty %b full %b data %h exp %h",
                                  q.size(), level, empty, full, rd_data, q.size() ? q[0] : 0);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      automatic int ph = (i / 300) % 3;     // 0 mostly push, 1 mostly pop, 2 balanced
      @(negedge clk);
      compare();
      wr_en = (ph == 0) ? ($urandom % 4 != 0) : (ph == 1) ? ($urandom % 4 == 0) : 1'($urandom);
      rd_en = (ph == 1) ? ($urandom % 4 != 0) : (ph == 0) ? ($urandom % 4 == 0) : 1'($urandom);
      wr_data = W'($urandom);
      @(posedge clk);
      begin
        automatic bit can_rd = q.size() > 0;
        automatic bit can_wr = q.size() < DEPTH;
        if (full) n_full++;
        if (rd_en && !can_rd) n_empty_pop++;
        if (rd_en && can_rd) void'(q.pop_front());
        if (wr_en && can_wr) q.push_back(wr_data);
      end
    end
    @(negedge clk); wr_en = 0; rd_en = 0;
    @(negedge clk); wr_en = 1; wr_data = 1; @(negedge clk); wr_en = 0;
    clear = 1; @(negedge clk); clear = 0; q.delete();
    compare();
    checks++; if (n_full == 0 || n_empty_pop == 0) begin failures++; $display("FAIL corner cases not reached full=%0d emptypop=%0d", n_full, n_empty_pop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
