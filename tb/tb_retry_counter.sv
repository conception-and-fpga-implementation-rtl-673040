// tb_retry_counter: the count rises by one per clock while start_count is high
// (1, 2, 3, 4 as in the original waveform), returns to 0 on reset, holds while
// start_count is low, and saturates.
module tb_retry_counter;
  logic clk = 0, reset = 1, start_count = 0;
  logic [3:0] count_val;
  int checks = 0, failures = 0;

  retry_counter #(.WIDTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    @(posedge clk); #1 reset = 0;
    check(count_val, 0, "after reset");
    start_count = 1;
    for (int i = 1; i <= 4; i++) begin
      @(posedge clk); #1 check(count_val, i, "count up");
    end
    reset = 1; @(posedge clk); #1 check(count_val, 0, "reset");
    reset = 0; start_count = 0;
    repeat (3) @(posedge clk); #1 check(count_val, 0, "hold at 0");
    for (int i = 1; i <= 20; i++) begin
      start_count = 1'($urandom);
      @(posedge clk);
    end
    #1 start_count = 0;
    begin
      int v; v = count_val;
      repeat (3) @(posedge clk); #1 check(count_val, v, "hold");
    end
    start_count = 1;
    repeat (30) @(posedge clk); #1 check(count_val, 15, "saturate");
    reset = 1; @(posedge clk); #1 check(count_val, 0, "reset priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
