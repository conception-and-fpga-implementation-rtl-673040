// tb_collision_avoidance: the cases of the paper's collision-avoidance
// description: free medium -> access granted with no attempt counted; NAV != 0
// or carrier sensed -> attempt counted, backoff started, access granted after
// backoff done; attempt count past the threshold -> access refused; en_retry
// counts an attempt before looking at the medium. The retry counter and the
// backoff entity are modelled here.
module tb_collision_avoidance;
  logic clk = 0, rst = 1, en_medium = 0, en_retry = 0, carrier_sense = 0, backoff_done = 0;
  logic [15:0] nav_reg = '0;
  logic [7:0] count_val;
  logic medium_idle, start_count, en_backoff, access_granted, tx_fail;
  int checks = 0, failures = 0;
  int n_start = 0, n_backoff = 0;

  collision_avoidance dut (.*);
  always #5 clk = ~clk;

  // retry counter model
  always_ff @(posedge clk) begin
    if (rst) count_val <= '0;
    else if (start_count) count_val <= count_val + 1;
    if (start_count && !rst) n_start++;
    if (en_backoff && !rst) n_backoff++;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Request access and wait for an answer; returns 1 for granted, 0 for refused.
  task automatic request(logic retry_req, int bo_delay, output logic granted);
    int t;
    en_medium = !retry_req; en_retry = retry_req;
    t = 0;
    while (!access_granted && !tx_fail && t < 1000) begin
      @(posedge clk); #1; t++;
      if (en_backoff) begin
        fork
          begin
            repeat (bo_delay) @(posedge clk);
            #1 backoff_done = 1;
            @(posedge clk); #1 backoff_done = 0;
          end
        join_none
      end
    end
    granted = access_granted;
    check(access_granted && tx_fail, 0, "grant and fail exclusive");
    en_medium = 0; en_retry = 0;
    @(posedge clk); #1;
    check(access_granted | tx_fail, 0, "answer released");
  endtask

  initial begin
    logic g;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // free medium
    request(0, 0, g);
    check(g, 1, "free medium granted");
    check(n_start, 0, "no attempt counted");
    check(n_backoff, 0, "no backoff");
    // NAV set: attempt counted, backoff, then granted
    nav_reg = 16'hC000;
    request(0, 5, g);
    check(g, 1, "granted after backoff (NAV)");
    check(n_start, 1, "attempt counted (NAV)");
    check(n_backoff, 1, "backoff started (NAV)");
    nav_reg = 0;
    // carrier sensed
    carrier_sense = 1;
    request(0, 3, g);
    check(g, 1, "granted after backoff (carrier)");
    check(count_val, 2, "count 2");
    check(n_backoff, 2, "backoff started (carrier)");
    carrier_sense = 0;
    // a retry counts one attempt, medium free -> granted
    request(1, 0, g);
    check(g, 1, "retry granted");
    check(count_val, 3, "retry counted");
    check(n_backoff, 2, "retry on free medium no backoff");
    // busy medium until the count passes 10
    carrier_sense = 1;
    for (int i = 4; i <= 10; i++) begin
      request(0, 1, g);
      check(g, 1, "granted below threshold");
    end
    check(count_val, 10, "count 10");
    request(0, 1, g);
    check(g, 0, "refused past threshold");
    check(count_val, 11, "count 11");
    check(n_backoff, 9, "no backoff when refused");
    carrier_sense = 0;
    request(0, 0, g);
    check(g, 0, "still refused until the count is cleared");
    rst = 1; @(posedge clk); #1 rst = 0;
    check(medium_idle, 1, "medium idle");
    nav_reg = 1; #1 check(medium_idle, 0, "nav busy");
    nav_reg = 0; carrier_sense = 1; #1 check(medium_idle, 0, "cs busy");
    carrier_sense = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
