// tb_allocation_control: the allocation control with its three entities.
// Free medium -> access in 2 cycles. Busy medium -> the attempt count rises, a
// backoff of Random*20 us with Random in [0, CW] is drawn, and access comes only
// after Random slots of idle medium. A busy medium every time drives the count
// past 10 and access is refused; clear_retry brings the count back to 0 and
// the contention window back to CWmin.
module tb_allocation_control;
  localparam int S = 2;
  logic clk = 0, rst = 1, en_medium = 0, en_retry = 0, clear_retry = 0, carrier_sense = 0;
  logic [15:0] nav_reg = '0;
  logic access_granted, tx_fail, backoff_busy;
  logic [7:0] count_val;
  logic [15:0] backoff_val;
  logic [9:0] cw;
  int checks = 0, failures = 0;

  allocation_control #(.SLOT_CYCLES(S)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // request access; the medium is busy for busy_for cycles, then idle
  task automatic request(logic r, int busy_for, output logic granted, output int cycles,
                         output int idle_cycles);
    en_medium = !r; en_retry = r;
    cycles = 0; idle_cycles = 0;
    while (!access_granted && !tx_fail && cycles < 100000) begin
      carrier_sense = (cycles < busy_for);
      @(posedge clk); #1;
      cycles++;
      if (!carrier_sense && backoff_busy) idle_cycles++;
    end
    granted = access_granted;
    en_medium = 0; en_retry = 0; carrier_sense = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    logic g; int c, ic, bo, cnt;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    request(0, 0, g, c, ic);
    check(g, 1, "free granted");
    check(c, 2, "free medium latency");
    check(count_val, 0, "no attempt");
    // busy medium for 10 cycles
    request(0, 10, g, c, ic);
    check(g, 1, "granted after backoff");
    check(count_val, 1, "one attempt");
    check(cw, 63, "cw for count 1");
    bo = backoff_val;
    checks++;
    if (bo % 20 != 0 || bo / 20 > 63) begin
      failures++; $display("FAIL backoff_val %0d", bo);
    end
    check(ic, (bo / 20) * S, "idle cycles counted = slots * SLOT_CYCLES");
    // retry on a free medium: one more attempt, no backoff
    request(1, 0, g, c, ic);
    check(g, 1, "retry granted");
    check(count_val, 2, "retry counted");
    clear_retry = 1; @(posedge clk); #1 clear_retry = 0;
    check(count_val, 0, "cleared");
    // NAV busy: wait on NAV, then the count passes the threshold
    cnt = 0;
    for (int i = 1; i <= 11; i++) begin
      request(0, 3, g, c, ic);
      if (g) cnt++;
    end
    check(cnt, 10, "ten grants below the threshold");
    check(g, 0, "eleventh attempt refused");
    check(count_val, 11, "count past threshold");
    check(cw, 1023, "cw saturated at CWmax");
    clear_retry = 1; @(posedge clk); #1 clear_retry = 0;
    request(0, 0, g, c, ic);
    check(g, 1, "granted after clear");
    nav_reg = 16'd5;
    en_medium = 1;
    repeat (20) @(posedge clk); #1;
    check(access_granted, 0, "NAV holds access");
    check(count_val, 1, "NAV counted once");
    nav_reg = 0;
    repeat (3000) begin
      if (!access_granted) @(posedge clk);
    end
    #1 check(access_granted, 1, "granted once NAV clears");
    en_medium = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
