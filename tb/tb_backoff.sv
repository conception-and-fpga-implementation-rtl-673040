// tb_backoff: for attempt counts 0..7 checks the contention window
// (31, 63, ..., 1023), that Backoff Time = Random * 20 us with Random in [0, CW]
// predicted by a reference LFSR, and that done comes after exactly
// Random * SLOT_CYCLES idle cycles (+1), with busy-medium cycles not counted.
module tb_backoff;
  localparam int S = 3;                 // SLOT_CYCLES, shortened
  logic clk = 0, rst = 1, en_backoff = 0, medium_idle = 1;
  logic [7:0] count_val = '0;
  logic [15:0] backoff_val;
  logic [9:0] cw;
  logic busy, done;
  logic [15:0] ref_lfsr;
  int checks = 0, failures = 0;

  backoff #(.SLOT_CYCLES(S)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk)
    ref_lfsr <= rst ? 16'hACE1 : {ref_lfsr[14:0], ref_lfsr[15] ^ ref_lfsr[13] ^ ref_lfsr[12] ^ ref_lfsr[10]};

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int c = 0; c < 8; c++) begin
        int exp_cw, exp_rnd, cycles, busy_cycles;
        exp_cw = (c >= 5) ? 1023 : ((32 << c) - 1);
        repeat ($urandom % 5) @(posedge clk);
        #1 count_val = 8'(c); en_backoff = 1;
        exp_rnd = int'(ref_lfsr[9:0]) & exp_cw;
        @(posedge clk); #1 en_backoff = 0;
        check(cw, exp_cw, "cw");
        check(backoff_val, exp_rnd * 20, "backoff_val");
        check(busy, 1, "busy");
        cycles = 0; busy_cycles = 0;
        while (!done && cycles < 100000) begin
          medium_idle = (rep == 2) ? 1'($urandom % 3 != 0) : 1'b1;
          @(posedge clk); #1;
          if (!medium_idle && !done) busy_cycles++;
          cycles++;
        end
        medium_idle = 1;
        check(cycles - busy_cycles, exp_rnd * S + 1, "countdown length");
        @(posedge clk); #1;
        check(done, 0, "done is a pulse");
      end
    end
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
