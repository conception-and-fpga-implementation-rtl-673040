// tb_did_entity: checks the Duration/ID field against the three values printed
// in the original waveform (DID written there with b0 first, NAV with the MSB
// first) and against the 802.11 encoding for random NAV values.
module tb_did_entity;
  import mac_tx_pkg::*;
  logic clk = 0, rst = 1, load = 0;
  frame_subtype_t frame_subtype = '0;
  logic [15:0] nav_reg = '0, did;
  int checks = 0, failures = 0;

  did_entity dut (.*);
  always #5 clk = ~clk;

  function automatic logic [15:0] rev16(logic [15:0] v);
    for (int i = 0; i < 16; i++) rev16[i] = v[15-i];
  endfunction
  function automatic logic [5:0] rev6(logic [5:0] v);
    for (int i = 0; i < 6; i++) rev6[i] = v[5-i];
  endfunction

  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic do_load(logic [5:0] s, logic [15:0] nav);
    frame_subtype = s; nav_reg = nav; load = 1;
    @(posedge clk); #1 load = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    do_load(rev6(6'b100101), 16'b1010101010101001);   // PS-Poll
    check(did, rev16(16'b1001010101010111), "fig PS-Poll");
    do_load(rev6(6'b010110), 16'b1010101010101001);   // CF-Poll
    check(did, rev16(16'b0000000000000001), "fig CF-Poll");
    do_load(rev6(6'b011100), 16'b1010101010101001);   // other
    check(did, rev16(16'b1001010101010100), "fig other");
    for (int k = 0; k < 300; k++) begin
      logic [15:0] n; logic [5:0] s; logic [15:0] e;
      n = 16'($urandom);
      case ($urandom % 3)
        0: s = FS_PS_POLL;
        1: s = FS_CF_POLL;
        default: s = 6'($urandom);
      endcase
      if (s == FS_PS_POLL)      e = n | 16'hC000;
      else if (s == FS_CF_POLL) e = 16'h8000;
      else                      e = n & 16'h7FFF;
      do_load(s, n);
      check(did, e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
