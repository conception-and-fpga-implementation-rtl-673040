// tb_fch_entity: checks the frame control header against the two values printed
// in the original waveform (written there with b0 first, so they are reversed
// here) and against a field-by-field reference for random inputs.
module tb_fch_entity;
  import mac_tx_pkg::*;
  logic clk = 0, rst = 1, load = 0, retry = 0, more_frag = 0;
  frame_subtype_t fs = '0;
  logic [15:0] fch;
  int checks = 0, failures = 0;

  fch_entity dut (.clk, .rst, .load, .frame_subtype(fs), .retry, .more_frag, .fch);
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

  task automatic do_load(logic [5:0] s, logic r, logic m);
    fs = s; retry = r; more_frag = m; load = 1;
    @(posedge clk); #1 load = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // waveform: subtype "000000" with retry = 1 -> fch "0000000000010000"
    do_load(rev6(6'b000000), 1'b1, 1'b0);
    check(fch, rev16(16'b0000000000010000), "fig mgmt retry");
    // waveform: subtype "101010" with retry = 0 -> fch "0010101000000000"
    do_load(rev6(6'b101010), 1'b0, 1'b0);
    check(fch, rev16(16'b0010101000000000), "fig 101010");
    // fch holds while load is low
    fs = FS_DATA; retry = 1; @(posedge clk); #1;
    check(fch, rev16(16'b0010101000000000), "hold");
    // data frame: type 10, subtype 0000, ToDS = FromDS = 1, MoreFrag, Retry
    do_load(FS_DATA, 1'b1, 1'b1);
    check(fch, 16'b0000_1111_0000_1000, "data frame");
    for (int k = 0; k < 200; k++) begin
      logic [5:0] s; logic r, m; logic [15:0] e;
      s = 6'($urandom); r = 1'($urandom); m = 1'($urandom);
      e = '0;
      e[3:2] = s[1:0]; e[7:4] = s[5:2];
      e[8] = (s[1:0] == 2'b10); e[9] = (s[1:0] == 2'b10);
      e[10] = m; e[11] = r;
      do_load(s, r, m);
      check(fch, e, "random");
    end
    rst = 1; @(posedge clk); #1;
    check(fch, 16'd0, "reset");
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
