// tb_fsc_entity: sequence control and fragmentation. The fourth MSDU carries
// sequence number 3 and fragment 0 (the case of the original waveform); a
// non-data subtype gives no sequence control; a 5000-byte MSDU is split into
// fragments of FRAG_BYTES; retransmissions keep the numbers.
module tb_fsc_entity;
  import mac_tx_pkg::*;
  localparam int FB = 2304;
  logic clk = 0, rst = 1, load = 0, retry = 0, next_frag = 0;
  frame_subtype_t frame_subtype = FS_DATA;
  logic [15:0] msdu_len = 16'd100;
  logic [15:0] fsc, frag_off, frag_len;
  logic fragment, more_frag;
  int checks = 0, failures = 0;

  fsc_entity #(.FRAG_BYTES(FB)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic do_load(logic [5:0] s, logic r, logic nf);
    frame_subtype = s; retry = r; next_frag = nf; load = 1;
    @(posedge clk); #1 load = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 4; i++) do_load(FS_DATA, 0, 0);
    check(fsc[15:4], 3, "seq 3");
    check(fsc[3:0], 0, "frag 0");
    check(fragment, 0, "short msdu not fragmented");
    check(more_frag, 0, "short msdu no more frag");
    check(frag_len, 100, "short frag_len");
    // non-data subtype ("011000" written b2 first) -> no sequence control
    frame_subtype = 6'b000110; #1;
    check(fsc, 0, "non-data fsc");
    do_load(6'b000110, 0, 0);
    frame_subtype = FS_DATA; #1;
    check(fsc[15:4], 3, "non-data load leaves seq");
    // retransmission keeps the number
    do_load(FS_DATA, 1, 0);
    check(fsc, {12'd3, 4'd0}, "retry keeps");
    // 5000-byte MSDU: fragments of 2304, 2304, 392
    msdu_len = 16'd5000;
    do_load(FS_DATA, 0, 0);
    check(fsc, {12'd4, 4'd0}, "new msdu seq 4");
    check(fragment, 1, "fragmented");
    check(more_frag, 1, "frag0 more");
    check(frag_off, 0, "frag0 off");
    check(frag_len, FB, "frag0 len");
    do_load(FS_DATA, 0, 1);
    check(fsc, {12'd4, 4'd1}, "frag1 number");
    check(more_frag, 1, "frag1 more");
    check(frag_off, FB, "frag1 off");
    do_load(FS_DATA, 1, 0);
    check(fsc, {12'd4, 4'd1}, "frag1 retry");
    do_load(FS_DATA, 0, 1);
    check(fsc, {12'd4, 4'd2}, "frag2 number");
    check(more_frag, 0, "frag2 last");
    check(frag_off, 2 * FB, "frag2 off");
    check(frag_len, 5000 - 2 * FB, "frag2 len");
    msdu_len = 16'd40;
    do_load(FS_DATA, 0, 0);
    check(fsc, {12'd5, 4'd0}, "next msdu");
    check(frag_off, 0, "next msdu off");
    // wrap of the 12-bit sequence number
    for (int i = 6; i <= 4097; i++) do_load(FS_DATA, 0, 0);
    check(fsc[15:4], 4097 % 4096, "wrap");
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
