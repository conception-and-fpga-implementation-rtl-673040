// tb_frame_computing: whole header built on en_buildframe for ACK, RTS, PS-Poll
// and a 5000-byte data MSDU sent as three fragments (one of them retried);
// checks each field against values worked out here, and the
// en_buildframe / frame_done handshake and the build latency in cycles.
module tb_frame_computing;
  import mac_tx_pkg::*;
  localparam int FB = 2304;
  logic clk = 0, rst = 1, en_buildframe = 0, retry = 0, next_frag = 0;
  frame_subtype_t frame_subtype = '0;
  logic [10:0] buff_ptr = '0;
  mac_addr_t own_addr = 48'h02_00_00_00_00_01, peer_addr = 48'h02_00_00_00_00_99;
  logic [15:0] nav_reg = 16'h1234;
  logic buf_rd, frame_done, fragment, more_frag;
  logic [10:0] buf_addr;
  logic [31:0] buf_rdata;
  frame_hdr_t hdr;
  logic [31:0] mem [2048];
  int checks = 0, failures = 0;

  frame_computing #(.FRAG_BYTES(FB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (buf_rd) buf_rdata <= mem[buf_addr];

  task automatic check(logic [47:0] got, logic [47:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic build(logic [5:0] fs, logic r, logic nf);
    int t;
    frame_subtype = fs; retry = r; next_frag = nf; en_buildframe = 1;
    t = 0;
    while (!frame_done && t < 100) begin @(posedge clk); #1 t++; end
    check(frame_done, 1, "frame_done");
    // latency: descriptor read (1 + 7 words + 1) + sequence + header + done
    check(t, (fs == FS_ACK || fs == FS_CTS) ? 5 : 13, "build latency in cycles");
  endtask

  task automatic release_bf();
    repeat (2) @(posedge clk);
    #1 check(frame_done, 1, "frame_done held");
    en_buildframe = 0;
    @(posedge clk); #1 check(frame_done, 0, "frame_done released");
  endtask

  initial begin
    mac_addr_t ra, da, sa;
    ra = 48'hA1A2A3A4A5A6; da = 48'hD1D2D3D4D5D6; sa = 48'h515253545556;
    mem[100] = ra[31:0]; mem[101] = {16'h0, ra[47:32]};
    mem[102] = da[31:0]; mem[103] = {16'h0, da[47:32]};
    mem[104] = sa[31:0]; mem[105] = {16'h0, sa[47:32]};
    mem[106] = 32'd5000;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    buff_ptr = 11'd100;
    // ACK
    build(FS_ACK, 0, 0);
    check(hdr.fch, 16'h00D4, "ack fch");
    check(hdr.did, 16'h1234, "ack did");
    check(hdr.a1, peer_addr, "ack a1");
    check(hdr.mask, 5'b00000, "ack mask");
    check(hdr.fsc, 0, "ack fsc");
    release_bf();
    // RTS
    build(FS_RTS, 0, 0);
    check(hdr.fch, 16'h00B4, "rts fch");
    check(hdr.a1, ra, "rts a1"); check(hdr.a2, own_addr, "rts a2");
    check(hdr.mask, 5'b10000, "rts mask");
    release_bf();
    // PS-Poll: DID carries the AID with b14, b15 set
    build(FS_PS_POLL, 0, 0);
    check(hdr.did, 16'hD234, "ps-poll did");
    release_bf();
    // data, fragment 0 of a 5000-byte MSDU
    build(FS_DATA, 0, 0);
    check(hdr.fch, 16'h0708, "data frag0 fch (ToDS, FromDS, MoreFrag)");
    check(hdr.did, 16'h1234, "data did");
    check(hdr.a1, ra, "a1"); check(hdr.a2, own_addr, "a2");
    check(hdr.a3, da, "a3"); check(hdr.a4, sa, "a4");
    check(hdr.fsc, {12'd0, 4'd0}, "fsc seq0 frag0");
    check(hdr.mask, 5'b11111, "data mask");
    check(hdr.body_word, 107, "body word frag0");
    check(hdr.body_len, FB, "body len frag0");
    check(fragment, 1, "FRAGMENT");
    check(more_frag, 1, "more_frag");
    release_bf();
    build(FS_DATA, 0, 1);
    check(hdr.fsc, {12'd0, 4'd1}, "fsc frag1");
    check(hdr.body_word, 107 + FB / 4, "body word frag1");
    release_bf();
    build(FS_DATA, 1, 0);
    check(hdr.fch, 16'h0F08, "retried frag1 fch (Retry bit)");
    check(hdr.fsc, {12'd0, 4'd1}, "fsc frag1 retry");
    release_bf();
    build(FS_DATA, 0, 1);
    check(hdr.fch, 16'h0308, "last fragment: no MoreFrag");
    check(hdr.fsc, {12'd0, 4'd2}, "fsc frag2");
    check(hdr.body_len, 5000 - 2 * FB, "body len frag2");
    check(more_frag, 0, "no more frag");
    release_bf();
    // next MSDU, short
    mem[106] = 32'd64;
    build(FS_DATA, 0, 0);
    check(hdr.fsc, {12'd1, 4'd0}, "next msdu seq1");
    check(hdr.body_len, 64, "short body");
    check(fragment, 0, "short not fragmented");
    release_bf();
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
