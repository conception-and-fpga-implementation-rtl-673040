// tb_addr_gen: addresses for each kind of frame, read from a descriptor in a
// buffer model with one cycle of read latency, and the done latency (1 cycle
// for ACK/CTS, 9 cycles when the 7 descriptor words are read).
module tb_addr_gen;
  import mac_tx_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  frame_subtype_t frame_subtype = '0;
  logic [10:0] buff_ptr = '0;
  mac_addr_t own_addr = 48'h02_11_22_33_44_55, peer_addr = 48'h0A_BB_CC_DD_EE_FF;
  logic buf_rd, busy, done;
  logic [10:0] buf_addr;
  logic [31:0] buf_rdata;
  mac_addr_t addr1, addr2, addr3, addr4;
  logic [15:0] msdu_len;
  logic [31:0] mem [2048];
  int checks = 0, failures = 0;

  addr_gen dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (buf_rd) buf_rdata <= mem[buf_addr];

  task automatic check(logic [47:0] got, logic [47:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic put_desc(int p, mac_addr_t ra, mac_addr_t da, mac_addr_t sa, int len);
    mem[p]   = ra[31:0]; mem[p+1] = {16'hDEAD, ra[47:32]};
    mem[p+2] = da[31:0]; mem[p+3] = {16'hBEEF, da[47:32]};
    mem[p+4] = sa[31:0]; mem[p+5] = {16'hF00D, sa[47:32]};
    mem[p+6] = {16'h5A5A, 16'(len)};
  endtask

  task automatic run(logic [5:0] fs, int p, output int lat);
    frame_subtype = fs; buff_ptr = 11'(p); start = 1;
    @(posedge clk); #1 start = 0;
    frame_subtype = '0; buff_ptr = '0;   // sampled with start only
    lat = 1;
    while (!done && lat < 100) begin @(posedge clk); #1 lat++; end
  endtask

  initial begin
    int lat;
    mac_addr_t ra, da, sa;
    for (int i = 0; i < 2048; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k < 20; k++) begin
      int p;
      p = $urandom % 2000;
      ra = {$urandom, $urandom}; da = {$urandom, $urandom}; sa = {$urandom, $urandom};
      put_desc(p, ra, da, sa, k * 37);
      run(FS_DATA, p, lat);
      check(lat, 10, "data latency");
      check(addr1, ra, "data a1"); check(addr2, own_addr, "data a2");
      check(addr3, da, "data a3"); check(addr4, sa, "data a4");
      check(msdu_len, k * 37, "data len");
      run(FS_RTS, p, lat);
      check(addr1, ra, "rts a1"); check(addr2, own_addr, "rts a2");
      check(addr3, 0, "rts a3"); check(addr4, 0, "rts a4"); check(msdu_len, 0, "rts len");
      run(FS_ACK, p, lat);
      check(lat, 2, "ack latency");
      check(addr1, peer_addr, "ack a1"); check(addr2, 0, "ack a2");
      run(FS_CTS, p, lat);
      check(addr1, peer_addr, "cts a1");
      run(6'b000100, p, lat);          // management (association response)
      check(addr1, ra, "mgmt a1"); check(addr2, own_addr, "mgmt a2");
      check(addr3, 0, "mgmt bssid 0"); check(addr4, 0, "mgmt a4");
      run(FS_CF_POLL, p, lat);
      check(addr3, da, "cf-poll a3"); check(msdu_len, 0, "cf-poll no body");
    end
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
