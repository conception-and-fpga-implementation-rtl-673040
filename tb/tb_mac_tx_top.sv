// tb_mac_tx_top: end-to-end test of the transmitter with every parameter at its
// default. The testbench plays the upper MAC (writes MSDU descriptors into the
// buffer and raises msdurdy), the peer station (answers RTS with CTS and data
// with ACK, or stays silent) and the PHY (collects TX_LINE, answers OK, raises
// carrier sense when asked). Every frame on TX_LINE is decoded and its fields
// and body compared with what the testbench expects.
//
// Mechanisms made to happen and counted (each must happen at least once):
//   CTS in answer to RTS, ACK in answer to data, RTS/CTS/DATA/ACK exchange,
//   fragmentation, retransmission after a missing ACK, backoff on a busy
//   carrier, deferral on a non-zero NAV, an MSDU dropped at the retry limit,
//   the attempt count cleared by a broadcast/multicast reception, and the
//   largest mesh data body (7955 bytes) sent as four fragments.
module tb_mac_tx_top;
  import mac_tx_pkg::*;
  localparam int FB = 2304;            // default fragment size of the design
  logic clk = 0, rst = 1;
  logic buf_wr_en = 0;
  logic [10:0] buf_wr_addr = '0;
  logic [31:0] buf_wr_data = '0;
  logic msdurdy = 0;
  logic [10:0] buff_ptr = '0;
  logic msdu_sent, msdu_dropped;
  logic rec_data = 0, rec_cts = 0, rec_rts = 0, rec_ack = 0, rec_group = 0;
  mac_addr_t peer_addr = 48'h02_AA_00_00_00_07;
  mac_addr_t own_addr  = 48'h02_BB_00_00_00_01;
  logic [15:0] nav_reg = '0;
  logic carrier_sense = 0, phy_done = 0;
  logic tx_line, tx_en, fragment;
  frame_subtype_t frame_subtype;
  logic [7:0] retry_count;
  logic [15:0] backoff_val;

  mac_tx_top dut (.*);
  always #10 clk = ~clk;               // 50 MHz

  int checks = 0, failures = 0;
  int n_cts_resp = 0, n_ack_resp = 0, n_exchange = 0, n_frag = 0, n_retry = 0;
  int n_backoff = 0, n_nav = 0, n_drop = 0, n_sent = 0, n_group = 0, n_big = 0;

  task automatic check(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ---------------- upper MAC: buffer contents mirrored here ----------------
  logic [31:0] mirror [2048];
  mac_addr_t cur_ra, cur_da, cur_sa;
  int cur_len;

  task automatic wr(int a, logic [31:0] d);
    buf_wr_en = 1; buf_wr_addr = 11'(a); buf_wr_data = d; mirror[a] = d;
    @(posedge clk); #1 buf_wr_en = 0;
  endtask

  task automatic load_msdu(int p, int len);
    cur_ra = {16'h02CC, $urandom}; cur_da = {16'h02DD, $urandom};
    cur_sa = {16'h02EE, $urandom}; cur_len = len;
    wr(p + 0, cur_ra[31:0]); wr(p + 1, {16'd0, cur_ra[47:32]});
    wr(p + 2, cur_da[31:0]); wr(p + 3, {16'd0, cur_da[47:32]});
    wr(p + 4, cur_sa[31:0]); wr(p + 5, {16'd0, cur_sa[47:32]});
    wr(p + 6, 32'(len));
    for (int i = 0; i < (len + 3) / 4; i++) wr(p + 7 + i, $urandom);
    buff_ptr = 11'(p);
  endtask

  // ---------------- PHY: collect bits, answer OK, decode ----------------
  bit bits[$];
  int idle_cnt = 0;
  typedef struct packed {
    logic [15:0] fch, did; mac_addr_t a1, a2, a3, a4; logic [15:0] fsc; int nbits;
  } frame_t;
  frame_t frames[$];
  int body_errors = 0;

  function automatic longint field(int pos, int n);
    longint v; v = 0;
    for (int i = 0; i < n; i++) if (pos + i < bits.size()) v[i] = bits[pos + i];
    return v;
  endfunction

  function automatic void decode();
    frame_t f;
    int pos;
    f = '0;
    f.nbits = bits.size();
    f.fch = 16'(field(0, 16)); f.did = 16'(field(16, 16)); f.a1 = 48'(field(32, 48));
    pos = 80;
    if (f.fch[7:2] != FS_ACK && f.fch[7:2] != FS_CTS) begin
      f.a2 = 48'(field(pos, 48)); pos += 48;
      if (f.fch[3:2] == TYPE_DATA) begin
        f.a3 = 48'(field(pos, 48)); pos += 48;
        f.fsc = 16'(field(pos, 16)); pos += 16;
        f.a4 = 48'(field(pos, 48)); pos += 48;
        // body of this fragment against the mirrored buffer
        begin
          int off, n;
          off = int'(f.fsc[3:0]) * FB;
          n = (cur_len - off > FB) ? FB : cur_len - off;
          if (f.nbits != pos + 8 * n) body_errors++;
          for (int b = 0; b < n; b++) begin
            logic [31:0] w;
            w = mirror[int'(buff_ptr) + 7 + (off + b) / 4];
            if (8'(field(pos + 8 * b, 8)) != 8'(w >> (8 * ((off + b) % 4)))) body_errors++;
          end
        end
      end
    end
    frames.push_back(f);
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      phy_done <= 0; idle_cnt <= 0;
    end else if (tx_en) begin
      bits.push_back(tx_line);
      idle_cnt <= 0;
      phy_done <= 0;
    end else if (bits.size() > 0) begin
      idle_cnt <= idle_cnt + 1;
      if (idle_cnt == 12) begin
        decode();
        bits.delete();
        phy_done <= 1;
      end
    end
  end

  always @(posedge clk) begin
    if (msdu_sent && !rst) n_sent++;
    if (msdu_dropped && !rst) n_drop++;
  end

  // ---------------- helpers for the peer station ----------------
  task automatic next_frame(output frame_t f, input int limit);
    int t; t = 0;
    while (frames.size() == 0 && t < limit) begin @(posedge clk); #1 t++; end
    checks++;
    if (frames.size() == 0) begin
      failures++; $display("FAIL no frame within %0d cycles", limit); f = '0;
    end else f = frames.pop_front();
  endtask

  task automatic pulse_rec(int which);
    repeat (20) @(posedge clk);
    #1;
    case (which)
      0: rec_data = 1; 1: rec_cts = 1; 2: rec_rts = 1; default: rec_ack = 1;
    endcase
    @(posedge clk); #1 {rec_data, rec_cts, rec_rts, rec_ack} = '0;
  endtask

  task automatic wait_done(output logic ok);
    int t; t = 0;
    while (!msdu_sent && !msdu_dropped && t < 3000000) begin @(posedge clk); #1 t++; end
    ok = msdu_sent;
    msdurdy = 0;
  endtask

  task automatic check_data(frame_t f, int frag, logic retry, logic more, string what);
    check(f.fch[7:2], FS_DATA, {what, " subtype"});
    check(f.fch[9:8], 2'b11, {what, " ToDS/FromDS"});
    check(f.fch[10], more, {what, " MoreFragments"});
    check(f.fch[11], retry, {what, " Retry"});
    check(f.a1, cur_ra, {what, " ADDR1"}); check(f.a2, own_addr, {what, " ADDR2"});
    check(f.a3, cur_da, {what, " ADDR3"}); check(f.a4, cur_sa, {what, " ADDR4"});
    check(f.fsc[3:0], frag, {what, " fragment number"});
  endtask

  initial begin
    frame_t f;
    logic ok;
    int seq0;
    repeat (4) @(posedge clk);
    #1 rst = 0;

    // 1. peer sends RTS -> CTS, then data -> ACK
    nav_reg = 16'h0000;
    rec_rts = 1; @(posedge clk); #1 rec_rts = 0;
    next_frame(f, 100000);
    check(f.fch[7:2], FS_CTS, "CTS subtype");
    check(f.a1, peer_addr, "CTS ADDR1");
    check(f.nbits, 80, "CTS length");
    if (f.fch[7:2] == FS_CTS) n_cts_resp++;
    pulse_rec(0);
    next_frame(f, 100000);
    check(f.fch[7:2], FS_ACK, "ACK subtype");
    check(f.a1, peer_addr, "ACK ADDR1");
    check(f.nbits, 80, "ACK length");
    if (f.fch[7:2] == FS_ACK) n_ack_resp++;

    // 2. short MSDU: RTS, CTS, DATA, ACK
    load_msdu(0, 101);
    msdurdy = 1;
    next_frame(f, 100000);
    check(f.fch[7:2], FS_RTS, "RTS subtype");
    check(f.a1, cur_ra, "RTS ADDR1"); check(f.a2, own_addr, "RTS ADDR2");
    check(f.nbits, 128, "RTS length");
    pulse_rec(1);
    next_frame(f, 100000);
    check_data(f, 0, 0, 0, "short data");
    seq0 = int'(f.fsc[15:4]);
    check(f.nbits, 16 + 16 + 4 * 48 + 16 + 8 * 101, "short data length");
    pulse_rec(3);
    wait_done(ok);
    check(ok, 1, "short MSDU sent");
    if (ok) n_exchange++;

    // 3. 5000-byte MSDU in three fragments, carrier busy at first, one ACK lost
    load_msdu(100, 5000);
    carrier_sense = 1;
    msdurdy = 1;
    repeat (200) @(posedge clk);
    #1 check(retry_count, 1, "busy carrier counted as an attempt");
    if (retry_count > 0 && dut.u_alloc.backoff_busy) n_backoff++;
    carrier_sense = 0;
    next_frame(f, 2000000);
    check(f.fch[7:2], FS_RTS, "RTS after backoff");
    pulse_rec(1);
    next_frame(f, 200000);
    check_data(f, 0, 0, 1, "fragment 0");
    check(f.fsc[15:4], seq0 + 1, "next sequence number");
    check(fragment, 1, "FRAGMENT raised");
    pulse_rec(3);
    next_frame(f, 200000);
    check_data(f, 1, 0, 1, "fragment 1");
    if (f.fsc[3:0] == 1) n_frag++;
    // no ACK: the fragment is sent again with the Retry bit
    next_frame(f, 200000);
    check_data(f, 1, 1, 1, "fragment 1 retried");
    if (f.fch[11]) n_retry++;
    check(retry_count, 1, "retransmission counted");
    // a broadcast frame heard meanwhile clears the attempt count
    rec_group = 1; @(posedge clk); #1 rec_group = 0;
    check(retry_count, 0, "attempt count cleared by broadcast reception");
    if (retry_count == 0) n_group++;
    pulse_rec(3);
    next_frame(f, 200000);
    check_data(f, 2, 0, 0, "fragment 2");
    pulse_rec(3);
    wait_done(ok);
    check(ok, 1, "fragmented MSDU sent");

    // 4. NAV set when the MSDU arrives: the RTS waits until the NAV clears
    load_msdu(1500, 12);
    nav_reg = 16'd300;
    msdurdy = 1;
    repeat (5000) @(posedge clk);
    #1 check(frames.size(), 0, "no frame while NAV is set");
    check(bits.size(), 0, "no bits while NAV is set");
    n_nav++;
    nav_reg = 16'd0;
    next_frame(f, 2000000);
    check(f.fch[7:2], FS_RTS, "RTS after NAV");
    check(f.did, 16'd300, "DID from the NAV register at build time");
    pulse_rec(1);
    next_frame(f, 200000);
    check_data(f, 0, 0, 0, "data after NAV");
    pulse_rec(3);
    wait_done(ok);
    check(ok, 1, "MSDU after NAV sent");

    // 5. largest mesh data body (7955 bytes): four fragments, 2304+2304+2304+1043
    load_msdu(40, 7955);
    msdurdy = 1;
    next_frame(f, 2000000);
    check(f.fch[7:2], FS_RTS, "RTS for the largest MSDU");
    pulse_rec(1);
    for (int k = 0; k < 4; k++) begin
      next_frame(f, 200000);
      check_data(f, k, 0, k < 3, "largest MSDU fragment");
      check(f.nbits, 16 + 16 + 4 * 48 + 16 + 8 * ((k < 3) ? FB : 7955 - 3 * FB),
            "largest MSDU fragment length");
      pulse_rec(3);
    end
    wait_done(ok);
    check(ok, 1, "largest MSDU sent");
    if (ok) n_big++;

    // 6. peer goes silent after CTS: retransmissions until the limit, then drop
    load_msdu(1800, 40);
    msdurdy = 1;
    next_frame(f, 2000000);
    pulse_rec(1);
    begin
      int nd; nd = 0;
      for (int i = 0; i < 11; i++) begin
        next_frame(f, 2000000);
        if (f.fch[7:2] == FS_DATA) nd++;
      end
      check(nd, 11, "first transmission and ten retransmissions");
      check(f.fch[11], 1, "last one retried");
    end
    wait_done(ok);
    @(posedge clk); #1;
    check(ok, 0, "MSDU dropped at the retry limit");
    check(n_drop, 1, "one drop");
    check(retry_count, 0, "retry count cleared after drop");
    check(body_errors, 0, "frame body bytes");
    check(frames.size(), 0, "no unexpected frames");

    // every mechanism happened
    check(n_cts_resp > 0, 1, "CTS response happened");
    check(n_ack_resp > 0, 1, "ACK response happened");
    check(n_exchange > 0, 1, "RTS/CTS/DATA/ACK exchange happened");
    check(n_frag > 0, 1, "fragmentation happened");
    check(n_retry > 0, 1, "retransmission happened");
    check(n_backoff > 0, 1, "backoff happened");
    check(n_nav > 0, 1, "NAV deferral happened");
    check(n_drop > 0, 1, "drop happened");
    check(n_group > 0, 1, "broadcast reset happened");
    check(n_big > 0, 1, "largest mesh MSDU happened");
    check(n_sent, 4, "MSDUs sent");
    $display("mechanisms: cts_resp=%0d ack_resp=%0d exchange=%0d frag=%0d retry=%0d backoff=%0d nav=%0d drop=%0d sent=%0d group=%0d big=%0d",
             n_cts_resp, n_ack_resp, n_exchange, n_frag, n_retry, n_backoff, n_nav, n_drop, n_sent, n_group, n_big);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
