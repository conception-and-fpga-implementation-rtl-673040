// tb_transmission_control: the exchanges of the paper's waveforms and what this
// design adds around them. The other sub-modules are modelled with fixed
// answer delays. Each frame the controller builds is logged as (subtype,
// retry bit, medium request kind, next_frag) and compared with the expected
// sequence:
//   rec_data -> ACK                       rec_rts -> CTS, rec_data -> ACK
//   msdurdy -> RTS, rec_cts -> DATA, no ACK -> DATA again with Retry and en_retry,
//   rec_ack -> msdu_sent                  fragmented MSDU -> next fragment after ACK
//   no CTS -> RTS again                   refused access -> msdu_dropped
module tb_transmission_control;
  import mac_tx_pkg::*;
  localparam int TO = 50;
  // state encoding of transmission_control (declaration order of its enum)
  localparam int S_IDLE = 0, S_WAIT_CTS = 5, S_WAIT_DATA = 6, S_WAIT_ACK = 7;
  logic clk = 0, rst = 1;
  logic msdurdy = 0, rec_data = 0, rec_cts = 0, rec_rts = 0, rec_ack = 0;
  logic [10:0] buff_ptr_in = 11'h2AB;
  logic frame_done = 0, more_frag = 0, access_granted = 0, tx_fail = 0, transmit_complete = 0;
  logic en_buildframe, retry, next_frag, en_medium, en_retry, transmit, clear_retry;
  logic msdu_sent, msdu_dropped;
  frame_subtype_t frame_subtype;
  logic [10:0] buff_ptr;
  logic refuse = 0;
  int checks = 0, failures = 0;
  int n_clear = 0, n_sent = 0, n_drop = 0, n_tx = 0;
  typedef struct packed { logic [5:0] fs; logic retry; logic via_retry; logic nf; } rec_t;
  rec_t log_q[$];

  transmission_control #(.RESP_TIMEOUT(TO)) dut (.*);
  always #5 clk = ~clk;

  // models of frame computing, allocation control and frame transmission
  int bf_t = 0, md_t = 0, tx_t = 0;
  always @(posedge clk) begin
    if (rst) begin
      frame_done <= 0; access_granted <= 0; tx_fail <= 0; transmit_complete <= 0;
    end else begin
      bf_t <= en_buildframe ? bf_t + 1 : 0;
      if (en_buildframe && bf_t == 0)
        log_q.push_back('{fs: frame_subtype, retry: retry, via_retry: 1'b0, nf: next_frag});
      frame_done <= en_buildframe && bf_t >= 3;
      md_t <= (en_medium | en_retry) ? md_t + 1 : 0;
      if ((en_medium | en_retry) && md_t == 0 && log_q.size() > 0)
        log_q[log_q.size() - 1].via_retry = en_retry;
      access_granted <= (en_medium | en_retry) && md_t >= 2 && !refuse;
      tx_fail        <= (en_medium | en_retry) && md_t >= 2 && refuse;
      tx_t <= transmit ? tx_t + 1 : 0;
      transmit_complete <= transmit && tx_t >= 5;
      if (transmit && tx_t == 0) n_tx++;
      if (clear_retry) n_clear++;
      if (msdu_sent) n_sent++;
      if (msdu_dropped) n_drop++;
    end
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask


  task automatic wait_idle();
    int t; t = 0;
    while (int'(dut.state) != S_IDLE && t < 10000) begin @(posedge clk); #1 t++; end
  endtask

  task automatic wait_state(int st);
    int t; t = 0;
    while (int'(dut.state) != st && t < 10000) begin @(posedge clk); #1 t++; end
    check(int'(dut.state), st, "reached wait state");
  endtask

  task automatic expect_frame(logic [5:0] fs, logic r, logic vr, logic nf, string what);
    rec_t e;
    checks++;
    if (log_q.size() == 0) begin
      failures++; $display("FAIL %s: no frame built", what);
    end else begin
      e = log_q.pop_front();
      if (e.fs != fs || e.retry != r || e.via_retry != vr || e.nf != nf) begin
        failures++;
        $display("FAIL %s: got fs=%b r=%b vr=%b nf=%b", what, e.fs, e.retry, e.via_retry, e.nf);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // Fig. 6: received data -> ACK
    rec_data = 1; @(posedge clk); #1 rec_data = 0;
    wait_idle();
    expect_frame(FS_ACK, 0, 0, 0, "ACK for data");
    check(n_tx, 1, "ACK transmitted");
    // Fig. 8: received RTS -> CTS, then data -> ACK
    rec_rts = 1; @(posedge clk); #1 rec_rts = 0;
    wait_state(S_WAIT_DATA);
    expect_frame(FS_CTS, 0, 0, 0, "CTS for RTS");
    rec_data = 1; @(posedge clk); #1 rec_data = 0;
    wait_idle();
    expect_frame(FS_ACK, 0, 0, 0, "ACK after CTS");
    // Fig. 9/10: MSDU -> RTS, CTS -> DATA, no ACK -> retry, ACK -> sent
    msdurdy = 1;
    wait_state(S_WAIT_CTS);
    check(buff_ptr, 11'h2AB, "buff_ptr latched");
    expect_frame(FS_RTS, 0, 0, 0, "RTS for MSDU");
    rec_cts = 1; @(posedge clk); #1 rec_cts = 0;
    @(posedge clk); #1 check(n_clear, 1, "CTS clears retry count");
    wait_state(S_WAIT_ACK);
    expect_frame(FS_DATA, 0, 0, 0, "DATA after CTS");
    repeat (TO + 5) @(posedge clk);
    #1 wait_state(S_WAIT_ACK);
    expect_frame(FS_DATA, 1, 1, 0, "DATA retried, en_retry");
    rec_ack = 1; @(posedge clk); #1 rec_ack = 0;
    @(posedge clk); #1 check(n_sent, 1, "msdu_sent");
    check(n_clear, 2, "ACK clears retry count");
    msdurdy = 0;
    wait_idle();
    // fragmented MSDU: the ACK of fragment 0 is followed by fragment 1
    msdurdy = 1;
    wait_state(S_WAIT_CTS);
    expect_frame(FS_RTS, 0, 0, 0, "RTS 2");
    rec_cts = 1; @(posedge clk); #1 rec_cts = 0;
    wait_state(S_WAIT_ACK);
    expect_frame(FS_DATA, 0, 0, 0, "fragment 0");
    more_frag = 1;
    rec_ack = 1; @(posedge clk); #1 rec_ack = 0;
    more_frag = 0;
    wait_state(S_WAIT_ACK);
    expect_frame(FS_DATA, 0, 0, 1, "fragment 1 with next_frag");
    check(n_sent, 1, "not sent before the last fragment");
    rec_ack = 1; @(posedge clk); #1 rec_ack = 0;
    @(posedge clk); #1 check(n_sent, 2, "sent after the last fragment");
    msdurdy = 0;
    wait_idle();
    // no CTS -> RTS again; refused access -> dropped
    msdurdy = 1;
    wait_state(S_WAIT_CTS);
    expect_frame(FS_RTS, 0, 0, 0, "RTS 3");
    repeat (TO + 5) @(posedge clk);
    #1 wait_state(S_WAIT_CTS);
    expect_frame(FS_RTS, 1, 1, 0, "RTS retried");
    refuse = 1;
    begin
      int t; t = 0;
      while (n_drop == 0 && t < 1000) begin @(posedge clk); #1 t++; end
    end
    msdurdy = 0;
    check(n_drop, 1, "dropped after refusal");
    expect_frame(FS_RTS, 1, 1, 0, "RTS retry refused");
    check(n_clear, 6, "drop clears retry count");
    msdurdy = 0; refuse = 0;
    wait_idle();
    // CTS sent but no data follows -> back to idle
    rec_rts = 1; @(posedge clk); #1 rec_rts = 0;
    wait_state(S_WAIT_DATA);
    expect_frame(FS_CTS, 0, 0, 0, "CTS 2");
    repeat (TO + 5) @(posedge clk);
    #1 check(int'(dut.state), S_IDLE, "WAIT_DATA timeout to idle");
    // responses have priority over a pending MSDU
    msdurdy = 1; rec_rts = 1;
    @(posedge clk); #1 rec_rts = 0;
    wait_state(S_WAIT_DATA);
    expect_frame(FS_CTS, 0, 0, 0, "response first");
    msdurdy = 0;
    check(log_q.size(), 0, "no extra frames");
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
