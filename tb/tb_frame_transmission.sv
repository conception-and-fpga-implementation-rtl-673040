// tb_frame_transmission: serialises ACK, RTS and data frames (body lengths that
// end on and off a word boundary) and compares the bits on TX_LINE with a
// reference stream built here field by field, LSB first, in 802.11 header
// order. Also checks the cycle cost of the multiplexer/shift-register walk and
// that TRANSMIT_COMPLETE waits for the PHY's OK and for transmit to fall.
module tb_frame_transmission;
  import mac_tx_pkg::*;
  logic clk = 0, rst = 1, transmit = 0, phy_done = 0;
  frame_hdr_t hdr;
  logic buf_rd, tx_line, tx_en, transmit_complete;
  logic [10:0] buf_addr;
  logic [31:0] buf_rdata;
  field_sel_t sel;
  logic [31:0] mem [2048];
  bit exp_bits[$];
  bit got_bits[$];
  int checks = 0, failures = 0;

  frame_transmission dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (buf_rd) buf_rdata <= mem[buf_addr];
  always @(posedge clk) if (tx_en && !rst) got_bits.push_back(tx_line);

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic void push(logic [63:0] v, int n);
    for (int i = 0; i < n; i++) exp_bits.push_back(v[i]);
  endfunction

  // Reference stream and cycle cost.
  function automatic int reference();
    int cost;
    exp_bits.delete();
    cost = 0;
    push(hdr.fch, 16); push(hdr.did, 16); push(hdr.a1, 48);
    cost += 4 + 16 + 16 + 48;
    if (hdr.mask.a2) begin push(hdr.a2, 48); cost += 2 + 48; end else cost += 2;
    if (hdr.mask.a3) begin push(hdr.a3, 48); cost += 2 + 48; end else cost += 2;
    if (hdr.mask.fsc) begin push(hdr.fsc, 16); cost += 1 + 16; end else cost += 1;
    if (hdr.mask.a4) begin push(hdr.a4, 48); cost += 2 + 48; end else cost += 2;
    if (hdr.mask.body) begin
      for (int b = 0; b < hdr.body_len; b++) begin
        logic [31:0] w;
        w = mem[hdr.body_word + b / 4];
        push(w >> (8 * (b % 4)), 8);
      end
      cost += 2 * ((hdr.body_len + 3) / 4) + 8 * hdr.body_len;
    end
    return cost + 1 + 1 + 1 + 1;   // idle edge, body/end, end, phy wait
  endfunction

  task automatic send(int phy_delay);
    int exp_cost, t;
    exp_cost = reference();
    got_bits.delete();
    phy_done = (phy_delay == 0);
    transmit = 1;
    t = 0;
    if (phy_delay == 0) begin
      while (!transmit_complete && t < 100000) begin @(posedge clk); #1 t++; end
    end else begin
      while (got_bits.size() < exp_bits.size() && t < 100000) begin @(posedge clk); #1 t++; end
      repeat (phy_delay) @(posedge clk);
      #1 check(transmit_complete, 0, "complete waits for the PHY");
      phy_done = 1;
      @(posedge clk); #1 check(transmit_complete, 1, "complete one cycle after the PHY's OK");
    end
    check(got_bits.size(), exp_bits.size(), "bit count");
    begin
      int bad; bad = 0;
      foreach (exp_bits[i]) if (i < got_bits.size() && got_bits[i] != exp_bits[i]) bad++;
      check(bad, 0, "bits differing");
    end
    phy_done = 0;
    repeat (2) @(posedge clk);
    #1 check(transmit_complete, 1, "complete held");
    transmit = 0;
    @(posedge clk); #1 check(transmit_complete, 0, "complete released");
    t_last = t;
    exp_last = exp_cost;
  endtask
  int t_last, exp_last;

  initial begin
    for (int i = 0; i < 2048; i++) mem[i] = $urandom;
    hdr = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int k = 0; k < 12; k++) begin
      hdr.fch = 16'($urandom); hdr.did = 16'($urandom); hdr.fsc = 16'($urandom);
      hdr.a1 = {$urandom, $urandom}; hdr.a2 = {$urandom, $urandom};
      hdr.a3 = {$urandom, $urandom}; hdr.a4 = {$urandom, $urandom};
      hdr.body_word = 16'(7 + $urandom % 1000);
      case (k % 4)
        0: begin hdr.mask = 5'b00000; hdr.body_len = 0; end          // ACK / CTS
        1: begin hdr.mask = 5'b10000; hdr.body_len = 0; end          // RTS
        2: begin hdr.mask = 5'b11111; hdr.body_len = 16'(4 * (1 + $urandom % 40)); end
        default: begin hdr.mask = 5'b11111; hdr.body_len = 16'(1 + $urandom % 150); end
      endcase
      send(0);
      check(t_last, exp_last, "cycles to TRANSMIT_COMPLETE");
      send(12 + k);
    end
    // empty data body
    hdr.mask = 5'b11111; hdr.body_len = 0;
    send(0);
    check(t_last, exp_last, "empty body cycles");
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
