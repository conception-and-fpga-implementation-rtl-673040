// backoff: the backoff entity of the allocation control.
//
// When en_backoff is pulsed it
//   1. computes the contention window from the attempt count:
//        CW = min(CW_MAX, (CW_MIN + 1) * 2^count - 1),
//   2. takes a random number in [0, CW] from a free-running 16-bit LFSR
//      (CW is always 2^k - 1, so the number is the LFSR value masked by CW),
//   3. reports Backoff Time = Random * SlotTime on backoff_val (in microseconds),
//   4. counts the backoff down, one slot per SLOT_CYCLES clock cycles, only while
//      the medium is idle, and pulses done when it reaches zero.
// The formula Backoff Time = Random() * SlotTime, the interval [0, CW] and the
// CWmin/CWmax bounds follow the paper. The paper takes CW from the SSRC/SLRC
// retry counts; here a single attempt count is used. CW_MIN = 31, CW_MAX = 1023
// and a 20 us slot are the 802.11 DSSS values (the paper's waveforms show backoff
// times that are all multiples of 20 us). The clock rate is this design's choice.
//
// Interface: en_backoff is a one-cycle start pulse; done is a one-cycle pulse;
// busy is high from the cycle after en_backoff until done.
module backoff #(
  parameter int unsigned CW_MIN       = 31,
  parameter int unsigned CW_MAX       = 1023,
  parameter int unsigned SLOT_TIME_US = 20,
  parameter int unsigned CLK_MHZ      = 50,
  parameter int unsigned SLOT_CYCLES  = SLOT_TIME_US * CLK_MHZ,
  parameter int unsigned CNT_W        = 8,
  parameter logic [15:0] LFSR_SEED    = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst,          // synchronous, active high
  input  logic             en_backoff,
  input  logic [CNT_W-1:0] count_val,    // attempt count from the retry counter
  input  logic             medium_idle,
  output logic [15:0]      backoff_val,  // Random * SlotTime, microseconds
  output logic [9:0]       cw,           // contention window in use
  output logic             busy,
  output logic             done
);

  localparam int unsigned SLOT_W = (SLOT_CYCLES > 1) ? $clog2(SLOT_CYCLES) : 1;

  logic [15:0]       lfsr;
  logic [9:0]        cw_next;
  logic [9:0]        rnd;
  logic [9:0]        slots_left;
  logic [SLOT_W-1:0] slot_cnt;

  // Contention window from the attempt count, saturating at CW_MAX.
  always_comb begin
    logic [20:0] w;
    if (count_val >= CNT_W'(10))
      w = 21'(CW_MAX);
    else
      w = (21'(CW_MIN + 1) << count_val) - 21'd1;
    cw_next = (w > 21'(CW_MAX)) ? 10'(CW_MAX) : w[9:0];
    rnd     = lfsr[9:0] & cw_next;
  end

  // x^16 + x^14 + x^13 + x^11 + 1
  always_ff @(posedge clk) begin
    if (rst) lfsr <= LFSR_SEED;
    else     lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      slots_left  <= '0;
      slot_cnt    <= '0;
      backoff_val <= '0;
      cw          <= 10'(CW_MIN);
    end else begin
      done <= 1'b0;
      if (en_backoff) begin
        busy        <= 1'b1;
        cw          <= cw_next;
        slots_left  <= rnd;
        backoff_val <= 16'(32'(rnd) * SLOT_TIME_US);
        slot_cnt    <= '0;
      end else if (busy) begin
        if (slots_left == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (medium_idle) begin
          if (slot_cnt == SLOT_W'(SLOT_CYCLES - 1)) begin
            slot_cnt   <= '0;
            slots_left <= slots_left - 10'd1;
          end else begin
            slot_cnt <= slot_cnt + 1'b1;
          end
        end
      end
    end
  end

endmodule
