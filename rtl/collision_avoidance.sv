// collision_avoidance: the collision avoidance entity of the allocation control.
//
// Started by en_medium (first attempt) or en_retry (retransmission). For a
// retransmission it first increments the attempt count (start_count). It then
// looks at the medium: it is free when nav_reg == 0 and carrier_sense == 0.
//   free             -> access_granted
//   busy (NAV != 0 or carrier sensed)
//                    -> start_count (attempt count + 1); if the count now
//                       passes RETRY_THRESHOLD access is refused (tx_fail),
//                       otherwise en_backoff starts the backoff entity and
//                       access_granted is given when the backoff has elapsed.
// These rules and RETRY_THRESHOLD = 10 are the paper's. The backoff counts down
// only while the medium is idle, so the medium is free when it expires.
// tx_fail, which tells the transmission control that the frame is rejected, is
// this design's addition; the paper only says access_granted stays 0.
//
// Handshake (4-phase): en_medium/en_retry stay high until access_granted or
// tx_fail is seen, then fall; access_granted and tx_fail fall in the next cycle.
// start_count and en_backoff are one-cycle pulses.
module collision_avoidance #(
  parameter int unsigned CNT_W           = 8,
  parameter int unsigned RETRY_THRESHOLD = 10
) (
  input  logic             clk,
  input  logic             rst,            // synchronous, active high
  input  logic             en_medium,
  input  logic             en_retry,
  input  logic [15:0]      nav_reg,
  input  logic             carrier_sense,
  input  logic [CNT_W-1:0] count_val,
  input  logic             backoff_done,
  output logic             medium_idle,
  output logic             start_count,
  output logic             en_backoff,
  output logic             access_granted,
  output logic             tx_fail
);

  typedef enum logic [2:0] {
    CA_IDLE, CA_RETRY_INC, CA_CHECK, CA_LIMIT, CA_WAIT_BO, CA_GRANT, CA_FAIL
  } ca_state_t;

  ca_state_t state, state_next;
  logic      req;
  logic      over_limit;

  assign req         = en_medium | en_retry;
  assign medium_idle = (nav_reg == 16'd0) && !carrier_sense;
  assign over_limit  = (count_val > CNT_W'(RETRY_THRESHOLD));

  always_comb begin
    state_next     = state;
    start_count    = 1'b0;
    en_backoff     = 1'b0;
    access_granted = 1'b0;
    tx_fail        = 1'b0;
    unique case (state)
      CA_IDLE: begin
        if (en_retry)       state_next = CA_RETRY_INC;
        else if (en_medium) state_next = CA_CHECK;
      end
      CA_RETRY_INC: begin
        start_count = 1'b1;
        state_next  = CA_CHECK;
      end
      CA_CHECK: begin
        if (!req)             state_next = CA_IDLE;
        else if (over_limit)  state_next = CA_FAIL;
        else if (medium_idle) state_next = CA_GRANT;
        else begin
          start_count = 1'b1;
          state_next  = CA_LIMIT;
        end
      end
      CA_LIMIT: begin
        if (!req)            state_next = CA_IDLE;
        else if (over_limit) state_next = CA_FAIL;
        else begin
          en_backoff = 1'b1;
          state_next = CA_WAIT_BO;
        end
      end
      CA_WAIT_BO: begin
        if (!req)              state_next = CA_IDLE;
        else if (backoff_done) state_next = CA_GRANT;
      end
      CA_GRANT: begin
        access_granted = 1'b1;
        if (!req) state_next = CA_IDLE;
      end
      CA_FAIL: begin
        tx_fail = 1'b1;
        if (!req) state_next = CA_IDLE;
      end
      default: state_next = CA_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) state <= CA_IDLE;
    else     state <= state_next;
  end

endmodule
