// allocation_control: the allocation control sub-module. It decides when the
// transmitter may use the medium. It holds the three entities the paper names:
// collision avoidance, retry counter and backoff.
//
// The retry counter is cleared by clear_retry: the transmission control pulses
// it when a CTS answers an RTS, when an ACK answers a data frame, and when a
// frame is given up, and the top level also pulses it when a broadcast or
// multicast frame is received. Those are the cases in which the paper
// re-initialises the retry counts.
//
// Interface: see collision_avoidance for the en_medium/en_retry ->
// access_granted/tx_fail handshake. count_val, backoff_val and cw are status.
module allocation_control #(
  parameter int unsigned CNT_W           = 8,
  parameter int unsigned RETRY_THRESHOLD = 10,
  parameter int unsigned CW_MIN          = 31,
  parameter int unsigned CW_MAX          = 1023,
  parameter int unsigned SLOT_TIME_US    = 20,
  parameter int unsigned CLK_MHZ         = 50,
  parameter int unsigned SLOT_CYCLES     = SLOT_TIME_US * CLK_MHZ
) (
  input  logic             clk,
  input  logic             rst,            // synchronous, active high
  input  logic             en_medium,
  input  logic             en_retry,
  input  logic             clear_retry,
  input  logic [15:0]      nav_reg,
  input  logic             carrier_sense,
  output logic             access_granted,
  output logic             tx_fail,
  output logic [CNT_W-1:0] count_val,
  output logic [15:0]      backoff_val,
  output logic [9:0]       cw,
  output logic             backoff_busy
);

  logic start_count, en_backoff, backoff_done, medium_idle;

  collision_avoidance #(
    .CNT_W(CNT_W), .RETRY_THRESHOLD(RETRY_THRESHOLD)
  ) u_ca (
    .clk, .rst, .en_medium, .en_retry, .nav_reg, .carrier_sense, .count_val,
    .backoff_done, .medium_idle, .start_count, .en_backoff, .access_granted,
    .tx_fail
  );

  retry_counter #(.WIDTH(CNT_W)) u_retry (
    .clk, .reset(rst | clear_retry), .start_count, .count_val
  );

  backoff #(
    .CW_MIN(CW_MIN), .CW_MAX(CW_MAX), .SLOT_TIME_US(SLOT_TIME_US),
    .CLK_MHZ(CLK_MHZ), .SLOT_CYCLES(SLOT_CYCLES), .CNT_W(CNT_W)
  ) u_backoff (
    .clk, .rst, .en_backoff, .count_val, .medium_idle, .backoff_val, .cw,
    .busy(backoff_busy), .done(backoff_done)
  );

endmodule
