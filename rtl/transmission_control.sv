// transmission_control: the transmission control sub-module. It arbitrates the
// other sub-modules and steps a frame exchange through its phases.
//
// Every frame goes through the same four phases, as in the paper:
//   BUILD  : en_buildframe = 1 and frame_subtype set, until frame_done
//   MEDIUM : en_medium (or en_retry for a retransmission), until access_granted
//   TX     : transmit = 1, until transmit_complete
//   RELEASE: all requests dropped; wait for the answers to drop
// What starts an exchange and what follows it (paper, Sec. 4.1):
//   rec_data            -> send ACK, then idle
//   rec_rts             -> send CTS, then wait for rec_data
//   msdurdy             -> send RTS, then wait for rec_cts
//   rec_cts (after RTS) -> send DATA, then wait for rec_ack
//   no rec_ack          -> send DATA again with retry = 1 and en_retry
// This design adds: a timeout of RESP_TIMEOUT cycles for each wait (the paper
// does not say when rec_ack counts as missing); an RTS that gets no CTS is
// sent again the same way a data frame is; a DATA fragment that is followed by
// more fragments is, once acknowledged, followed by the next fragment without a
// new RTS; tx_fail from the allocation control drops the MSDU (msdu_dropped).
// clear_retry pulses when a CTS or an ACK arrives and when an MSDU is dropped.
// When several requests arrive together in idle the order is rec_rts, rec_data,
// msdurdy (responses first).
//
// Inputs rec_* and msdurdy are sampled while the controller waits for them;
// msdurdy must fall in the cycle where msdu_sent or msdu_dropped is seen (a new
// MSDU is not taken in that cycle). buff_ptr_in is latched with
// msdurdy. msdu_sent and msdu_dropped are one-cycle pulses.
module transmission_control
  import mac_tx_pkg::*;
#(
  parameter int unsigned BUF_AW       = 11,
  parameter int unsigned RESP_TIMEOUT = 16384
) (
  input  logic              clk,
  input  logic              rst,               // synchronous, active high
  input  logic              msdurdy,
  input  logic [BUF_AW-1:0] buff_ptr_in,
  input  logic              rec_data,
  input  logic              rec_cts,
  input  logic              rec_rts,
  input  logic              rec_ack,
  input  logic              frame_done,
  input  logic              more_frag,
  input  logic              access_granted,
  input  logic              tx_fail,
  input  logic              transmit_complete,
  output logic              en_buildframe,
  output frame_subtype_t    frame_subtype,
  output logic              retry,
  output logic              next_frag,
  output logic [BUF_AW-1:0] buff_ptr,
  output logic              en_medium,
  output logic              en_retry,
  output logic              transmit,
  output logic              clear_retry,
  output logic              msdu_sent,
  output logic              msdu_dropped
);

  typedef enum logic [2:0] {
    TC_IDLE, TC_BUILD, TC_MEDIUM, TC_TX, TC_RELEASE, TC_WAIT_CTS, TC_WAIT_DATA,
    TC_WAIT_ACK
  } tc_state_t;

  localparam int unsigned TW = $clog2(RESP_TIMEOUT + 1);

  tc_state_t      state, after;
  frame_subtype_t fs;
  logic           retry_mode;
  logic [TW-1:0]  timer;
  logic           timeout;

  assign timeout       = (timer == TW'(RESP_TIMEOUT));
  assign en_buildframe = (state == TC_BUILD) || (state == TC_MEDIUM) || (state == TC_TX);
  assign frame_subtype = en_buildframe ? fs : '0;
  assign en_medium     = (state == TC_MEDIUM) && !retry_mode;
  assign en_retry      = (state == TC_MEDIUM) && retry_mode;
  assign transmit      = (state == TC_TX);

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= TC_IDLE;
      after        <= TC_IDLE;
      fs           <= '0;
      retry        <= 1'b0;
      retry_mode   <= 1'b0;
      next_frag    <= 1'b0;
      buff_ptr     <= '0;
      timer        <= '0;
      clear_retry  <= 1'b0;
      msdu_sent    <= 1'b0;
      msdu_dropped <= 1'b0;
    end else begin
      clear_retry  <= 1'b0;
      msdu_sent    <= 1'b0;
      msdu_dropped <= 1'b0;
      if (state inside {TC_WAIT_CTS, TC_WAIT_DATA, TC_WAIT_ACK}) timer <= timer + 1'b1;
      else                                                     timer <= '0;

      unique case (state)
        TC_IDLE: begin
          retry <= 1'b0; retry_mode <= 1'b0; next_frag <= 1'b0;
          if (rec_rts) begin
            fs <= FS_CTS; after <= TC_WAIT_DATA; state <= TC_BUILD;
          end else if (rec_data) begin
            fs <= FS_ACK; after <= TC_IDLE; state <= TC_BUILD;
          end else if (msdurdy && !msdu_sent && !msdu_dropped) begin
            fs <= FS_RTS; after <= TC_WAIT_CTS; state <= TC_BUILD;
            buff_ptr <= buff_ptr_in;
          end
        end
        TC_BUILD:  if (frame_done) state <= TC_MEDIUM;
        TC_MEDIUM: begin
          if (access_granted) begin
            state <= TC_TX;
          end else if (tx_fail) begin
            clear_retry  <= 1'b1;
            msdu_dropped <= (fs == FS_RTS) || (fs == FS_DATA);
            after        <= TC_IDLE;
            state        <= TC_RELEASE;
          end
        end
        TC_TX: if (transmit_complete) state <= TC_RELEASE;
        TC_RELEASE: begin
          if (!frame_done && !transmit_complete && !access_granted && !tx_fail)
            state <= after;
        end
        TC_WAIT_CTS: begin
          if (rec_cts) begin
            clear_retry <= 1'b1;
            fs <= FS_DATA; retry <= 1'b0; retry_mode <= 1'b0; next_frag <= 1'b0;
            after <= TC_WAIT_ACK; state <= TC_BUILD;
          end else if (timeout) begin
            fs <= FS_RTS; retry <= 1'b1; retry_mode <= 1'b1; next_frag <= 1'b0;
            after <= TC_WAIT_CTS; state <= TC_BUILD;
          end
        end
        TC_WAIT_DATA: begin
          if (rec_data) begin
            fs <= FS_ACK; retry <= 1'b0; retry_mode <= 1'b0; next_frag <= 1'b0;
            after <= TC_IDLE; state <= TC_BUILD;
          end else if (timeout) begin
            state <= TC_IDLE;
          end
        end
        TC_WAIT_ACK: begin
          if (rec_ack) begin
            clear_retry <= 1'b1;
            if (more_frag) begin
              fs <= FS_DATA; retry <= 1'b0; retry_mode <= 1'b0; next_frag <= 1'b1;
              after <= TC_WAIT_ACK; state <= TC_BUILD;
            end else begin
              msdu_sent <= 1'b1;
              state     <= TC_IDLE;
            end
          end else if (timeout) begin
            fs <= FS_DATA; retry <= 1'b1; retry_mode <= 1'b1; next_frag <= 1'b0;
            after <= TC_WAIT_ACK; state <= TC_BUILD;
          end
        end
        default: state <= TC_IDLE;
      endcase
    end
  end

  a_one_request: assert property (@(posedge clk) disable iff (rst) !(en_medium && en_retry));
  a_tx_after_grant: assert property (@(posedge clk) disable iff (rst)
    $rose(transmit) |-> $past(access_granted));

endmodule
