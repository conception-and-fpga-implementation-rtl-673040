// fsc_entity: frame sequence control. Keeps the 12-bit sequence counter and the
// 4-bit fragment number, builds the 16-bit Sequence Control field (FSC) and
// decides whether the MSDU has to be fragmented (FRAGMENT).
//
// Following the paper, the FSC is produced only for data frames (FS_DATA);
// for every other subtype fsc is 0. The sequence counter advances once per new
// MSDU. Field layout (802.11): fsc[3:0] = fragment number, fsc[15:4] = sequence
// number.
//
// Fragmentation (the threshold and the per-fragment bookkeeping are this design's
// choice; the paper only says FRAGMENT is raised when the frame must be
// fragmented): an MSDU whose body is longer than FRAG_BYTES is sent as fragments
// of FRAG_BYTES bytes. On each load of a data frame:
//   retry=1        : same sequence number, fragment and offset (a retransmission)
//   next_frag=1    : fragment number + 1, offset + FRAG_BYTES
//   otherwise      : new MSDU, next sequence number, fragment 0, offset 0
// Outputs that depend on the MSDU length (fragment, more_frag, frag_len,
// frag_off) are combinational from the registered state and msdu_len.
//
// Timing: state updates on the clock edge where load is high; fsc is valid from
// the next cycle.
module fsc_entity
  import mac_tx_pkg::*;
#(
  parameter int unsigned FRAG_BYTES = 2304
) (
  input  logic           clk,
  input  logic           rst,         // synchronous, active high
  input  logic           load,
  input  frame_subtype_t frame_subtype,
  input  logic           retry,
  input  logic           next_frag,
  input  logic [15:0]    msdu_len,    // body length in bytes of the current MSDU
  output logic [15:0]    fsc,
  output logic           fragment,    // MSDU longer than FRAG_BYTES
  output logic           more_frag,   // more fragments follow the current one
  output logic [15:0]    frag_off,    // byte offset of the current fragment
  output logic [15:0]    frag_len     // body bytes in the current fragment
);

  logic [11:0] seq_next, seq_num;
  logic [3:0]  frag_num;
  logic        is_data;
  logic [15:0] remaining;

  assign is_data = (frame_subtype == FS_DATA);

  always_ff @(posedge clk) begin
    if (rst) begin
      seq_next <= '0;
      seq_num  <= '0;
      frag_num <= '0;
      frag_off <= '0;
    end else if (load && is_data && !retry) begin
      if (next_frag) begin
        frag_num <= frag_num + 4'd1;
        frag_off <= frag_off + 16'(FRAG_BYTES);
      end else begin
        seq_num  <= seq_next;
        seq_next <= seq_next + 12'd1;
        frag_num <= '0;
        frag_off <= '0;
      end
    end
  end

  always_comb begin
    remaining = (msdu_len > frag_off) ? (msdu_len - frag_off) : 16'd0;
    fragment  = (msdu_len > 16'(FRAG_BYTES));
    more_frag = (remaining > 16'(FRAG_BYTES));
    frag_len  = more_frag ? 16'(FRAG_BYTES) : remaining;
    fsc       = is_data ? {seq_num, frag_num} : 16'd0;
  end

endmodule
