// fch_entity: builds the 16-bit Frame Control header (FCH) of the frame being
// computed and holds it in a register until the next load.
//
// Field layout (bit 0 first on the air), as the paper lists it:
//   [1:0] protocol version = 00     [3:2] type     (from frame_subtype)
//   [7:4] subtype (from frame_subtype)
//   [8] ToDS  [9] FromDS  [10] MoreFragments  [11] Retry (input)
//   [12] PowerManagement  [13] MoreData  [14] WEP  [15] Order
// Type, subtype and Retry come from inputs as in the paper. ToDS and FromDS are
// set together for data-type frames, so that mesh data frames carry the four
// address format; this and the MoreFragments input are this design's choices.
// PowerManagement, MoreData, WEP and Order are always 0.
//
// Timing: fch is registered on the clock edge where load is high.
module fch_entity
  import mac_tx_pkg::*;
(
  input  logic           clk,
  input  logic           rst,        // synchronous, active high
  input  logic           load,
  input  frame_subtype_t frame_subtype,
  input  logic           retry,
  input  logic           more_frag,
  output logic [15:0]    fch
);

  logic [15:0] fch_next;
  logic        wds;

  always_comb begin
    wds          = (frame_subtype[1:0] == TYPE_DATA);
    fch_next     = '0;
    fch_next[1:0]  = 2'b00;
    fch_next[7:2]  = frame_subtype;
    fch_next[8]    = wds;
    fch_next[9]    = wds;
    fch_next[10]   = more_frag;
    fch_next[11]   = retry;
  end

  always_ff @(posedge clk) begin
    if (rst)       fch <= '0;
    else if (load) fch <= fch_next;
  end

endmodule
