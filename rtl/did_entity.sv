// did_entity: builds the 16-bit Duration/ID (DID) field from the NAV register.
//
//   PS-Poll frame : DID = nav_reg with its two top bits (b14, b15) forced to 1
//                   (the field then carries an association ID)
//   CF-Poll frame : DID = 16'h8000 (only b15 set)
//   otherwise     : DID = nav_reg with b15 forced to 0 (a duration value)
// The paper describes these rules as "replacing the last two bits by 1",
// "0000000000000001" and "replacing the last bit by 0"; its waveform prints the
// DID with b0 first, so "last" is b15. Read that way the rules are the 802.11
// Duration/ID encodings, which this module follows.
//
// Timing: did is registered on the clock edge where load is high.
module did_entity
  import mac_tx_pkg::*;
(
  input  logic           clk,
  input  logic           rst,        // synchronous, active high
  input  logic           load,
  input  frame_subtype_t frame_subtype,
  input  logic [15:0]    nav_reg,
  output logic [15:0]    did
);

  logic [15:0] did_next;

  always_comb begin
    unique case (frame_subtype)
      FS_PS_POLL: did_next = {2'b11, nav_reg[13:0]};
      FS_CF_POLL: did_next = 16'h8000;
      default:    did_next = {1'b0, nav_reg[14:0]};
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst)       did <= '0;
    else if (load) did <= did_next;
  end

endmodule
