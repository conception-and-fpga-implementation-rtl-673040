// frame_transmission: the frame transmission sub-module. It sends the frame
// built by frame computing, one bit per clock, on TX_LINE.
//
// As in the paper it is a multiplexer with a 4-bit select line whose inputs are
// FCH, DID, ADDR1..ADDR4, FCS (sequence control) and DATA, feeding a 32-bit shift
// register. The select walks the fields in 802.11 header order (FCH, DID, ADDR1,
// ADDR2, ADDR3, sequence control, ADDR4, body), skipping those the frame does not
// carry (hdr.mask). Each 48-bit address goes through the 32-bit register in two
// loads (32 + 16 bits). Body words are read from the MSDU buffer, one-cycle read
// latency, and the last word is cut to the remaining bytes. Bits leave LSB first.
//
// Cycle cost (this design's choice): one load cycle per selected field, one per
// skipped field, one extra per body word for the buffer read, then one cycle per
// bit. tx_en marks the cycles where tx_line carries a frame bit.
//
// After the last bit it waits for phy_done (the PHY's "OK") and then raises
// transmit_complete until transmit falls (4-phase handshake). When frame
// computing raises FRAGMENT, the part of the body to send arrives as
// hdr.body_word/hdr.body_len, so no separate fragment input is needed here.
// No CRC frame check sequence is appended; the paper does not describe one.
module frame_transmission
  import mac_tx_pkg::*;
#(
  parameter int unsigned BUF_AW = 11
) (
  input  logic              clk,
  input  logic              rst,            // synchronous, active high
  input  logic              transmit,
  input  frame_hdr_t        hdr,
  input  logic              phy_done,
  output logic              buf_rd,
  output logic [BUF_AW-1:0] buf_addr,
  input  logic [31:0]       buf_rdata,
  output logic              tx_line,
  output logic              tx_en,
  output logic              transmit_complete,
  output field_sel_t        sel
);

  typedef enum logic [2:0] {FT_IDLE, FT_LOAD, FT_LOADW, FT_SHIFT, FT_WAIT_PHY, FT_DONE}
    ft_state_t;

  ft_state_t         state;
  logic [31:0]       sreg;
  logic [5:0]        bits_left;
  logic [31:0]       mux_out;
  logic [5:0]        mux_bits;
  logic              present;
  logic [15:0]       bytes_left;
  logic [BUF_AW-1:0] body_addr;
  field_sel_t        sel_next;

  // The multiplexer: 4-bit select -> 32-bit shift register input.
  always_comb begin
    mux_out  = '0;
    mux_bits = 6'd16;
    present  = 1'b1;
    unique case (sel)
      SEL_FCH:  mux_out = {16'd0, hdr.fch};
      SEL_DID:  mux_out = {16'd0, hdr.did};
      SEL_A1L:  begin mux_out = hdr.a1[31:0];          mux_bits = 6'd32; end
      SEL_A1H:  mux_out = {16'd0, hdr.a1[47:32]};
      SEL_A2L:  begin mux_out = hdr.a2[31:0];          mux_bits = 6'd32; present = hdr.mask.a2; end
      SEL_A2H:  begin mux_out = {16'd0, hdr.a2[47:32]}; present = hdr.mask.a2; end
      SEL_A3L:  begin mux_out = hdr.a3[31:0];          mux_bits = 6'd32; present = hdr.mask.a3; end
      SEL_A3H:  begin mux_out = {16'd0, hdr.a3[47:32]}; present = hdr.mask.a3; end
      SEL_FSC:  begin mux_out = {16'd0, hdr.fsc};       present = hdr.mask.fsc; end
      SEL_A4L:  begin mux_out = hdr.a4[31:0];          mux_bits = 6'd32; present = hdr.mask.a4; end
      SEL_A4H:  begin mux_out = {16'd0, hdr.a4[47:32]}; present = hdr.mask.a4; end
      SEL_BODY: begin
        mux_out  = buf_rdata;
        mux_bits = (bytes_left >= 16'd4) ? 6'd32 : 6'(bytes_left[2:0] * 8);
        present  = hdr.mask.body && (bytes_left != 16'd0);
      end
      default:  begin present = 1'b0; mux_bits = 6'd0; end
    endcase
  end

  always_comb begin
    unique case (sel)
      SEL_FCH:  sel_next = SEL_DID;
      SEL_DID:  sel_next = SEL_A1L;
      SEL_A1L:  sel_next = SEL_A1H;
      SEL_A1H:  sel_next = SEL_A2L;
      SEL_A2L:  sel_next = SEL_A2H;
      SEL_A2H:  sel_next = SEL_A3L;
      SEL_A3L:  sel_next = SEL_A3H;
      SEL_A3H:  sel_next = SEL_FSC;
      SEL_FSC:  sel_next = SEL_A4L;
      SEL_A4L:  sel_next = SEL_A4H;
      SEL_A4H:  sel_next = SEL_BODY;
      default:  sel_next = SEL_END;
    endcase
  end

  assign buf_rd   = (state == FT_LOAD) && (sel == SEL_BODY) && present;
  assign buf_addr = body_addr;
  assign tx_line  = sreg[0];
  assign tx_en    = (state == FT_SHIFT);
  assign transmit_complete = (state == FT_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= FT_IDLE;
      sel        <= SEL_FCH;
      sreg       <= '0;
      bits_left  <= '0;
      bytes_left <= '0;
      body_addr  <= '0;
    end else begin
      unique case (state)
        FT_IDLE: if (transmit) begin
          sel        <= SEL_FCH;
          bytes_left <= hdr.body_len;
          body_addr  <= BUF_AW'(hdr.body_word);
          state      <= FT_LOAD;
        end
        FT_LOAD: begin
          if (sel == SEL_END) begin
            state <= FT_WAIT_PHY;
          end else if (!present) begin
            sel <= sel_next;
          end else if (sel == SEL_BODY) begin
            state <= FT_LOADW;          // buffer read issued this cycle
          end else begin
            sreg      <= mux_out;
            bits_left <= mux_bits;
            state     <= FT_SHIFT;
          end
        end
        FT_LOADW: begin
          sreg       <= mux_out;
          bits_left  <= mux_bits;
          bytes_left <= (bytes_left >= 16'd4) ? bytes_left - 16'd4 : 16'd0;
          body_addr  <= body_addr + 1'b1;
          state      <= FT_SHIFT;
        end
        FT_SHIFT: begin
          sreg      <= sreg >> 1;
          bits_left <= bits_left - 6'd1;
          if (bits_left == 6'd1) begin
            if (sel != SEL_BODY) sel <= sel_next;
            state <= FT_LOAD;
          end
        end
        FT_WAIT_PHY: if (phy_done) state <= FT_DONE;
        FT_DONE:     if (!transmit) state <= FT_IDLE;
        default:     state <= FT_IDLE;
      endcase
    end
  end

endmodule
