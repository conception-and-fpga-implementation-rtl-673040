// mac_tx_pkg: types and constants shared by the 802.11s mesh MAC transmitter.
//
// Bit numbering. Every frame field (frame control, duration/ID, sequence control,
// addresses) is held with the 802.11 bit numbering: bit 0 of a field is the first
// bit sent on the air, and the field is sent LSB first. A 6-bit "frame subtype"
// is frame-control bits b7..b2, i.e. {subtype[3:0], type[1:0]}.
//
// The frame-subtype codes used by the transmitter are written in the original
// design notes as 6-character strings beginning with b2 (first bit on the air),
// e.g. "101011" for ACK. Read backwards, each string is the value below, and each
// agrees with the 802.11 type/subtype of the frame it names:
//   ACK     "101011" -> 6'b110101  (type 01 control, subtype 1101)
//   DATA    "010000" -> 6'b000010  (type 10 data,    subtype 0000)
//   CTS     "100011" -> 6'b110001  (type 01 control, subtype 1100)
//   RTS     "101101" -> 6'b101101  (type 01 control, subtype 1011)
//   PS-Poll "100101" -> 6'b101001  (type 01 control, subtype 1010)
//   CF-Poll "010110" -> 6'b011010  (type 10 data,    subtype 0110)
package mac_tx_pkg;

  typedef logic [47:0] mac_addr_t;
  typedef logic [5:0]  frame_subtype_t;

  localparam frame_subtype_t FS_ACK     = 6'b110101;
  localparam frame_subtype_t FS_DATA    = 6'b000010;
  localparam frame_subtype_t FS_CTS     = 6'b110001;
  localparam frame_subtype_t FS_RTS     = 6'b101101;
  localparam frame_subtype_t FS_PS_POLL = 6'b101001;
  localparam frame_subtype_t FS_CF_POLL = 6'b011010;

  localparam logic [1:0] TYPE_MGMT = 2'b00;
  localparam logic [1:0] TYPE_CTRL = 2'b01;
  localparam logic [1:0] TYPE_DATA = 2'b10;

  // Words of an MSDU descriptor in the buffer, relative to BUFF_PTR.
  // Each 48-bit address takes two 32-bit words, low word first.
  localparam int unsigned DESC_RA   = 0;  // receiver (next hop)       -> ADDR1
  localparam int unsigned DESC_DA   = 2;  // final destination         -> ADDR3
  localparam int unsigned DESC_SA   = 4;  // original source           -> ADDR4
  localparam int unsigned DESC_LEN  = 6;  // body length in bytes, bits [15:0]
  localparam int unsigned DESC_BODY = 7;  // first body word, bytes little-endian
  localparam int unsigned DESC_READS = 7; // header words read per frame

  // Select line of the frame-transmission multiplexer (4 bits), in the order
  // the fields go on the air. Addresses are split into a 32-bit low part and a
  // 16-bit high part because the shift register is 32 bits wide.
  typedef enum logic [3:0] {
    SEL_FCH  = 4'd0,
    SEL_DID  = 4'd1,
    SEL_A1L  = 4'd2,
    SEL_A1H  = 4'd3,
    SEL_A2L  = 4'd4,
    SEL_A2H  = 4'd5,
    SEL_A3L  = 4'd6,
    SEL_A3H  = 4'd7,
    SEL_FSC  = 4'd8,
    SEL_A4L  = 4'd9,
    SEL_A4H  = 4'd10,
    SEL_BODY = 4'd11,
    SEL_END  = 4'd15
  } field_sel_t;

  // Which optional fields a frame carries (FCH, DID and ADDR1 always go out).
  typedef struct packed {
    logic a2;
    logic a3;
    logic fsc;
    logic a4;
    logic body;
  } field_mask_t;

  // Everything the frame computing sub-module hands to frame transmission.
  typedef struct packed {
    logic [15:0] fch;
    logic [15:0] did;
    mac_addr_t   a1;
    mac_addr_t   a2;
    mac_addr_t   a3;
    mac_addr_t   a4;
    logic [15:0] fsc;
    field_mask_t mask;
    logic [15:0] body_word;  // buffer word address of the first body word
    logic [15:0] body_len;   // body bytes in this frame (one fragment)
  } frame_hdr_t;

  function automatic field_mask_t fs_mask(frame_subtype_t fs);
    field_mask_t m;
    m = '0;
    if (fs == FS_ACK || fs == FS_CTS) begin
      m = '0;
    end else if (fs[1:0] == TYPE_CTRL) begin
      m.a2 = 1'b1;
    end else if (fs[1:0] == TYPE_DATA) begin
      m = '{a2: 1'b1, a3: 1'b1, fsc: 1'b1, a4: 1'b1, body: (fs == FS_DATA)};
    end else begin
      m = '{a2: 1'b1, a3: 1'b1, fsc: 1'b1, a4: 1'b0, body: 1'b0};
    end
    return m;
  endfunction

endpackage
