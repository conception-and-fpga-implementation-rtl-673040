// mac_tx_top: IEEE 802.11s mesh MAC transmitter.
//
// The four sub-modules of the transmitter and the MSDU buffer, wired as in the
// paper's sequence of a transmission:
//   MAC control --MSDURDY/REC_*--> transmission control
//   transmission control --EN_BUILDFRAME, FRAME_SUBTYPE, BUFF_PTR--> frame computing
//   frame computing --FRAME_DONE--> transmission control
//   transmission control --ENABLE_MEDIUM/ENABLE_RETRY--> allocation control
//   PHY --CARRIER_SENSE--> allocation control (with NAV_REG)
//   allocation control --ACCESS_GRANTED--> transmission control
//   transmission control --TRANSMIT--> frame transmission --TX_LINE--> PHY
//   PHY --OK (phy_done)--> frame transmission --TRANSMIT_COMPLETE--> control
// The PHY, the receiver (which raises REC_* and keeps the NAV register) and the
// upper MAC are outside this design: their signals are ports. The upper MAC
// loads MSDU descriptors through the buffer write port (layout in mac_tx_pkg).
//
// The attempt count is cleared when the transmission control reports a CTS or
// ACK for our frame or a drop, and, as the paper also requires, when the
// receiver reports a broadcast or multicast frame (rec_group, one-cycle pulse).
//
// The buffer has one read port. Frame computing uses it while a frame is built
// and frame transmission while it is sent; these never overlap, so the port is
// given to frame transmission whenever transmit is high.
module mac_tx_top
  import mac_tx_pkg::*;
#(
  parameter int unsigned BUF_DEPTH       = 2048,
  parameter int unsigned BUF_AW          = $clog2(BUF_DEPTH),
  parameter int unsigned FRAG_BYTES      = 2304,
  parameter int unsigned RETRY_THRESHOLD = 10,
  parameter int unsigned CW_MIN          = 31,
  parameter int unsigned CW_MAX          = 1023,
  parameter int unsigned SLOT_TIME_US    = 20,
  parameter int unsigned CLK_MHZ         = 50,
  parameter int unsigned SLOT_CYCLES     = SLOT_TIME_US * CLK_MHZ,
  parameter int unsigned RESP_TIMEOUT    = 16384
) (
  input  logic              clk,
  input  logic              rst,              // synchronous, active high
  // upper MAC: MSDU buffer write port and MSDU request
  input  logic              buf_wr_en,
  input  logic [BUF_AW-1:0] buf_wr_addr,
  input  logic [31:0]       buf_wr_data,
  input  logic              msdurdy,
  input  logic [BUF_AW-1:0] buff_ptr,
  output logic              msdu_sent,
  output logic              msdu_dropped,
  // receiver side
  input  logic              rec_data,
  input  logic              rec_cts,
  input  logic              rec_rts,
  input  logic              rec_ack,
  input  logic              rec_group,        // broadcast/multicast frame received
  input  mac_addr_t         peer_addr,        // transmitter of the received frame
  input  logic [15:0]       nav_reg,
  // station configuration
  input  mac_addr_t         own_addr,
  // PHY
  input  logic              carrier_sense,
  input  logic              phy_done,
  output logic              tx_line,
  output logic              tx_en,
  // status
  output frame_subtype_t    frame_subtype,
  output logic              fragment,
  output logic [7:0]        retry_count,
  output logic [15:0]       backoff_val
);

  logic              en_buildframe, frame_done, retry, next_frag, more_frag;
  logic              en_medium, en_retry, access_granted, tx_fail, clear_retry;
  logic              transmit, transmit_complete;
  logic [BUF_AW-1:0] ptr;
  frame_hdr_t        hdr;
  logic              fc_rd, ft_rd;
  logic [BUF_AW-1:0] fc_addr, ft_addr;
  logic [31:0]       buf_rdata;
  logic [9:0]        cw;
  logic              backoff_busy;
  field_sel_t        sel;

  transmission_control #(.BUF_AW(BUF_AW), .RESP_TIMEOUT(RESP_TIMEOUT)) u_ctrl (
    .clk, .rst, .msdurdy, .buff_ptr_in(buff_ptr), .rec_data, .rec_cts, .rec_rts,
    .rec_ack, .frame_done, .more_frag, .access_granted, .tx_fail, .transmit_complete,
    .en_buildframe, .frame_subtype, .retry, .next_frag, .buff_ptr(ptr), .en_medium,
    .en_retry, .transmit, .clear_retry, .msdu_sent, .msdu_dropped
  );

  frame_computing #(.BUF_AW(BUF_AW), .FRAG_BYTES(FRAG_BYTES)) u_comp (
    .clk, .rst, .en_buildframe, .frame_subtype, .retry, .next_frag, .buff_ptr(ptr),
    .own_addr, .peer_addr, .nav_reg, .buf_rd(fc_rd), .buf_addr(fc_addr), .buf_rdata,
    .frame_done, .hdr, .fragment, .more_frag
  );

  allocation_control #(
    .CNT_W(8), .RETRY_THRESHOLD(RETRY_THRESHOLD), .CW_MIN(CW_MIN), .CW_MAX(CW_MAX),
    .SLOT_TIME_US(SLOT_TIME_US), .CLK_MHZ(CLK_MHZ), .SLOT_CYCLES(SLOT_CYCLES)
  ) u_alloc (
    .clk, .rst, .en_medium, .en_retry, .clear_retry(clear_retry | rec_group), .nav_reg, .carrier_sense,
    .access_granted, .tx_fail, .count_val(retry_count), .backoff_val, .cw,
    .backoff_busy
  );

  frame_transmission #(.BUF_AW(BUF_AW)) u_tx (
    .clk, .rst, .transmit, .hdr, .phy_done, .buf_rd(ft_rd), .buf_addr(ft_addr),
    .buf_rdata, .tx_line, .tx_en, .transmit_complete, .sel
  );

  msdu_buffer #(.DEPTH(BUF_DEPTH), .AW(BUF_AW)) u_buf (
    .clk, .wr_en(buf_wr_en), .wr_addr(buf_wr_addr), .wr_data(buf_wr_data),
    .rd_en(transmit ? ft_rd : fc_rd), .rd_addr(transmit ? ft_addr : fc_addr),
    .rd_data(buf_rdata)
  );

endmodule
