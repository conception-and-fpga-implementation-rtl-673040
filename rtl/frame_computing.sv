// frame_computing: the frame computing sub-module. On EN_BUILDFRAME it builds
// every header field of the frame named by FRAME_SUBTYPE and answers FRAME_DONE.
//
// It holds the four entities the paper names: frame control header
// (fch_entity), duration/ID (did_entity), address generation (addr_gen) and
// frame sequence control (fsc_entity). The sequence is
//   1. start addr_gen, which reads the MSDU descriptor at BUFF_PTR if needed,
//   2. load fsc_entity (sequence/fragment state, needs the MSDU length),
//   3. load the FCH (needs MoreFragments from step 2) and the DID,
//   4. raise frame_done and hold it, with the header on hdr, until
//      en_buildframe falls.
// The body of a data frame is not copied: hdr.body_word and hdr.body_len tell
// frame transmission which buffer words to send for this fragment.
//
// Handshake: en_buildframe is a level held by the transmission control for the
// whole transmission; frame_done rises when the header is ready and falls the
// cycle after en_buildframe falls. retry and next_frag are sampled with
// en_buildframe at the start. FRAG_BYTES must be a multiple of 4.
module frame_computing
  import mac_tx_pkg::*;
#(
  parameter int unsigned BUF_AW     = 11,
  parameter int unsigned FRAG_BYTES = 2304
) (
  input  logic              clk,
  input  logic              rst,            // synchronous, active high
  input  logic              en_buildframe,
  input  frame_subtype_t    frame_subtype,
  input  logic              retry,
  input  logic              next_frag,
  input  logic [BUF_AW-1:0] buff_ptr,
  input  mac_addr_t         own_addr,
  input  mac_addr_t         peer_addr,
  input  logic [15:0]       nav_reg,
  output logic              buf_rd,
  output logic [BUF_AW-1:0] buf_addr,
  input  logic [31:0]       buf_rdata,
  output logic              frame_done,
  output frame_hdr_t        hdr,
  output logic              fragment,       // FRAGMENT: this MSDU is fragmented
  output logic              more_frag
);

  typedef enum logic [2:0] {FC_IDLE, FC_ADDR, FC_SEQ, FC_HDR, FC_DONE} fc_state_t;

  fc_state_t         state;
  frame_subtype_t    fs;
  logic              retry_r, next_frag_r;
  logic [BUF_AW-1:0] ptr;
  logic              ag_start, ag_done, ag_busy;
  logic              fsc_load, hdr_load;
  mac_addr_t         a1, a2, a3, a4;
  logic [15:0]       msdu_len, fch, did, fsc, frag_off, frag_len;

  assign ag_start = (state == FC_IDLE) && en_buildframe;
  assign fsc_load = (state == FC_SEQ);
  assign hdr_load = (state == FC_HDR);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= FC_IDLE;
      fs          <= '0;
      retry_r     <= 1'b0;
      next_frag_r <= 1'b0;
      ptr         <= '0;
      frame_done  <= 1'b0;
    end else begin
      unique case (state)
        FC_IDLE: if (en_buildframe) begin
          fs          <= frame_subtype;
          retry_r     <= retry;
          next_frag_r <= next_frag;
          ptr         <= buff_ptr;
          state       <= FC_ADDR;
        end
        FC_ADDR: if (ag_done) state <= FC_SEQ;
        FC_SEQ:  state <= FC_HDR;
        FC_HDR:  begin
          state      <= FC_DONE;
          frame_done <= 1'b1;
        end
        FC_DONE: if (!en_buildframe) begin
          state      <= FC_IDLE;
          frame_done <= 1'b0;
        end
        default: state <= FC_IDLE;
      endcase
    end
  end

  addr_gen #(.BUF_AW(BUF_AW)) u_addr (
    .clk, .rst, .start(ag_start), .frame_subtype, .buff_ptr, .own_addr, .peer_addr,
    .buf_rd, .buf_addr, .buf_rdata, .addr1(a1), .addr2(a2), .addr3(a3), .addr4(a4),
    .msdu_len, .busy(ag_busy), .done(ag_done)
  );

  fsc_entity #(.FRAG_BYTES(FRAG_BYTES)) u_fsc (
    .clk, .rst, .load(fsc_load), .frame_subtype(fs), .retry(retry_r),
    .next_frag(next_frag_r), .msdu_len, .fsc, .fragment, .more_frag, .frag_off,
    .frag_len
  );

  fch_entity u_fch (
    .clk, .rst, .load(hdr_load), .frame_subtype(fs), .retry(retry_r), .more_frag,
    .fch
  );

  did_entity u_did (
    .clk, .rst, .load(hdr_load), .frame_subtype(fs), .nav_reg, .did
  );

  always_comb begin
    hdr.fch       = fch;
    hdr.did       = did;
    hdr.a1        = a1;
    hdr.a2        = a2;
    hdr.a3        = a3;
    hdr.a4        = a4;
    hdr.fsc       = fsc;
    hdr.mask      = fs_mask(fs);
    hdr.body_word = 16'(ptr) + 16'(DESC_BODY) + (frag_off >> 2);
    hdr.body_len  = frag_len;
  end

  // A new build is only started once the previous one has been released.
  a_no_overlap: assert property (@(posedge clk) disable iff (rst)
    ag_start |-> !ag_busy);

endmodule
