// addr_gen: the address generation entity of the frame computing sub-module.
//
// From the frame subtype it chooses the four addresses of the frame and, where
// they come from the MSDU buffer, reads them from the descriptor at buff_ptr
// (word layout in mac_tx_pkg: RA, DA, SA as two words each, then the body length):
//   ACK, CTS      : ADDR1 = peer_addr (transmitter of the frame being answered)
//   other control : ADDR1 = RA, ADDR2 = own_addr               (RTS, PS-Poll)
//   data          : ADDR1 = RA, ADDR2 = own_addr, ADDR3 = DA, ADDR4 = SA
//   management    : ADDR1 = RA (= DA), ADDR2 = own_addr, ADDR3 (BSSID) = 0
// The management rule (BSSID set to 0 for single-hop frames of a mesh point) is
// from the paper. The paper only says the entity takes BUFF_PTR and produces
// ADDR1..ADDR4; the descriptor layout and the per-subtype choice are this
// design's, following the 802.11 address usage.
//
// Timing: start is a one-cycle pulse. The buffer answers one cycle after
// buf_rd. For ACK/CTS done pulses one cycle after start; otherwise the 7
// descriptor words are read back to back and done pulses 9 cycles after start.
// Outputs hold their values until the next start.
module addr_gen
  import mac_tx_pkg::*;
#(
  parameter int unsigned BUF_AW = 11
) (
  input  logic              clk,
  input  logic              rst,        // synchronous, active high
  input  logic              start,
  input  frame_subtype_t    frame_subtype,
  input  logic [BUF_AW-1:0] buff_ptr,
  input  mac_addr_t         own_addr,
  input  mac_addr_t         peer_addr,
  output logic              buf_rd,
  output logic [BUF_AW-1:0] buf_addr,
  input  logic [31:0]       buf_rdata,
  output mac_addr_t         addr1,
  output mac_addr_t         addr2,
  output mac_addr_t         addr3,
  output mac_addr_t         addr4,
  output logic [15:0]       msdu_len,
  output logic              busy,
  output logic              done
);

  logic [31:0]       w [DESC_READS];
  logic [2:0]        rd_idx;       // next word to request
  logic [2:0]        cap_idx;      // word arriving this cycle
  logic              cap_vld;
  logic              reading;
  logic              finish;
  frame_subtype_t    fs;
  logic [BUF_AW-1:0] ptr;

  assign buf_rd   = reading && (rd_idx < 3'(DESC_READS));
  assign buf_addr = ptr + BUF_AW'(rd_idx);
  assign busy     = reading | finish;

  always_ff @(posedge clk) begin
    if (rst) begin
      reading <= 1'b0;
      finish  <= 1'b0;
      done    <= 1'b0;
      rd_idx  <= '0;
      cap_idx <= '0;
      cap_vld <= 1'b0;
      fs      <= '0;
      ptr     <= '0;
      addr1 <= '0; addr2 <= '0; addr3 <= '0; addr4 <= '0;
      msdu_len <= '0;
      for (int i = 0; i < DESC_READS; i++) w[i] <= '0;
    end else begin
      done    <= 1'b0;
      cap_vld <= buf_rd;
      cap_idx <= rd_idx;
      if (cap_vld) w[cap_idx] <= buf_rdata;

      if (start) begin
        fs     <= frame_subtype;
        ptr    <= buff_ptr;
        rd_idx <= '0;
        if (frame_subtype == FS_ACK || frame_subtype == FS_CTS) begin
          finish <= 1'b1;
        end else begin
          reading <= 1'b1;
        end
      end else if (reading) begin
        if (rd_idx < 3'(DESC_READS)) rd_idx <= rd_idx + 3'd1;
        if (cap_vld && cap_idx == 3'(DESC_READS - 1)) begin
          reading <= 1'b0;
          finish  <= 1'b1;
        end
      end else if (finish) begin
        finish <= 1'b0;
        done   <= 1'b1;
        addr1 <= '0; addr2 <= '0; addr3 <= '0; addr4 <= '0;
        msdu_len <= '0;
        if (fs == FS_ACK || fs == FS_CTS) begin
          addr1 <= peer_addr;
        end else begin
          addr1 <= {w[DESC_RA + 1][15:0], w[DESC_RA]};
          addr2 <= own_addr;
          if (fs[1:0] == TYPE_DATA) begin
            addr3 <= {w[DESC_DA + 1][15:0], w[DESC_DA]};
            addr4 <= {w[DESC_SA + 1][15:0], w[DESC_SA]};
            if (fs == FS_DATA) msdu_len <= w[DESC_LEN][15:0];
          end
        end
      end
    end
  end

endmodule
