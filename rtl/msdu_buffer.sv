// msdu_buffer: the buffer the transmitter reads through BUFF_PTR. The upper MAC
// writes MSDU descriptors into it; frame computing reads the addresses and the
// length of the MSDU, frame transmission reads its body.
//
// Simple dual-port RAM of DEPTH 32-bit words: one synchronous write port, one
// synchronous read port with one cycle of read latency. The paper only names
// the buffer; its organisation and its default size (2048 words = 8 KiB, room
// for one descriptor with the largest mesh data body of 7955 bytes) are this
// design's choice. The descriptor layout is in mac_tx_pkg.
module msdu_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
