// tx_arena: the TX Arena, the SRAM region where the serializer assembles the
// outgoing RPC message (header first, then the encoded body) before the
// transport layer sends it.
//
// Byte-addressed, BYTES deep.  The write port stores up to 16 consecutive
// bytes at any byte address in one cycle (enough for one tag plus one 64-bit
// varint), so the encoder never waits for the arena; bytes past the end are
// dropped.  The read port returns the 8 bytes starting at a byte address one
// cycle after rd_en.  The paper does not size the arena; 16 KB is this
// design's choice (messages longer than that are not supported).
module tx_arena #(
  parameter int unsigned BYTES = 16384,
  localparam int unsigned AW   = $clog2(BYTES)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [4:0]    wr_cnt,     // 0..16 bytes
  input  logic [127:0]  wr_data,    // byte 0 in bits 7:0
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data
);
  logic [7:0] mem [BYTES];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < 16; i++)
        if (5'(i) < wr_cnt && (32'(wr_addr) + 32'(i)) < BYTES)
          mem[AW'(32'(wr_addr) + 32'(i))] <= wr_data[8*i +: 8];
    if (rd_en)
      for (int i = 0; i < 8; i++)
        rd_data[8*i +: 8] <= mem[AW'(32'(rd_addr) + 32'(i))];
  end
endmodule
